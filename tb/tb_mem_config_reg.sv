// tb_mem_config_reg: checks the layout register: reset value, a write while
// idle taking effect on the next edge, a write while busy held pending
// until idle, and a later write while pending replacing the pending value.
module tb_mem_config_reg;
  logic clk = 0, rst_n = 0, we = 0, wd = 0, idle = 1, part, pend;
  int checks = 0, failures = 0;

  mem_config_reg dut (.clk(clk), .rst_n(rst_n), .cfg_we(we), .cfg_partition(wd),
                      .idle(idle), .partition(part), .pending(pend));

  always #5 clk = ~clk;

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL at %0t: %s", $time, m); end
  endtask

  task automatic write(input logic v);
    @(negedge clk); we = 1; wd = v;
    @(negedge clk); we = 0;
  endtask

  initial begin
    #12 rst_n = 1;
    @(negedge clk);
    chk(part == 1'b1 && !pend, "reset: partitioning, nothing pending");
    idle = 1; write(1'b0);
    chk(part == 1'b0 && !pend, "idle write applies at once");
    write(1'b1);
    chk(part == 1'b1, "idle write back to partitioning");
    idle = 0; write(1'b0);
    chk(part == 1'b1 && pend, "busy write held");
    repeat (5) @(negedge clk);
    chk(part == 1'b1 && pend, "still held while busy");
    write(1'b1); write(1'b0);
    chk(pend && part == 1'b1, "later write replaces pending value");
    idle = 1; @(negedge clk);
    chk(part == 1'b0 && !pend, "pending value applied when idle");
    // random writes against a model
    for (int n = 0; n < 300; n++) begin
      logic m_part, m_pend, m_val;
      m_part = part; m_pend = pend; m_val = dut.pend_val;
      we = $urandom_range(0, 2) == 0; wd = $urandom_range(0, 1); idle = $urandom_range(0, 1);
      if (we && idle) begin m_part = wd; m_pend = 0; end
      else if (we) begin m_pend = 1; m_val = wd; end
      else if (m_pend && idle) begin m_part = m_val; m_pend = 0; end
      @(negedge clk);
      chk(part == m_part && pend == m_pend, "random sequence");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
