// tb_pe_buffer: random pushes and pops on a 4-entry per-PE buffer checked
// against a queue model: order, head value, full, head_valid, count, and
// the same-cycle bypass (an entry pushed into an empty buffer is visible
// at the head at once and, if popped, is not stored).
module tb_pe_buffer;
  localparam int W = 27, D = 4;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, hv;
  logic [W-1:0] din = '0, head;
  logic [2:0] count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, bypasses = 0, fulls = 0;

  pe_buffer #(.DEPTH(D), .W(W)) dut (.clk(clk), .rst_n(rst_n), .push(push), .din(din),
    .full(full), .head_valid(hv), .head(head), .pop(pop), .count(count));

  always #5 clk = ~clk;

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL at %0t: %s", $time, m); end
  endtask

  initial begin
    #12 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      if (failures > 4) break;   // stop before a broken buffer trips its own assertions
      @(negedge clk);
      push = (q.size() < D) && ($urandom_range(0, 2) != 0);
      din  = W'($urandom);
      #1;
      chk(full == (q.size() == D), "full");
      chk(int'(count) == q.size(), "count");
      chk(hv == (q.size() != 0 || push), "head_valid");
      if (q.size() != 0) chk(head == q[0], "head is oldest");
      else if (push) begin chk(head == din, "bypass head"); bypasses++; end
      if (full) fulls++;
      pop = hv && ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (push) q.push_back(din);
      if (pop) void'(q.pop_front());
      #1 push = 0; pop = 0;
    end
    chk(bypasses > 0 && fulls > 0, "bypass and full both exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
