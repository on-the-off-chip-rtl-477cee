// tb_command_generation: checks the request-type to RLDRAM command
// encoding for every input combination against the RLDRAM3 command truth
// table written out here: NOP = CS# high; READ = CS# L, WE# H, REF# H;
// WRITE = CS# L, WE# L, REF# H.
module tb_command_generation;
  import rldc_pkg::*;
  logic valid; op_e op; rld_cmd_t cmd;
  int checks = 0, failures = 0;

  command_generation dut (.valid(valid), .op(op), .cmd(cmd));

  initial begin
    for (int n = 0; n < 40; n++) begin
      logic [2:0] exp;
      valid = n[0];
      op    = n[1] ? OP_WRITE : OP_READ;
      #1;
      if (!valid)      exp = 3'b111;
      else if (n[1])   exp = 3'b001;
      else             exp = 3'b011;
      checks++;
      if ({cmd.cs_n, cmd.we_n, cmd.ref_n} != exp) begin
        failures++;
        $display("FAIL valid=%0b op=%0d cmd=%b expected %b", valid, op, cmd, exp);
      end
      checks++;
      if (cmd_is_write(cmd) != (valid && n[1])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
