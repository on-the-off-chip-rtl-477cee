// command_generation: turns a request's operation type into the RLDRAM
// command that is buffered with it.
//
// A read becomes READ and a write becomes WRITE, encoded as the RLDRAM3
// control pins {CS#, WE#, REF#}; with no request the output is NOP. The
// controller only ever sends READ and WRITE: the device opens and closes
// rows by itself, and refresh is left out of this design.
//
// Interface: valid, op in; cmd out. Purely combinational, no latency.
// Following the paper: the block's role (type in, command out). This
// design's choice: the pin-level encoding, taken from the RLDRAM3 command
// truth table.
module command_generation
  import rldc_pkg::*;
(
  input  logic     valid,
  input  op_e      op,
  output rld_cmd_t cmd
);

  always_comb begin
    if (!valid)                cmd = CMD_NOP;
    else if (op == OP_WRITE)   cmd = CMD_WRITE;
    else                       cmd = CMD_READ;
  end

endmodule
