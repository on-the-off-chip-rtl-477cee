// processor_decoder: first stage of the controller. It reads the PE
// identification bits carried with each request and steers the request to
// that PE's buffer.
//
// A request is accepted (req_ready) when its Id names an existing PE and
// that PE's buffer has room; pe_sel is then the one-hot push enable of the
// buffer. The operation type goes on to command generation and the address
// to address mapping; pe_id goes to address mapping as well, which needs it
// for bank partitioning.
//
// Interface: valid/ready request handshake; pe_sel, pe_id, op, addr out.
// Combinational: a request is pushed on the clock edge that ends the cycle
// in which req_valid and req_ready are both high.
// Following the paper: decoding the PE Id from bits in the request. This
// design's choice: the field layout and the valid/ready handshake.
module processor_decoder
  import rldc_pkg::*;
#(
  parameter int unsigned NUM_PE = DEF_NUM_PE,
  parameter int unsigned REQ_AW = DEF_ADDR_W + $clog2(DEF_NUM_BANKS),
  localparam int unsigned PE_W  = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [PE_W-1:0]   req_pe,
  input  op_e               req_op,
  input  logic [REQ_AW-1:0] req_addr,
  input  logic [NUM_PE-1:0] buf_full,
  output logic [NUM_PE-1:0] pe_sel,
  output logic [PE_W-1:0]   pe_id,
  output logic              dec_valid,
  output op_e               op,
  output logic [REQ_AW-1:0] addr
);

  logic id_ok;

  always_comb begin
    id_ok     = (int'(req_pe) < int'(NUM_PE));
    pe_id     = req_pe;
    op        = req_op;
    addr      = req_addr;
    req_ready = id_ok && !buf_full[req_pe];
    dec_valid = req_valid && req_ready;
    pe_sel    = '0;
    for (int i = 0; i < int'(NUM_PE); i++)
      pe_sel[i] = dec_valid && (int'(req_pe) == i);
  end

endmodule
