// tb_processor_decoder: drives random requests (PE Id, type, address) and
// buffer-full patterns into the processor decoder, for 4 PEs and for a
// 3-PE instance (where Id 3 names no PE), and checks req_ready, the one-hot
// buffer select, the decoded Id and the fields passed on.
module tb_processor_decoder;
  import rldc_pkg::*;
  localparam int AW = 24;
  int checks = 0, failures = 0;

  logic          v;
  logic [1:0]    pe;
  op_e           op;
  logic [AW-1:0] ad;
  logic [3:0]    full4;
  logic [2:0]    full3;
  logic          rdy4, rdy3, dv4, dv3;
  logic [3:0]    sel4;
  logic [2:0]    sel3;
  logic [1:0]    id4, id3;
  op_e           op4, op3;
  logic [AW-1:0] ad4, ad3;

  processor_decoder #(.NUM_PE(4), .REQ_AW(AW)) d4 (
    .req_valid(v), .req_ready(rdy4), .req_pe(pe), .req_op(op), .req_addr(ad),
    .buf_full(full4), .pe_sel(sel4), .pe_id(id4), .dec_valid(dv4), .op(op4), .addr(ad4));
  processor_decoder #(.NUM_PE(3), .REQ_AW(AW)) d3 (
    .req_valid(v), .req_ready(rdy3), .req_pe(pe), .req_op(op), .req_addr(ad),
    .buf_full(full3), .pe_sel(sel3), .pe_id(id3), .dec_valid(dv3), .op(op3), .addr(ad3));

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  initial begin
    for (int n = 0; n < 500; n++) begin
      logic e_rdy4, e_rdy3;
      v = $urandom_range(0, 1); pe = 2'($urandom); op = $urandom_range(0, 1) ? OP_WRITE : OP_READ;
      ad = AW'($urandom); full4 = 4'($urandom); full3 = 3'($urandom);
      #1;
      e_rdy4 = !full4[pe];
      e_rdy3 = (pe != 2'd3) && !full3[pe];
      chk(rdy4 == e_rdy4, "ready, 4 PEs");
      chk(rdy3 == e_rdy3, "ready, 3 PEs");
      chk(sel4 == ((v && e_rdy4) ? 4'(1 << pe) : 4'b0), $sformatf("select 4 PEs pe=%0d sel=%b", pe, sel4));
      chk(sel3 == ((v && e_rdy3) ? 3'(1 << pe) : 3'b0), "select 3 PEs");
      chk(dv4 == (v && e_rdy4) && dv3 == (v && e_rdy3), "decoded valid");
      chk(id4 == pe && op4 == op && ad4 == ad, "fields");
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
