// address_mapping: splits a request address into the RLDRAM bank (ba) and
// the in-bank address (addr), under either memory layout.
//
// RLDRAM takes row and column in one step (no address multiplexing), so
// the in-bank address is sent whole. Request address layout, this design's
// choice: {in-bank address [ADDR_W-1:0], bank field [BA_W-1:0]}, so that
// consecutive blocks fall in different banks.
//   bank sharing      (partition = 0): ba = bank field; any PE reaches
//                                       every bank.
//   bank partitioning (partition = 1): each PE owns NUM_BANKS/NUM_PE
//                                       consecutive banks,
//                                       ba = pe_id * (NUM_BANKS/NUM_PE)
//                                            + (bank field mod that count).
//                                       The upper bank-field bits are
//                                       ignored, so each PE sees its own
//                                       1/NUM_PE of the memory.
// NUM_PE and NUM_BANKS must be powers of two with NUM_PE <= NUM_BANKS.
//
// Combinational, no latency. Following the paper: the two layouts, chosen
// by one configuration bit, partitioning by the decoded PE Id. This
// design's choice: which address bits select the bank.
module address_mapping
  import rldc_pkg::*;
#(
  parameter int unsigned NUM_PE    = DEF_NUM_PE,
  parameter int unsigned NUM_BANKS = DEF_NUM_BANKS,
  parameter int unsigned ADDR_W    = DEF_ADDR_W,
  localparam int unsigned PE_W     = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int unsigned BA_W     = $clog2(NUM_BANKS),
  localparam int unsigned REQ_AW   = ADDR_W + BA_W
) (
  input  logic              partition,
  input  logic [PE_W-1:0]   pe_id,
  input  logic [REQ_AW-1:0] req_addr,
  output logic [BA_W-1:0]   ba,
  output logic [ADDR_W-1:0] addr
);

  localparam int unsigned BANKS_PER_PE = NUM_BANKS / NUM_PE;

  logic [BA_W-1:0] bank_field;

  always_comb begin
    bank_field = req_addr[BA_W-1:0];
    addr       = req_addr[REQ_AW-1:BA_W];
    if (partition)
      ba = BA_W'(int'(pe_id) * int'(BANKS_PER_PE)
                 + int'(bank_field) % int'(BANKS_PER_PE));
    else
      ba = bank_field;
  end

  initial begin
    assert (NUM_PE >= 1 && NUM_PE <= NUM_BANKS && (NUM_BANKS % NUM_PE) == 0)
      else $error("address_mapping: NUM_PE must divide NUM_BANKS");
  end

endmodule
