// rr_arbiter: round-robin arbiter that picks one PE buffer head per cycle
// and drives it onto the RLDRAM command bus (cmd, ba, addr).
//
// A pointer names the PE holding the current slot of the round-robin
// schedule. Each cycle the arbiter looks at that PE first; if its head is
// absent or not ready (a timing constraint still running) it looks at the
// next PE, and so on, all within the cycle. The first ready head found is
// issued: its buffer is popped, and the slot moves to the PE after it. If
// no head is ready the bus carries NOP and the slot stays.
//
// Interface: clk, rst_n (asynchronous, active low); per-PE head_valid,
// head_ready and head entry {cmd, ba, addr}; pop (one-hot), issue,
// grant_pe, and cmd/ba/addr to the device. Outputs are combinational in the
// issue cycle; the device samples them on the next clock edge.
// SKIP_NOT_READY selects between two readings of the arbitration rule:
//   1 (default): a PE whose head is not ready is passed over and the next
//     PE in the schedule may issue in its place (work conserving). This is
//     the rule as the arbitration is described. A PE can then be passed
//     over repeatedly, so its latency is not bounded by waiting once for
//     each other PE.
//   0: the slot stays with the first PE (from the pointer) that holds a
//     request until that request is ready; PEs without a request are
//     passed over. This is the behaviour the worst-case latency analysis
//     relies on ("waits for all other N-1 PEs"), and with one outstanding
//     request per PE its bounds hold.
// Following the paper: round robin over the per-PE buffer heads. This
// design's choice: the search over all PEs in one cycle, the pointer
// update and the strict option.
module rr_arbiter
  import rldc_pkg::*;
#(
  parameter int unsigned NUM_PE = DEF_NUM_PE,
  parameter int unsigned BA_W   = $clog2(DEF_NUM_BANKS),
  parameter int unsigned ADDR_W = DEF_ADDR_W,
  parameter bit          SKIP_NOT_READY = 1'b1,
  localparam int unsigned PE_W  = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [NUM_PE-1:0]               head_valid,
  input  logic [NUM_PE-1:0]               head_ready,
  input  rld_cmd_t [NUM_PE-1:0]           head_cmd,
  input  logic [NUM_PE-1:0][BA_W-1:0]     head_ba,
  input  logic [NUM_PE-1:0][ADDR_W-1:0]   head_addr,
  output logic [NUM_PE-1:0]               pop,
  output logic                            issue,
  output logic [PE_W-1:0]                 grant_pe,
  output rld_cmd_t                        cmd,
  output logic [BA_W-1:0]                 ba,
  output logic [ADDR_W-1:0]               addr
);

  logic [PE_W-1:0] ptr;

  always_comb begin
    logic [PE_W-1:0] idx;
    logic            found;
    issue    = 1'b0;
    found    = 1'b0;
    grant_pe = '0;
    for (int k = 0; k < int'(NUM_PE); k++) begin
      idx = PE_W'((int'(ptr) + k) % int'(NUM_PE));
      if (SKIP_NOT_READY) begin
        if (!issue && head_valid[idx] && head_ready[idx]) begin
          issue    = 1'b1;
          grant_pe = idx;
        end
      end else if (!found && head_valid[idx]) begin
        found    = 1'b1;
        issue    = head_ready[idx];
        grant_pe = idx;
      end
    end
    pop = '0;
    if (issue) pop[grant_pe] = 1'b1;
    if (issue) begin
      cmd  = head_cmd[grant_pe];
      ba   = head_ba[grant_pe];
      addr = head_addr[grant_pe];
    end else begin
      cmd  = CMD_NOP;
      ba   = '0;
      addr = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (issue)
      ptr <= (int'(grant_pe) == int'(NUM_PE) - 1) ? '0 : grant_pe + 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pop))
    else $error("rr_arbiter: more than one grant");

endmodule
