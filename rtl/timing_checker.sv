// timing_checker: decides, every cycle, which head-of-queue commands may be
// sent to the RLDRAM without breaking a timing constraint.
//
// RLDRAM manages rows inside the device, so only two kinds of constraint
// remain, each kept as a down-counter that must be zero before a command
// may issue:
//   * one tRC counter per bank: after any command to a bank, the next
//     command to that bank waits tRC cycles;
//   * two data-bus counters: cycles until a READ, and until a WRITE, may
//     issue. After a READ:  read waits BL/2, write waits tRL - tWL + BL/2.
//     After a WRITE: write waits BL/2, read waits tWL - tRL + BL/2.
//     These spacings keep data bursts from colliding on the shared bus.
// A counter is loaded with (gap - 1) on the edge that ends the issue cycle,
// so a command issued in cycle t lets the next go in cycle t + gap. A load
// never lowers a count already running.
//
// ready[i] is computed for every PE head at once, so the arbiter can pass
// over a blocked PE within the same cycle.
//
// Interface: clk, rst_n (asynchronous, active low); per-PE head_valid,
// head_wr, head_ba; the issued command (issue, issue_wr, issue_ba); ready.
// Following the paper: a counter per constraint, the per-bank tRC counter
// loaded on every command, the Table II values. This design's choice: the
// load value (constraint - 1) matching the printed issue times of the
// worst-case schedules (commands every 6 cycles to one bank; W, R, W, R to
// four banks at 0, 5, 8, 13).
module timing_checker
  import rldc_pkg::*;
#(
  parameter int unsigned NUM_PE    = DEF_NUM_PE,
  parameter int unsigned NUM_BANKS = DEF_NUM_BANKS,
  parameter int unsigned T_RC      = DEF_T_RC,
  parameter int unsigned T_RL      = DEF_T_RL,
  parameter int unsigned T_WL      = DEF_T_WL,
  parameter int unsigned BL        = DEF_BL,
  localparam int unsigned BA_W     = $clog2(NUM_BANKS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NUM_PE-1:0]             head_valid,
  input  logic [NUM_PE-1:0]             head_wr,
  input  logic [NUM_PE-1:0][BA_W-1:0]   head_ba,
  input  logic                          issue,
  input  logic                          issue_wr,
  input  logic [BA_W-1:0]               issue_ba,
  output logic [NUM_PE-1:0]             ready
);

  localparam int unsigned GAP_RR = bus_gap(T_RL, T_WL, BL, 1'b0, 1'b0);
  localparam int unsigned GAP_RW = bus_gap(T_RL, T_WL, BL, 1'b0, 1'b1);
  localparam int unsigned GAP_WR = bus_gap(T_RL, T_WL, BL, 1'b1, 1'b0);
  localparam int unsigned GAP_WW = bus_gap(T_RL, T_WL, BL, 1'b1, 1'b1);
  localparam int unsigned MAXGAP = (T_RC > GAP_RW + GAP_WR + BL) ? T_RC
                                                                 : GAP_RW + GAP_WR + BL;
  localparam int unsigned CW     = $clog2(MAXGAP + 1);

  logic [NUM_BANKS-1:0][CW-1:0] bank_cnt;
  logic [CW-1:0]                rd_cnt, wr_cnt;

  function automatic logic [CW-1:0] dec0(logic [CW-1:0] c);
    return (c == '0) ? '0 : c - 1'b1;
  endfunction

  function automatic logic [CW-1:0] maxc(logic [CW-1:0] a, logic [CW-1:0] b);
    return (a > b) ? a : b;
  endfunction

  always_comb begin
    for (int i = 0; i < int'(NUM_PE); i++)
      ready[i] = head_valid[i]
              && (bank_cnt[head_ba[i]] == '0)
              && (head_wr[i] ? (wr_cnt == '0) : (rd_cnt == '0));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_cnt <= '0;
      rd_cnt   <= '0;
      wr_cnt   <= '0;
    end else begin
      for (int b = 0; b < int'(NUM_BANKS); b++) begin
        if (issue && int'(issue_ba) == b) bank_cnt[b] <= CW'(T_RC - 1);
        else                              bank_cnt[b] <= dec0(bank_cnt[b]);
      end
      if (issue && issue_wr) begin
        rd_cnt <= maxc(dec0(rd_cnt), CW'(GAP_WR - 1));
        wr_cnt <= maxc(dec0(wr_cnt), CW'(GAP_WW - 1));
      end else if (issue) begin
        rd_cnt <= maxc(dec0(rd_cnt), CW'(GAP_RR - 1));
        wr_cnt <= maxc(dec0(wr_cnt), CW'(GAP_RW - 1));
      end else begin
        rd_cnt <= dec0(rd_cnt);
        wr_cnt <= dec0(wr_cnt);
      end
    end
  end

  // an issued command must have been allowed by the counters
  assert property (@(posedge clk) disable iff (!rst_n)
                   issue |-> (bank_cnt[issue_ba] == '0)
                          && (issue_wr ? (wr_cnt == '0) : (rd_cnt == '0)))
    else $error("timing_checker: command issued against a running counter");

endmodule
