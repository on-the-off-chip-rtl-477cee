// rldc_traffic_check: testbench helper. Runs one RLDRAM controller with
// NUM_PE in-order processing elements, each with at most one request
// outstanding (a PE stalls until its data starts), and measures every request's latency from acceptance to
// the start of its data (issue cycle + tRL or tWL).
//
// The layout (PARTITION) is written into the configuration register after
// reset. Requests are random reads and writes; under bank sharing their
// banks are drawn from two banks to force bank conflicts. An RLDRAM
// behavioural model checks tRC and data bus collisions. When NREQ requests
// have been served, done rises and the worst and best latencies seen, the
// analytical bounds for this size and the model's violation count are
// held on the outputs.
module rldc_traffic_check #(
  parameter int unsigned NUM_PE    = 4,
  parameter bit          PARTITION = 1'b1,
  parameter bit          SKIP      = 1'b0,
  parameter int unsigned NREQ      = 2000,
  parameter int unsigned SEED      = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   max_r,
  output int   max_w,
  output int   min_lat,
  output int   bound_r,
  output int   bound_w,
  output int   violations
);
  import rldc_pkg::*;

  localparam int NB  = DEF_NUM_BANKS;
  localparam int AW  = DEF_ADDR_W;
  localparam int BAW = $clog2(NB);
  localparam int PEW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;
  localparam int TRL = DEF_T_RL, TWL = DEF_T_WL, TRC = DEF_T_RC, BLH = DEF_BL / 2;
  localparam int N1  = int'(NUM_PE) - 1;
  localparam int PART_INT = ((N1 + 1) / 2) * (TWL - TRL + BLH) + (N1 / 2) * (TRL - TWL + BLH);
  localparam int SHARE_INT = N1 * TRC;

  logic cfg_we, cfg_partition, cfg_pending, partition;
  logic req_valid, req_ready;
  logic [PEW-1:0] req_pe;
  op_e req_op;
  logic [AW+BAW-1:0] req_addr;
  logic rld_cs_n, rld_we_n, rld_ref_n, issue;
  logic [BAW-1:0] rld_ba;
  logic [AW-1:0] rld_a;
  logic [PEW-1:0] issue_pe;
  int nrd, nwr; longint lds;

  rldc_top #(.NUM_PE(NUM_PE), .SKIP_NOT_READY(SKIP)) dut (.*);

  rldram_model mem (.ck(clk), .cs_n(rld_cs_n), .we_n(rld_we_n), .ref_n(rld_ref_n),
                    .ba(rld_ba), .a(rld_a), .violations(violations), .reads(nrd),
                    .writes(nwr), .last_data_start(lds));

  longint cyc;
  longint arr [NUM_PE];
  logic   busy [NUM_PE];
  logic   busy_wr [NUM_PE];
  longint free_at [NUM_PE];   // data start of the PE's request: PE stalls until then
  int     served;
  int     rng;

  assign bound_r = (PARTITION ? PART_INT : SHARE_INT) + TRL;
  assign bound_w = (PARTITION ? PART_INT : SHARE_INT) + TWL;

  function automatic int rnd(input int n);
    rng = rng * 1103515245 + 12345;
    return int'((unsigned'(rng) >> 8) % unsigned'(n));
  endfunction

  initial begin
    cyc = 0; served = 0; done = 1'b0; rng = int'(SEED);
    max_r = 0; max_w = 0; min_lat = 1000;
    req_valid = 1'b0; req_pe = '0; req_op = OP_READ; req_addr = '0;
    cfg_we = 1'b0; cfg_partition = PARTITION;
    foreach (busy[i]) begin busy[i] = 1'b0; busy_wr[i] = 1'b0; arr[i] = 0; free_at[i] = -1; end
  end

  // one clocked process: settle the outcome of the cycle just ended, then
  // drive the next cycle's inputs (blocking, so they are seen next edge)
  always @(posedge clk) begin
    if (!rst_n) begin
      cyc <= 0;
    end else begin
      int lat, p;
      cyc <= cyc + 1;
      if (req_valid && req_ready) begin
        busy[req_pe]    = 1'b1;
        busy_wr[req_pe] = (req_op == OP_WRITE);
        arr[req_pe]     = cyc;
      end
      if (issue) begin
        lat = int'(cyc - arr[issue_pe]) + (busy_wr[issue_pe] ? TWL : TRL);
        if (busy_wr[issue_pe]) begin if (lat > max_w) max_w = lat; end
        else if (lat > max_r) max_r = lat;
        if (lat < min_lat) min_lat = lat;
        free_at[issue_pe] = cyc + (busy_wr[issue_pe] ? TWL : TRL);
        served++;
        if (served >= int'(NREQ)) done = 1'b1;
      end
      for (int i = 0; i < int'(NUM_PE); i++)
        if (busy[i] && free_at[i] >= 0 && cyc >= free_at[i]) begin
          busy[i] = 1'b0;
          free_at[i] = -1;
        end
      // next inputs
      cfg_we = (cyc == 2);
      if (!(req_valid && !req_ready)) begin
        req_valid = 1'b0;
        p = rnd(int'(NUM_PE));
        if (cyc > 6 && !done && !busy[p] && rnd(4) != 0) begin
          req_valid = 1'b1;
          req_pe    = PEW'(p);
          req_op    = rnd(2) ? OP_WRITE : OP_READ;
          req_addr  = {AW'(rnd(1 << 20)), BAW'(PARTITION ? rnd(NB) : rnd(2))};
        end
      end
    end
  end

endmodule
