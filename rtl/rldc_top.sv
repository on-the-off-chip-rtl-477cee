// rldc_top: RLDC, a predictable memory controller for RLDRAM3 shared by
// NUM_PE processing elements (PEs).
//
// Each request carries its PE Id, a read/write type and an address. The
// processor decoder steers it to its PE's buffer; in the same cycle command
// generation turns the type into a READ or WRITE and address mapping
// computes the bank and in-bank address (under bank partitioning from the
// PE Id as well). The buffers feed a round-robin arbiter which, guided by
// the timing checker's per-constraint counters, issues at most one command
// per cycle on the device's cmd/ba/addr pins. A configuration register bit
// selects bank partitioning or bank sharing.
//
// Timing: the whole path from request to command pins is combinational, so
// a request that arrives at an idle controller is issued in its arrival
// cycle and its data starts tRL (read) or tWL (write) cycles later.
// Worst case from arrival to data with N PEs, both from the controller's
// analysis: bank sharing (N-1)*tRC + tCL; bank partitioning
// ceil((N-1)/2)*(tWL-tRL+BL/2) + floor((N-1)/2)*(tRL-tWL+BL/2) + tCL.
//
// Interface: clk, rst_n (asynchronous, active low).
//   Request port: req_valid/req_ready handshake with req_pe, req_op,
//   req_addr = {in-bank address, bank field}.
//   Configuration: cfg_we with cfg_partition (1 = partitioning). A write
//   waits until no request is buffered; meanwhile new requests are held off
//   (req_ready low) so that the buffers drain. cfg_pending and partition
//   show the state.
//   Device: rld_cs_n, rld_we_n, rld_ref_n, rld_ba, rld_a, sampled by the
//   device on the clock edge ending the issue cycle; issue and issue_pe say
//   that, and for whom, a command goes out, for a data path to use.
// SKIP_NOT_READY chooses the arbitration reading (see rr_arbiter): 1 lets
// a ready PE go ahead of a blocked one; 0 keeps the slot, which is what the
// worst-case bounds above assume.
// Data (DQ) handling is not part of this block.
// Following the paper: the block structure and connections, round-robin
// arbitration, the counters, both layouts, the timing values. This design's
// choice: combinational request-to-command path, buffer depth, address bit
// layout, configuration write rules.
module rldc_top
  import rldc_pkg::*;
#(
  parameter int unsigned NUM_PE    = DEF_NUM_PE,
  parameter int unsigned NUM_BANKS = DEF_NUM_BANKS,
  parameter int unsigned ADDR_W    = DEF_ADDR_W,
  parameter int unsigned BUF_DEPTH = DEF_BUF_DEPTH,
  parameter int unsigned T_RC      = DEF_T_RC,
  parameter int unsigned T_RL      = DEF_T_RL,
  parameter int unsigned T_WL      = DEF_T_WL,
  parameter int unsigned BL        = DEF_BL,
  parameter bit          SKIP_NOT_READY = 1'b1,
  localparam int unsigned PE_W     = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int unsigned BA_W     = $clog2(NUM_BANKS),
  localparam int unsigned REQ_AW   = ADDR_W + BA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration register write
  input  logic              cfg_we,
  input  logic              cfg_partition,
  output logic              cfg_pending,
  output logic              partition,
  // requests from the PEs
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [PE_W-1:0]   req_pe,
  input  op_e               req_op,
  input  logic [REQ_AW-1:0] req_addr,
  // RLDRAM command/address pins
  output logic              rld_cs_n,
  output logic              rld_we_n,
  output logic              rld_ref_n,
  output logic [BA_W-1:0]   rld_ba,
  output logic [ADDR_W-1:0] rld_a,
  output logic              issue,
  output logic [PE_W-1:0]   issue_pe
);

  localparam int unsigned ENT_W  = $bits(rld_cmd_t) + BA_W + ADDR_W;
  localparam int unsigned CNT_W  = ((BUF_DEPTH > 1) ? $clog2(BUF_DEPTH) : 1) + 1;

  typedef struct packed {
    rld_cmd_t          cmd;
    logic [BA_W-1:0]   ba;
    logic [ADDR_W-1:0] addr;
  } entry_t;

  // ---- front end ------------------------------------------------------
  logic [NUM_PE-1:0]  buf_full, dec_full, pe_sel, pop, head_valid, head_ready;
  logic [PE_W-1:0]    pe_id;
  logic               dec_valid;
  op_e                op;
  logic [REQ_AW-1:0]  dec_addr;
  rld_cmd_t           gen_cmd;
  entry_t             new_entry;
  logic               idle;

  // a pending layout change holds off new requests
  assign dec_full = buf_full | {NUM_PE{cfg_pending}};

  processor_decoder #(.NUM_PE(NUM_PE), .REQ_AW(REQ_AW)) u_dec (
    .req_valid (req_valid),
    .req_ready (req_ready),
    .req_pe    (req_pe),
    .req_op    (req_op),
    .req_addr  (req_addr),
    .buf_full  (dec_full),
    .pe_sel    (pe_sel),
    .pe_id     (pe_id),
    .dec_valid (dec_valid),
    .op        (op),
    .addr      (dec_addr)
  );

  command_generation u_cmdgen (
    .valid (dec_valid),
    .op    (op),
    .cmd   (gen_cmd)
  );

  address_mapping #(.NUM_PE(NUM_PE), .NUM_BANKS(NUM_BANKS), .ADDR_W(ADDR_W)) u_map (
    .partition (partition),
    .pe_id     (pe_id),
    .req_addr  (dec_addr),
    .ba        (new_entry.ba),
    .addr      (new_entry.addr)
  );
  assign new_entry.cmd = gen_cmd;

  mem_config_reg u_cfg (
    .clk           (clk),
    .rst_n         (rst_n),
    .cfg_we        (cfg_we),
    .cfg_partition (cfg_partition),
    .idle          (idle),
    .partition     (partition),
    .pending       (cfg_pending)
  );

  // ---- per-PE buffers -------------------------------------------------
  entry_t [NUM_PE-1:0]                 head;
  logic [NUM_PE-1:0][CNT_W-1:0]        count;
  rld_cmd_t [NUM_PE-1:0]               head_cmd;
  logic [NUM_PE-1:0][BA_W-1:0]         head_ba;
  logic [NUM_PE-1:0][ADDR_W-1:0]       head_addr;
  logic [NUM_PE-1:0]                   head_wr;

  for (genvar i = 0; i < NUM_PE; i++) begin : g_buf
    pe_buffer #(.DEPTH(BUF_DEPTH), .W(ENT_W)) u_buf (
      .clk        (clk),
      .rst_n      (rst_n),
      .push       (pe_sel[i]),
      .din        (new_entry),
      .full       (buf_full[i]),
      .head_valid (head_valid[i]),
      .head       (head[i]),
      .pop        (pop[i]),
      .count      (count[i])
    );
    assign head_cmd[i]  = head[i].cmd;
    assign head_ba[i]   = head[i].ba;
    assign head_addr[i] = head[i].addr;
    assign head_wr[i]   = cmd_is_write(head[i].cmd);
  end

  always_comb begin
    idle = !dec_valid;
    for (int i = 0; i < int'(NUM_PE); i++)
      if (count[i] != '0) idle = 1'b0;
  end

  // ---- scheduling -----------------------------------------------------
  rld_cmd_t        out_cmd;
  logic [BA_W-1:0] out_ba;

  timing_checker #(
    .NUM_PE(NUM_PE), .NUM_BANKS(NUM_BANKS),
    .T_RC(T_RC), .T_RL(T_RL), .T_WL(T_WL), .BL(BL)
  ) u_tc (
    .clk        (clk),
    .rst_n      (rst_n),
    .head_valid (head_valid),
    .head_wr    (head_wr),
    .head_ba    (head_ba),
    .issue      (issue),
    .issue_wr   (cmd_is_write(out_cmd)),
    .issue_ba   (out_ba),
    .ready      (head_ready)
  );

  rr_arbiter #(.NUM_PE(NUM_PE), .BA_W(BA_W), .ADDR_W(ADDR_W),
               .SKIP_NOT_READY(SKIP_NOT_READY)) u_arb (
    .clk        (clk),
    .rst_n      (rst_n),
    .head_valid (head_valid),
    .head_ready (head_ready),
    .head_cmd   (head_cmd),
    .head_ba    (head_ba),
    .head_addr  (head_addr),
    .pop        (pop),
    .issue      (issue),
    .grant_pe   (issue_pe),
    .cmd        (out_cmd),
    .ba         (out_ba),
    .addr       (rld_a)
  );

  assign rld_cs_n  = out_cmd.cs_n;
  assign rld_we_n  = out_cmd.we_n;
  assign rld_ref_n = out_cmd.ref_n;
  assign rld_ba    = out_ba;

endmodule
