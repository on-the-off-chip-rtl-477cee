// rldram_model: behavioural model of the RLDRAM3 command interface, for
// testbenches only (not synthesizable logic; the real part is a DRAM chip).
//
// On each rising clock edge it samples CS#, WE#, REF#, BA and A. A READ or
// WRITE is checked against the device rules the controller must honour:
// a command to a bank at least T_RC cycles after the previous command to
// that bank, and a data burst (starting T_RL after READ or T_WL after WRITE,
// lasting BL/2 cycles) that does not overlap the previous burst on the data
// bus. Every broken rule increments violations. A refresh or mode-register
// command (REF# low) counts as a violation too: the controller never sends
// one. reads, writes and last_data_start (the cycle the newest burst begins)
// are exported for the testbench. No data is stored.
module rldram_model #(
  parameter int unsigned NUM_BANKS = 16,
  parameter int unsigned ADDR_W    = 20,
  parameter int unsigned T_RC      = 6,
  parameter int unsigned T_RL      = 13,
  parameter int unsigned T_WL      = 14,
  parameter int unsigned BL        = 8
) (
  input  logic                         ck,
  input  logic                         cs_n,
  input  logic                         we_n,
  input  logic                         ref_n,
  input  logic [$clog2(NUM_BANKS)-1:0] ba,
  input  logic [ADDR_W-1:0]            a,
  output int                           violations,
  output int                           reads,
  output int                           writes,
  output longint                       last_data_start
);

  longint cyc;
  longint bank_last [NUM_BANKS];
  longint bus_free;            // first cycle the data bus is free
  logic   a_unused;

  initial begin
    cyc = 0;
    violations = 0;
    reads = 0;
    writes = 0;
    last_data_start = -1;
    bus_free = 0;
    foreach (bank_last[b]) bank_last[b] = -1000;
  end

  assign a_unused = ^a;

  always @(posedge ck) begin
    longint ds;
    if (!cs_n) begin
      if (!ref_n) begin
        violations <= violations + 1;
        $display("[rldram] cycle %0d: unexpected REF/MRS command", cyc);
      end else begin
        ds = cyc + (we_n ? T_RL : T_WL);
        if (cyc - bank_last[ba] < T_RC) begin
          violations <= violations + 1;
          $display("[rldram] cycle %0d: tRC violation on bank %0d (%0d cycles)",
                   cyc, ba, cyc - bank_last[ba]);
        end
        if (ds < bus_free) begin
          violations <= violations + 1;
          $display("[rldram] cycle %0d: data bus collision", cyc);
        end
        bank_last[ba]   = cyc;
        bus_free        = ds + BL / 2;
        last_data_start <= ds;
        if (we_n) reads  <= reads + 1;
        else      writes <= writes + 1;
      end
    end
    cyc <= cyc + 1;
  end

endmodule
