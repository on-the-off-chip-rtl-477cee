// tb_rldc_bounds: worst-case latency of the controller against its
// analytical bounds, for 1, 2, 4 and 8 processing elements under both
// memory layouts (the scalability experiment's system sizes).
//
// With the strict round-robin slot (SKIP_NOT_READY = 0) every latency must
// stay within the bound: bank sharing (N-1)*tRC + tCL; bank partitioning
// ceil((N-1)/2)*(tWL-tRL+BL/2) + floor((N-1)/2)*(tRL-tWL+BL/2) + tCL; and
// the best latency must be tRL. The work-conserving default
// (SKIP_NOT_READY = 1) is run at every size too; its worst latencies are
// printed beside the bounds but not checked against them, since passing
// over a blocked PE can let it exceed them (it does with 8 PEs). Every run
// must be free of RLDRAM timing violations and reach the best case tRL.
module tb_rldc_bounds;

  localparam int NCFG = 16;
  localparam int NPE_OF  [NCFG] = '{1, 2, 4, 8, 1, 2, 4, 8, 1, 2, 4, 8, 1, 2, 4, 8};
  localparam bit PART_OF [NCFG] = '{0, 0, 0, 0, 1, 1, 1, 1, 0, 0, 0, 0, 1, 1, 1, 1};
  localparam bit SKIP_OF [NCFG] = '{0, 0, 0, 0, 0, 0, 0, 0, 1, 1, 1, 1, 1, 1, 1, 1};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NCFG-1:0] done;
  int max_r [NCFG], max_w [NCFG], min_lat [NCFG], br [NCFG], bw [NCFG], viol [NCFG];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NCFG; g++) begin : g_run
    rldc_traffic_check #(.NUM_PE(NPE_OF[g]), .PARTITION(PART_OF[g]),
                         .SKIP(SKIP_OF[g]), .NREQ(20000), .SEED(17 + g)) u (
      .clk(clk), .rst_n(rst_n), .done(done[g]), .max_r(max_r[g]), .max_w(max_w[g]),
      .min_lat(min_lat[g]), .bound_r(br[g]), .bound_w(bw[g]), .violations(viol[g]));
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (!(&done)) @(posedge clk);
    repeat (20) @(posedge clk);
    for (int g = 0; g < NCFG; g++) begin
      $display("N=%0d %-9s %-6s worst read %0d (bound %0d = %.1f ns) worst write %0d (bound %0d) best %0d  VW(read bound) %.1f%%",
               NPE_OF[g], PART_OF[g] ? "partition" : "share", SKIP_OF[g] ? "skip" : "strict",
               max_r[g], br[g], br[g] * 1.5, max_w[g], bw[g], min_lat[g],
               100.0 * (br[g] - 13) / 13.0);
      check(viol[g] == 0, $sformatf("run %0d: RLDRAM timing violations", g));
      check(min_lat[g] == 13, $sformatf("run %0d: best latency %0d, expected tRL", g, min_lat[g]));
      if (!SKIP_OF[g]) begin
        check(max_r[g] <= br[g], $sformatf("run %0d: read latency %0d over bound %0d", g, max_r[g], br[g]));
        check(max_w[g] <= bw[g], $sformatf("run %0d: write latency %0d over bound %0d", g, max_w[g], bw[g]));
      end else if (max_r[g] > br[g] || max_w[g] > bw[g]) begin
        $display("  note: work-conserving arbitration exceeded the bound in run %0d", g);
      end
    end
    // the 4-PE bounds printed in the analysis: 31 (sharing), 26 (partitioning)
    check(br[2] == 31 && br[6] == 26, "4-PE read bounds are 31 and 26 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
