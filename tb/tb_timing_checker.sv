// tb_timing_checker: checks the ready flags of the timing checker.
//
// Directed part: after a single READ or WRITE, the cycle at which each
// kind of command first becomes ready again, to the same or another bank,
// must be: same bank tRC = 6; READ->READ 4, READ->WRITE 3, WRITE->WRITE 4,
// WRITE->READ 5 (RLDRAM3-1600 values). Random part: random heads, random
// issue of a ready head, compared every cycle with a model that keeps the
// last issue time per bank and per command type.
module tb_timing_checker;
  localparam int NPE = 4, NB = 16;
  localparam int TRC = 6, TRL = 13, TWL = 14, BLH = 4;
  logic clk = 0, rst_n = 0;
  logic [NPE-1:0] hv = '0, hw = '0, rdy;
  logic [NPE-1:0][3:0] hb = '0;
  logic iss = 0, iss_w = 0;
  logic [3:0] iss_b = '0;
  int checks = 0, failures = 0;
  longint cyc = 0, last_bank [NB], last_r = -100, last_w = -100;

  timing_checker #(.NUM_PE(NPE), .NUM_BANKS(NB)) dut (
    .clk(clk), .rst_n(rst_n), .head_valid(hv), .head_wr(hw), .head_ba(hb),
    .issue(iss), .issue_wr(iss_w), .issue_ba(iss_b), .ready(rdy));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL cycle %0d: %s", cyc, m); end
  endtask

  function automatic logic model_ready(logic w, logic [3:0] b, longint t);
    logic ok;
    ok = (t - last_bank[b]) >= TRC;
    if (w) ok = ok && (t - last_w >= BLH) && (t - last_r >= TRL - TWL + BLH);
    else   ok = ok && (t - last_r >= BLH) && (t - last_w >= TWL - TRL + BLH);
    return ok;
  endfunction

  // issue one command, then measure when each probe becomes ready
  task automatic gap_test(input logic first_w, input logic probe_w, input logic same_bank,
                          input int expect_gap);
    int g;
    repeat (10) @(negedge clk);
    hv = 4'b0001; hw[0] = first_w; hb[0] = 4'd3; iss = 1; iss_w = first_w; iss_b = 4'd3;
    @(negedge clk);
    iss = 0; hv = 4'b0010; hw[1] = probe_w; hb[1] = same_bank ? 4'd3 : 4'd9;
    g = 1;
    while (!rdy[1] && g < 20) begin @(negedge clk); g++; end
    chk(g == expect_gap, $sformatf("gap %s->%s %s bank: %0d, expected %0d",
        first_w ? "W" : "R", probe_w ? "W" : "R", same_bank ? "same" : "other", g, expect_gap));
    hv = '0;
  endtask

  initial begin
    foreach (last_bank[b]) last_bank[b] = -100;
    #12 rst_n = 1;
    gap_test(0, 0, 0, 4);
    gap_test(0, 1, 0, 3);
    gap_test(1, 1, 0, 4);
    gap_test(1, 0, 0, 5);
    gap_test(0, 0, 1, 6);
    gap_test(1, 1, 1, 6);
    gap_test(0, 1, 1, 6);
    gap_test(1, 0, 1, 6);
    repeat (20) @(negedge clk);
    // random: the model starts from an idle state
    for (int n = 0; n < 4000; n++) begin
      int pick;
      @(negedge clk);
      iss = 0;
      for (int i = 0; i < NPE; i++) begin
        hv[i] = $urandom_range(0, 3) != 0;
        hw[i] = $urandom_range(0, 1);
        hb[i] = 4'($urandom_range(0, 5));
      end
      #1;
      for (int i = 0; i < NPE; i++)
        chk(rdy[i] == (hv[i] && model_ready(hw[i], hb[i], cyc)),
            $sformatf("ready[%0d] bank %0d wr %0b", i, hb[i], hw[i]));
      pick = $urandom_range(0, NPE - 1);
      if (rdy[pick] && $urandom_range(0, 2) != 0) begin
        iss = 1; iss_w = hw[pick]; iss_b = hb[pick];
        last_bank[hb[pick]] = cyc;
        if (hw[pick]) last_w = cyc; else last_r = cyc;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
