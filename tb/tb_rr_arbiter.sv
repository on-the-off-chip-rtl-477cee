// tb_rr_arbiter: random head_valid / head_ready patterns into two arbiters,
// one passing over not-ready PEs (SKIP_NOT_READY = 1) and one keeping the
// slot (SKIP_NOT_READY = 0). A model of each round-robin pointer predicts
// the grant every cycle; the one-hot pop, the issued PE and the command,
// bank and address muxed onto the device bus are checked, and NOP when
// nothing is granted. A directed case checks the rotation order 0,1,2,3.
module tb_rr_arbiter;
  import rldc_pkg::*;
  localparam int N = 4, BAW = 4, AW = 20;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] hv = '0, hr = '0;
  rld_cmd_t [N-1:0] hc;
  logic [N-1:0][BAW-1:0] hb;
  logic [N-1:0][AW-1:0] ha;
  logic [N-1:0] pop_s, pop_k;
  logic iss_s, iss_k;
  logic [1:0] g_s, g_k;
  rld_cmd_t c_s, c_k;
  logic [BAW-1:0] b_s, b_k;
  logic [AW-1:0] a_s, a_k;
  int checks = 0, failures = 0, ptr_s = 0, ptr_k = 0;

  rr_arbiter #(.NUM_PE(N), .BA_W(BAW), .ADDR_W(AW), .SKIP_NOT_READY(1'b1)) skip_arb (
    .clk(clk), .rst_n(rst_n), .head_valid(hv), .head_ready(hr), .head_cmd(hc),
    .head_ba(hb), .head_addr(ha), .pop(pop_s), .issue(iss_s), .grant_pe(g_s),
    .cmd(c_s), .ba(b_s), .addr(a_s));
  rr_arbiter #(.NUM_PE(N), .BA_W(BAW), .ADDR_W(AW), .SKIP_NOT_READY(1'b0)) keep_arb (
    .clk(clk), .rst_n(rst_n), .head_valid(hv), .head_ready(hr), .head_cmd(hc),
    .head_ba(hb), .head_addr(ha), .pop(pop_k), .issue(iss_k), .grant_pe(g_k),
    .cmd(c_k), .ba(b_k), .addr(a_k));

  always #5 clk = ~clk;

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL at %0t: %s", $time, m); end
  endtask

  task automatic check_one(input int ptr, input logic skip, input logic iss, input logic [1:0] g,
                           input logic [N-1:0] pop, input rld_cmd_t c, input logic [BAW-1:0] b,
                           input logic [AW-1:0] a, output int new_ptr);
    int eg; logic ei, found;
    ei = 0; eg = 0; found = 0;
    for (int k = 0; k < N; k++) begin
      int i;
      i = (ptr + k) % N;
      if (skip) begin
        if (!ei && hv[i] && hr[i]) begin ei = 1; eg = i; end
      end else if (!found && hv[i]) begin
        found = 1; ei = hr[i]; eg = i;
      end
    end
    chk(iss == ei, $sformatf("%s issue", skip ? "skip" : "keep"));
    if (ei) begin
      chk(int'(g) == eg, $sformatf("%s grant %0d expected %0d", skip ? "skip" : "keep", g, eg));
      chk(pop == N'(1 << eg), "one-hot pop");
      chk(c == hc[eg] && b == hb[eg] && a == ha[eg], "muxed command");
      new_ptr = (eg + 1) % N;
    end else begin
      chk(pop == '0 && c == CMD_NOP, "NOP when idle");
      new_ptr = ptr;
    end
  endtask

  initial begin
    int np;
    #12 rst_n = 1;
    // rotation with all PEs always ready
    for (int n = 0; n < 8; n++) begin
      @(negedge clk);
      hv = '1; hr = '1;
      for (int i = 0; i < N; i++) begin hc[i] = CMD_READ; hb[i] = BAW'(i); ha[i] = AW'(i * 7); end
      #1;
      chk(int'(g_s) == n % N && int'(g_k) == n % N, "rotation order");
      check_one(ptr_s, 1'b1, iss_s, g_s, pop_s, c_s, b_s, a_s, np); ptr_s = np;
      check_one(ptr_k, 1'b0, iss_k, g_k, pop_k, c_k, b_k, a_k, np); ptr_k = np;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      hv = N'($urandom); hr = N'($urandom);
      for (int i = 0; i < N; i++) begin
        hc[i] = $urandom_range(0, 1) ? CMD_WRITE : CMD_READ;
        hb[i] = BAW'($urandom); ha[i] = AW'($urandom);
      end
      #1;
      check_one(ptr_s, 1'b1, iss_s, g_s, pop_s, c_s, b_s, a_s, np); ptr_s = np;
      check_one(ptr_k, 1'b0, iss_k, g_k, pop_k, c_k, b_k, a_k, np); ptr_k = np;
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
