// tb_address_mapping: checks the bank and in-bank address produced from a
// request address, for both layouts, at the default 4 PEs / 16 banks and
// at 8 PEs. Under bank partitioning the expected bank is computed as
// pe * (banks / PEs) + (bank field mod banks / PEs), and the test also
// confirms that PEs never share a bank; under sharing the bank is the
// low address field.
module tb_address_mapping;
  localparam int AW = 20;
  int checks = 0, failures = 0;

  logic          part;
  logic [1:0]    pe4;
  logic [2:0]    pe8;
  logic [AW+3:0] ad;
  logic [3:0]    ba4, ba8;
  logic [AW-1:0] a4, a8;
  int owner [16];

  address_mapping #(.NUM_PE(4), .NUM_BANKS(16), .ADDR_W(AW)) m4 (
    .partition(part), .pe_id(pe4), .req_addr(ad), .ba(ba4), .addr(a4));
  address_mapping #(.NUM_PE(8), .NUM_BANKS(16), .ADDR_W(AW)) m8 (
    .partition(part), .pe_id(pe8), .req_addr(ad), .ba(ba8), .addr(a8));

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  initial begin
    foreach (owner[b]) owner[b] = -1;
    for (int n = 0; n < 2000; n++) begin
      int bf;
      part = n[0];
      pe4 = 2'($urandom); pe8 = 3'($urandom);
      ad = (AW+4)'($urandom);
      #1;
      bf = int'(ad[3:0]);
      chk(a4 == ad[AW+3:4] && a8 == ad[AW+3:4], "in-bank address");
      if (part) begin
        chk(int'(ba4) == int'(pe4) * 4 + bf % 4, $sformatf("4 PE partition pe=%0d bf=%0d ba=%0d", pe4, bf, ba4));
        chk(int'(ba8) == int'(pe8) * 2 + bf % 2, "8 PE partition");
        if (owner[ba4] == -1) owner[ba4] = int'(pe4);
        chk(owner[ba4] == int'(pe4), "bank owned by one PE only");
      end else begin
        chk(int'(ba4) == bf && int'(ba8) == bf, "sharing bank = bank field");
      end
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
