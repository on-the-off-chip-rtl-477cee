// mem_config_reg: the controller's memory configuration register. Its one
// bit selects the memory layout: 1 = bank partitioning, 0 = bank sharing.
//
// A write (cfg_we with cfg_partition) is held pending until the controller
// is idle (idle = no request buffered and none accepted this cycle), then
// takes effect
// on that clock edge. This keeps every buffered command mapped under a
// single layout. pending shows a write waiting.
//
// Interface: clk, rst_n (asynchronous, active low); cfg_we, cfg_partition,
// idle in; partition, pending out. Reset loads RESET_PARTITION.
// Following the paper: one register bit chosen by the user selects the
// layout. This design's choice: the write port, deferring a write to an idle
// controller, and the reset value.
module mem_config_reg #(
  parameter logic RESET_PARTITION = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic cfg_we,
  input  logic cfg_partition,
  input  logic idle,
  output logic partition,
  output logic pending
);

  logic pend_val;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      partition <= RESET_PARTITION;
      pending   <= 1'b0;
      pend_val  <= RESET_PARTITION;
    end else begin
      if (cfg_we && idle) begin
        partition <= cfg_partition;
        pending   <= 1'b0;
      end else if (cfg_we) begin
        pending   <= 1'b1;
        pend_val  <= cfg_partition;
      end else if (pending && idle) begin
        partition <= pend_val;
        pending   <= 1'b0;
      end
    end
  end

endmodule
