// pe_buffer: per-PE command queue. Holds generated commands, each with its
// bank and address, in arrival order until the arbiter issues them.
//
// A circular buffer of DEPTH entries, first-word-fall-through: head and
// head_valid show the oldest entry. When the buffer is empty, an entry
// being pushed appears at the head in the same cycle (bypass); if it is
// popped in that cycle it is never stored. This lets a request that meets
// every timing constraint issue in its arrival cycle, so its latency is
// just tRL or tWL.
//
// Interface: clk, rst_n (asynchronous, active low); push/din/full in and
// out; head_valid/head/pop. count gives the number of stored entries.
// Following the paper: one buffer per PE feeding the arbiter. This design's
// choice: the depth and the same-cycle bypass.
module pe_buffer #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned W     = 27,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         full,
  output logic         head_valid,
  output logic [W-1:0] head,
  input  logic         pop,
  output logic [PTR_W:0] count
);

  logic [W-1:0]     mem [DEPTH];
  logic [PTR_W-1:0] rd_ptr, wr_ptr;
  logic             empty, store, take;

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (int'(p) == int'(DEPTH) - 1) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    empty      = (count == '0);
    full       = (int'(count) == int'(DEPTH));
    head_valid = !empty || push;
    head       = empty ? din : mem[rd_ptr];
    // bypass: a push into an empty buffer popped at once is not stored
    store      = push && !(empty && pop);
    take       = pop && !empty;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (store) wr_ptr <= inc(wr_ptr);
      if (take)  rd_ptr <= inc(rd_ptr);
      count <= count + (PTR_W+1)'(store) - (PTR_W+1)'(take);
    end
  end

  always_ff @(posedge clk) begin
    if (store) mem[wr_ptr] <= din;
  end

  // handshake rules
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("pe_buffer: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && !head_valid))
    else $error("pe_buffer: pop with no entry");

endmodule
