// flexstep_fifo -- Data Buffer FIFO of one core (part of Data Buffering and Channelling, DBC).
//
// Buffers checking-segment entries. On a main core it holds the entries the core produced until
// the system interconnect can forward them (this is what lets a main core keep running while its
// checker is busy or owned by another main core). On a checker core it holds the entries received
// from the interconnect until the checker replays them, which is what makes checking asynchronous.
// The paper calls it SRAM based and gives 1088 bytes per core for DBC; DEPTH = 64 entries of the
// 136-bit entry_t is exactly 1088 bytes (the split into 64 x 136 is this design's reading).
// Storage is a plain array (maps to SRAM/LUTRAM); the head is read combinationally (first-word
// fall-through). push when full and pop when empty are ignored; push and pop may happen in the
// same cycle. Synchronous active-low reset clears the pointers only.
module flexstep_fifo
  import flexstep_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  entry_t din,
  input  logic   pop,
  output entry_t dout,
  output logic   empty,
  output logic   full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  entry_t          mem [DEPTH];
  logic [AW-1:0]   wptr, rptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  assign empty = (cnt == '0);
  assign full  = (cnt == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign count = cnt;
  assign dout  = mem[rptr];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
      cnt  <= '0;
    end else begin
      if (do_push) wptr <= incr(wptr);
      if (do_pop)  rptr <= incr(rptr);
      unique case ({do_push, do_pop})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: cnt <= cnt;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

`ifndef SYNTHESIS
  a_cnt_range: assert property (@(posedge clk) disable iff (!rst_n) 32'(cnt) <= DEPTH);
`endif
endmodule
