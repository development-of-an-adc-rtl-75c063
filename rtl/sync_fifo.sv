// sync_fifo: single-clock first-word-fall-through FIFO, used by the capture
// engine to absorb AXI back-pressure. Memory is an array (block RAM); the
// head word is presented on rdata while empty is low. push on full and pop on
// empty are ignored; clr empties it. count gives the fill level.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,     // synchronous flush
  input  logic                       push,
  input  logic [W-1:0]               wdata,
  input  logic                       pop,
  output logic [W-1:0]               rdata,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW   = $clog2(DEPTH);
  localparam int unsigned CNTW = $clog2(DEPTH+1);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_push, do_pop;

  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rdata   = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (clr) begin
        wp    <= '0;
        rp    <= '0;
        count <= '0;
      end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + CNTW'(do_push) - CNTW'(do_pop);
      end
    end
  end
endmodule
