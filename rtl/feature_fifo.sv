// feature_fifo: the compressed-frame FIFO between the LLDS and the first
// CNN convolution ("CONV 2x8 FIFO (2x128)").
//
// The LLDS writes one 2 x 12-bit column every five input samples; the 2x8
// convolution needs eight adjacent columns at once and moves on by one
// column every three cycles. The FIFO is a circular buffer of DEPTH columns
// (a whole compressed frame) that shows its WIN oldest columns in parallel
// on win[], and lets the reader discard 0..WIN columns per cycle (pop_n).
// Each column carries the frame-end tag written with it.
//
// Interface: push/din/din_last write; pop_n discards; count is the
// occupancy. A push that finds the FIFO full is dropped and sets the
// sticky overflow flag (cleared by reset). Timing: a pushed column is
// visible in win[] and count the next cycle.
//
// From the paper: the FIFO, its 2x128 size and its purpose (rate transition
// between LLDS and CNN). This design's own: the window port, multi-pop and
// the overflow flag.
module feature_fifo
  import ccd_pkg::*;
#(
  parameter int DEPTH = CLEN,
  parameter int WIN   = C1_KW
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      push,
  input  act_t                      din [2],
  input  logic                      din_last,
  input  logic [$clog2(WIN+1)-1:0]  pop_n,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output act_t                      win [WIN][2],
  output logic [WIN-1:0]            win_last,
  output logic                      overflow
);
  localparam int PW = $clog2(DEPTH);

  act_t          mem  [DEPTH][2];
  logic          lastm[DEPTH];
  logic [PW-1:0] wp, rp;
  logic          full, push_ok;

  assign full    = (int'(count) == DEPTH);
  assign push_ok = push && !full;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (push_ok) begin
        mem[wp]   <= din;
        lastm[wp] <= din_last;
        wp        <= (int'(wp) == DEPTH-1) ? '0 : wp + 1'b1;
      end
      if (push && full) overflow <= 1'b1;
      rp    <= PW'((int'(rp) + int'(pop_n)) % DEPTH);
      count <= count + ($bits(count))'(push_ok) - ($bits(count))'(pop_n);
    end
  end

  always_comb begin
    for (int k = 0; k < WIN; k++) begin
      win[k]      = mem[(int'(rp) + k) % DEPTH];
      win_last[k] = lastm[(int'(rp) + k) % DEPTH];
    end
  end

  assert property (@(posedge clk) disable iff (rst) int'(pop_n) <= int'(count));
endmodule
