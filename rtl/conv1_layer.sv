// conv1_layer: first CNN convolution, 45 filters of 2x8 over the 2 x 128
// compressed frame, stride 1, no padding, ReLU: 121 output columns of 45
// channels per frame.
//
// Input-stationary: when the feature FIFO holds at least eight columns,
// the eight-column window is copied into the layer's input buffer and the
// FIFO drops one column (eight after the frame's last position, the one
// whose window ends on the frame's last column). The window then stays
// while the filters pass over it in three phases of 15 filters each
// (15 x 16 = 240 MACs per cycle, execution rate 1/3). The 45 results are
// registered out together one cycle after the third phase.
//
// Interface: win/win_last/fifo_count from feature_fifo, pop_n back to it;
// out_valid/out_col/out_last towards conv2_layer. Timing: one position
// every three cycles when data is waiting; out_valid pulses are at least
// three cycles apart.
//
// From the paper: kernel, filter count, 15 filters per cycle, ReLU, 12-bit
// x 8-bit MACs. This design's own: the frame alignment through the FIFO's
// frame-end tags, no padding (implied by the printed 1044 flatten size),
// and the fixed-point format.
module conv1_layer
  import ccd_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  wload_t      wload,
  input  act_t        win [C1_KW][2],
  input  logic [C1_KW-1:0] win_last,
  input  logic [$clog2(CLEN+1)-1:0] fifo_count,
  output logic [$clog2(C1_KW+1)-1:0] pop_n,
  output logic        out_valid,
  output logic        out_last,
  output act_t        out_col [C1_NF]
);
  localparam int FPC = C1_NF / NPHASE;        // 15 filters per cycle
  localparam int WPF = 2 * C1_KW + 1;         // 17 words per filter
  localparam int NRD = FPC * WPF;             // 255

  logic busy, done, first, last, start;
  logic [1:0] phase;
  logic [$clog2(C1_LEN)-1:0] pos;
  layer_ctrl #(.NPHASE(NPHASE), .NPOS(C1_LEN)) u_ctrl (
    .clk, .rst, .start, .busy, .phase, .pos, .done, .first, .last);

  act_t ibuf [C1_KW][2];
  logic cur_last;

  assign start = (!busy || done) && (int'(fifo_count) >= C1_KW);
  assign pop_n = !start ? '0 : (win_last[C1_KW-1] ? ($bits(pop_n))'(C1_KW) : ($bits(pop_n))'(1));

  logic [AW-1:0] waddr [NRD];
  wgt_t          w     [NRD];
  always_comb for (int k = 0; k < NRD; k++) waddr[k] = AW'(int'(phase) * NRD + k);
  weight_mem #(.DEPTH(CONV1_DEPTH), .NRD(NRD), .LAYER(LY_CONV1)) u_w (
    .clk, .wload, .rd_addr(waddr), .rd_data(w));

  acc_t acc [FPC];
  act_t y   [FPC];
  always_comb begin
    for (int j = 0; j < FPC; j++) begin
      acc[j] = bias_acc(w[j*WPF + 2*C1_KW]);
      for (int r = 0; r < 2; r++)
        for (int t = 0; t < C1_KW; t++)
          acc[j] += acc_t'(ibuf[t][r]) * acc_t'(w[j*WPF + r*C1_KW + t]);
    end
  end
  act_unit #(.N(FPC), .RELU(1'b1)) u_act (.acc, .y);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      cur_last  <= 1'b0;
    end else begin
      out_valid <= done;
      if (done) out_last <= cur_last;
      if (start) begin
        ibuf     <= win;
        cur_last <= win_last[C1_KW-1];
      end
    end
    if (busy)
      for (int j = 0; j < FPC; j++) out_col[int'(phase)*FPC + j] <= y[j];
  end

  // The layer's own position count must agree with the frame tags.
  assert property (@(posedge clk) disable iff (rst) done |-> (last == cur_last));
endmodule
