// ccd_accelerator: CNN accelerator for on-line covert-channel detection in
// an RF receiver.
//
// It sits on the 12-bit I/Q outputs of the receiver's ADCs, next to the
// normal PHY, and classifies every 640-sample frame as CC-free or as
// carrying one of four Trojan covert channels (HT1-CC .. HT4-CC).
// Dataflow: llds_inconv (four 1x5/1x3 convolutions, one sample per clock)
// -> llds_downsample (stride-5 linear convolution, 2 x 128 out) ->
// feature_fifo (one whole compressed frame) -> conv1_layer (45 filters
// 2x8, 15 per cycle) -> conv2_layer (9 filters 1x6, 15 channels per cycle)
// -> dense_layer (1044 -> 32, accumulated on the fly) -> output_layer
// (5 scores, argmax). All 36,851 weights are loaded through wload before
// use; each layer owns its part of the weight memory.
//
// Interface: s_valid/s_sof/s_i/s_q carry ADC samples (s_sof on the first
// sample of each frame, at most one sample per clock, any gaps allowed).
// res_valid pulses once per frame with res_cls (0 CC-free, 1..4 HTn-CC),
// res_onehot (one flag per class, as the five alarm outputs of the
// receiver drawing) and cc_detected. fifo_overflow is sticky and would mean
// a lost column; it cannot happen at one sample per clock or slower.
// Timing: the LLDS runs at the sample rate; the CNN layers need three
// cycles per output position and stay ahead of it, so back-to-back frames
// are classified with no loss; a result comes out about 200 cycles after
// the frame's last sample.
//
// From the paper: the layer structure and sizes, 12-bit data, 8-bit
// weights, the FIFO and the 1/3 execution rate of the CNN. This design's
// own: frame framing, the weight-load bus, the fixed-point scaling and the
// argmax in place of softmax.
module ccd_accelerator
  import ccd_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  input  wload_t          wload,
  input  logic            s_valid,
  input  logic            s_sof,
  input  act_t            s_i,
  input  act_t            s_q,
  output logic            res_valid,
  output cls_e            res_cls,
  output logic [NCLS-1:0] res_onehot,
  output logic            cc_detected,
  output act_t            res_logits [NCLS],
  output logic            fifo_overflow
);
  // LLDS stage 1
  logic       m_valid, m_last;
  logic [9:0] m_pos;
  act_t       m_map [4];
  llds_inconv u_llds1 (
    .clk, .rst, .wload, .in_valid(s_valid), .in_sof(s_sof), .in_i(s_i), .in_q(s_q),
    .out_valid(m_valid), .out_pos(m_pos), .out_last(m_last), .out_map(m_map));

  // LLDS stage 2
  logic c_valid, c_last;
  act_t c_col [2];
  llds_downsample u_llds2 (
    .clk, .rst, .wload, .in_valid(m_valid), .in_pos(m_pos), .in_map(m_map),
    .out_valid(c_valid), .out_last(c_last), .out_col(c_col));

  // Compressed-frame FIFO
  logic [$clog2(CLEN+1)-1:0]  f_count;
  logic [$clog2(C1_KW+1)-1:0] f_pop;
  act_t                       f_win [C1_KW][2];
  logic [C1_KW-1:0]           f_win_last;
  feature_fifo #(.DEPTH(CLEN), .WIN(C1_KW)) u_fifo (
    .clk, .rst, .push(c_valid), .din(c_col), .din_last(c_last), .pop_n(f_pop),
    .count(f_count), .win(f_win), .win_last(f_win_last), .overflow(fifo_overflow));

  // Conv 2x8
  logic a_valid, a_last;
  act_t a_col [C1_NF];
  conv1_layer u_conv1 (
    .clk, .rst, .wload, .win(f_win), .win_last(f_win_last), .fifo_count(f_count),
    .pop_n(f_pop), .out_valid(a_valid), .out_last(a_last), .out_col(a_col));

  // Conv 1x6
  logic b_valid, b_last;
  logic [$clog2(C2_LEN)-1:0] b_pos;
  act_t b_col [C2_NF];
  conv2_layer u_conv2 (
    .clk, .rst, .wload, .in_valid(a_valid), .in_last(a_last), .in_col(a_col),
    .out_valid(b_valid), .out_last(b_last), .out_pos(b_pos), .out_col(b_col));

  // Dense 1044 -> 32
  logic h_valid;
  act_t h [D_NH];
  dense_layer u_dense (
    .clk, .rst, .wload, .in_valid(b_valid), .in_last(b_last), .in_pos(b_pos), .in_col(b_col),
    .out_valid(h_valid), .out_h(h));

  // Output layer 32 -> 5
  output_layer u_out (
    .clk, .rst, .wload, .in_valid(h_valid), .in_h(h),
    .out_valid(res_valid), .cls(res_cls), .cls_onehot(res_onehot),
    .cc_detected, .logits(res_logits));
endmodule
