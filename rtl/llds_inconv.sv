// llds_inconv: first stage of the Learnable Linear Down-Sample (LLDS) block.
//
// Four single-channel convolutions run in parallel on the raw ADC stream:
// for each of the I and Q branches a 1x5 filter (zero padding 2) and a 1x3
// filter (zero padding 1), stride 1, each with a bias and ReLU. Every frame
// position 0..639 therefore yields four values: out_map[0] = 1x5 on I,
// [1] = 1x3 on I, [2] = 1x5 on Q, [3] = 1x3 on Q. The weights stay in place
// and the samples slide through a 5-deep window (weight-stationary), so all
// 16 MACs of a position happen in one cycle and one sample per clock can
// be accepted.
//
// Interface: in_valid qualifies one I/Q sample; in_sof marks the first
// sample of a frame (a frame is FRAME_LEN samples, counted from in_sof or
// from the previous frame's end). Timing: position n comes out (out_valid,
// registered) two cycles after the shift that brings sample n+2 into the
// window. Padding: the window slots carry a frame tag and only samples of
// the centre sample's frame are used, so the next frame can follow with no
// gap; after a frame's last sample, idle cycles shift zero bubbles in to
// flush the final two positions.
//
// From the paper: kernel sizes, padding, stride, ReLU, 12-bit samples and
// 8-bit weights, one position per clock. This design's own: the frame-start
// flag, the bubble flush and the fixed-point format (see ccd_pkg).
module llds_inconv
  import ccd_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  wload_t      wload,
  input  logic        in_valid,
  input  logic        in_sof,
  input  act_t        in_i,
  input  act_t        in_q,
  output logic        out_valid,
  output logic [9:0]  out_pos,
  output logic        out_last,
  output act_t        out_map [4]
);
  typedef struct packed {
    logic       valid;
    logic       tag;
    logic       last;
    logic [9:0] idx;
    act_t       i;
    act_t       q;
  } slot_t;

  slot_t       win [5];          // win[0] newest = position n+2, win[2] centre
  logic [9:0]  cnt;              // index of the next sample
  logic        tag;              // frame tag of the current frame
  logic        shifted;

  // weights: b*10 + {c5 0..4, c5 bias, c3 0..2, c3 bias}
  logic [AW-1:0] waddr [LLDS1_DEPTH];
  wgt_t          w     [LLDS1_DEPTH];
  always_comb for (int k = 0; k < LLDS1_DEPTH; k++) waddr[k] = AW'(k);
  weight_mem #(.DEPTH(LLDS1_DEPTH), .NRD(LLDS1_DEPTH), .LAYER(LY_LLDS1)) u_w (
    .clk, .wload, .rd_addr(waddr), .rd_data(w));

  logic [9:0] this_idx;
  logic       this_tag, bubble, shift;
  assign this_idx = in_sof ? 10'd0 : cnt;
  assign this_tag = (this_idx == 10'd0) ? ~tag : tag;
  assign bubble   = !in_valid && ((win[0].valid && win[0].last) ||
                                  (win[1].valid && win[1].last));
  assign shift    = in_valid || bubble;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < 5; s++) win[s] <= '0;
      cnt     <= '0;
      tag     <= 1'b0;
      shifted <= 1'b0;
    end else begin
      shifted <= shift;
      if (shift) begin
        for (int s = 4; s > 0; s--) win[s] <= win[s-1];
        if (in_valid) begin
          win[0] <= '{valid: 1'b1, tag: this_tag, last: (this_idx == 10'(FRAME_LEN-1)),
                      idx: this_idx, i: in_i, q: in_q};
          tag    <= this_tag;
          cnt    <= (this_idx == 10'(FRAME_LEN-1)) ? 10'd0 : this_idx + 10'd1;
        end else begin
          win[0] <= '0;
        end
      end
    end
  end

  // Window values with zero padding outside the centre's frame.
  act_t xi [5], xq [5];
  always_comb begin
    for (int s = 0; s < 5; s++) begin
      logic use_s;
      use_s = win[s].valid && (win[s].tag == win[2].tag);
      xi[s] = use_s ? win[s].i : '0;
      xq[s] = use_s ? win[s].q : '0;
    end
  end

  // tap k of the 1x5 filter multiplies x[n-2+k] = slot 4-k;
  // tap k of the 1x3 filter multiplies x[n-1+k] = slot 3-k.
  acc_t acc [4];
  act_t y   [4];
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      acc_t a5, a3;
      a5 = bias_acc(w[b*10 + 5]);
      a3 = bias_acc(w[b*10 + 9]);
      for (int k = 0; k < 5; k++)
        a5 += (b == 0 ? acc_t'(xi[4-k]) : acc_t'(xq[4-k])) * acc_t'(w[b*10 + k]);
      for (int k = 0; k < 3; k++)
        a3 += (b == 0 ? acc_t'(xi[3-k]) : acc_t'(xq[3-k])) * acc_t'(w[b*10 + 6 + k]);
      acc[2*b]   = a5;
      acc[2*b+1] = a3;
    end
  end
  act_unit #(.N(4), .RELU(1'b1)) u_act (.acc, .y);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_pos   <= '0;
      out_last  <= 1'b0;
      for (int k = 0; k < 4; k++) out_map[k] <= '0;
    end else begin
      out_valid <= shifted && win[2].valid;
      out_pos   <= win[2].idx;
      out_last  <= win[2].last;
      for (int k = 0; k < 4; k++) out_map[k] <= y[k];
    end
  end
endmodule
