// llds_downsample: second stage of the LLDS block, the down-sampling
// convolution.
//
// A linear (no activation) 1x5 convolution with stride CF = 5 over the four
// maps of the first stage. Filter 0 reads the two I-branch maps (1x5 and
// 1x3 outputs) and gives the compressed I row; filter 1 does the same for
// Q. Each filter has 2 x 5 weights and a bias. Four positions are held in a
// 4x5 buffer; when the fifth (position 5m+4) arrives, all 20 MACs run in
// that cycle and compressed column m (0..127) is registered out one cycle
// later.
//
// Interface: in_valid/in_pos/in_map from llds_inconv; out_valid, out_col
// (0 = I, 1 = Q) and out_last (column 127) towards the feature FIFO.
//
// From the paper: 1x5 kernel, stride 5, linear activation, 2 filters, the
// 4x5 buffer. This design's own: which maps each filter reads (chosen so
// that the LLDS has the 42 parameters the paper's totals imply) and the
// fixed-point format.
module llds_downsample
  import ccd_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  wload_t      wload,
  input  logic        in_valid,
  input  logic [9:0]  in_pos,
  input  act_t        in_map [4],
  output logic        out_valid,
  output logic        out_last,
  output act_t        out_col [2]
);
  act_t buff [CF-1][4];

  logic [AW-1:0] waddr [LLDS2_DEPTH];
  wgt_t          w     [LLDS2_DEPTH];
  always_comb for (int k = 0; k < LLDS2_DEPTH; k++) waddr[k] = AW'(k);
  weight_mem #(.DEPTH(LLDS2_DEPTH), .NRD(LLDS2_DEPTH), .LAYER(LY_LLDS2)) u_w (
    .clk, .wload, .rd_addr(waddr), .rd_data(w));

  logic [2:0] ph;
  assign ph = 3'(in_pos % 10'(CF));

  acc_t acc [2];
  act_t y   [2];
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      acc[b] = bias_acc(w[b*11 + 10]);
      for (int k = 0; k < CF; k++) begin
        act_t m5, m3;
        m5 = (k == CF-1) ? in_map[2*b]   : buff[k][2*b];
        m3 = (k == CF-1) ? in_map[2*b+1] : buff[k][2*b+1];
        acc[b] += acc_t'(m5) * acc_t'(w[b*11 + k]) + acc_t'(m3) * acc_t'(w[b*11 + 5 + k]);
      end
    end
  end
  act_unit #(.N(2), .RELU(1'b0)) u_act (.acc, .y);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_col   <= '{default: '0};
    end else begin
      out_valid <= in_valid && (ph == 3'(CF-1));
      out_last  <= in_valid && (in_pos == 10'(FRAME_LEN-1));
      if (in_valid && ph == 3'(CF-1)) out_col <= y;
      if (in_valid && ph != 3'(CF-1)) buff[ph[1:0]] <= in_map;
    end
  end
endmodule
