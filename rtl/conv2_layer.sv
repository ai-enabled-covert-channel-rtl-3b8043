// conv2_layer: second CNN convolution, 9 filters of 1x6 across the 45
// channels of conv1, stride 1, no padding, ReLU: 116 output columns of 9
// values per frame (1044 values in all).
//
// A 45x6 buffer holds the last six conv1 columns of the current frame. Each
// new column shifts in; from the sixth column of a frame on, it starts one
// output position, computed in three phases of 15 input channels for all 9
// filters (9 x 15 x 6 = 810 MACs per cycle, execution rate 1/3) into nine
// accumulators. The activations are registered out one cycle after the
// third phase.
//
// Interface: in_valid/in_col/in_last from conv1_layer (in_valid pulses at
// least three cycles apart); out_valid/out_col/out_pos/out_last towards
// dense_layer.
//
// From the paper: kernel, filter and channel counts, the 45x6 buffer and 15
// channels x 9 filters per cycle. This design's own: the accumulation order
// and the fixed-point format.
module conv2_layer
  import ccd_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  wload_t      wload,
  input  logic        in_valid,
  input  logic        in_last,
  input  act_t        in_col [C1_NF],
  output logic        out_valid,
  output logic        out_last,
  output logic [$clog2(C2_LEN)-1:0] out_pos,
  output act_t        out_col [C2_NF]
);
  localparam int CPC = C1_NF / NPHASE;        // 15 channels per cycle
  localparam int WPF = C1_NF * C2_KW + 1;     // 271 words per filter
  localparam int WPP = CPC * C2_KW;           // 90 weights per filter per phase
  localparam int NRD = C2_NF * (WPP + 1);     // 819

  logic busy, done, first, last, start;
  logic [1:0] phase;
  logic [$clog2(C2_LEN)-1:0] pos;
  layer_ctrl #(.NPHASE(NPHASE), .NPOS(C2_LEN)) u_ctrl (
    .clk, .rst, .start, .busy, .phase, .pos, .done, .first, .last);

  act_t cbuf [C2_KW][C1_NF];                  // cbuf[0] newest column
  logic [$clog2(C1_LEN+1)-1:0] ncol;          // columns of this frame so far
  logic cur_last;

  assign start = in_valid && (int'(ncol) + 1 >= C2_KW);

  always_ff @(posedge clk) begin
    if (rst) begin
      ncol     <= '0;
      cur_last <= 1'b0;
    end else if (in_valid) begin
      for (int s = C2_KW-1; s > 0; s--) cbuf[s] <= cbuf[s-1];
      cbuf[0]  <= in_col;
      ncol     <= in_last ? '0 : ncol + 1'b1;
      cur_last <= in_last;
    end
  end

  logic [AW-1:0] waddr [NRD];
  wgt_t          w     [NRD];
  always_comb begin
    for (int f = 0; f < C2_NF; f++) begin
      for (int k = 0; k < WPP; k++)
        waddr[f*(WPP+1) + k] = AW'(f*WPF + int'(phase)*WPP + k);
      waddr[f*(WPP+1) + WPP] = AW'(f*WPF + WPF - 1);
    end
  end
  weight_mem #(.DEPTH(CONV2_DEPTH), .NRD(NRD), .LAYER(LY_CONV2)) u_w (
    .clk, .wload, .rd_addr(waddr), .rd_data(w));

  acc_t acc [C2_NF];
  acc_t nacc [C2_NF];
  act_t y   [C2_NF];
  always_comb begin
    for (int f = 0; f < C2_NF; f++) begin
      nacc[f] = (phase == 2'd0) ? bias_acc(w[f*(WPP+1) + WPP]) : acc[f];
      for (int c = 0; c < CPC; c++)
        for (int t = 0; t < C2_KW; t++)
          nacc[f] += acc_t'(cbuf[C2_KW-1-t][int'(phase)*CPC + c]) *
                     acc_t'(w[f*(WPP+1) + c*C2_KW + t]);
    end
  end
  act_unit #(.N(C2_NF), .RELU(1'b1)) u_act (.acc(nacc), .y);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_pos   <= '0;
    end else begin
      out_valid <= done;
      if (done) begin
        out_col  <= y;
        out_pos  <= pos;
        out_last <= last;
      end
    end
    if (busy) acc <= nacc;
  end

  assert property (@(posedge clk) disable iff (rst) in_valid |-> (!busy || done));
  assert property (@(posedge clk) disable iff (rst) done |-> (last == cur_last));
endmodule
