// output_layer: the 5-neuron output layer and the class decision.
//
// The 32 hidden activations are latched; five accumulators, started from
// their biases, then take one hidden value per cycle (32 cycles, 5 MACs).
// One cycle later the result is registered: the class with the largest
// score (argmax, ties to the lower index), its one-hot flags, the binary
// covert-channel alarm (any class other than CC-free) and the five scores
// truncated to 12 bits. Classes: 0 CC-free, 1..4 HT1-CC..HT4-CC.
//
// Interface: in_valid/in_h from dense_layer (at most one vector per 34
// cycles); out_valid is a one-cycle pulse 34 cycles after in_valid.
//
// From the paper: 5 output neurons, the five classes, the binary and
// multi-class decisions. This design's own: softmax replaced by argmax
// (softmax does not change which score is largest), the serial MAC order
// and the fixed-point format.
module output_layer
  import ccd_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  wload_t      wload,
  input  logic        in_valid,
  input  act_t        in_h [D_NH],
  output logic        out_valid,
  output cls_e        cls,
  output logic [NCLS-1:0] cls_onehot,
  output logic        cc_detected,
  output act_t        logits [NCLS]
);
  localparam int WPK = D_NH + 1;              // 33 words per class
  localparam int NRD = 2 * NCLS;

  act_t h [D_NH];
  logic busy;
  logic [$clog2(D_NH+1)-1:0] j;               // next hidden input, D_NH = finish
  acc_t acc [NCLS];

  logic [AW-1:0] waddr [NRD];
  wgt_t          w     [NRD];
  always_comb begin
    for (int k = 0; k < NCLS; k++) begin
      waddr[2*k]   = AW'(k*WPK + (int'(j) < D_NH ? int'(j) : 0));
      waddr[2*k+1] = AW'(k*WPK + D_NH);
    end
  end
  weight_mem #(.DEPTH(OUT_DEPTH), .NRD(NRD), .LAYER(LY_OUT)) u_w (
    .clk, .wload, .rd_addr(waddr), .rd_data(w));

  act_t y [NCLS];
  act_unit #(.N(NCLS), .RELU(1'b0)) u_act (.acc, .y);

  logic [2:0] best;
  always_comb begin
    best = '0;
    for (int k = 1; k < NCLS; k++)
      if (acc[k] > acc[best]) best = 3'(k);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy        <= 1'b0;
      j           <= '0;
      out_valid   <= 1'b0;
      cls         <= CLS_FREE;
      cls_onehot  <= '0;
      cc_detected <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && !busy) begin
        h    <= in_h;
        busy <= 1'b1;
        j    <= '0;
        for (int k = 0; k < NCLS; k++) acc[k] <= bias_acc(w[2*k+1]);
      end else if (busy && int'(j) < D_NH) begin
        for (int k = 0; k < NCLS; k++) acc[k] <= acc[k] + acc_t'(h[j[$bits(j)-2:0]]) * acc_t'(w[2*k]);
        j <= j + 1'b1;
      end else if (busy) begin
        busy        <= 1'b0;
        out_valid   <= 1'b1;
        cls         <= cls_e'(best);
        cls_onehot  <= NCLS'(1) << best;
        cc_detected <= (best != 3'd0);
        logits      <= y;
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) in_valid |-> !busy);
endmodule
