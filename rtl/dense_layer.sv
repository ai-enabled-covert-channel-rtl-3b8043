// dense_layer: the fully connected hidden layer, 1044 flattened conv2
// outputs to 32 neurons with ReLU.
//
// Nothing is flattened or stored: each conv2 column (9 values, position p)
// is latched and multiplied into 32 running accumulators in three phases of
// 3 inputs x 32 neurons (96 MACs per cycle), so the layer keeps pace with
// conv2. Input index p*9 + f selects the weight. The accumulators start
// from the bias at position 0; after the last position the 32 ReLU
// activations are registered out with a one-cycle out_valid.
//
// Interface: in_valid/in_col/in_pos/in_last from conv2_layer (pulses at
// least three cycles apart); out_valid/out_h towards output_layer.
//
// From the paper: 1044 inputs, ReLU dense layer. This design's own: 32
// neurons (the value both of the paper's parameter totals imply), the
// position-major flatten order, the MAC arrangement and the fixed-point
// format.
module dense_layer
  import ccd_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  wload_t      wload,
  input  logic        in_valid,
  input  logic        in_last,
  input  logic [$clog2(C2_LEN)-1:0] in_pos,
  input  act_t        in_col [C2_NF],
  output logic        out_valid,
  output act_t        out_h [D_NH]
);
  localparam int IPC = C2_NF / NPHASE;        // 3 inputs per cycle
  localparam int WPN = D_NIN + 1;             // 1045 words per neuron
  localparam int NRD = D_NH * (IPC + 1);      // 128

  logic busy, done, first, last;
  logic [1:0] phase;
  logic [$clog2(C2_LEN)-1:0] pos;
  layer_ctrl #(.NPHASE(NPHASE), .NPOS(C2_LEN)) u_ctrl (
    .clk, .rst, .start(in_valid), .busy, .phase, .pos, .done, .first, .last);

  act_t xcol [C2_NF];
  logic [$clog2(C2_LEN)-1:0] xpos;
  logic xlast;

  always_ff @(posedge clk) begin
    if (rst) begin
      xlast <= 1'b0;
      xpos  <= '0;
    end else if (in_valid) begin
      xcol  <= in_col;
      xpos  <= in_pos;
      xlast <= in_last;
    end
  end

  logic [AW-1:0] waddr [NRD];
  wgt_t          w     [NRD];
  always_comb begin
    for (int n = 0; n < D_NH; n++) begin
      for (int j = 0; j < IPC; j++)
        waddr[n*(IPC+1) + j] = AW'(n*WPN + int'(xpos)*C2_NF + int'(phase)*IPC + j);
      waddr[n*(IPC+1) + IPC] = AW'(n*WPN + D_NIN);
    end
  end
  weight_mem #(.DEPTH(DENSE_DEPTH), .NRD(NRD), .LAYER(LY_DENSE)) u_w (
    .clk, .wload, .rd_addr(waddr), .rd_data(w));

  acc_t acc  [D_NH];
  acc_t nacc [D_NH];
  act_t y    [D_NH];
  always_comb begin
    for (int n = 0; n < D_NH; n++) begin
      nacc[n] = (xpos == '0 && phase == 2'd0) ? bias_acc(w[n*(IPC+1) + IPC]) : acc[n];
      for (int j = 0; j < IPC; j++)
        nacc[n] += acc_t'(xcol[int'(phase)*IPC + j]) * acc_t'(w[n*(IPC+1) + j]);
    end
  end
  act_unit #(.N(D_NH), .RELU(1'b1)) u_act (.acc(nacc), .y);

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= done && xlast;
    if (busy) acc <= nacc;
    if (done && xlast) out_h <= y;
  end

  assert property (@(posedge clk) disable iff (rst) in_valid |-> (!busy || done));
  assert property (@(posedge clk) disable iff (rst) done |-> (pos == xpos));
endmodule
