// weight_mem: 8-bit weight storage of one layer.
//
// A flat array of DEPTH signed 8-bit words. It is written one word per cycle
// from the shared load bus when the bus carries this memory's LAYER id, and
// read combinationally through NRD independent ports, so a layer can fetch
// all the weights of one third of its filters in the same cycle.
//
// The paper shows a single 37 KB weight memory addressed by layer and
// address; splitting it into one array per layer, each with as many read
// ports as the layer has multipliers, is this design's choice. Contents are
// not reset: weights must be loaded before use.
module weight_mem
  import ccd_pkg::*;
#(
  parameter int     DEPTH = CONV1_DEPTH,
  parameter int     NRD   = 1,
  parameter layer_e LAYER = LY_CONV1
) (
  input  logic          clk,
  input  wload_t        wload,
  input  logic [AW-1:0] rd_addr [NRD],
  output wgt_t          rd_data [NRD]
);
  localparam int IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  wgt_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wload.valid && wload.layer == LAYER && int'(wload.addr) < DEPTH)
      mem[wload.addr[IW-1:0]] <= wload.data;
  end

  always_comb begin
    for (int k = 0; k < NRD; k++)
      rd_data[k] = (int'(rd_addr[k]) < DEPTH) ? mem[rd_addr[k][IW-1:0]] : '0;
  end
endmodule
