// layer_ctrl: control unit of one CNN layer.
//
// A start pulse begins one output position. The unit then spends NPHASE
// cycles on it (phase 0 .. NPHASE-1: one third of the filters or input
// channels per cycle) and raises done in the last phase. The position
// counter advances on done and wraps after NPOS positions, so first/last
// mark the frame's first and last output position. The layer uses phase and
// pos to address its weight memory and to select its input data.
//
// Interface: start is accepted only when busy is low or in the cycle done
// is high (back-to-back positions). Timing: busy is high in the NPHASE
// cycles after the start cycle.
//
// The paper gives the unit's role (weight addressing, aligning data with
// weights) and the 1/3 execution rate; the counter structure is this
// design's own.
module layer_ctrl #(
  parameter int NPHASE = 3,
  parameter int NPOS   = 121
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      start,
  output logic                      busy,
  output logic [1:0]                phase,
  output logic [$clog2(NPOS)-1:0]   pos,
  output logic                      done,
  output logic                      first,
  output logic                      last
);
  assign done  = busy && (int'(phase) == NPHASE-1);
  assign first = (pos == '0);
  assign last  = (int'(pos) == NPOS-1);

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      phase <= '0;
      pos   <= '0;
    end else begin
      if (done) pos <= last ? '0 : pos + 1'b1;
      if (start) begin
        busy  <= 1'b1;
        phase <= '0;
      end else if (done) begin
        busy  <= 1'b0;
        phase <= '0;
      end else if (busy) begin
        phase <= phase + 1'b1;
      end
    end
  end

  // A new position may only start when the previous one is finishing.
  assert property (@(posedge clk) disable iff (rst) start |-> (!busy || done));
endmodule
