// tb_llds_inconv: streams three frames into the LLDS input convolutions,
// the first two back to back at one sample per clock, the third with random
// gaps after an idle period, and compares all four maps at every position
// with the golden model, including the zero padding at both frame ends. It
// also checks one output per input sample and the timing: position n is
// valid two clock edges after the edge that takes in sample n+2 (the
// monitor, sampling at the next edge, sees a distance of three).
module tb_llds_inconv;
  import ccd_pkg::*;
  import ccd_ref_pkg::*;
  localparam int NFR = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  wload_t wload;
  logic in_valid, in_sof, out_valid, out_last;
  act_t in_i, in_q;
  logic [9:0] out_pos;
  act_t out_map [4];
  llds_inconv dut (.*);

  int checks = 0, failures = 0;
  int expm [NFR][4][FRAME_LEN];
  longint in_cyc [NFR][FRAME_LEN];
  longint cyc = 0;
  int ofr = 0, opos = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  always @(posedge clk) if (!rst && out_valid) begin
    chk(ofr < NFR, "extra output");
    if (ofr < NFR) begin
      chk(int'(out_pos) == opos, $sformatf("pos %0d exp %0d", out_pos, opos));
      chk(out_last == (opos == FRAME_LEN-1), "last flag");
      for (int k = 0; k < 4; k++)
        chk(int'(out_map[k]) == expm[ofr][k][opos], $sformatf("fr %0d pos %0d map %0d: %0d exp %0d", ofr, opos, k, out_map[k], expm[ofr][k][opos]));
      if (opos < FRAME_LEN - 2)
        chk(cyc == in_cyc[ofr][opos+2] + 3, $sformatf("timing pos %0d: %0d vs %0d", opos, cyc, in_cyc[ofr][opos+2]));
      if (opos == FRAME_LEN-1) begin opos = 0; ofr++; end else opos++;
    end
  end

  initial begin
    #(10 * 20000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int fi [FRAME_LEN], fq [FRAME_LEN];
  initial begin
    void'($urandom(7));
    random_weights();
    wload = '0; in_valid = 0; in_sof = 0; in_i = '0; in_q = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < LLDS1_DEPTH; k++) begin
      wload <= '{valid: 1'b1, layer: LY_LLDS1, addr: AW'(k), data: WW'(wl1[k])}; @(posedge clk);
    end
    wload <= '0;
    for (int fr = 0; fr < NFR; fr++) begin
      make_frame(fr * 5, fi, fq);
      ref_llds1(fi, fq);
      for (int k = 0; k < 4; k++) for (int n = 0; n < FRAME_LEN; n++) expm[fr][k][n] = m[k][n];
      if (fr == 2) begin in_valid <= 0; repeat (20) @(posedge clk); end
      for (int n = 0; n < FRAME_LEN; n++) begin
        if (fr == 2) while ($urandom % 2 == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1; in_sof <= (n == 0); in_i <= act_t'(fi[n]); in_q <= act_t'(fq[n]);
        in_cyc[fr][n] = cyc;
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (20) @(posedge clk);
    chk(ofr == NFR && opos == 0, $sformatf("outputs: %0d frames + %0d", ofr, opos));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
