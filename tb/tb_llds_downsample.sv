// tb_llds_downsample: feeds two frames of first-stage maps (from the golden
// model) into the down-sampling convolution, one position per clock for the
// first frame and with random gaps for the second, and checks all 128
// compressed I/Q columns per frame, the last-column flag and that each
// column comes one cycle after its fifth input position.
module tb_llds_downsample;
  import ccd_pkg::*;
  import ccd_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  wload_t wload;
  logic in_valid, out_valid, out_last;
  logic [9:0] in_pos;
  act_t in_map [4], out_col [2];
  llds_downsample dut (.*);
  int checks = 0, failures = 0;
  int expc [2][2][CLEN];
  int ofr = 0, ocol = 0;
  logic prev_fifth = 0;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask
  always @(posedge clk) if (!rst) begin
    prev_fifth <= in_valid && (int'(in_pos) % CF == CF-1);
    chk(out_valid == prev_fifth, "column one cycle after its fifth position");
    if (out_valid && ofr < 2) begin
      for (int r = 0; r < 2; r++)
        chk(int'(out_col[r]) == expc[ofr][r][ocol], $sformatf("fr %0d col %0d row %0d: %0d exp %0d", ofr, ocol, r, out_col[r], expc[ofr][r][ocol]));
      chk(out_last == (ocol == CLEN-1), "last");
      if (ocol == CLEN-1) begin ocol = 0; ofr++; end else ocol++;
    end
  end
  initial begin
    #(10 * 20000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int fi [FRAME_LEN], fq [FRAME_LEN];
  int mm [2][4][FRAME_LEN];
  initial begin
    void'($urandom(11));
    random_weights();
    wload = '0; in_valid = 0; in_pos = '0; in_map = '{default: '0};
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < LLDS2_DEPTH; k++) begin
      wload <= '{valid: 1'b1, layer: LY_LLDS2, addr: AW'(k), data: WW'(wl2[k])}; @(posedge clk);
    end
    wload <= '0;
    for (int fr = 0; fr < 2; fr++) begin
      make_frame(fr + 2, fi, fq);
      ref_llds1(fi, fq);
      ref_llds2();
      for (int r = 0; r < 2; r++) for (int j = 0; j < CLEN; j++) expc[fr][r][j] = c[r][j];
      for (int k = 0; k < 4; k++) for (int n = 0; n < FRAME_LEN; n++) mm[fr][k][n] = m[k][n];
      for (int n = 0; n < FRAME_LEN; n++) begin
        if (fr == 1) while ($urandom % 3 == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1; in_pos <= 10'(n);
        for (int k = 0; k < 4; k++) in_map[k] <= act_t'(mm[fr][k][n]);
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    chk(ofr == 2, "all columns seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
