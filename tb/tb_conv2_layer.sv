// tb_conv2_layer: feeds two frames of conv1 columns (golden model) into the
// second convolution, the first at the fastest legal rate (one column every
// three cycles), the second with random gaps, and checks all 9 x 116 outputs
// per frame, the position and last flags, and the timing: a result is
// valid four edges after the edge that takes in the column completing its
// 6-column window (three phases of 15 channels, then the output register);
// the monitor, sampling one edge later, sees five.
module tb_conv2_layer;
  import ccd_pkg::*;
  import ccd_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  wload_t wload;
  logic in_valid, in_last, out_valid, out_last;
  act_t in_col [C1_NF];
  logic [6:0] out_pos;
  act_t out_col [C2_NF];
  conv2_layer dut (.*);
  int checks = 0, failures = 0;
  int expb [2][C2_NF][C2_LEN];
  int ofr = 0, opos = 0;
  longint cyc = 0;
  longint start_cyc [$];
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask
  always @(posedge clk) if (!rst && out_valid) begin
    if (ofr < 2) begin
      longint sc;
      for (int f = 0; f < C2_NF; f++)
        chk(int'(out_col[f]) == expb[ofr][f][opos], $sformatf("fr %0d pos %0d f %0d: %0d exp %0d", ofr, opos, f, out_col[f], expb[ofr][f][opos]));
      chk(int'(out_pos) == opos, "pos");
      chk(out_last == (opos == C2_LEN-1), "last");
      sc = start_cyc.pop_front();
      chk(cyc - sc == 5, $sformatf("latency %0d", cyc - sc));
      if (opos == C2_LEN-1) begin opos = 0; ofr++; end else opos++;
    end else chk(0, "extra output");
  end
  initial begin
    #(10 * 20000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int fi [FRAME_LEN], fq [FRAME_LEN];
  int aa [2][C1_NF][C1_LEN];
  initial begin
    void'($urandom(17));
    random_weights();
    wload = '0; in_valid = 0; in_last = 0; in_col = '{default: '0};
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < CONV2_DEPTH; k++) begin
      wload <= '{valid: 1'b1, layer: LY_CONV2, addr: AW'(k), data: WW'(wc2[k])}; @(posedge clk);
    end
    wload <= '0;
    for (int fr = 0; fr < 2; fr++) begin
      make_frame(fr + 1, fi, fq);
      ref_llds1(fi, fq); ref_llds2(); ref_conv1(); ref_conv2();
      for (int f = 0; f < C2_NF; f++) for (int p = 0; p < C2_LEN; p++) expb[fr][f][p] = a2[f][p];
      for (int f = 0; f < C1_NF; f++) for (int p = 0; p < C1_LEN; p++) aa[fr][f][p] = a1[f][p];
    end
    for (int fr = 0; fr < 2; fr++)
      for (int p = 0; p < C1_LEN; p++) begin
        in_valid <= 1; in_last <= (p == C1_LEN-1);
        for (int f = 0; f < C1_NF; f++) in_col[f] <= act_t'(aa[fr][f][p]);
        if (p >= C2_KW-1) start_cyc.push_back(cyc);
        @(posedge clk);
        in_valid <= 0;
        repeat (2 + ((fr == 1) ? int'($urandom % 4) : 0)) @(posedge clk);
      end
    repeat (10) @(posedge clk);
    chk(ofr == 2 && opos == 0, $sformatf("outputs %0d frames + %0d", ofr, opos));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
