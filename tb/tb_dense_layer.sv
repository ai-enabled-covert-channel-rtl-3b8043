// tb_dense_layer: feeds three frames of conv2 columns (golden model) into
// the dense layer, one column every three cycles with occasional gaps,
// and checks the 32 ReLU outputs of each frame, that the hidden vector is
// valid four edges after the edge that takes in the frame's last column
// (the monitor sees five), and that there is exactly one result per frame.
module tb_dense_layer;
  import ccd_pkg::*;
  import ccd_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  wload_t wload;
  logic in_valid, in_last, out_valid;
  logic [6:0] in_pos;
  act_t in_col [C2_NF];
  act_t out_h [D_NH];
  dense_layer dut (.*);
  int checks = 0, failures = 0;
  int exph [3][D_NH];
  int ofr = 0, nz = 0;
  longint cyc = 0, last_in = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask
  always @(posedge clk) if (!rst && out_valid) begin
    if (ofr < 3) begin
      for (int n = 0; n < D_NH; n++) begin
        chk(int'(out_h[n]) == exph[ofr][n], $sformatf("fr %0d n %0d: %0d exp %0d", ofr, n, out_h[n], exph[ofr][n]));
        if (out_h[n] != 0) nz++;
      end
      chk(cyc - last_in == 5, $sformatf("latency %0d", cyc - last_in));
      ofr++;
    end else chk(0, "extra output");
  end
  initial begin
    #(10 * 50000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int fi [FRAME_LEN], fq [FRAME_LEN];
  int bb [3][C2_NF][C2_LEN];
  initial begin
    void'($urandom(19));
    random_weights();
    wload = '0; in_valid = 0; in_last = 0; in_pos = '0; in_col = '{default: '0};
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < DENSE_DEPTH; k++) begin
      wload <= '{valid: 1'b1, layer: LY_DENSE, addr: AW'(k), data: WW'(wd[k])}; @(posedge clk);
    end
    wload <= '0;
    for (int fr = 0; fr < 3; fr++) begin
      make_frame(fr + 3, fi, fq);
      ref_llds1(fi, fq); ref_llds2(); ref_conv1(); ref_conv2(); ref_dense();
      for (int n = 0; n < D_NH; n++) exph[fr][n] = hh[n];
      for (int f = 0; f < C2_NF; f++) for (int p = 0; p < C2_LEN; p++) bb[fr][f][p] = a2[f][p];
    end
    for (int fr = 0; fr < 3; fr++)
      for (int p = 0; p < C2_LEN; p++) begin
        in_valid <= 1; in_last <= (p == C2_LEN-1); in_pos <= 7'(p);
        for (int f = 0; f < C2_NF; f++) in_col[f] <= act_t'(bb[fr][f][p]);
        if (p == C2_LEN-1) last_in = cyc;
        @(posedge clk);
        in_valid <= 0;
        repeat (2 + ($urandom % 8 == 0 ? 3 : 0)) @(posedge clk);
      end
    repeat (10) @(posedge clk);
    chk(ofr == 3, $sformatf("results %0d", ofr));
    chk(nz > 0, "some hidden unit active");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
