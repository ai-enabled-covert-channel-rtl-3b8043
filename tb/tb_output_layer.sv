// tb_output_layer: random hidden vectors with random output weights; checks
// the five 12-bit scores, the argmax class (worked out from the exact
// scores), its one-hot flags, the CC alarm, the fixed 34-cycle latency,
// and that several different classes were produced, including ties
// resolved to the lower class.
module tb_output_layer;
  import ccd_pkg::*;
  import ccd_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  wload_t wload;
  logic in_valid, out_valid, cc_detected;
  act_t in_h [D_NH];
  cls_e cls;
  logic [NCLS-1:0] cls_onehot;
  act_t logits [NCLS];
  output_layer dut (.*);
  int checks = 0, failures = 0;
  int seen [NCLS];
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask
  initial begin
    #(10 * 50000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic load_out();
    for (int k = 0; k < OUT_DEPTH; k++) begin
      wload <= '{valid: 1'b1, layer: LY_OUT, addr: AW'(k), data: WW'(wo[k])}; @(posedge clk);
    end
    wload <= '0;
  endtask
  initial begin
    void'($urandom(23));
    random_weights();
    for (int k = 0; k < NCLS; k++) wo[k*33 + 32] = rnd(-20, 20);
    wload = '0; in_valid = 0; in_h = '{default: '0};
    repeat (2) @(posedge clk);
    rst <= 0;
    load_out();
    for (int it = 0; it < 120; it++) begin
      int lat;
      if (it == 100) begin   // all-zero weights: every score equals, class 0 wins
        foreach (wo[k]) wo[k] = 0;
        load_out();
      end
      for (int j = 0; j < D_NH; j++) hh[j] = (j % 3 == 0) ? 0 : rnd(0, 600);
      ref_out();
      in_valid <= 1;
      for (int j = 0; j < D_NH; j++) in_h[j] <= act_t'(hh[j]);
      @(posedge clk);
      in_valid <= 0;
      lat = 1;
      while (!out_valid && lat < 100) begin @(posedge clk); #1; lat++; end
      chk(lat == 34, $sformatf("latency %0d", lat));
      chk(int'(cls) == ccd_ref_pkg::cls, $sformatf("class %0d exp %0d", cls, ccd_ref_pkg::cls));
      chk(cls_onehot == NCLS'(1 << ccd_ref_pkg::cls), "onehot");
      chk(cc_detected == (ccd_ref_pkg::cls != 0), "alarm");
      for (int k = 0; k < NCLS; k++) chk(int'(logits[k]) == lg[k], $sformatf("logit %0d: %0d exp %0d", k, logits[k], lg[k]));
      seen[ccd_ref_pkg::cls]++;
      @(posedge clk);
    end
    chk(seen[0] >= 20, "tie case gave class 0");
    chk((seen[1] > 0) + (seen[2] > 0) + (seen[3] > 0) + (seen[4] > 0) >= 2, "several classes produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
