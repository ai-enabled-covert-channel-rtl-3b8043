// tb_conv1_layer: the first convolution fed through a feature_fifo with two
// compressed frames from the golden model: the first at one column every
// five cycles (the LLDS rate at one sample per clock), the second pushed in
// a burst so that the layer runs from a backlog. Checks all 45 x 121
// outputs per frame, the last-column flag, and the rate: with data waiting,
// results come exactly three cycles apart (15 filters per cycle).
module tb_conv1_layer;
  import ccd_pkg::*;
  import ccd_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  wload_t wload;
  logic push, din_last, overflow, out_valid, out_last;
  act_t din [2];
  logic [3:0] pop_n;
  logic [7:0] count;
  act_t win [8][2];
  logic [7:0] win_last;
  act_t out_col [C1_NF];
  feature_fifo u_fifo (.clk, .rst, .push, .din, .din_last, .pop_n, .count, .win, .win_last, .overflow);
  conv1_layer dut (.clk, .rst, .wload, .win, .win_last, .fifo_count(count), .pop_n,
                   .out_valid, .out_last, .out_col);
  int checks = 0, failures = 0;
  int expa [2][C1_NF][C1_LEN];
  int ofr = 0, opos = 0, n_three = 0;
  longint cyc = 0, last_out = -100;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask
  always @(posedge clk) if (!rst && out_valid) begin
    if (ofr < 2) begin
      for (int f = 0; f < C1_NF; f++)
        chk(int'(out_col[f]) == expa[ofr][f][opos], $sformatf("fr %0d pos %0d f %0d: %0d exp %0d", ofr, opos, f, out_col[f], expa[ofr][f][opos]));
      chk(out_last == (opos == C1_LEN-1), "last");
      chk(cyc - last_out >= 3, "at most one column per three cycles");
      if (ofr == 1 && opos > 0) begin
        chk(cyc - last_out == 3, $sformatf("backlog rate: %0d cycles", cyc - last_out));
        n_three++;
      end
      last_out = cyc;
      if (opos == C1_LEN-1) begin opos = 0; ofr++; end else opos++;
    end else chk(0, "extra output");
  end
  initial begin
    #(10 * 20000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int fi [FRAME_LEN], fq [FRAME_LEN];
  int cc [2][2][CLEN];
  initial begin
    void'($urandom(13));
    random_weights();
    wload = '0; push = 0; din = '{default: '0}; din_last = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < CONV1_DEPTH; k++) begin
      wload <= '{valid: 1'b1, layer: LY_CONV1, addr: AW'(k), data: WW'(wc1[k])}; @(posedge clk);
    end
    wload <= '0;
    for (int fr = 0; fr < 2; fr++) begin
      make_frame(fr + 4, fi, fq);
      ref_llds1(fi, fq); ref_llds2(); ref_conv1();
      for (int f = 0; f < C1_NF; f++) for (int p = 0; p < C1_LEN; p++) expa[fr][f][p] = a1[f][p];
      for (int r = 0; r < 2; r++) for (int j = 0; j < CLEN; j++) cc[fr][r][j] = c[r][j];
    end
    for (int fr = 0; fr < 2; fr++) begin
      if (fr == 1) begin push <= 0; repeat (500) @(posedge clk); end
      for (int j = 0; j < CLEN; j++) begin
        push <= 1; din[0] <= act_t'(cc[fr][0][j]); din[1] <= act_t'(cc[fr][1][j]); din_last <= (j == CLEN-1);
        @(posedge clk);
        if (fr == 0) begin push <= 0; repeat (4) @(posedge clk); end
      end
    end
    push <= 0;
    repeat (500) @(posedge clk);
    chk(ofr == 2 && opos == 0, $sformatf("outputs %0d frames + %0d", ofr, opos));
    chk(n_three == C1_LEN - 1, "three-cycle rate seen");
    chk(!overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
