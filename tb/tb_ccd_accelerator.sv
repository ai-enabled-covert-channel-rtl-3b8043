// tb_ccd_accelerator: end-to-end test of the accelerator at its full size.
//
// Loads all 36,851 weights (random, fixed seed) over the load bus, then
// streams six 640-sample frames: three back to back at one sample per
// clock, one at one sample every three clocks (the 67 MS/s rate at
// 200 MHz), one with random gaps, and a last one back to back with it.
// Every result (class, one-hot flags, alarm, five 12-bit scores) is compared
// with the golden model, in order. It also checks that no frame is lost, the
// FIFO never overflows, each result comes within three frame durations of the
// frame's last sample, and that these mechanisms each happened at least
// once: back-to-back frames, the zero-bubble flush at a frame end, the first
// convolution waiting on the FIFO, the FIFO dropping a whole 2x8 window at
// each frame end,
// three-phase positions (121 per frame), an alarm and a CC-free result.
module tb_ccd_accelerator;
  import ccd_pkg::*;
  import ccd_ref_pkg::*;

  localparam int NFR = 6;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  wload_t wload;
  logic   s_valid, s_sof;
  act_t   s_i, s_q;
  logic   res_valid, cc_detected, fifo_overflow;
  cls_e   res_cls;
  logic [NCLS-1:0] res_onehot;
  act_t   res_logits [NCLS];

  ccd_accelerator dut (.*);

  int checks = 0, failures = 0;
  int exp_cls [NFR];
  int exp_lg  [NFR][NCLS];
  longint last_sample_cyc [NFR];
  int nres = 0;
  longint cyc = 0;
  logic prev_in_last = 0;
  int n_b2b = 0, n_bubble = 0, n_wait = 0, n_backlog = 0, n_c1pos = 0, n_alarm = 0, n_free = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic load_layer(layer_e ly, int n);
    for (int k = 0; k < n; k++) begin
      wload <= '{valid: 1'b1, layer: ly, addr: AW'(k), data: WW'(wget(ly, k))};
      @(posedge clk);
    end
    wload <= '0;
  endtask

  // monitors
  always @(posedge clk) if (!rst) begin
    if (dut.u_llds1.bubble) n_bubble++;
    if (!dut.u_conv1.busy && dut.f_count > 0 && int'(dut.f_count) < C1_KW) n_wait++;
    if (int'(dut.f_pop) == C1_KW) n_backlog++;
    if (s_valid && s_sof && prev_in_last) n_b2b++;
    prev_in_last <= s_valid && (dut.u_llds1.this_idx == 10'(FRAME_LEN-1));
    if (dut.u_conv1.done) n_c1pos++;
    if (res_valid) begin
      if (nres < NFR) begin
        check(int'(res_cls) == exp_cls[nres], $sformatf("frame %0d class %0d exp %0d", nres, res_cls, exp_cls[nres]));
        check(res_onehot == NCLS'(1 << exp_cls[nres]), $sformatf("frame %0d onehot", nres));
        check(cc_detected == (exp_cls[nres] != 0), $sformatf("frame %0d alarm", nres));
        for (int k = 0; k < NCLS; k++)
          check(int'(res_logits[k]) == exp_lg[nres][k], $sformatf("frame %0d logit %0d: %0d exp %0d", nres, k, res_logits[k], exp_lg[nres][k]));
        check(cyc - last_sample_cyc[nres] <= 3 * FRAME_LEN, $sformatf("frame %0d latency %0d", nres, cyc - last_sample_cyc[nres]));
        $display("frame %0d: class %0d, latency %0d cycles", nres, res_cls, cyc - last_sample_cyc[nres]);
        if (cc_detected) n_alarm++; else n_free++;
      end else check(0, "extra result");
      nres++;
    end
  end

  initial begin
    #(10 * 300000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int fi [FRAME_LEN], fq [FRAME_LEN];
  int prev_last_cyc;

  initial begin
    void'($urandom(20240611));
    wload = '0; s_valid = 0; s_sof = 0; s_i = '0; s_q = '0;
    random_weights();
    threshold_output(0, 7);
    repeat (3) @(posedge clk);
    rst <= 0;
    load_layer(LY_LLDS1, LLDS1_DEPTH);
    load_layer(LY_LLDS2, LLDS2_DEPTH);
    load_layer(LY_CONV1, CONV1_DEPTH);
    load_layer(LY_CONV2, CONV2_DEPTH);
    load_layer(LY_DENSE, DENSE_DEPTH);
    load_layer(LY_OUT, OUT_DEPTH);
    repeat (5) @(posedge clk);
    prev_last_cyc = -10;
    for (int fr = 0; fr < NFR; fr++) begin
      make_frame(fr + 1, fi, fq);
      ref_frame(fi, fq);
      exp_cls[fr] = cls;
      for (int k = 0; k < NCLS; k++) exp_lg[fr][k] = lg[k];
      if (fr == 3) begin s_valid <= 0; repeat (50) @(posedge clk); end
      for (int n = 0; n < FRAME_LEN; n++) begin
        if (fr == 3) begin s_valid <= 0; repeat (2) @(posedge clk); end
        if (fr == 4) while ($urandom % 3 == 0) begin s_valid <= 0; @(posedge clk); end
        s_valid <= 1; s_sof <= (n == 0); s_i <= act_t'(fi[n]); s_q <= act_t'(fq[n]);
        @(posedge clk);
        if (n == FRAME_LEN-1) begin last_sample_cyc[fr] = cyc; prev_last_cyc = int'(cyc); end
      end
    end
    s_valid <= 0; s_sof <= 0;
    repeat (3 * FRAME_LEN) @(posedge clk);
    check(nres == NFR, $sformatf("results %0d of %0d frames", nres, NFR));
    check(!fifo_overflow, "fifo overflow");
    check(n_c1pos == NFR * C1_LEN, $sformatf("conv1 positions %0d", n_c1pos));
    $display("mechanisms: back-to-back %0d, bubbles %0d, conv1 waits %0d, frame-end pops %0d, alarms %0d, cc-free %0d",
             n_b2b, n_bubble, n_wait, n_backlog, n_alarm, n_free);
    check(n_b2b > 0, "no back-to-back frames");
    check(n_bubble > 0, "no bubble flush");
    check(n_wait > 0, "conv1 never waited");
    check(n_backlog == NFR, "frame-end pops of a whole window");
    check(n_alarm > 0, "no alarm raised");
    check(n_free > 0, "no CC-free result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
