// tb_layer_ctrl: drives start pulses back to back and with gaps, and checks
// the three phases per position, the done pulse in the third cycle, the
// position count with its wrap after NPOS, and the first/last flags.
module tb_layer_ctrl;
  localparam int NPOS = 7;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, busy, done, first, last;
  logic [1:0] phase;
  logic [2:0] pos;
  layer_ctrl #(.NPHASE(3), .NPOS(NPOS)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int p = 0; p < 2 * NPOS + 3; p++) begin
      int gap;
      gap = (p % 3 == 0) ? 2 : 0;
      repeat (gap) begin #1; chk(!busy && !done, "idle between positions"); @(posedge clk); end
      #1;
      chk(int'(pos) == p % NPOS, $sformatf("pos %0d exp %0d", pos, p % NPOS));
      chk(first == (p % NPOS == 0), "first");
      chk(last == (p % NPOS == NPOS-1), "last");
      start <= 1; @(posedge clk); start <= 0;
      for (int ph = 0; ph < 3; ph++) begin
        #1;
        chk(busy && int'(phase) == ph, $sformatf("phase %0d exp %0d", phase, ph));
        chk(done == (ph == 2), "done in the third cycle");
        if (ph == 2 && (p + 1) % 3 != 0) begin start <= 1; @(posedge clk); start <= 0; p++;
          // back-to-back: next position has started
          for (int q = 0; q < 3; q++) begin #1; chk(busy && int'(phase) == q, "b2b phase");
            chk(int'(pos) == p % NPOS, $sformatf("b2b pos %0d exp %0d", pos, p % NPOS));
            if (q < 2) @(posedge clk); end
        end
        @(posedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
