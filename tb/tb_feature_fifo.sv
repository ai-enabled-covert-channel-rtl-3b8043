// tb_feature_fifo: random pushes and multi-column pops against a queue
// model. Checks the occupancy, every column of the 8-wide window that holds
// data, the frame-end tags, that a push into a full FIFO is dropped and
// sets the sticky overflow flag, and wrap-around of the circular buffer.
module tb_feature_fifo;
  import ccd_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic push, din_last, overflow;
  act_t din [2];
  logic [3:0] pop_n;
  logic [7:0] count;
  act_t win [8][2];
  logic [7:0] win_last;
  feature_fifo dut (.*);
  int checks = 0, failures = 0;
  int q [$];      // packed model entries: {last, i, q}
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask
  initial begin
    #(10 * 50000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bit saw_full = 0;
    push = 0; din = '{default: '0}; din_last = 0; pop_n = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int it = 0; it < 4000; it++) begin
      int np, e;
      bit ph;
      // compare state
      #1;
      chk(int'(count) == q.size(), $sformatf("count %0d exp %0d", count, q.size()));
      for (int k = 0; k < 8 && k < q.size(); k++) begin
        chk({win_last[k], win[k][0], win[k][1]} == 25'(q[k]), $sformatf("win[%0d]", k));
      end
      chk(overflow == saw_full, "overflow flag");
      // choose next action; phase 1 fills, phase 2 drains
      ph = (it / 500) % 2;
      e = int'($urandom % 33554432);
      push = ph ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      din[0] = act_t'(e >> 13); din[1] = act_t'(e >> 1); din_last = e[0];
      np = int'($urandom % 9);
      if (np > q.size()) np = q.size();
      if (!ph && $urandom % 12 != 0) np = 0;
      pop_n = 4'(np);
      @(posedge clk);
      for (int k = 0; k < np; k++) void'(q.pop_front());
      if (push) begin
        if (q.size() + np < CLEN) q.push_back({din_last, din[0], din[1]});
        else saw_full = 1;
      end
    end
    chk(saw_full, "full reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
