// tb_act_unit: checks the activation stage on directed and random
// accumulators, for a ReLU and a linear instance: shift by W_FRAC,
// ReLU, saturation at +2047 / -2048.
module tb_act_unit;
  import ccd_pkg::*;
  import ccd_ref_pkg::*;
  acc_t acc [4];
  act_t yr [4], yl [4];
  act_unit #(.N(4), .RELU(1'b1)) u_r (.acc, .y(yr));
  act_unit #(.N(4), .RELU(1'b0)) u_l (.acc, .y(yl));
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    acc_t dir [8];
    dir = '{32'sd0, 32'sd127, 32'sd128, -32'sd1, -32'sd129, 32'sd262016, 32'sd262144, -32'sd300000};
    for (int it = 0; it < 200; it++) begin
      for (int k = 0; k < 4; k++)
        acc[k] = (it < 2) ? dir[it*4 + k] : acc_t'($urandom % 1000000) - acc_t'(500000);
      #1;
      for (int k = 0; k < 4; k++) begin
        checks += 2;
        if (int'(yr[k]) != q12(longint'(acc[k]), 1)) begin failures++; $display("FAIL relu %0d -> %0d", acc[k], yr[k]); end
        if (int'(yl[k]) != q12(longint'(acc[k]), 0)) begin failures++; $display("FAIL lin %0d -> %0d", acc[k], yl[k]); end
      end
    end
    // spot values worked out by hand
    acc[0] = 32'sd640; acc[1] = -32'sd640; acc[2] = 32'sd1000000; acc[3] = -32'sd1000000; #1;
    checks += 8;
    if (yl[0] != 12'sd5 || yr[0] != 12'sd5) failures++;
    if (yl[1] != -12'sd5 || yr[1] != 12'sd0) failures++;
    if (yl[2] != 12'sd2047 || yr[2] != 12'sd2047) failures++;
    if (yl[3] != -12'sd2048 || yr[3] != 12'sd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
