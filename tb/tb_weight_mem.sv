// tb_weight_mem: writes a layer's memory through the load bus, with writes
// for other layers and out-of-range addresses mixed in, and reads every word
// back through four ports.
module tb_weight_mem;
  import ccd_pkg::*;
  localparam int DEPTH = 100;
  logic clk = 0;
  always #5 clk = ~clk;
  wload_t wload;
  logic [AW-1:0] rd_addr [4];
  wgt_t rd_data [4];
  weight_mem #(.DEPTH(DEPTH), .NRD(4), .LAYER(LY_CONV2)) dut (.clk, .wload, .rd_addr, .rd_data);
  int checks = 0, failures = 0;
  int img [DEPTH];
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wload = '0;
    for (int k = 0; k < DEPTH; k++) img[k] = int'($urandom % 256) - 128;
    for (int k = 0; k < DEPTH; k++) begin
      wload <= '{valid: 1'b1, layer: LY_CONV2, addr: AW'(k), data: WW'(img[k])};
      @(posedge clk);
      wload <= '{valid: 1'b1, layer: LY_CONV1, addr: AW'(k), data: WW'(k)};    // other layer
      @(posedge clk);
    end
    wload <= '{valid: 1'b1, layer: LY_CONV2, addr: AW'(DEPTH + 3), data: 8'sd5};  // out of range
    @(posedge clk);
    wload <= '{valid: 1'b0, layer: LY_CONV2, addr: AW'(0), data: 8'sd99};         // not valid
    @(posedge clk);
    wload <= '0;
    @(posedge clk);
    for (int k = 0; k < DEPTH; k += 4) begin
      for (int p = 0; p < 4; p++) rd_addr[p] = AW'((k + p * 37) % DEPTH);
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (int'(rd_data[p]) != img[(k + p * 37) % DEPTH]) begin
          failures++; $display("FAIL addr %0d: %0d exp %0d", (k + p*37) % DEPTH, rd_data[p], img[(k + p*37) % DEPTH]);
        end
      end
    end
    rd_addr[0] = AW'(DEPTH + 3); #1;
    checks++; if (rd_data[0] != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
