// tb_ddr_capture: checks that the DDR capture presents, after each rising
// edge, the four values driven during the previous clock period in the order
// A(rise), B(rise), A(fall), B(fall).
module tb_ddr_capture;
  logic clk = 1'b0;
  logic [11:0] a, b;
  logic [11:0] samples [4];
  int checks = 0, failures = 0;
  logic [11:0] ar [64], br [64], af [64], bf [64];

  always #5 clk = ~clk;

  ddr_capture dut (.clk, .ddr_a(a), .ddr_b(b), .samples);

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 64; k++) begin
      ar[k] = 12'($urandom); br[k] = 12'($urandom); af[k] = 12'($urandom); bf[k] = 12'($urandom);
    end
    a = '0; b = '0;
    @(negedge clk); #1;
    for (int k = 0; k < 64; k++) begin
      a = ar[k]; b = br[k];
      @(posedge clk); #1;
      if (k > 0) begin
        checks++;
        if (samples[0] !== ar[k-1] || samples[1] !== br[k-1] ||
            samples[2] !== af[k-1] || samples[3] !== bf[k-1]) begin
          failures++;
          $display("mismatch period %0d: %h %h %h %h", k-1, samples[0], samples[1], samples[2], samples[3]);
        end
      end
      a = af[k]; b = bf[k];
      @(negedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
