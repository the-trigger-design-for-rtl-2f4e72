// tb_flower_sum: random and extreme 7-pixel samples; each registered sum is
// compared with a sum computed in the testbench one cycle later.
module tb_flower_sum;
  localparam int ADC_W = 14;
  localparam int NPIX  = 7;
  localparam int SUM_W = ADC_W + 3;

  logic             clk = 1'b0;
  logic             rst_n;
  logic [ADC_W-1:0] pix [NPIX];
  logic [SUM_W-1:0] sum;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  flower_sum #(.ADC_W(ADC_W), .NPIX(NPIX)) dut (.clk, .rst_n, .pix, .sum);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_sum;
    rst_n = 1'b0;
    foreach (pix[i]) pix[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      exp_sum = 0;
      for (int i = 0; i < NPIX; i++) begin
        if (t == 0)      pix[i] = '1;              // full scale
        else if (t == 1) pix[i] = ADC_W'(i + 1);
        else             pix[i] = ADC_W'($urandom);
        exp_sum += int'(pix[i]);
      end
      @(negedge clk);
      checks++;
      if (int'(sum) != exp_sum) begin
        failures++;
        $display("mismatch t=%0d sum=%0d exp=%0d", t, sum, exp_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
