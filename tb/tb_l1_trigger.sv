// tb_l1_trigger: a small camera (radius 3, 37 flowers). Random samples and
// thresholds; the testbench computes every 49-pixel super-flower sum from
// its own neighbour table (built from axial coordinates independently of
// the RTL wiring) and checks patch sums, L1 bits, l1_any and the 2- and
// 3-cycle latencies. Also checks an edge flower, whose patch has fewer
// than 7 flowers.
module tb_l1_trigger;
  localparam int R     = 3;
  localparam int ADC_W = 14;
  localparam int NF    = 3 * R * (R + 1) + 1;
  localparam int NPIX  = NF * 7;
  localparam int PS_W  = ADC_W + 6;

  logic             clk = 1'b0;
  logic             rst_n;
  logic [ADC_W-1:0] adc [NPIX];
  logic [PS_W-1:0]  threshold;
  logic [NF-1:0]    l1_frame;
  logic [PS_W-1:0]  patch_sum [NF];
  logic             l1_any;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  l1_trigger #(.R(R), .ADC_W(ADC_W)) dut (.clk, .rst_n, .adc, .threshold,
                                          .l1_frame, .patch_sum, .l1_any);

  // Testbench's own flower coordinates: enumerate q, then r.
  int fq [NF];
  int fr [NF];
  function automatic int find(input int q, input int r);
    for (int i = 0; i < NF; i++) if (fq[i] == q && fr[i] == r) return i;
    return -1;
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int fs [3][NF];        // flower sums of the last frames
  longint ps [NF];
  bit     any_prev;
  int     dq [6] = '{1, 1, 0, -1, -1, 0};
  int     dr [6] = '{0, -1, -1, 0, 1, 1};
  int     n_fired = 0;

  initial begin
    int k;
    k = 0;
    for (int q = -R; q <= R; q++)
      for (int r = -R; r <= R; r++)
        if ((q < 0 ? -q : q) <= R && (r < 0 ? -r : r) <= R && ((q + r) < 0 ? -(q + r) : (q + r)) <= R) begin
          fq[k] = q; fr[k] = r; k++;
        end
    rst_n = 1'b0;
    threshold = '0;
    foreach (adc[i]) adc[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    any_prev = 0;
    for (int t = 0; t < 200; t++) begin
      // Frame: mostly low noise, sometimes a bright spot on one flower.
      int spot;
      spot = (t % 3 == 0) ? int'($urandom_range(NF - 1)) : -1;
      for (int f = 0; f < NF; f++) begin
        fs[0][f] = 0;
        for (int p = 0; p < 7; p++) begin
          adc[f*7+p] = ADC_W'($urandom_range(40));
          if (f == spot) adc[f*7+p] = ADC_W'(2000 + $urandom_range(4000));
          if (t == 5) adc[f*7+p] = '1;  // full scale everywhere
          fs[0][f] += int'(adc[f*7+p]);
        end
      end
      threshold = PS_W'(t < 100 ? 3000 : 8000);
      for (int f = 0; f < NF; f++) begin
        ps[f] = fs[0][f];
        for (int d = 0; d < 6; d++) begin
          int nb;
          nb = find(fq[f] + dq[d], fr[f] + dr[d]);
          if (nb >= 0) ps[f] += fs[0][nb];
        end
      end
      @(negedge clk);       // flower sums registered
      @(negedge clk);       // patch sums and L1 bits registered
      begin
        bit any_now;
        any_now = 0;
        for (int f = 0; f < NF; f++) begin
          bit exp_bit;
          exp_bit = (ps[f] > longint'(threshold));
          any_now |= exp_bit;
          checks += 2;
          if (longint'(patch_sum[f]) != ps[f]) begin
            failures++;
            $display("t=%0d flower %0d patch %0d exp %0d", t, f, patch_sum[f], ps[f]);
          end
          if (l1_frame[f] != exp_bit) begin
            failures++;
            $display("t=%0d flower %0d l1 %0b exp %0b", t, f, l1_frame[f], exp_bit);
          end
          if (exp_bit) n_fired++;
        end
        @(negedge clk);
        checks++;
        if (l1_any != any_now) begin
          failures++;
          $display("t=%0d l1_any %0b exp %0b", t, l1_any, any_now);
        end
      end
    end
    if (n_fired == 0) begin failures++; $display("no L1 bit ever fired"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
