// tb_tdscan: streams random binary frames (with dense bursts) into two
// TDSCAN instances on a radius-3 camera: (Eps_t, Eps_XY) = (1, 1), the
// configuration whose latency is quoted for the FPGA build, and (2, 2).
// A reference model in the testbench keeps the frame history, counts the
// set bits of the hexagonal 3D kernel with its own coordinate table and
// compares every output bit. It also checks that out_valid rises exactly
// Eps_t + 4 cycles after the first input frame (5 cycles for (1, 1)).
module tb_tdscan;
  localparam int R  = 3;
  localparam int NF = 3 * R * (R + 1) + 1;
  localparam int T  = 400;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          in_valid;
  logic [NF-1:0] in_frame;
  logic [7:0]    min_pts;
  logic          ov_a, ov_b;
  logic [NF-1:0] of_a, of_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tdscan #(.R(R), .EPS_T(1), .EPS_XY(1), .MP_W(8)) dut_a (
    .clk, .rst_n, .in_valid, .in_frame, .min_pts, .out_valid(ov_a), .out_frame(of_a));
  tdscan #(.R(R), .EPS_T(2), .EPS_XY(2), .MP_W(8)) dut_b (
    .clk, .rst_n, .in_valid, .in_frame, .min_pts, .out_valid(ov_b), .out_frame(of_b));

  int fq [NF];
  int fr [NF];
  logic [NF-1:0] frames [T];
  int first_a = -1, first_b = -1;
  int n_set_a = 0;

  function automatic int habs(input int v);
    return v < 0 ? -v : v;
  endfunction
  function automatic int hd(input int a, input int b);
    int m;
    m = habs(a);
    if (habs(b) > m) m = habs(b);
    if (habs(a + b) > m) m = habs(a + b);
    return m;
  endfunction

  // Expected output bit of flower f for centre frame n.
  function automatic bit ref_bit(input int n, input int f, input int et, input int exy, input int mp);
    int c;
    c = 0;
    for (int k = n - et; k <= n + et; k++) begin
      if (k < 0 || k >= T) continue;
      for (int g = 0; g < NF; g++)
        if (hd(fq[g] - fq[f], fr[g] - fr[f]) <= exy && frames[k][g]) c++;
    end
    return c > mp;
  endfunction

  initial begin
    repeat (T + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker: frame index of the output = cycles since first input - latency.
  int cyc = 0;
  always @(negedge clk) begin
    if (rst_n) begin
      if (ov_a && first_a < 0) first_a = cyc;
      if (ov_b && first_b < 0) first_b = cyc;
      if (ov_a) begin
        int n;
        n = cyc - 5;
        if (n >= 1 && n < T - 1) begin
          for (int f = 0; f < NF; f++) begin
            checks++;
            if (of_a[f] != ref_bit(n, f, 1, 1, int'(min_pts))) begin
              failures++;
              if (failures < 10) $display("A frame %0d flower %0d got %0b", n, f, of_a[f]);
            end
            if (of_a[f]) n_set_a++;
          end
        end
      end
      if (ov_b) begin
        int n;
        n = cyc - 6;
        if (n >= 2 && n < T - 2) begin
          for (int f = 0; f < NF; f++) begin
            checks++;
            if (of_b[f] != ref_bit(n, f, 2, 2, int'(min_pts))) begin
              failures++;
              if (failures < 10) $display("B frame %0d flower %0d got %0b", n, f, of_b[f]);
            end
          end
        end
      end
      cyc++;
    end
  end

  initial begin
    int k;
    k = 0;
    for (int q = -R; q <= R; q++)
      for (int r = -R; r <= R; r++)
        if (hd(q, r) <= R) begin fq[k] = q; fr[k] = r; k++; end
    for (int n = 0; n < T; n++) begin
      int dens;
      dens = ((n / 40) % 2 == 1) ? 45 : 8;   // percent of set flowers
      for (int f = 0; f < NF; f++) frames[n][f] = ($urandom_range(99) < dens);
    end
    rst_n = 1'b0;
    in_valid = 1'b0;
    in_frame = '0;
    min_pts = 8'd6;
    @(negedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // Frame n is presented during cycle n (cyc counts from 0 here).
    for (int n = 0; n < T; n++) begin
      in_valid = 1'b1;
      in_frame = frames[n];
      @(negedge clk);
    end
    in_valid = 1'b0;
    in_frame = '0;
    repeat (10) @(negedge clk);
    checks += 2;
    if (first_a != 5) begin failures++; $display("latency A %0d, expected 5", first_a); end
    if (first_b != 6) begin failures++; $display("latency B %0d, expected 6", first_b); end
    checks++;
    if (n_set_a == 0) begin failures++; $display("output never set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
