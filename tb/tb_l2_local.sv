// tb_l2_local: radius-3 camera. Presents bursts of frames with random
// clusters separated by empty frames. Checks the L2 Mono flag and flower
// count of every frame, that each burst gives exactly one Local L2 trigger
// (retrigger suppression), that the trigger carries the rounded barycenter
// of the burst's first frame computed here, and that it comes
// ABS_W + 5 = 12 cycles after that frame.
module tb_l2_local;
  import advcam_pkg::*;
  localparam int R   = 3;
  localparam int NF  = 3 * R * (R + 1) + 1;
  localparam int LAT = 12;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          in_valid;
  logic [NF-1:0] in_frame;
  logic          mono;
  logic [5:0]    n_set;
  trig_info_t    trig;
  logic          busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  l2_local #(.R(R)) dut (.clk, .rst_n, .in_valid, .in_frame, .mono, .n_set, .trig, .busy);

  int fq [NF];
  int fr [NF];
  function automatic int habs(input int v);
    return v < 0 ? -v : v;
  endfunction
  function automatic int rdiv(input int s, input int c);
    int m;
    m = (2 * habs(s) + c) / (2 * c);
    return s < 0 ? -m : m;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected triggers: queue of (cycle, q, r).
  int exp_cyc [$];
  int exp_q [$];
  int exp_r [$];
  int cyc = 0;
  int n_trig = 0;
  logic [NF-1:0] prev_frame;
  bit prev_valid;

  always @(negedge clk) begin
    if (rst_n) begin
      // mono / n_set refer to the frame of the previous cycle
      if (prev_valid) begin
        checks += 2;
        if (mono != (prev_frame != '0)) begin failures++; $display("mono wrong at %0d", cyc); end
        if (int'(n_set) != $countones(prev_frame)) begin failures++; $display("n_set wrong at %0d", cyc); end
      end
      prev_frame = in_frame;
      prev_valid = in_valid;
      if (trig.valid) begin
        n_trig++;
        checks++;
        if (exp_cyc.size() == 0) begin
          failures++;
          $display("unexpected trigger at %0d", cyc);
        end else begin
          int c, q, r;
          c = exp_cyc.pop_front();
          q = exp_q.pop_front();
          r = exp_r.pop_front();
          checks += 2;
          if (cyc != c + LAT) begin failures++; $display("latency %0d expected %0d", cyc - c, LAT); end
          if (int'(trig.q) != q || int'(trig.r) != r) begin
            failures++;
            $display("position (%0d,%0d) expected (%0d,%0d)", trig.q, trig.r, q, r);
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
        if (habs(q) <= R && habs(r) <= R && habs(q + r) <= R) begin fq[k] = q; fr[k] = r; k++; end
    rst_n = 1'b0;
    in_valid = 1'b0;
    in_frame = '0;
    prev_valid = 0;
    prev_frame = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int ev = 0; ev < 60; ev++) begin
      int len, sq, sr, c;
      len = 1 + $urandom_range(3);                  // burst length in frames
      for (int n = 0; n < len; n++) begin
        logic [NF-1:0] fr_bits;
        fr_bits = '0;
        for (int f = 0; f < NF; f++) fr_bits[f] = ($urandom_range(99) < 20);
        if (fr_bits == '0) fr_bits[$urandom_range(NF - 1)] = 1'b1;
        if (n == 0) begin
          sq = 0; sr = 0; c = 0;
          for (int f = 0; f < NF; f++) if (fr_bits[f]) begin sq += fq[f]; sr += fr[f]; c++; end
          exp_cyc.push_back(cyc);
          exp_q.push_back(rdiv(sq, c));
          exp_r.push_back(rdiv(sr, c));
        end
        in_valid = 1'b1;
        in_frame = fr_bits;
        @(negedge clk);
      end
      // Quiet gap long enough for the division to finish.
      for (int n = 0; n < 14 + $urandom_range(5); n++) begin
        in_frame = '0;
        @(negedge clk);
      end
    end
    repeat (20) @(negedge clk);
    checks += 2;
    if (exp_cyc.size() != 0) begin failures++; $display("%0d triggers missing", exp_cyc.size()); end
    if (n_trig != 60) begin failures++; $display("%0d triggers, expected 60", n_trig); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
