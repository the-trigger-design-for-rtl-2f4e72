// tb_camera_trigger_ctrl: drives stereo triggers into the CTP sequencer
// with a behavioural ring-buffer busy (high for 75 cycles after each
// release) and a behavioural g/h classifier that answers after a chosen
// delay, or never. Checks: without g/h the release comes one cycle after
// the stereo trigger (release high in the cycle after the stereo edge); with g/h the request is issued once, an accepted score
// (>= cut, including equal) releases one cycle after gh_valid, a low score
// and a missing answer do not release; a stereo trigger during readout is
// dropped; all counters match.
module tb_camera_trigger_ctrl;
  import advcam_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n;
  logic        stereo;
  logic        gh_en;
  logic        gh_req;
  logic        gh_valid;
  logic [7:0]  gh_score;
  logic [7:0]  gh_cut;
  logic [7:0]  gh_timeout;
  logic        rb_busy;
  logic        trig_release;
  ct_state_e   state;
  logic [15:0] n_stereo, n_accept, n_reject, n_timeout, n_dropped;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  camera_trigger_ctrl #(.GH_W(8), .TO_W(8), .CNT_W(16)) dut (
    .clk, .rst_n, .stereo, .gh_en, .gh_req, .gh_valid, .gh_score, .gh_cut, .gh_timeout,
    .rb_busy, .trig_release, .state, .n_stereo, .n_accept, .n_reject, .n_timeout, .n_dropped);

  int edges = 0;
  int busy_left = 0;
  int n_rel = 0, last_rel = -1, n_req = 0, last_req = -1;

  // Behavioural ring buffers: busy for 75 cycles after a sampled release.
  always @(posedge clk) begin
    edges++;
    if (!rst_n) busy_left = 0;
    else if (busy_left > 0) busy_left--;
    if (rst_n && trig_release) begin
      busy_left = 75;
      n_rel++;
      last_rel = edges;
    end
    if (rst_n && gh_req) begin n_req++; last_req = edges; end
    rb_busy <= (busy_left > 0);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (edge %0d)", what, edges); end
  endtask

  // Pulse stereo for one cycle; returns the edge that samples it.
  task automatic pulse_stereo(output int e);
    stereo = 1'b1;
    e = edges + 1;
    @(negedge clk);
    stereo = 1'b0;
  endtask

  task automatic wait_idle();
    while (state != CT_IDLE || rb_busy) @(negedge clk);
  endtask

  initial begin
    int e, r0;
    rst_n = 1'b0;
    stereo = 1'b0;
    gh_en = 1'b0;
    gh_valid = 1'b0;
    gh_score = '0;
    gh_cut = 8'd128;
    gh_timeout = 8'd10;
    rb_busy = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // 1) no g/h: release one cycle after the stereo edge
    r0 = n_rel;
    pulse_stereo(e);
    @(negedge clk);
    check(n_rel == r0 + 1 && last_rel == e + 1, "release follows stereo by one cycle");
    // 2) stereo during readout is dropped
    repeat (10) @(negedge clk);
    pulse_stereo(e);
    repeat (3) @(negedge clk);
    check(n_rel == r0 + 1, "no release during readout");
    check(n_dropped == 16'd1, "dropped counted");
    wait_idle();

    // 3) g/h accept with score equal to the cut
    gh_en = 1'b1;
    r0 = n_rel;
    pulse_stereo(e);
    @(negedge clk);
    check(n_req == 1 && last_req == e + 1, "g/h request issued");
    repeat (2) @(negedge clk);
    gh_valid = 1'b1; gh_score = 8'd128;
    @(negedge clk);
    gh_valid = 1'b0;
    check(state == CT_RELEASE, "accepted -> release state");
    @(negedge clk);
    check(n_rel == r0 + 1, "accepted event released");
    wait_idle();

    // 4) g/h reject
    r0 = n_rel;
    pulse_stereo(e);
    repeat (2) @(negedge clk);
    gh_valid = 1'b1; gh_score = 8'd127;
    @(negedge clk);
    gh_valid = 1'b0;
    repeat (5) @(negedge clk);
    check(n_rel == r0 && n_reject == 16'd1 && state == CT_IDLE, "rejected event not released");

    // 5) g/h timeout
    pulse_stereo(e);
    repeat (int'(gh_timeout) + 3) @(negedge clk);
    check(n_rel == r0 && n_timeout == 16'd1 && state == CT_IDLE, "timeout returns to idle");

    // 6) a few more accepted events
    for (int k = 0; k < 4; k++) begin
      pulse_stereo(e);
      @(negedge clk);
      gh_valid = 1'b1; gh_score = 8'(200 + k);
      @(negedge clk);
      gh_valid = 1'b0;
      wait_idle();
    end
    check(n_stereo == 16'd9, "stereo count");
    check(n_accept == 16'd6 && n_rel == 6, "accept count");
    check(n_req == 7, "request count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
