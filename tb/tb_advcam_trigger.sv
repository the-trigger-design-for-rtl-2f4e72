// tb_advcam_trigger: end-to-end test of one camera at full size (radius-19
// camera, 1141 flowers, 7987 pixels, 163 boards, 1024-sample buffers,
// 75-sample window), with the top's default parameters.
//
// Every pixel carries a pedestal of 100 counts plus 0..7 counts of
// pseudo-random noise, a deterministic function of sample number and pixel,
// so the testbench can recompute any sample. A "shower" adds 300 counts to
// every pixel of the 19 flowers within lattice distance 2 of a chosen
// flower, during 3 consecutive samples. The other telescopes and the g/h
// classifier are behavioural: the testbench sends remote triggers and
// answers g/h requests.
//
// Scenario (one shower each): (1) stereo with a matching remote trigger,
// readout checked word by word; (2) remote position off -> topological
// rejection; (3) no remote -> no stereo (window expiry); (4) g/h rejects;
// (5) g/h accepts and a second shower with its own coincidence arrives
// during the readout -> dropped as dead time; (6) g/h never answers ->
// timeout. Each mechanism is counted and must occur at least once. Also
// checks the L1 bits around the shower, the Local L2 position and that one
// shower gives exactly one Local L2 trigger although TDSCAN confirms
// several frames.
module tb_advcam_trigger;
  import advcam_pkg::*;

  localparam int R     = CAM_R;
  localparam int NF    = hex_count(R);
  localparam int NPIX  = NF * PIX_PER_FLOWER;
  localparam int N_CH  = 49;
  localparam int N_FEB = (NF + 6) / 7;
  localparam int NREM  = N_TEL - 1;
  localparam int LOOKBACK = 40;

  logic                    clk = 1'b0;
  logic                    rst_n;
  logic [ADC_W-1:0]        adc [NPIX];
  logic [19:0]             l1_threshold;
  logic [7:0]              min_pts;
  logic [7:0]              coinc_window;
  logic                    topo_en;
  logic [POS_W-1:0]        topo_tol;
  logic signed [POS_W-1:0] topo_off_q [NREM];
  logic signed [POS_W-1:0] topo_off_r [NREM];
  logic                    gh_en;
  logic [7:0]              gh_cut;
  logic [7:0]              gh_timeout;
  logic [9:0]              readout_lookback;
  logic [NF-1:0]           l1_frame;
  logic                    l1_any;
  logic [NF-1:0]           l2_frame;
  logic                    l2_mono;
  trig_info_t              local_trig;
  trig_info_t              remote_trig [NREM];
  logic                    stereo;
  logic [NREM-1:0]         coinc_mask;
  logic                    gh_req;
  logic                    gh_valid;
  logic [7:0]              gh_score;
  logic                    camera_trigger;
  logic                    ro_valid;
  logic [6:0]              ro_idx;
  logic [ADC_W-1:0]        ro_data [N_FEB][N_CH];
  logic [15:0]             n_stereo, n_accept, n_reject, n_timeout, n_dropped;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  advcam_trigger dut (
    .clk, .rst_n, .adc, .l1_threshold, .min_pts, .coinc_window, .topo_en, .topo_tol,
    .topo_off_q, .topo_off_r, .gh_en, .gh_cut, .gh_timeout, .readout_lookback,
    .l1_frame, .l1_any, .l2_frame, .l2_mono, .local_trig, .remote_trig, .stereo,
    .coinc_mask, .gh_req, .gh_valid, .gh_score, .camera_trigger, .ro_valid, .ro_idx,
    .ro_data, .n_stereo, .n_accept, .n_reject, .n_timeout, .n_dropped);

  // ---------------- stimulus model ----------------
  int fq [NF];
  int fr [NF];
  int sh_t [$];     // first sample of each shower
  int sh_q [$];
  int sh_r [$];

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

  function automatic int adc_val(input int t, input int p);
    int unsigned h;
    int v, f;
    h = (32'(p) * 32'd2654435761) ^ (32'(t) * 32'd40503);
    v = 100 + int'((h >> 13) & 7);
    f = p / 7;
    for (int s = 0; s < sh_t.size(); s++)
      if (t >= sh_t[s] && t < sh_t[s] + 3 && hd(fq[f] - sh_q[s], fr[f] - sh_r[s]) <= 2) v += 300;
    return v;
  endfunction

  int edges = 0;
  always @(posedge clk) edges++;

  // ---------------- mechanism counters ----------------
  int c_l1 = 0, c_l2frames = 0, c_mono = 0, c_local = 0, c_stereo = 0, c_release = 0;
  int c_readout_words = 0, c_gh_req = 0;
  int last_release = -1;
  int last_local = -1;
  int local_q [$];
  int local_r [$];

  // behavioural g/h classifier: mode 0 = low score, 1 = high score, 2 = silent
  int gh_mode = 0;
  int gh_due = -1;

  always @(posedge clk) begin
    if (rst_n) begin
      if (l1_any) c_l1++;
      if (l2_frame != '0) c_l2frames++;
      if (l2_mono) c_mono++;
      if (local_trig.valid) begin
        c_local++;
        last_local = edges;
        local_q.push_back(int'(local_trig.q));
        local_r.push_back(int'(local_trig.r));
      end
      if (stereo) c_stereo++;
      if (camera_trigger) begin c_release++; last_release = edges; end
      if (gh_req) begin c_gh_req++; gh_due = edges + 4; end
    end
  end

  always @(negedge clk) begin
    gh_valid <= 1'b0;
    if (gh_due >= 0 && edges + 1 == gh_due) begin
      gh_due = -1;
      if (gh_mode != 2) begin
        gh_valid <= 1'b1;
        gh_score <= (gh_mode == 1) ? 8'd200 : 8'd20;
      end
    end
  end

  // Readout checker: word i of a readout = sample (release edge - lookback + i).
  always @(negedge clk) begin
    if (rst_n && ro_valid) begin
      int s;
      s = last_release - LOOKBACK + int'(ro_idx);
      c_readout_words++;
      for (int b = 0; b < N_FEB; b++)
        for (int c = 0; c < N_CH; c++) begin
          int p, e;
          p = b * N_CH + c;
          e = (p < NPIX) ? adc_val(s, p) : 0;
          checks++;
          if (int'(ro_data[b][c]) != e) begin
            failures++;
            if (failures < 10) $display("readout word %0d board %0d ch %0d: %0d expected %0d", ro_idx, b, c, ro_data[b][c], e);
          end
        end
    end
  end

  // Drive the sample for the next rising edge.
  always @(negedge clk) begin
    for (int p = 0; p < NPIX; p++) adc[p] = ADC_W'(adc_val(edges + 1, p));
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle_remote();
    foreach (remote_trig[i]) remote_trig[i] = '0;
  endtask

  // Shower at flower (q, r) starting at the sample of edge t0.
  task automatic shower(input int q, input int r, output int t0);
    t0 = edges + 3;
    sh_t.push_back(t0);
    sh_q.push_back(q);
    sh_r.push_back(r);
  endtask

  // Wait until the edge number reaches t.
  task automatic wait_edge(input int t);
    while (edges < t) @(negedge clk);
  endtask

  // Remote telescope i reports a shower at (q, r).
  task automatic remote(input int i, input int q, input int r);
    remote_trig[i].valid = 1'b1;
    remote_trig[i].q = POS_W'(q);
    remote_trig[i].r = POS_W'(r);
    @(negedge clk);
    idle_remote();
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (edge %0d)", what, edges); end
  endtask

  int t0, loc0, st0, rel0, rej0, to0, dr0;
  int c_topo_rej = 0, c_expire = 0, c_gh_acc = 0, c_gh_rej = 0, c_gh_to = 0, c_drop = 0, c_suppr = 0;

  initial begin
    for (int f = 0; f < NF; f++) begin fq[f] = flower_q(R, f); fr[f] = flower_r(R, f); end
    rst_n = 1'b0;
    l1_threshold = 20'd6000;
    min_pts = 8'd10;
    coinc_window = 8'd12;
    topo_en = 1'b1;
    topo_tol = POS_W'(2);
    topo_off_q[0] = 8'sd3;  topo_off_r[0] = -8'sd1;
    topo_off_q[1] = -8'sd2; topo_off_r[1] = 8'sd2;
    topo_off_q[2] = 8'sd0;  topo_off_r[2] = -8'sd3;
    gh_en = 1'b0;
    gh_cut = 8'd128;
    gh_timeout = 8'd20;
    readout_lookback = 10'(LOOKBACK);
    gh_valid = 1'b0;
    gh_score = '0;
    idle_remote();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (20) @(negedge clk);
    check(c_l1 == 0 && c_local == 0, "pedestal and noise alone do not trigger");

    // (1) stereo, no g/h: remote 0 sees the shower at local - offset
    loc0 = c_local; rel0 = c_release;
    shower(5, -3, t0);
    wait_edge(t0 + 2);
    @(negedge clk);   // L1 frame of the shower's first sample is out
    for (int f = 0; f < NF; f++) begin
      int d;
      d = hd(fq[f] - 5, fr[f] + 3);
      checks++;
      if (l1_frame[f] != (d <= 3)) begin failures++; $display("L1 bit of flower %0d (distance %0d) = %0b", f, d, l1_frame[f]); end
    end
    wait_edge(t0 + 24);
    remote(0, 5 - 3, -3 + 1);
    wait_edge(t0 + 60);
    check(c_local == loc0 + 1, "one Local L2 trigger for the shower");
    check(local_q.size() > 0 && local_q[$] == 5 && local_r[$] == -3, "Local L2 position is the shower centre");
    // L1 (3) + TDSCAN (EPS_T + 4) + L2 Mono and division (ABS_W + 5) cycles
    $display("Local L2 trigger %0d cycles after the shower's first sample", last_local - t0);
    check(last_local - t0 == 27, "Local L2 latency includes TDSCAN");
    check(c_release == rel0 + 1, "camera trigger released");
    if (c_mono > c_local) c_suppr++;
    wait_edge(t0 + 150);
    check(c_readout_words == 75, "one 75-word readout");
    begin
      int ws;
      ws = last_release - LOOKBACK;
      check(ws <= t0 && t0 + 2 < ws + 75, "readout window contains the shower");
    end

    // (2) topological rejection: remote 1 reports a far-away position
    st0 = c_stereo;
    shower(-6, 4, t0);
    wait_edge(t0 + 24);
    remote(1, 10, -10);
    wait_edge(t0 + 60);
    check(c_stereo == st0, "mismatched position gives no stereo trigger");
    if (c_stereo == st0 && c_local > loc0 + 1) c_topo_rej++;

    // (3) window expiry: the matching remote trigger comes too late
    st0 = c_stereo; loc0 = c_local;
    shower(0, 8, t0);
    wait_edge(t0 + 27 + 40);
    remote(2, 0 - 0, 8 + 3);
    wait_edge(t0 + 100);
    check(c_local == loc0 + 1 && c_stereo == st0, "late remote trigger outside the window");
    if (c_local == loc0 + 1 && c_stereo == st0) c_expire++;

    // (4) g/h rejects
    gh_en = 1'b1;
    gh_mode = 0;
    rej0 = int'(n_reject); rel0 = c_release;
    shower(-3, -3, t0);
    wait_edge(t0 + 24);
    remote(0, -3 - 3, -3 + 1);
    wait_edge(t0 + 60);
    check(int'(n_reject) == rej0 + 1 && c_release == rel0, "g/h rejection, no release");
    if (int'(n_reject) == rej0 + 1) c_gh_rej++;

    // (5) g/h accepts; a second coincident shower during the readout is dropped
    gh_mode = 1;
    rel0 = c_release; dr0 = int'(n_dropped);
    shower(8, 2, t0);
    wait_edge(t0 + 24);
    remote(1, 8 + 2, 2 - 2);
    wait_edge(t0 + 45);
    check(c_release == rel0 + 1, "g/h acceptance releases the data");
    if (c_release == rel0 + 1) c_gh_acc++;
    shower(-8, 0, t0);
    wait_edge(t0 + 24);
    remote(2, -8, 0 + 3);
    wait_edge(t0 + 60);
    check(int'(n_dropped) == dr0 + 1 && c_release == rel0 + 1, "stereo trigger during readout dropped");
    if (int'(n_dropped) == dr0 + 1) c_drop++;
    wait_edge(edges + 100);
    check(c_readout_words == 150, "second readout complete");

    // (6) g/h silent -> timeout
    gh_mode = 2;
    to0 = int'(n_timeout); rel0 = c_release;
    shower(2, 2, t0);
    wait_edge(t0 + 24);
    remote(0, 2 - 3, 2 + 1);
    wait_edge(t0 + 80);
    check(int'(n_timeout) == to0 + 1 && c_release == rel0, "g/h timeout");
    if (int'(n_timeout) == to0 + 1) c_gh_to++;

    // every mechanism must have happened
    check(c_l1 > 0, "L1 fired");
    check(c_l2frames > 0, "TDSCAN fired");
    check(c_suppr > 0, "retrigger suppression");
    check(c_stereo > 0, "stereo coincidence");
    check(c_topo_rej > 0, "topological rejection");
    check(c_expire > 0, "window expiry");
    check(c_gh_acc > 0 && c_gh_rej > 0 && c_gh_to > 0, "g/h accept, reject, timeout");
    check(c_drop > 0, "dead-time drop");
    check(c_readout_words > 0, "readout");
    $display("L1 cycles=%0d TDSCAN frames=%0d mono=%0d local=%0d stereo=%0d releases=%0d readout words=%0d gh requests=%0d",
             c_l1, c_l2frames, c_mono, c_local, c_stereo, c_release, c_readout_words, c_gh_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
