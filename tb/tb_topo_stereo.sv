// tb_topo_stereo: random local and remote Local L2 triggers with random
// positions, windows, offsets and tolerances, with the topological check
// on and off. A reference model here keeps the arrival time and position
// of the latest trigger of each telescope and predicts stereo and
// coinc_mask cycle by cycle. Directed cases first: coincidence inside the
// window, one cycle outside it, a position mismatch, and a remote trigger
// arriving after the local one.
module tb_topo_stereo;
  import advcam_pkg::*;
  localparam int NR = 3;

  logic                    clk = 1'b0;
  logic                    rst_n;
  trig_info_t              local_trig;
  trig_info_t              remote_trig [NR];
  logic [7:0]              window;
  logic                    topo_en;
  logic [POS_W-1:0]        tol;
  logic signed [POS_W-1:0] off_q [NR];
  logic signed [POS_W-1:0] off_r [NR];
  logic                    stereo;
  logic [NR-1:0]           coinc_mask;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  topo_stereo #(.N_REMOTE(NR), .MIN_TELS(2), .WIN_W(8)) dut (
    .clk, .rst_n, .local_trig, .remote_trig, .window, .topo_en, .tol, .off_q, .off_r,
    .stereo, .coinc_mask);

  // Reference state: time (edge number) and position of the last trigger.
  int  lt, lq, lr;
  bit  lhave;
  int  rt [NR], rq [NR], rr [NR];
  bit  rhave [NR];
  int  edge_n = 0;
  bit  exp_stereo;
  logic [NR-1:0] exp_mask;
  int  n_fire = 0, n_topo_rej = 0;

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

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Model: evaluated on the state after edge e, predicts outputs after e+1.
  always @(posedge clk) begin
    if (!rst_n) begin
      lhave = 0;
      foreach (rhave[i]) rhave[i] = 0;
      exp_stereo = 0;
      exp_mask = '0;
    end else begin
      bit fire;
      logic [NR-1:0] m;
      int e;
      e = edge_n;
      // compare what the DUT shows now with the prediction from last edge
      checks++;
      if (stereo !== exp_stereo || coinc_mask !== exp_mask) begin
        failures++;
        if (failures < 10) $display("edge %0d stereo %0b/%0b mask %b/%b", e, stereo, exp_stereo, coinc_mask, exp_mask);
      end
      // decision with records as they stand before this edge
      m = '0;
      for (int i = 0; i < NR; i++) begin
        bit live_r, live_l, pos_ok;
        live_l = lhave && (e - 1 - lt) <= int'(window);
        live_r = rhave[i] && (e - 1 - rt[i]) <= int'(window);
        pos_ok = !topo_en || hd(lq - rq[i] - int'(off_q[i]), lr - rr[i] - int'(off_r[i])) <= int'(tol);
        m[i] = live_l && live_r && pos_ok;
        if (live_l && live_r && !pos_ok) n_topo_rej++;
      end
      fire = lhave && (e - 1 - lt) <= int'(window) && (m != '0);
      exp_stereo = fire;
      exp_mask = fire ? m : '0;
      if (fire) begin n_fire++; lhave = 0; end
      // record the triggers sampled at this edge
      if (local_trig.valid) begin lhave = 1; lt = e; lq = int'(local_trig.q); lr = int'(local_trig.r); end
      for (int i = 0; i < NR; i++)
        if (remote_trig[i].valid) begin
          rhave[i] = 1; rt[i] = e; rq[i] = int'(remote_trig[i].q); rr[i] = int'(remote_trig[i].r);
        end
      edge_n++;
    end
  end

  task automatic idle();
    local_trig = '0;
    foreach (remote_trig[i]) remote_trig[i] = '0;
  endtask

  task automatic send_local(input int q, input int r);
    local_trig.valid = 1'b1; local_trig.q = POS_W'(q); local_trig.r = POS_W'(r);
  endtask

  task automatic send_remote(input int i, input int q, input int r);
    remote_trig[i].valid = 1'b1; remote_trig[i].q = POS_W'(q); remote_trig[i].r = POS_W'(r);
  endtask

  int dir_fires;

  initial begin
    rst_n = 1'b0;
    idle();
    window = 8'd4;
    topo_en = 1'b1;
    tol = POS_W'(1);
    foreach (off_q[i]) begin off_q[i] = POS_W'(i + 1); off_r[i] = -POS_W'(i); end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // 1) local then matching remote 0 three cycles later -> fire
    dir_fires = n_fire;
    send_local(5, -2); @(negedge clk); idle();
    repeat (2) @(negedge clk);
    send_remote(0, 5 - 1, -2 + 0); @(negedge clk); idle();
    repeat (8) @(negedge clk);
    checks++;
    if (n_fire != dir_fires + 1) begin failures++; $display("directed coincidence did not fire"); end
    // 2) remote 1 then local, window + 2 cycles apart -> no fire
    dir_fires = n_fire;
    send_remote(1, 0, 0); @(negedge clk); idle();
    repeat (5) @(negedge clk);
    send_local(2, -1); @(negedge clk); idle();
    repeat (8) @(negedge clk);
    checks++;
    if (n_fire != dir_fires) begin failures++; $display("fired outside the window"); end
    // 3) position mismatch with topo on -> no fire; same with topo off -> fire
    dir_fires = n_fire;
    send_remote(2, -10, 10); send_local(8, -8); @(negedge clk); idle();
    repeat (8) @(negedge clk);
    checks++;
    if (n_fire != dir_fires) begin failures++; $display("fired despite position mismatch"); end
    topo_en = 1'b0;
    send_remote(2, -10, 10); send_local(8, -8); @(negedge clk); idle();
    repeat (8) @(negedge clk);
    checks++;
    if (n_fire != dir_fires + 1) begin failures++; $display("topo off did not fire"); end
    // 4) random traffic
    for (int n = 0; n < 3000; n++) begin
      idle();
      if (n % 200 == 0) begin
        // let every record expire first: an expired record stays dead even
        // if the window is widened later, which the model does not track
        repeat (16) @(negedge clk);
        window = 8'($urandom_range(12));
        topo_en = $urandom_range(1);
        tol = POS_W'($urandom_range(3));
        foreach (off_q[i]) begin off_q[i] = POS_W'($urandom_range(4)) - 2; off_r[i] = POS_W'($urandom_range(4)) - 2; end
      end
      if ($urandom_range(99) < 6) send_local($urandom_range(8) - 4, $urandom_range(8) - 4);
      for (int i = 0; i < NR; i++)
        if ($urandom_range(99) < 5) send_remote(i, $urandom_range(8) - 4, $urandom_range(8) - 4);
      @(negedge clk);
    end
    idle();
    repeat (20) @(negedge clk);
    checks += 2;
    if (n_fire < 20) begin failures++; $display("only %0d stereo triggers", n_fire); end
    if (n_topo_rej == 0) begin failures++; $display("no topological rejection seen"); end
    $display("stereo=%0d topo_rejections=%0d", n_fire, n_topo_rej);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
