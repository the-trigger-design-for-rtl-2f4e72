// topo_stereo: Topo-Stereo L2 trigger ("waiting for coincidences").
//
// Every telescope shares its Local L2 triggers, each with the shower
// position, with the others. This block keeps the latest Local L2 trigger
// of this camera and of each of the N_REMOTE other telescopes, each with
// its age in clock cycles. A record older than the coincidence window
// (window input, in cycles) expires. The stereo trigger fires while the
// local record is live and at least MIN_TELS-1 remote records are live
// and, when topo_en is set, match topologically: a remote position shifted
// by that telescope's expected offset (off_q/off_r, flower coordinates)
// must lie within tol flowers (hexagonal lattice distance) of the local
// position. Firing consumes the local record, so one local trigger gives at
// most one stereo trigger; coinc_mask reports which telescopes agreed.
//
// Timing: a trigger (local or remote) presented at edge n is recorded at
// edge n; the stereo decision uses registered records, so stereo fires after
// edge n+1 at the earliest. Two triggers are in coincidence when their
// arrival times differ by at most window cycles.
//
// From the paper: the shared Local L2 triggers, waiting for coincidences,
// the L2 Stereo test "is there a coincident event in a neighbouring
// telescope", prediction of the shower position in the other telescopes,
// and at least two cameras per event. This design's choices: the age
// counters, a constant per-telescope position offset as the prediction,
// and the lattice-distance tolerance.
module topo_stereo #(
  parameter int N_REMOTE = advcam_pkg::N_TEL - 1,
  parameter int MIN_TELS = 2,
  parameter int WIN_W    = 8,
  localparam int POS_W   = advcam_pkg::POS_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  advcam_pkg::trig_info_t  local_trig,
  input  advcam_pkg::trig_info_t  remote_trig [N_REMOTE],
  input  logic [WIN_W-1:0]        window,
  input  logic                    topo_en,
  input  logic [POS_W-1:0]        tol,
  input  logic signed [POS_W-1:0] off_q [N_REMOTE],
  input  logic signed [POS_W-1:0] off_r [N_REMOTE],
  output logic                    stereo,
  output logic [N_REMOTE-1:0]     coinc_mask
);

  typedef struct packed {
    logic                    live;
    logic [WIN_W-1:0]        age;
    logic signed [POS_W-1:0] q;
    logic signed [POS_W-1:0] r;
  } rec_t;

  rec_t loc;
  rec_t rem [N_REMOTE];

  function automatic rec_t update(input rec_t cur, input advcam_pkg::trig_info_t t,
                                  input logic [WIN_W-1:0] win, input logic consume);
    rec_t nx;
    nx = cur;
    if (t.valid) begin
      nx.live = 1'b1;
      nx.age  = '0;
      nx.q    = t.q;
      nx.r    = t.r;
    end else if (consume) begin
      nx.live = 1'b0;
    end else if (cur.live) begin
      if (cur.age >= win) nx.live = 1'b0;
      else                nx.age  = cur.age + 1'b1;
    end
    return nx;
  endfunction


  logic [N_REMOTE-1:0] match;
  logic                fire;

  always_comb begin
    for (int i = 0; i < N_REMOTE; i++) begin
      match[i] = rem[i].live && loc.live &&
                 (!topo_en ||
                  advcam_pkg::hex_dist(int'(loc.q) - int'(rem[i].q) - int'(off_q[i]),
                                       int'(loc.r) - int'(rem[i].r) - int'(off_r[i])) <= int'(tol));
    end
    fire = loc.live && ($countones(match) >= MIN_TELS - 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      loc        <= '0;
      for (int i = 0; i < N_REMOTE; i++) rem[i] <= '0;
      stereo     <= 1'b0;
      coinc_mask <= '0;
    end else begin
      loc <= update(loc, local_trig, window, fire);
      for (int i = 0; i < N_REMOTE; i++) rem[i] <= update(rem[i], remote_trig[i], window, 1'b0);
      stereo     <= fire;
      coinc_mask <= fire ? match : '0;
    end
  end

endmodule
