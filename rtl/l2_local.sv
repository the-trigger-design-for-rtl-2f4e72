// l2_local: L2 Mono decision and shower position.
//
// Takes the TDSCAN output frames. A frame with any flower set confirms the
// event ("L2 Mono"). The block then measures where the shower is: it adds
// up the axial coordinates (q, r) of all set flowers of that first frame and
// divides by their number, giving the barycenter rounded to the nearest
// flower. The Local L2 trigger is issued as a one-cycle pulse on trig.valid
// together with that position, for the Topo-Stereo trigger of this and the
// other telescopes.
//
// Only the first frame of a burst triggers: after a trigger the block is
// re-armed by a frame with no flower set (retrigger suppression), and a
// frame arriving while a division is running is ignored.
//
// Timing: frame at edge n -> mono, count and coordinate sums after edge
// n+1 -> division starts at edge n+2 and takes DIV_STEPS = ABS_W+2 cycles
// (one quotient bit per cycle) -> trig.valid one cycle later.
//
// From the paper: the L2 Mono confirmation and that the local L2 trigger
// provides the shower position in the camera. This design's choices: the
// barycenter of the first confirming frame as the position, axial flower
// coordinates, round-half-away-from-zero, the re-arm rule and the
// sequential divider.
module l2_local #(
  parameter int R     = advcam_pkg::CAM_R,
  localparam int NF    = advcam_pkg::hex_count(R),
  localparam int CNT_W = $clog2(NF + 1),
  localparam int ABS_W = $clog2(NF * R + 1),
  localparam int SUM_W = ABS_W + 1,
  localparam int NUM_W = ABS_W + 2,
  localparam int POS_W = advcam_pkg::POS_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [NF-1:0]          in_frame,
  output logic                   mono,      // frame confirmed (any flower set)
  output logic [CNT_W-1:0]       n_set,     // flowers set in that frame
  output advcam_pkg::trig_info_t trig,      // Local L2 trigger with position
  output logic                   busy
);

  // ---------------- stage 1: count and coordinate sums ----------------
  logic signed [SUM_W-1:0] tq [NF];
  logic signed [SUM_W-1:0] tr [NF];

  for (genvar f = 0; f < NF; f++) begin : g_coord
    localparam int FQ = advcam_pkg::flower_q(R, f);
    localparam int FR = advcam_pkg::flower_r(R, f);
    assign tq[f] = in_frame[f] ? SUM_W'(FQ) : '0;
    assign tr[f] = in_frame[f] ? SUM_W'(FR) : '0;
  end

  logic [CNT_W-1:0]        cnt_c;
  logic signed [SUM_W-1:0] sq_c;
  logic signed [SUM_W-1:0] sr_c;

  always_comb begin
    cnt_c = '0;
    sq_c  = '0;
    sr_c  = '0;
    for (int f = 0; f < NF; f++) begin
      cnt_c += CNT_W'(in_frame[f]);
      sq_c  += tq[f];
      sr_c  += tr[f];
    end
  end

  logic                    v1;
  logic signed [SUM_W-1:0] sq1;
  logic signed [SUM_W-1:0] sr1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1    <= 1'b0;
      mono  <= 1'b0;
      n_set <= '0;
      sq1   <= '0;
      sr1   <= '0;
    end else begin
      v1    <= in_valid;
      mono  <= in_valid && (cnt_c != '0);
      n_set <= in_valid ? cnt_c : '0;
      sq1   <= sq_c;
      sr1   <= sr_c;
    end
  end

  // ---------------- stage 2: rounded division ----------------
  // |barycenter| = floor((2*|sum| + n) / (2*n)), sign of the sum.
  localparam int DIV_STEPS = NUM_W;

  logic                    armed;
  logic                    dividing;
  logic [$clog2(DIV_STEPS+1)-1:0] step;
  logic [NUM_W-1:0]        num_q, num_r, quo_q, quo_r;
  logic [NUM_W:0]          rem_q, rem_r;
  logic [NUM_W:0]          den;
  logic                    neg_q, neg_r;

  function automatic logic [ABS_W-1:0] mag(input logic signed [SUM_W-1:0] v);
    return (v < 0) ? ABS_W'(-v) : ABS_W'(v);
  endfunction

  logic [NUM_W:0] rq_sh, rr_sh;
  assign rq_sh = {rem_q[NUM_W-1:0], num_q[NUM_W-1]};
  assign rr_sh = {rem_r[NUM_W-1:0], num_r[NUM_W-1]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      armed    <= 1'b1;
      dividing <= 1'b0;
      step     <= '0;
      num_q    <= '0;
      num_r    <= '0;
      quo_q    <= '0;
      quo_r    <= '0;
      rem_q    <= '0;
      rem_r    <= '0;
      den      <= '0;
      neg_q    <= 1'b0;
      neg_r    <= 1'b0;
      trig     <= '0;
    end else begin
      trig.valid <= 1'b0;
      if (v1 && !mono) armed <= 1'b1;
      if (!dividing) begin
        if (mono && armed) begin
          armed    <= 1'b0;
          dividing <= 1'b1;
          step     <= '0;
          num_q    <= {mag(sq1), 1'b0} + NUM_W'(n_set);
          num_r    <= {mag(sr1), 1'b0} + NUM_W'(n_set);
          den      <= (NUM_W+1)'({n_set, 1'b0});
          neg_q    <= sq1 < 0;
          neg_r    <= sr1 < 0;
          rem_q    <= '0;
          rem_r    <= '0;
          quo_q    <= '0;
          quo_r    <= '0;
        end
      end else begin
        num_q <= num_q << 1;
        num_r <= num_r << 1;
        if (rq_sh >= den) begin
          rem_q <= rq_sh - den;
          quo_q <= {quo_q[NUM_W-2:0], 1'b1};
        end else begin
          rem_q <= rq_sh;
          quo_q <= {quo_q[NUM_W-2:0], 1'b0};
        end
        if (rr_sh >= den) begin
          rem_r <= rr_sh - den;
          quo_r <= {quo_r[NUM_W-2:0], 1'b1};
        end else begin
          rem_r <= rr_sh;
          quo_r <= {quo_r[NUM_W-2:0], 1'b0};
        end
        step <= step + 1'b1;
        if (32'(step) == DIV_STEPS - 1) dividing <= 1'b0;
      end
      // Result is complete one cycle after the last step.
      if (!dividing && 32'(step) == DIV_STEPS) begin
        trig.valid <= 1'b1;
        trig.q     <= neg_q ? -POS_W'(quo_q) : POS_W'(quo_q);
        trig.r     <= neg_r ? -POS_W'(quo_r) : POS_W'(quo_r);
        step       <= '0;
      end
    end
  end

  assign busy = dividing || (32'(step) == DIV_STEPS);

endmodule
