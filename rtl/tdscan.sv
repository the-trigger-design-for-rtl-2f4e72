// tdscan: streaming spatio-temporal density filter (Local L2 trigger core).
//
// TDSCAN is a hardware-friendly approximation of the DBSCAN clustering
// algorithm. Its input is the stream of binary L1 frames, one bit per
// flower per clock. For every flower of frame N it counts the set bits in a
// 3D kernel: all flowers within lattice distance EPS_XY (a hexagon of
// 1, 7, 19, 37 ... flowers for EPS_XY = 0, 1, 2, 3) in each of the frames
// N-EPS_T .. N+EPS_T. The output bit of the flower is set when that count
// is larger than MinPts (min_pts input). Clusters are not told apart; the
// output is again one bit per flower per clock, so the block runs on an
// unbroken data stream with a fixed latency.
//
// Pipeline (one frame per clock):
//   frame history (2*EPS_T+1 frames, the input register is the first)
//   -> temporal count per flower -> hexagonal spatial sum -> compare.
// Frame N presented at edge n leaves as out_frame after edge
// n + EPS_T + 4 (out_valid marks it). With EPS_T = 1 that is 5 cycles,
// which at the 350 MHz of the published FPGA implementation is 14.3 ns.
// Flowers beyond the camera edge count as 0.
//
// From the paper: the three hyperparameters Eps_t, Eps_XY and MinPts, the
// hexagonal 3D convolution over frames N-1, N, N+1 and the "count > MinPts"
// test of each output flower, the fixed latency. This design's choices: the
// pipeline split into the stages above, Eps_t and Eps_XY as elaboration
// parameters, MinPts as a run-time input.
module tdscan #(
  parameter int R      = advcam_pkg::CAM_R,
  parameter int EPS_T  = 1,
  parameter int EPS_XY = 1,
  parameter int MP_W   = 8,
  localparam int NF    = advcam_pkg::hex_count(R),
  localparam int NFR   = 2 * EPS_T + 1,
  localparam int K     = advcam_pkg::hex_count(EPS_XY),
  localparam int TC_W  = $clog2(NFR + 1),
  localparam int SC_W  = $clog2(K * NFR + 1),
  localparam int LAT   = EPS_T + 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [NF-1:0]   in_frame,
  input  logic [MP_W-1:0] min_pts,
  output logic            out_valid,
  output logic [NF-1:0]   out_frame
);

  // hist[0] holds the newest frame, hist[EPS_T] the frame being evaluated.
  logic [NF-1:0]   hist [NFR];
  logic [TC_W-1:0] tcnt [NF];
  logic [SC_W-1:0] scnt [NF];
  logic [LAT-1:0]  vpipe;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < NFR; k++) hist[k] <= '0;
      vpipe <= '0;
    end else begin
      hist[0] <= in_frame;
      for (int k = 1; k < NFR; k++) hist[k] <= hist[k-1];
      vpipe <= {vpipe[LAT-2:0], in_valid};
    end
  end

  // A frame is complete once its EPS_T successors have arrived; the valid
  // pipe tracks frames, so out_valid rises LAT cycles after the first one.
  assign out_valid = vpipe[LAT-1];

  for (genvar f = 0; f < NF; f++) begin : g_fl
    // Temporal count over the 2*EPS_T+1 frames.
    logic [TC_W-1:0] tsum;
    always_comb begin
      tsum = '0;
      for (int k = 0; k < NFR; k++) tsum += TC_W'(hist[k][f]);
    end

    // Temporal counts of the hexagonal neighbourhood, 0 beyond the edge.
    logic [SC_W-1:0] term [K];
    for (genvar n = 0; n < K; n++) begin : g_k
      localparam int M = advcam_pkg::hood_member(R, EPS_XY, f, n);
      if (M >= 0) begin : g_in
        assign term[n] = SC_W'(tcnt[M]);
      end else begin : g_out
        assign term[n] = '0;
      end
    end

    logic [SC_W-1:0] ssum;
    always_comb begin
      ssum = '0;
      for (int n = 0; n < K; n++) ssum += term[n];
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        tcnt[f]      <= '0;
        scnt[f]      <= '0;
        out_frame[f] <= 1'b0;
      end else begin
        tcnt[f]      <= tsum;
        scnt[f]      <= ssum;
        out_frame[f] <= (32'(scnt[f]) > 32'(min_pts));
      end
    end
  end

endmodule
