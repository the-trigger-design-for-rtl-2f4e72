// advcam_trigger: camera trigger of one AdvCam (front-end boards plus
// Central Trigger Processor).
//
// Data path, one ADC frame (all pixels) per clock:
//   adc -> l1_trigger   : 7-pixel flower sums, 49-pixel super-flower sums,
//                         threshold -> one L1 bit per flower (l1_frame)
//       -> tdscan       : hexagonal spatio-temporal density filter
//       -> l2_local     : L2 Mono decision and shower barycenter
//                         -> local_trig, shared with the other telescopes
//       -> topo_stereo  : coincidence with remote_trig of the other
//                         telescopes, optional topological position check
//       -> camera_trigger_ctrl : optional external g/h decision, release
//       -> ring_buffer x N_FEB : every board stores its pixels' samples
//                         and reads out a WINDOW-sample window on release.
// The external g/h classifier (gh_req / gh_valid / gh_score) and the L1
// filter output a CNN-based trigger would use (l1_any, l1_frame) are ports.
//
// Boards: board b holds flowers 7b .. 7b+6, that is pixels 49b .. 49b+48
// (pixels past the last flower read as 0). Pixel k of flower f is adc[7f+k].
//
// Latency with default parameters: samples -> l1_frame 2 cycles -> TDSCAN
// output 5 more (EPS_T + 4) -> local_trig ABS_W + 5 = 20 more (mono flag,
// then a bit-serial division for the barycenter) -> stereo 1 cycle after
// the later of the local and the remote trigger -> release 1 cycle later
// (without g/h). A shower sample thus reaches local_trig after 27 cycles.
// readout_lookback must cover this path so the window contains the shower.
//
// From the paper: the chain L1 -> Local L2 (TDSCAN) -> Topo-Stereo L2 ->
// g/h -> release of FEB buffers, 14-bit samples, 49-pixel patches centred
// on every flower, 4 telescopes, 75-sample window. This design's choices:
// a single clock for everything, camera outline and board assignment, and
// all control values as run-time inputs.
module advcam_trigger #(
  parameter int R      = advcam_pkg::CAM_R,
  parameter int EPS_T  = 1,
  parameter int EPS_XY = 1,
  parameter int DEPTH  = 1024,
  parameter int WINDOW = advcam_pkg::WINDOW_SAMPLES,
  localparam int ADC_W = advcam_pkg::ADC_W,
  localparam int PPF   = advcam_pkg::PIX_PER_FLOWER,
  localparam int NF    = advcam_pkg::hex_count(R),
  localparam int NPIX  = NF * PPF,
  localparam int N_CH  = PPF * advcam_pkg::FLOWERS_PER_FEB,
  localparam int N_FEB = (NF + advcam_pkg::FLOWERS_PER_FEB - 1) / advcam_pkg::FLOWERS_PER_FEB,
  localparam int PS_W  = ADC_W + $clog2(PPF * 7 + 1),
  localparam int NREM  = advcam_pkg::N_TEL - 1,
  localparam int POS_W = advcam_pkg::POS_W,
  localparam int AW    = $clog2(DEPTH),
  localparam int WW    = $clog2(WINDOW),
  localparam int CNT_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // ADC samples of every pixel
  input  logic [ADC_W-1:0]        adc [NPIX],
  // configuration
  input  logic [PS_W-1:0]         l1_threshold,
  input  logic [7:0]              min_pts,
  input  logic [7:0]              coinc_window,
  input  logic                    topo_en,
  input  logic [POS_W-1:0]        topo_tol,
  input  logic signed [POS_W-1:0] topo_off_q [NREM],
  input  logic signed [POS_W-1:0] topo_off_r [NREM],
  input  logic                    gh_en,
  input  logic [7:0]              gh_cut,
  input  logic [7:0]              gh_timeout,
  input  logic [AW-1:0]           readout_lookback,
  // L1 outputs (trigger binary waveform and L1 filter)
  output logic [NF-1:0]           l1_frame,
  output logic                    l1_any,
  // Local L2 trigger
  output logic [NF-1:0]           l2_frame,
  output logic                    l2_mono,
  output advcam_pkg::trig_info_t  local_trig,
  // other telescopes
  input  advcam_pkg::trig_info_t  remote_trig [NREM],
  output logic                    stereo,
  output logic [NREM-1:0]         coinc_mask,
  // external gamma/hadron classifier
  output logic                    gh_req,
  input  logic                    gh_valid,
  input  logic [7:0]              gh_score,
  // camera trigger and readout
  output logic                    camera_trigger,
  output logic                    ro_valid,
  output logic [WW-1:0]           ro_idx,
  output logic [ADC_W-1:0]        ro_data [N_FEB][N_CH],
  output logic [CNT_W-1:0]        n_stereo,
  output logic [CNT_W-1:0]        n_accept,
  output logic [CNT_W-1:0]        n_reject,
  output logic [CNT_W-1:0]        n_timeout,
  output logic [CNT_W-1:0]        n_dropped
);

  // ---------------- Level 1 ----------------
  logic [PS_W-1:0] patch_sum [NF];

  l1_trigger #(.R(R), .ADC_W(ADC_W)) u_l1 (
    .clk      (clk),
    .rst_n    (rst_n),
    .adc      (adc),
    .threshold(l1_threshold),
    .l1_frame (l1_frame),
    .patch_sum(patch_sum),
    .l1_any   (l1_any)
  );

  // ---------------- Local L2: TDSCAN + L2 Mono ----------------
  logic l2_valid;

  tdscan #(.R(R), .EPS_T(EPS_T), .EPS_XY(EPS_XY), .MP_W(8)) u_tdscan (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (1'b1),
    .in_frame (l1_frame),
    .min_pts  (min_pts),
    .out_valid(l2_valid),
    .out_frame(l2_frame)
  );

  logic [$clog2(NF+1)-1:0] l2_nset;
  logic                    l2_busy;

  l2_local #(.R(R)) u_l2 (
    .clk     (clk),
    .rst_n   (rst_n),
    .in_valid(l2_valid),
    .in_frame(l2_frame),
    .mono    (l2_mono),
    .n_set   (l2_nset),
    .trig    (local_trig),
    .busy    (l2_busy)
  );

  // ---------------- Topo-Stereo L2 ----------------
  topo_stereo #(.N_REMOTE(NREM), .MIN_TELS(2), .WIN_W(8)) u_topo (
    .clk        (clk),
    .rst_n      (rst_n),
    .local_trig (local_trig),
    .remote_trig(remote_trig),
    .window     (coinc_window),
    .topo_en    (topo_en),
    .tol        (topo_tol),
    .off_q      (topo_off_q),
    .off_r      (topo_off_r),
    .stereo     (stereo),
    .coinc_mask (coinc_mask)
  );

  // ---------------- CTP sequencer ----------------
  logic                  rb_busy;
  advcam_pkg::ct_state_e ct_state;

  camera_trigger_ctrl #(.GH_W(8), .TO_W(8), .CNT_W(CNT_W)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .stereo      (stereo),
    .gh_en       (gh_en),
    .gh_req      (gh_req),
    .gh_valid    (gh_valid),
    .gh_score    (gh_score),
    .gh_cut      (gh_cut),
    .gh_timeout  (gh_timeout),
    .rb_busy     (rb_busy),
    .trig_release(camera_trigger),
    .state       (ct_state),
    .n_stereo    (n_stereo),
    .n_accept    (n_accept),
    .n_reject    (n_reject),
    .n_timeout   (n_timeout),
    .n_dropped   (n_dropped)
  );

  // ---------------- FEB ring buffers ----------------
  logic [N_FEB-1:0] feb_busy;
  logic [N_FEB-1:0] feb_valid;
  logic [WW-1:0]    feb_idx [N_FEB];

  for (genvar b = 0; b < N_FEB; b++) begin : g_feb
    logic [ADC_W-1:0] wr [N_CH];
    for (genvar c = 0; c < N_CH; c++) begin : g_ch
      if (b * N_CH + c < NPIX) begin : g_pix
        assign wr[c] = adc[b * N_CH + c];
      end else begin : g_pad
        assign wr[c] = '0;
      end
    end

    ring_buffer #(.ADC_W(ADC_W), .N_CH(N_CH), .DEPTH(DEPTH), .WINDOW(WINDOW)) u_rb (
      .clk         (clk),
      .rst_n       (rst_n),
      .wr_data     (wr),
      .trig_release(camera_trigger),
      .lookback    (readout_lookback),
      .busy        (feb_busy[b]),
      .rd_valid    (feb_valid[b]),
      .rd_idx      (feb_idx[b]),
      .rd_data     (ro_data[b])
    );
  end

  assign rb_busy  = |feb_busy;
  assign ro_valid = feb_valid[0];
  assign ro_idx   = feb_idx[0];

endmodule
