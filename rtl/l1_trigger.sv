// l1_trigger: Level 1 trigger of the whole camera.
//
// For every flower f the block forms the 49-pixel "super-flower" sum: the
// flower's own 7-pixel sum plus the sums of its 6 neighbouring flowers on
// the flower lattice (neighbours outside the camera count as 0). Patches
// therefore overlap and one patch is centred on every flower, leaving no
// blind region. The super-flower sum is compared with a programmable
// threshold; the result is one L1 bit per flower per clock, the "trigger
// binary waveform" that feeds the Local L2 trigger (TDSCAN). The OR of all
// bits, l1_any, is the L1 filter ("is there a trigger patch above
// threshold?") that a CNN-based L2 would need.
//
// Timing: samples at edge n -> flower sums after edge n+1 -> l1_frame after
// edge n+2 -> l1_any after edge n+3. One frame per clock.
// Interface: adc[] is ordered flower by flower, pixel k of flower f at index
// 7*f+k; flower order and lattice are those of advcam_pkg.
//
// From the paper: 49-pixel sums centred on each flower, a simple threshold
// cut, one L1 signal per flower. This design's choices: the comparison is
// strict (sum > threshold), the camera outline (hexagon of radius CAM_R),
// and running at one frame per clock.
module l1_trigger #(
  parameter int R     = advcam_pkg::CAM_R,
  parameter int ADC_W = advcam_pkg::ADC_W,
  localparam int PPF   = advcam_pkg::PIX_PER_FLOWER,
  localparam int NF    = advcam_pkg::hex_count(R),
  localparam int NPIX  = NF * PPF,
  localparam int FS_W  = ADC_W + $clog2(PPF + 1),
  localparam int PS_W  = ADC_W + $clog2(PPF * 7 + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ADC_W-1:0] adc [NPIX],
  input  logic [PS_W-1:0]  threshold,
  output logic [NF-1:0]    l1_frame,
  output logic [PS_W-1:0]  patch_sum [NF],
  output logic             l1_any
);

  logic [FS_W-1:0] fsum [NF];

  for (genvar f = 0; f < NF; f++) begin : g_flower
    localparam int FQ = advcam_pkg::flower_q(R, f);
    localparam int FR = advcam_pkg::flower_r(R, f);

    flower_sum #(.ADC_W(ADC_W), .NPIX(PPF)) u_fs (
      .clk  (clk),
      .rst_n(rst_n),
      .pix  (adc[f*PPF +: PPF]),
      .sum  (fsum[f])
    );

    // Sums of the 6 neighbouring flowers, 0 beyond the camera edge.
    logic [PS_W-1:0] nsum [6];
    for (genvar d = 0; d < 6; d++) begin : g_nb
      localparam int NB = advcam_pkg::flower_index(R, FQ + advcam_pkg::nb_dq(d),
                                                   FR + advcam_pkg::nb_dr(d));
      if (NB >= 0) begin : g_in
        assign nsum[d] = PS_W'(fsum[NB]);
      end else begin : g_out
        assign nsum[d] = '0;
      end
    end

    logic [PS_W-1:0] psum;
    always_comb begin
      psum = PS_W'(fsum[f]);
      for (int d = 0; d < 6; d++) psum += nsum[d];
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        patch_sum[f] <= '0;
        l1_frame[f]  <= 1'b0;
      end else begin
        patch_sum[f] <= psum;
        l1_frame[f]  <= (psum > threshold);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) l1_any <= 1'b0;
    else        l1_any <= |l1_frame;
  end

endmodule
