// flower_sum: digital sum of the 7 pixels of one flower.
//
// A flower is a seed pixel and its 6 neighbours. Every clock the 7 unsigned
// ADC samples are added and the sum is registered, so the flower sum of the
// samples presented at clock edge n appears after edge n+1 (latency 1 cycle,
// one sum per clock, matching the 1 GHz sample stream). The sum is full
// precision (ADC_W+3 bits), so it never overflows.
//
// From the paper: the per-flower digital sum at the front-end boards. This
// design's choices: no pedestal subtraction (raw ADC words are added; the
// threshold applied later absorbs the baseline), synchronous active-low
// reset of the output register.
module flower_sum #(
  parameter int ADC_W = advcam_pkg::ADC_W,
  parameter int NPIX  = advcam_pkg::PIX_PER_FLOWER,
  localparam int SUM_W = ADC_W + $clog2(NPIX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ADC_W-1:0] pix [NPIX],
  output logic [SUM_W-1:0] sum
);

  logic [SUM_W-1:0] acc;

  always_comb begin
    acc = '0;
    for (int i = 0; i < NPIX; i++) acc += SUM_W'(pix[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) sum <= '0;
    else        sum <= acc;
  end

endmodule
