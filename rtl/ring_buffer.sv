// ring_buffer: front-end board sample memory with triggered window readout.
//
// Each front-end board (FEB) writes the samples of all its N_CH pixels into
// a circular memory, one word of N_CH x ADC_W bits per clock, without
// pause. When the camera trigger releases the data (trig_release high for a
// cycle while the buffer is idle), the board reads out WINDOW consecutive
// samples, oldest first, starting lookback samples before the sample that
// was written in the release cycle. The lookback covers the latency of the
// trigger chain. Readout runs at one sample per clock, at the same speed as
// writing, so the read pointer stays a fixed distance behind the write
// pointer and the window is never overwritten while it is read.
//
// Interface and timing: release at edge n (writing sample S) -> rd_valid
// for edges n+1 .. n+WINDOW with rd_data = samples S-lookback ..
// S-lookback+WINDOW-1 and rd_idx = 0 .. WINDOW-1. busy is high from edge n
// to edge n+WINDOW; a release while busy is ignored (dead time). lookback
// must not exceed DEPTH-2.
//
// From the paper: the FEB ring buffer, readout of the stored digitised
// pixels on a camera trigger, the 75-sample (about 73 ns) waveform. This
// design's choices: DEPTH = 1024 samples (1 us at 1.024 GHz, enough for an
// L2 decision below 1 us), a run-time lookback, dead time during readout,
// one read port of the full board width.
module ring_buffer #(
  parameter int ADC_W  = advcam_pkg::ADC_W,
  parameter int N_CH   = advcam_pkg::PIX_PER_FLOWER * advcam_pkg::FLOWERS_PER_FEB,
  parameter int DEPTH  = 1024,
  parameter int WINDOW = advcam_pkg::WINDOW_SAMPLES,
  localparam int AW    = $clog2(DEPTH),
  localparam int WW    = $clog2(WINDOW)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ADC_W-1:0] wr_data [N_CH],
  input  logic             trig_release,
  input  logic [AW-1:0]    lookback,
  output logic             busy,
  output logic             rd_valid,
  output logic [WW-1:0]    rd_idx,
  output logic [ADC_W-1:0] rd_data [N_CH]
);

  logic [N_CH*ADC_W-1:0] mem [DEPTH];
  logic [N_CH*ADC_W-1:0] wr_word;
  logic [N_CH*ADC_W-1:0] rd_word;
  logic [AW-1:0]         wr_ptr;
  logic [AW-1:0]         rd_ptr;
  logic [WW-1:0]         cnt;

  always_comb begin
    for (int c = 0; c < N_CH; c++) wr_word[c*ADC_W +: ADC_W] = wr_data[c];
  end

  // Memory: one write and one registered read per clock.
  always_ff @(posedge clk) begin
    mem[wr_ptr] <= wr_word;
    if (busy) rd_word <= mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      cnt      <= '0;
      busy     <= 1'b0;
      rd_valid <= 1'b0;
      rd_idx   <= '0;
    end else begin
      wr_ptr   <= wr_ptr + 1'b1;
      rd_valid <= busy;
      rd_idx   <= cnt;
      if (!busy) begin
        if (trig_release) begin
          busy   <= 1'b1;
          rd_ptr <= wr_ptr - lookback;
          cnt    <= '0;
        end
      end else begin
        rd_ptr <= rd_ptr + 1'b1;
        cnt    <= cnt + 1'b1;
        if (32'(cnt) == WINDOW - 1) busy <= 1'b0;
      end
    end
  end

  always_comb begin
    for (int c = 0; c < N_CH; c++) rd_data[c] = rd_word[c*ADC_W +: ADC_W];
  end

  // The window must stay inside the stored history.
  a_lookback: assert property (@(posedge clk) disable iff (!rst_n)
                               (trig_release && !busy) |-> (32'(lookback) <= DEPTH - 2));

endmodule
