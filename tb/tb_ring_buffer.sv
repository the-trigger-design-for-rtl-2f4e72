// tb_ring_buffer: 49 channels, default depth 1024 and 75-sample window.
// Writes a known pattern (function of sample number and channel), then
// releases readouts with several lookbacks, including the largest allowed.
// Checks every read word against the pattern, rd_idx, that rd_valid lasts
// exactly 75 cycles starting one cycle after the release, and that a
// release during a readout is ignored.
module tb_ring_buffer;
  localparam int ADC_W  = 14;
  localparam int N_CH   = 49;
  localparam int DEPTH  = 1024;
  localparam int WINDOW = 75;

  logic             clk = 1'b0;
  logic             rst_n;
  logic [ADC_W-1:0] wr_data [N_CH];
  logic             trig_release;
  logic [9:0]       lookback;
  logic             busy;
  logic             rd_valid;
  logic [6:0]       rd_idx;
  logic [ADC_W-1:0] rd_data [N_CH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ring_buffer #(.ADC_W(ADC_W), .N_CH(N_CH), .DEPTH(DEPTH), .WINDOW(WINDOW)) dut (
    .clk, .rst_n, .wr_data, .trig_release, .lookback, .busy, .rd_valid, .rd_idx, .rd_data);

  function automatic logic [ADC_W-1:0] pattern(input int s, input int c);
    return ADC_W'(s * 37 + c * 101 + (s >> 3));
  endfunction

  int sample = 0;   // sample number presented in the current cycle
  int n_valid = 0;
  int start_s = 0;  // first sample expected in the current window
  int rel_cycle = -1;
  int first_valid = -1;
  int edges = 0;    // rising edges seen so far

  always @(posedge clk) edges++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Check the read side on the falling edge.
  always @(negedge clk) begin
    if (rst_n && rd_valid) begin
      if (first_valid < 0) first_valid = edges;
      checks++;
      if (int'(rd_idx) != n_valid) begin failures++; $display("rd_idx %0d expected %0d", rd_idx, n_valid); end
      for (int c = 0; c < N_CH; c++) begin
        checks++;
        if (rd_data[c] != pattern(start_s + n_valid, c)) begin
          failures++;
          if (failures < 10) $display("idx %0d ch %0d got %0d exp %0d", n_valid, c, rd_data[c], pattern(start_s + n_valid, c));
        end
      end
      n_valid++;
    end
  end

  task automatic step();
    @(negedge clk);
    sample++;
    for (int c = 0; c < N_CH; c++) wr_data[c] = pattern(sample, c);
  endtask

  task automatic readout(input int lb);
    n_valid = 0;
    first_valid = -1;
    lookback = 10'(lb);
    trig_release = 1'b1;
    start_s = sample - lb;
    rel_cycle = edges + 1;   // the edge that samples the release
    step();
    trig_release = 1'b0;
    // try to re-release in the middle of the readout: must be ignored
    repeat (30) step();
    trig_release = 1'b1;
    step();
    trig_release = 1'b0;
    repeat (WINDOW + 10) step();
    checks += 2;
    if (n_valid != WINDOW) begin failures++; $display("lookback %0d: %0d words", lb, n_valid); end
    if (first_valid != rel_cycle + 1) begin failures++; $display("first word at %0d, release at %0d", first_valid, rel_cycle); end
  endtask

  initial begin
    rst_n = 1'b0;
    trig_release = 1'b0;
    lookback = '0;
    for (int c = 0; c < N_CH; c++) wr_data[c] = pattern(0, c);
    @(posedge clk);
    @(posedge clk);
    #1 rst_n = 1'b1;
    // sample 0 is written at the first edge after reset
    repeat (DEPTH + 50) step();
    readout(100);
    readout(0);
    readout(DEPTH - 2);
    readout(500);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
