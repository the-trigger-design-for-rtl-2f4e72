// camera_trigger_ctrl: Central Trigger Processor sequencer.
//
// Turns stereo triggers into camera triggers. After a stereo trigger the
// controller, when gh_en is set, requests a gamma/hadron decision from an
// external classifier (gh_req, one cycle) and waits for gh_valid; a score
// of at least gh_cut accepts the event, a lower score rejects it ("event not
// saved"), and no answer within gh_timeout cycles drops it. With gh_en low
// every stereo trigger is accepted. An accepted event raises release for
// one cycle, which makes the front-end ring buffers read out their window;
// the controller then waits until the buffers are idle again (rb_busy low).
// Stereo triggers arriving while the controller is not idle are dropped
// and counted as dead time.
//
// Timing: with gh_en low, a stereo trigger sampled at edge n makes release
// high in the cycle after edge n (the ring buffers sample it at edge n+1).
// With gh_en, gh_req is high in the cycle after edge n and release is high
// in the cycle after the edge that samples gh_valid with a passing score.
// Counters saturate at all ones.
//
// From the paper: the CTP steps after the L2 Stereo decision, g/h separation,
// "Is this a g?" and release of the data to the camera server. This design's
// choices: the request/valid handshake and timeout, the score comparison
// (score >= cut), the gh_en switch that lets the stereo trigger alone be
// the camera trigger, the busy wait and the counters.
module camera_trigger_ctrl #(
  parameter int GH_W  = 8,
  parameter int TO_W  = 8,
  parameter int CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             stereo,
  input  logic             gh_en,
  output logic             gh_req,
  input  logic             gh_valid,
  input  logic [GH_W-1:0]  gh_score,
  input  logic [GH_W-1:0]  gh_cut,
  input  logic [TO_W-1:0]  gh_timeout,
  input  logic             rb_busy,
  output logic             trig_release,
  output advcam_pkg::ct_state_e state,
  output logic [CNT_W-1:0] n_stereo,
  output logic [CNT_W-1:0] n_accept,
  output logic [CNT_W-1:0] n_reject,
  output logic [CNT_W-1:0] n_timeout,
  output logic [CNT_W-1:0] n_dropped
);
  import advcam_pkg::*;

  logic [TO_W-1:0] timer;

  function automatic logic [CNT_W-1:0] inc(input logic [CNT_W-1:0] v);
    return (&v) ? v : v + 1'b1;
  endfunction

  assign trig_release = (state == CT_RELEASE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= CT_IDLE;
      timer     <= '0;
      gh_req    <= 1'b0;
      n_stereo  <= '0;
      n_accept  <= '0;
      n_reject  <= '0;
      n_timeout <= '0;
      n_dropped <= '0;
    end else begin
      gh_req <= 1'b0;
      if (stereo) n_stereo <= inc(n_stereo);
      if (stereo && state != CT_IDLE) n_dropped <= inc(n_dropped);
      unique case (state)
        CT_IDLE: begin
          if (stereo) begin
            if (gh_en) begin
              gh_req <= 1'b1;
              timer  <= '0;
              state  <= CT_WAIT_GH;
            end else begin
              state <= CT_RELEASE;
            end
          end
        end
        CT_WAIT_GH: begin
          if (gh_valid) begin
            if (gh_score >= gh_cut) begin
              state <= CT_RELEASE;
            end else begin
              n_reject <= inc(n_reject);
              state    <= CT_IDLE;
            end
          end else if (timer == gh_timeout) begin
            n_timeout <= inc(n_timeout);
            state     <= CT_IDLE;
          end else begin
            timer <= timer + 1'b1;
          end
        end
        CT_RELEASE: begin
          n_accept <= inc(n_accept);
          state    <= CT_READOUT;
        end
        CT_READOUT: begin
          if (!rb_busy) state <= CT_IDLE;
        end
        default: state <= CT_IDLE;
      endcase
    end
  end

  // A released event must find the ring buffers idle.
  a_release_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                   trig_release |-> !rb_busy);

endmodule
