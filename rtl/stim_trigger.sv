// stim_trigger: phase-locked trigger of the auditory stimulus.
//
// The analog path band-passes the EEG around the slow oscillation and a
// comparator marks its zero crossings; that comparator output arrives here
// asynchronously on osc_detect.  It is synchronised with two flip-flops and the
// selected edge (rising or falling crossing) is detected.  An edge arms the
// trigger only while stimulation is enabled and the classifier's current stage
// equals target_stage (N3 in the closed loop of the paper); otherwise it is
// counted as blocked.  An armed trigger waits `delay` clock cycles, the
// programmable delay that places the stimulus at the wanted phase, then holds
// stim_on high for pulse_len cycles to gate the pink-noise burst.  Edges that
// arrive while a trigger is pending or the burst is on are ignored.
//
// Timing: stim_on rises delay+3 cycles after the osc_detect edge (two
// synchroniser stages and one edge register) and lasts pulse_len cycles.  The
// stage gating and the programmable delay are the paper's; the edge select,
// burst length and counters are this design's choices.
module stim_trigger
  import sleep_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         osc_detect,
  input  logic         enable,
  input  logic         edge_falling,   // 0: rising crossing, 1: falling crossing
  input  sleep_stage_e stage,
  input  sleep_stage_e target_stage,
  input  logic [31:0]  delay,
  input  logic [31:0]  pulse_len,
  output logic         stim_on,
  output logic [15:0]  n_triggers,     // bursts started
  output logic [15:0]  n_blocked       // crossings rejected by the stage gate
);

  logic [2:0] sync;
  logic       crossing;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= '0;
    else        sync <= {sync[1:0], osc_detect};
  end
  assign crossing = edge_falling ? (sync[2] & ~sync[1]) : (~sync[2] & sync[1]);

  typedef enum logic [1:0] {T_IDLE, T_DELAY, T_PULSE} tstate_e;
  tstate_e     st;
  logic [31:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; cnt <= '0; stim_on <= 1'b0; n_triggers <= '0; n_blocked <= '0;
    end else begin
      unique case (st)
        T_IDLE: if (crossing) begin
          if (enable && stage == target_stage) begin
            if (delay == 0) begin
              st <= T_PULSE; stim_on <= 1'b1; cnt <= '0; n_triggers <= n_triggers + 1;
            end else begin
              st <= T_DELAY; cnt <= '0;
            end
          end else begin
            n_blocked <= n_blocked + 1;
          end
        end
        T_DELAY: if (cnt >= delay - 1) begin
          st <= T_PULSE; stim_on <= 1'b1; cnt <= '0; n_triggers <= n_triggers + 1;
        end else cnt <= cnt + 1;
        T_PULSE: if (cnt >= pulse_len - 1) begin
          st <= T_IDLE; stim_on <= 1'b0; cnt <= '0;
        end else cnt <= cnt + 1;
        default: st <= T_IDLE;
      endcase
    end
  end

endmodule
