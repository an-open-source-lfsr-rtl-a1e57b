// lif_core: saturating 16-bit leaky integrate-and-fire core with refractory
// gating.
//
// Every enabled cycle, in priority order:
//   1. refractory counter non-zero: the membrane is held, no spike;
//   2. v[15:8] >= threshold: emit a spike, reset v to 0, load the refractory
//      counter with r and set the latched-spike flag;
//   3. stochastic event OR external spike: v <= min(v + I, 0xFFFF); a sum
//      above 0xFFFF sets the sticky overflow flag;
//   4. otherwise leak: v <= max(v - d, 0).
// The event gate is the OR of the stochastic event and the external spike,
// ANDed with "not refractory". The threshold test looks only at the upper
// byte of the membrane, so the threshold has 256 levels.
//
// Timing: `spike` is a registered one-cycle pulse that rises at the same clock
// edge at which the membrane resets and the refractory counter loads, one
// cycle after the registered membrane first satisfies the threshold test.
// With threshold 0 and an event every cycle the spike rate is 1/(r+1).
// `acc_reset` (CTRL[1], level) clears the membrane, counter and both flags;
// `en` low (CTRL[0]) freezes everything and holds `spike` low.
//
// The update rule, saturation, floor at zero, upper-byte threshold and
// refractory hold follow the published design. Firing taking priority over
// integration in the same cycle, the registered spike, and the exact set/
// clear rules of the two flags are choices of this design.
module lif_core
  import stoch_neuron_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             acc_reset,
  input  logic             stoch_fire,
  input  logic             ext_spike,
  input  logic [V_W-1:0]   current,
  input  logic [7:0]       decay,
  input  logic [7:0]       threshold,
  input  logic [REF_W-1:0] refractory,
  output logic             spike,
  output logic [V_W-1:0]   membrane,
  output logic             overflow,
  output logic             spike_latched,
  output logic [REF_W-1:0] ref_count,
  output logic             ref_busy
);

  logic         event_in;    // OR gate: stochastic event or external spike
  logic         integrate;   // AND gate: event and not refractory
  logic         fire;
  logic [V_W:0] sum;
  logic [V_W-1:0] leaked;

  always_comb begin
    event_in  = stoch_fire | ext_spike;
    integrate = event_in & ~ref_busy;
    fire      = en & ~acc_reset & ~ref_busy & (membrane[V_W-1 -: 8] >= threshold);
    sum       = {1'b0, membrane} + {1'b0, current};
    leaked    = (membrane > V_W'(decay)) ? membrane - V_W'(decay) : '0;
  end

  refractory_counter #(.CNT_W(REF_W)) u_refractory (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (en),
    .clear (acc_reset),
    .load  (fire),
    .value (refractory),
    .count (ref_count),
    .busy  (ref_busy)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      membrane      <= '0;
      spike         <= 1'b0;
      overflow      <= 1'b0;
      spike_latched <= 1'b0;
    end else if (acc_reset) begin
      membrane      <= '0;
      spike         <= 1'b0;
      overflow      <= 1'b0;
      spike_latched <= 1'b0;
    end else if (!en) begin
      spike         <= 1'b0;
    end else begin
      spike <= fire;
      if (ref_busy) begin
        membrane <= membrane;                 // held during refractory
      end else if (fire) begin
        membrane      <= '0;
        spike_latched <= 1'b1;
      end else if (integrate) begin
        if (sum[V_W]) begin
          membrane <= '1;                     // saturate at full scale
          overflow <= 1'b1;
        end else begin
          membrane <= sum[V_W-1:0];
        end
      end else begin
        membrane <= leaked;
      end
    end
  end

endmodule
