// input_current_mux: selects the integration step of the membrane.
//
// In free-run mode (free_run = 1, pin ui_in[1]) the step is the selected
// activation a_t, so one table value sets both the firing probability and the
// step size. In host mode (free_run = 0) the step is the 4-bit weight on the
// parallel pins ui_in[7:4]. Both are zero-extended to the membrane width.
//
// Interface: combinational. The two sources follow the published design; the
// pin polarity and the zero extension of the weight are choices of this
// design (the extension matches the published weight sweep, in which weights
// below the decay of 4 never fire).
module input_current_mux
  import stoch_neuron_pkg::*;
(
  input  logic                free_run,
  input  logic [7:0]          activation,
  input  logic [WEIGHT_W-1:0] weight,
  output logic [V_W-1:0]      current
);

  always_comb begin
    if (free_run) current = V_W'(activation);
    else          current = V_W'(weight);
  end

endmodule
