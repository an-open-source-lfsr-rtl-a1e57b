// refractory_counter: post-spike dead-time counter of the neuron.
//
// On `load` (a spike) the counter takes the programmed period `value` (0..7);
// while it is non-zero it counts down by one per enabled cycle and `busy` is
// high, which blocks integration and firing in the LIF core. A period r thus
// allows at most one spike every r+1 cycles. `clear` (accumulator reset)
// forces it to 0 and has priority; with `en` low it holds.
//
// Interface: registered count, `busy` = (count != 0). Asynchronous
// active-low reset to 0. Load and decrement follow the published design;
// the clear and enable behaviour are choices of this design.
module refractory_counter #(
  parameter int unsigned CNT_W = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             clear,
  input  logic             load,
  input  logic [CNT_W-1:0] value,
  output logic [CNT_W-1:0] count,
  output logic             busy
);

  assign busy = (count != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          count <= '0;
    else if (clear)      count <= '0;
    else if (en) begin
      if (load)          count <= value;
      else if (busy)     count <= count - CNT_W'(1);
    end
  end

endmodule
