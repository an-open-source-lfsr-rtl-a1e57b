// tb_stoch_stats: statistics of the random source over one full period.
//
// Runs the LFSR with the maximal polynomial 0xB400 from seed 1 through all
// 65535 states, feeding the activation table and comparator with the reset
// table, and checks:
//   - the period is 65535 cycles;
//   - the comparison byte s[7:0] is uniform: every value 256 times, except
//     0 which appears 255 times (the all-zero state never occurs);
//   - the LFSR MSB, mapped to +/-1, has periodic autocorrelation sum -1 at
//     every lag 1..32 (ideal m-sequence);
//   - the stochastic-event signal is serially correlated: about +0.32 at lag
//     1 and about -0.28 at lag 8; subsampled every 8 cycles its lag-1 value is
//     about -0.28, subsampled every 16 cycles it is near 0 (about 0.003).
// Expected values are the published characterisation of this comparator.
module tb_stoch_stats;
  import stoch_neuron_pkg::*;
  logic        clk = 0, rst_n = 0;
  logic [15:0] state;
  logic [7:0]  activation;
  logic        stoch_fire;
  int checks = 0, failures = 0;

  localparam int N = 65535;

  lfsr16_cfg u_lfsr (.clk, .rst_n, .en(1'b1), .load(1'b0), .seed(16'h0001),
                     .poly(16'hB400), .state);
  stoch_activation u_act (.lfsr_state(state), .lut(LUT_DEFAULT), .activation, .stoch_fire);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit   fire [N];
  bit   msb  [N];
  int   hist [256];

  // Normalised periodic autocorrelation of x[0::stride] at lag `lag`.
  function automatic real acorr(int stride, int lag);
    int n = N / stride;
    real mu = 0, v = 0, c = 0;
    for (int i = 0; i < n; i++) mu += fire[i * stride];
    mu /= n;
    for (int i = 0; i < n; i++) v += (fire[i * stride] - mu) ** 2;
    for (int i = 0; i < n; i++) c += (fire[i * stride] - mu) * (fire[((i + lag) % n) * stride] - mu);
    return c / v;
  endfunction

  initial begin
    logic [15:0] first;
    int period;
    real r1, r8, s8, s16;
    repeat (2) @(negedge clk);
    rst_n = 1;
    first = state;                       // sampled before the first step
    for (int i = 0; i < N; i++) begin
      fire[i] = stoch_fire;
      msb[i]  = state[15];
      hist[state[7:0]]++;
      @(negedge clk);
    end
    check(state == first, "back at the start after 65535 cycles");
    period = 0;
    do begin
      @(negedge clk); period++;
    end while (state != first && period < 70000);
    check(period == 65535, $sformatf("period %0d", period));

    for (int b = 0; b < 256; b++)
      check(hist[b] == ((b == 0) ? 255 : 256), $sformatf("comparison byte %0d seen %0d times", b, hist[b]));

    for (int lag = 1; lag <= 32; lag++) begin
      int acc;
      acc = 0;
      for (int i = 0; i < N; i++) acc += (msb[i] == msb[(i + lag) % N]) ? 1 : -1;
      check(acc == -1, $sformatf("MSB autocorrelation sum at lag %0d = %0d", lag, acc));
    end

    r1  = acorr(1, 1);
    r8  = acorr(1, 8);
    s8  = acorr(8, 1);
    s16 = acorr(16, 1);
    $display("event autocorrelation: lag1 %.4f lag8 %.4f  stride8 lag1 %.4f  stride16 lag1 %.4f",
             r1, r8, s8, s16);
    for (int lag = 1; lag <= 16; lag++) $display("  lag %2d: %.3f", lag, acorr(1, lag));
    check(r1 > 0.30 && r1 < 0.34, "lag-1 autocorrelation about 0.32");
    check(r8 < -0.26 && r8 > -0.30, "lag-8 autocorrelation about -0.28");
    check(s8 < -0.25, "stride 8 leaves the negative lobe");
    check(s16 > -0.01 && s16 < 0.01, "stride 16 near white");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
