// tb_top: end-to-end testbench of the whole neuron at its default sizes.
//
// The chip is driven only through its pins: a mode-0 SPI master on uio
// configures it, and ui_in carries the external spike, the mode pin and the
// host weight. A cycle-level reference model of the complete neuron (LFSR,
// activation table, comparator, input selection, membrane, threshold,
// refractory counter, flags) is kept here and compared with every bit of
// uo_out on every cycle of each run.
//
// Alignment: each run starts with the neuron disabled and its accumulator
// held in reset, so its state is known exactly (membrane 0, LFSR = seed).
// The final CTRL write enables it a few clocks after the last SCLK edge; the
// recorded uo_out trace is matched against the model for every start offset
// 0..15 and exactly one offset must match the whole trace.
//
// Runs: reset defaults (63-state cycle of polynomial 0x002D), free-run rate
// at threshold 0x10, the refractory cap 1/(r+1) for r = 0..7, host-mode
// weights 15 and 2, a mid-run mode switch with random external spikes, and a
// zero seed. Each mechanism is counted and one that never happens is a
// failure. The membrane cannot overflow through the pins (the largest step
// is 255 and a membrane at or above 0xFF00 always fires first), so overflow
// is covered by the LIF core's own testbench instead.
module tb_top;
  timeunit 1ns; timeprecision 1ps;

  logic [7:0] ui_in = 8'h02;     // free-run, no external spike
  logic [7:0] uo_out, uio_in, uio_out, uio_oe;
  logic       ena = 1'b1, clk = 1'b0, rst_n = 1'b0;
  logic       sclk = 0, cs_n = 1, mosi = 0;
  int checks = 0, failures = 0;

  assign uio_in = {4'b0, sclk, 1'b0, mosi, cs_n};

  tt_um_santhosh_stoch_neuron dut (.*);

  always #10 clk = ~clk;          // 50 MHz

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- SPI
  event last_rise;
  int   n_spi_write = 0, n_spi_read = 0;

  // SCLK edges on clock negedges, five clocks per half period (5 MHz).
  task automatic half();
    repeat (5) @(negedge clk);
  endtask

  task automatic spi_frame(input logic rw, input logic [6:0] a, input logic [7:0] d,
                           output logic [7:0] rx);
    logic [15:0] w = {rw, a, d};
    rx = '0;
    cs_n = 0; half();
    for (int i = 15; i >= 0; i--) begin
      mosi = w[i]; half();
      sclk = 1;
      if (i < 8) rx[i] = uio_out[2];
      if (i == 0) -> last_rise;
      half();
      sclk = 0;
    end
    half(); cs_n = 1; half(); half();
  endtask

  task automatic wr(input logic [6:0] a, input logic [7:0] d);
    logic [7:0] rx;
    spi_frame(1'b1, a, d, rx);
    n_spi_write++;
  endtask

  task automatic rd(input logic [6:0] a, output logic [7:0] d);
    spi_frame(1'b0, a, 8'h00, d);
    n_spi_read++;
  endtask

  // --------------------------------------------------------- reference model
  typedef struct {
    logic [15:0] s, v;
    logic [2:0]  ref_cnt;
    logic        spike, ovf, lat;
  } mstate_t;

  typedef struct {
    logic [15:0] poly, seed;
    logic [7:0]  threshold, decay;
    logic [2:0]  r;
    logic [7:0]  lut [8];
  } mcfg_t;

  // mechanism counters
  int n_spike = 0, n_ref_hold = 0, n_leak = 0, n_stoch_int = 0, n_ext_int = 0;
  int n_free_int = 0, n_host_int = 0, n_mode_switch = 0, n_zero_reseed = 0;
  int n_seed_load = 0, n_acc_reset = 0, n_disable = 0, n_period63 = 0;

  function automatic logic [7:0] m_out(mstate_t m);
    return {m.lat, m.ovf, m.v[15:12], m.s[15], m.spike};
  endfunction

  // One clock of the neuron; `count` enables the mechanism counters.
  function automatic mstate_t m_step(mstate_t m, mcfg_t c, logic [7:0] ui, bit count);
    mstate_t n = m;
    logic [7:0]  a = c.lut[m.s[15:13]];
    logic        ev_st = m.s[7:0] < a;
    logic        ev = ev_st | ui[0];
    logic [15:0] cur = ui[1] ? 16'(a) : 16'(ui[7:4]);
    logic [16:0] sum = {1'b0, m.v} + {1'b0, cur};
    n.spike = 0;
    if (m.ref_cnt != 0) begin
      n.ref_cnt = m.ref_cnt - 1;
      if (count) n_ref_hold++;
    end else if (m.v[15:8] >= c.threshold) begin
      n.spike = 1; n.v = 0; n.ref_cnt = c.r; n.lat = 1;
      if (count) n_spike++;
    end else if (ev) begin
      if (sum[16]) begin n.v = 16'hFFFF; n.ovf = 1; end
      else n.v = sum[15:0];
      if (count) begin
        if (ev_st) n_stoch_int++; else n_ext_int++;
        if (ui[1]) n_free_int++; else n_host_int++;
      end
    end else begin
      n.v = (m.v > 16'(c.decay)) ? m.v - 16'(c.decay) : 16'd0;
      if (count) n_leak++;
    end
    if (m.s == 0) begin n.s = 16'd1; if (count) n_zero_reseed++; end
    else n.s = {m.s[14:0], ^(m.s & c.poly)};
    return n;
  endfunction

  // ------------------------------------------------------------- one run
  typedef enum {GEN_CONST, GEN_RANDOM_EXT, GEN_SWITCH} gen_e;

  logic [7:0] trace_out [];
  logic [7:0] trace_ui  [];
  int         run_spikes;

  function automatic logic [7:0] gen_ui(gen_e g, logic [7:0] base, int i, int n);
    case (g)
      GEN_CONST:      return base;
      GEN_RANDOM_EXT: return {base[7:1], 1'(($urandom % 10) == 0)};
      default:        return {base[7:2], (i < n / 2) ? base[1] : ~base[1], 1'(($urandom % 10) == 0)};
    endcase
  endfunction

  // Configure (neuron held), enable, record n cycles, align and compare.
  task automatic run(input string name, input mcfg_t c, input gen_e g,
                     input logic [7:0] ui_base, input int n);
    mstate_t m0, m;
    int best_k, best_bad, n_match;
    int spikes_at_k;
    logic [7:0] rb;
    wr(7'h00, {c.r, 3'b000, 2'b10});             // disable, hold accumulator reset
    n_acc_reset++; n_disable++;
    wr(7'h01, c.poly[7:0]);  wr(7'h02, c.poly[15:8]);
    wr(7'h03, c.seed[7:0]);  wr(7'h04, c.seed[15:8]);
    n_seed_load++;
    wr(7'h05, c.threshold);  wr(7'h06, c.decay);
    for (int i = 0; i < 8; i++) wr(7'(8 + i), c.lut[i]);
    // STATUS while held: nothing pending, flags cleared.
    rd(7'h07, rb);
    check(rb == 8'h00, $sformatf("%s: STATUS while held = %h", name, rb));
    check(uo_out[7:6] == 2'b00 && uo_out[0] == 0, $sformatf("%s: flags cleared by accumulator reset", name));
    ui_in = gen_ui(g, ui_base, 0, n);
    trace_out = new[n + 16];
    trace_ui  = new[n + 16];
    fork
      wr(7'h00, {c.r, 3'b000, 2'b01});           // enable
      begin
        @last_rise;
        for (int i = 0; i < n + 16; i++) begin
          @(negedge clk);
          trace_out[i] = uo_out;
          ui_in = gen_ui(g, ui_base, i, n);
          trace_ui[i] = ui_in;
        end
      end
    join
    // Align: state at trace[k] is the initial state; step j uses trace_ui[k+j].
    m0.s = c.seed; m0.v = 0; m0.ref_cnt = 0; m0.spike = 0; m0.ovf = 0; m0.lat = 0;
    best_k = -1; best_bad = n + 1; n_match = 0;
    for (int k = 0; k < 16; k++) begin
      int bad = 0;
      m = m0;
      for (int j = 0; j < n; j++) begin
        if (trace_out[k + j] !== m_out(m)) bad++;
        m = m_step(m, c, trace_ui[k + j], 0);
      end
      if (bad == 0) n_match++;
      if (bad < best_bad) begin best_bad = bad; best_k = k; end
    end
    check(n_match == 1 && best_bad == 0,
          $sformatf("%s: model match (offsets matching=%0d, best offset %0d with %0d mismatching cycles)",
                    name, n_match, best_k, best_bad));
    // Count mechanisms and spikes on the aligned run.
    m = m0; run_spikes = 0;
    for (int j = 0; j < n; j++) begin
      m = m_step(m, c, trace_ui[best_k + j], 1);
      if (j > 0 && trace_ui[best_k + j][1] != trace_ui[best_k + j - 1][1]) n_mode_switch++;
    end
    for (int j = 0; j < n; j++) run_spikes += int'(trace_out[best_k + j][0]);
    // Live STATUS agrees with the pins once the neuron is frozen again.
    wr(7'h00, {c.r, 3'b000, 2'b00});
    n_disable++;
    rd(7'h07, rb);
    check(rb[0] == 0 && rb[2] == uo_out[7] && rb[1] == uo_out[6] && rb[3] == uo_out[5]
          && rb[4] == (rb[7:5] != 0),
          $sformatf("%s: STATUS %h agrees with uo_out %h", name, rb, uo_out));
    $display("%s: %0d spikes in %0d cycles (%.2f per 1000), offset %0d",
             name, run_spikes, n, 1000.0 * run_spikes / n, best_k);
  endtask

  // ------------------------------------------------------------------ main
  initial begin
    mcfg_t c;
    logic [7:0] rb;
    logic [7:0] defaults [16] = '{8'h01, 8'h2D, 8'h00, 8'h01, 8'h00, 8'h80, 8'h04, 8'h00,
                                  8'd16, 8'd32, 8'd64, 8'd128, 8'd192, 8'd224, 8'd240, 8'd248};
    repeat (3) @(negedge clk);
    // Reset release: LFSR starts from seed 1 with polynomial 0x002D and runs.
    rst_n = 1;
    trace_out = new[700];
    for (int i = 0; i < 700; i++) begin @(negedge clk); trace_out[i] = uo_out; end
    begin
      int bad = 0;
      logic [15:0] s = 16'h0001;
      // the first sample follows the first rising clock edge, one step on
      for (int i = 0; i < 700; i++) begin
        s = (s == 0) ? 16'd1 : {s[14:0], ^(s & 16'h002D)};
        if (trace_out[i][1] !== s[15]) bad++;
      end
      check(bad == 0, $sformatf("LFSR MSB from reset, %0d mismatches", bad));
      bad = 0;
      for (int i = 20; i < 600; i++) if (trace_out[i][1] !== trace_out[i + 63][1]) bad++;
      check(bad == 0, "default polynomial repeats every 63 cycles");
      if (bad == 0) n_period63++;
      bad = 0;
      for (int i = 20; i < 600; i++) if (trace_out[i][1] !== trace_out[i + 21][1]) bad++;
      check(bad != 0, "default polynomial period is not 21");
    end

    // Register defaults through SPI reads.
    for (int a = 0; a < 16; a++) begin
      rd(7'(a), rb);
      if (a != 7) check(rb == defaults[a], $sformatf("reset value of register %h: %h", a, rb));
    end

    // Common configuration: default table.
    for (int i = 0; i < 8; i++) c.lut[i] = defaults[8 + i];

    // 1. Default polynomial, free-run, default threshold and decay.
    c.poly = 16'h002D; c.seed = 16'h0001; c.threshold = 8'h80; c.decay = 8'd4; c.r = 0;
    run("default-poly free-run", c, GEN_CONST, 8'h02, 2000);

    // 2. Free-run rate with threshold 0x10 (published: about 25 per 1000 cycles).
    c.poly = 16'hB400; c.seed = 16'hACE1; c.threshold = 8'h10; c.decay = 8'd4; c.r = 0;
    run("free-run thr 0x10", c, GEN_CONST, 8'h02, 20000);
    check(run_spikes >= 400 && run_spikes <= 600, "free-run rate near 25 per 1000 cycles");

    // 3. Refractory cap: threshold 0, external spike every cycle.
    for (int r = 0; r < 8; r++) begin
      c.threshold = 8'h00; c.r = 3'(r);
      run($sformatf("refractory r=%0d", r), c, GEN_CONST, 8'h03, 840);
      // first spike one cycle after enabling, then one every r+1 cycles
      check(run_spikes == (840 - 2) / (r + 1) + 1,
            $sformatf("refractory r=%0d: %0d spikes in 840 cycles, law gives %0d", r, run_spikes, (840 - 2) / (r + 1) + 1));
    end

    // 4. Host mode: weight 15 fires, weight 2 never does (decay 4 dominates).
    c.threshold = 8'h80; c.decay = 8'd4; c.r = 0; c.seed = 16'h1D2C;
    run("host w=15", c, GEN_CONST, 8'hF0, 60000);
    check(run_spikes >= 6 && run_spikes <= 20, "host weight 15: about 0.2 spikes per 1000 cycles");
    run("host w=2", c, GEN_CONST, 8'h20, 20000);
    check(run_spikes == 0, "host weight 2: no spikes");

    // 5. Mode switch half way, random external spikes, refractory 3.
    c.threshold = 8'h20; c.r = 3; c.seed = 16'h7777; c.poly = 16'hD008;
    run("mode switch", c, GEN_SWITCH, 8'h52, 6000);

    // 6. Zero seed is replaced by 1; random external spikes in host mode.
    c.seed = 16'h0000; c.poly = 16'hB400; c.threshold = 8'h08; c.r = 1;
    run("zero seed", c, GEN_RANDOM_EXT, 8'h90, 3000);

    // Register write/read-back through the pins.
    for (int a = 0; a < 16; a++) begin
      logic [7:0] d = 8'($urandom);
      if (a == 0) d[0] = 0;
      wr(7'(a), d);
      rd(7'(a), rb);
      if (a != 7) check(rb == d, $sformatf("write/read register %h", a));
    end

    // Every mechanism must have happened.
    begin
      int cnt [string];
      cnt["spike"] = n_spike; cnt["refractory hold"] = n_ref_hold; cnt["leak"] = n_leak;
      cnt["stochastic integration"] = n_stoch_int; cnt["external-spike integration"] = n_ext_int;
      cnt["free-run integration"] = n_free_int; cnt["host integration"] = n_host_int;
      cnt["mode switch"] = n_mode_switch; cnt["zero reseed"] = n_zero_reseed;
      cnt["seed load"] = n_seed_load; cnt["accumulator reset"] = n_acc_reset;
      cnt["disable"] = n_disable; cnt["63-state cycle"] = n_period63;
      cnt["SPI write"] = n_spi_write; cnt["SPI read"] = n_spi_read;
      foreach (cnt[k]) begin
        $display("mechanism %-28s %0d", k, cnt[k]);
        check(cnt[k] > 0, $sformatf("mechanism '%s' never happened", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
