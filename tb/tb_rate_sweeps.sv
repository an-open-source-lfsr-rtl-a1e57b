// tb_rate_sweeps: rate-coding sweeps of the whole neuron through its pins.
//
// Polynomial 0xB400, reset activation table, decay 4. Spikes on uo_out[0] are
// counted over a fixed window after each reconfiguration (accumulator reset
// then enable):
//   - weight sweep, host mode, threshold 0x80, weights 0..15, 200000 cycles
//     each: no spikes below weight 4 (the leak of 4 per idle cycle wins),
//     non-decreasing with weight, about 0.2 spikes per 1000 cycles at 15;
//   - threshold sweep, free-run, thresholds 0x10..0xF0, 40000 cycles each:
//     strictly decreasing, about 25 per 1000 at 0x10 and 1.8 per 1000 at 0xF0;
//   - refractory sweep, external spike every cycle, threshold 0: exactly one
//     spike per r+1 cycles for r = 0..7.
// The reference numbers are the published sweep results for this neuron.
module tb_rate_sweeps;
  timeunit 1ns; timeprecision 1ps;

  logic [7:0] ui_in = 8'h00;
  logic [7:0] uo_out, uio_in, uio_out, uio_oe;
  logic       ena = 1'b1, clk = 1'b0, rst_n = 1'b0;
  logic       sclk = 0, cs_n = 1, mosi = 0;
  int checks = 0, failures = 0;

  assign uio_in = {4'b0, sclk, 1'b0, mosi, cs_n};

  tt_um_santhosh_stoch_neuron dut (.*);

  always #10 clk = ~clk;

  initial begin : watchdog
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic half();
    repeat (5) @(negedge clk);
  endtask

  task automatic wr(input logic [6:0] a, input logic [7:0] d);
    logic [15:0] w = {1'b1, a, d};
    cs_n = 0; half();
    for (int i = 15; i >= 0; i--) begin
      mosi = w[i]; half(); sclk = 1; half(); sclk = 0;
    end
    half(); cs_n = 1; half();
  endtask

  // Reset the accumulator, enable with refractory r, count spikes.
  task automatic count_spikes(input logic [2:0] r, input int cycles, output int spikes);
    wr(7'h00, {r, 5'b00010});
    wr(7'h00, {r, 5'b00001});
    spikes = 0;
    repeat (cycles) begin
      @(negedge clk);
      spikes += int'(uo_out[0]);
    end
  endtask

  initial begin
    int wspk [16];
    int tspk [15];
    int n;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(7'h01, 8'h00); wr(7'h02, 8'hB4);          // polynomial 0xB400
    wr(7'h03, 8'hE1); wr(7'h04, 8'hAC);          // seed 0xACE1
    wr(7'h06, 8'd4);                             // decay 4

    // Weight sweep, host mode.
    wr(7'h05, 8'h80);
    for (int w = 0; w < 16; w++) begin
      ui_in = {4'(w), 4'b0000};
      count_spikes(3'd0, 200000, wspk[w]);
      $display("weight %2d: %0d spikes, %.3f per 1000 cycles", w, wspk[w], wspk[w] / 200.0);
    end
    for (int w = 0; w < 4; w++) check(wspk[w] == 0, $sformatf("weight %0d silent", w));
    for (int w = 1; w < 16; w++) check(wspk[w] >= wspk[w - 1], $sformatf("weight %0d not below weight %0d", w, w - 1));
    check(wspk[15] >= 30 && wspk[15] <= 50, "weight 15 near 0.2 per 1000 cycles");
    check(wspk[4] > 0 && wspk[4] < 8, "weight 4 fires rarely");

    // Threshold sweep, free-run.
    ui_in = 8'h02;
    for (int t = 0; t < 15; t++) begin
      wr(7'h05, 8'(16 * (t + 1)));
      count_spikes(3'd0, 40000, tspk[t]);
      $display("threshold 0x%02h: %0d spikes, %.2f per 1000 cycles", 16 * (t + 1), tspk[t], tspk[t] / 40.0);
    end
    for (int t = 1; t < 15; t++) check(tspk[t] < tspk[t - 1], $sformatf("threshold step %0d decreases rate", t));
    check(tspk[0] >= 0.9 * 25.2 * 40 && tspk[0] <= 1.1 * 25.2 * 40, "threshold 0x10 near 25.2 per 1000");
    check(tspk[14] >= 0.8 * 1.8 * 40 && tspk[14] <= 1.2 * 1.8 * 40, "threshold 0xF0 near 1.8 per 1000");

    // Refractory sweep.
    wr(7'h05, 8'h00);
    ui_in = 8'h03;
    for (int r = 0; r < 8; r++) begin
      count_spikes(3'(r), 1000, n);
      $display("refractory %0d: %0d spikes per 1000 cycles (1000/(r+1) = %.1f)", r, n, 1000.0 / (r + 1));
      check(n >= 1000 / (r + 1) - 1 && n <= 1000 / (r + 1) + 1, $sformatf("refractory %0d cap", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
