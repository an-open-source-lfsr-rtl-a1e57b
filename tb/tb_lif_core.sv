// tb_lif_core: self-checking testbench of the LIF core.
//
// A cycle-level reference model of the membrane equation is kept here:
//   refractory: hold; v[15:8] >= threshold: spike, v = 0, counter = r;
//   event (stochastic OR external): v = min(v + I, 0xFFFF), overflow on carry;
//   else v = max(v - d, 0).
// Random stimulus is compared with the model every cycle. Directed parts: the
// refractory cap (threshold 0, an event every cycle, r = 0..7 gives exactly
// one spike per r+1 cycles), saturation with a large current, decay to zero,
// accumulator reset and enable.
module tb_lif_core;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic        en = 1'b1, acc_reset = 1'b0;
  logic        stoch_fire = 1'b0, ext_spike = 1'b0;
  logic [15:0] current = '0;
  logic [7:0]  decay = '0, threshold = 8'hFF;
  logic [2:0]  refractory = '0;
  logic        spike, overflow, spike_latched, ref_busy;
  logic [15:0] membrane;
  logic [2:0]  ref_count;
  int checks = 0, failures = 0;
  int n_sat = 0, n_spike = 0, n_ref = 0, n_leak = 0;

  lif_core dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  logic [15:0] m_v = '0;
  logic [2:0]  m_r = '0;
  logic        m_spk = 0, m_ovf = 0, m_lat = 0;

  task automatic model_step();
    logic [16:0] s;
    if (acc_reset) begin
      m_v = 0; m_r = 0; m_spk = 0; m_ovf = 0; m_lat = 0;
    end else if (!en) begin
      m_spk = 0;
    end else if (m_r != 0) begin
      m_r--; m_spk = 0; n_ref++;
    end else if (m_v[15:8] >= threshold) begin
      m_spk = 1; m_v = 0; m_r = refractory; m_lat = 1; n_spike++;
    end else begin
      m_spk = 0;
      if (stoch_fire || ext_spike) begin
        s = {1'b0, m_v} + {1'b0, current};
        if (s[16]) begin m_v = 16'hFFFF; m_ovf = 1; n_sat++; end
        else m_v = s[15:0];
      end else begin
        m_v = (m_v > 16'(decay)) ? m_v - 16'(decay) : 16'd0;
        n_leak++;
      end
    end
  endtask

  // Drive inputs at the negedge, let the model take the same edge.
  task automatic cycle_check();
    @(posedge clk);
    model_step();
    @(negedge clk);
    checks++;
    if (membrane !== m_v || spike !== m_spk || ref_count !== m_r ||
        overflow !== m_ovf || spike_latched !== m_lat || ref_busy !== (m_r != 0)) begin
      failures++;
      if (failures < 10)
        $display("FAIL t=%0t: v=%h/%h spike=%b/%b ref=%0d/%0d ovf=%b/%b lat=%b/%b", $time,
                 membrane, m_v, spike, m_spk, ref_count, m_r, overflow, m_ovf, spike_latched, m_lat);
    end
  endtask

  initial begin
    int spikes;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // Random operation.
    for (int i = 0; i < 20000; i++) begin
      stoch_fire = ($urandom % 100) < 60;
      ext_spike  = ($urandom % 100) < 5;
      current    = (($urandom % 50) == 0) ? 16'($urandom) : 16'($urandom % 256);
      decay      = 8'($urandom % 16);
      if (i % 2000 == 0) begin
        threshold  = 8'($urandom);
        refractory = 3'($urandom);
      end
      en        = ($urandom % 50) != 0;
      acc_reset = ($urandom % 1000) == 0;
      cycle_check();
    end

    // Refractory cap: threshold 0 and an event every cycle.
    en = 1; acc_reset = 0; threshold = 0; ext_spike = 1; stoch_fire = 0; current = 16'd1;
    for (int r = 0; r < 8; r++) begin
      refractory = 3'(r);
      acc_reset = 1; cycle_check(); acc_reset = 0;
      spikes = 0;
      for (int c = 0; c < 8 * 9 * 5; c++) begin
        cycle_check();
        if (spike) spikes++;
      end
      checks++;
      // the first spike comes in the first cycle, so ceil(360 / (r+1))
      if (spikes != (360 + r) / (r + 1)) begin
        failures++;
        $display("FAIL: r=%0d gave %0d spikes in 360 cycles, want %0d", r, spikes, (360 + r) / (r + 1));
      end
    end

    // Saturation: large current, threshold out of reach is impossible with
    // an 8-bit threshold, so use a current that jumps past full scale.
    refractory = 0; threshold = 8'hFF; ext_spike = 1;
    acc_reset = 1; cycle_check(); acc_reset = 0;
    current = 16'hF000; cycle_check();
    current = 16'h2000; cycle_check();
    checks++;
    if (!(membrane == 16'hFFFF && overflow)) begin
      failures++; $display("FAIL: saturation v=%h ovf=%b", membrane, overflow);
    end
    cycle_check();     // spikes now
    // Decay to zero floor.
    ext_spike = 0; decay = 8'd200; current = 16'h0300;
    acc_reset = 1; cycle_check(); acc_reset = 0;
    ext_spike = 1; cycle_check(); ext_spike = 0;
    repeat (6) cycle_check();
    checks++;
    if (membrane != 0) begin failures++; $display("FAIL: leak floor v=%h", membrane); end

    checks++;
    if (n_sat == 0 || n_spike == 0 || n_ref == 0 || n_leak == 0) begin
      failures++;
      $display("FAIL: mechanism not exercised sat=%0d spike=%0d ref=%0d leak=%0d", n_sat, n_spike, n_ref, n_leak);
    end
    $display("saturations=%0d spikes=%0d refractory cycles=%0d leak cycles=%0d", n_sat, n_spike, n_ref, n_leak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
