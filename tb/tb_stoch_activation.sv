// tb_stoch_activation: self-checking testbench of the activation table and
// comparator.
//
// Exhaustive over all 65536 LFSR states for the reset table and for random
// tables: activation must equal lut[s[15:13]] and the event must be
// s[7:0] < activation. Then the firing probability per entry is counted over
// the full period of the maximal polynomial 0xB400, with the sequence produced
// by a reference LFSR here: entry a must fire 32*a times out of 8192 states
// (one fewer for entry 0, whose all-zero state never occurs), i.e. a/256.
module tb_stoch_activation;
  import stoch_neuron_pkg::*;
  logic [15:0]     lfsr_state;
  logic [7:0][7:0] lut;
  logic [7:0]      activation;
  logic            stoch_fire;
  int checks = 0, failures = 0;

  stoch_activation dut (.*);

  initial begin : watchdog
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] ref_step(logic [15:0] s, logic [15:0] p);
    logic f = ^(s & p);
    return (s == 0) ? 16'd1 : {s[14:0], f};
  endfunction

  initial begin
    int bad;
    int fires [8];
    int visits [8];
    logic [7:0] table_v [8] = '{16, 32, 64, 128, 192, 224, 240, 248};
    for (int t = 0; t < 6; t++) begin
      for (int i = 0; i < 8; i++)
        lut[i] = (t == 0) ? table_v[i] : 8'($urandom);
      bad = 0;
      for (int s = 0; s < 65536; s++) begin
        logic [7:0] a;
        lfsr_state = 16'(s);
        #1;
        a = lut[s >> 13];
        if (activation !== a || stoch_fire !== ((s & 255) < a)) bad++;
      end
      checks++;
      if (bad != 0) begin
        failures++;
        $display("FAIL: table %0d, %0d mismatching states", t, bad);
      end
    end

    // Per-entry firing counts over the full maximal-length period.
    for (int i = 0; i < 8; i++) begin lut[i] = table_v[i]; fires[i] = 0; visits[i] = 0; end
    lfsr_state = 16'h0001;
    for (int n = 0; n < 65535; n++) begin
      #1;
      visits[lfsr_state[15:13]]++;
      if (stoch_fire) fires[lfsr_state[15:13]]++;
      lfsr_state = ref_step(lfsr_state, 16'hB400);
    end
    for (int i = 0; i < 8; i++) begin
      int want;
      want = 32 * table_v[i] - ((i == 0) ? 1 : 0);
      checks++;
      if (fires[i] != want) begin
        failures++;
        $display("FAIL: entry %0d fired %0d times, want %0d", i, fires[i], want);
      end else
        $display("entry %0d: a=%0d P=%f (a/256=%f)", i, table_v[i],
                 real'(fires[i]) / visits[i], table_v[i] / 256.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
