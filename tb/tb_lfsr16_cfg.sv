// tb_lfsr16_cfg: self-checking testbench of the configurable LFSR.
//
// A reference step function written here (parity of state & poly shifted in
// at bit 0, zero state replaced by 1) is run beside the DUT for random
// polynomials and seeds. Directed checks: reset state, seed load, the zero
// reseed, hold with en low, and the period of three polynomials: 0x002D
// (10-state transient from seed 1, then a 63-state cycle) and the maximal
// polynomials 0xB400 and 0xD008 (65535 states), counted in clock cycles.
module tb_lfsr16_cfg;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        en = 1'b0, load = 1'b0;
  logic [15:0] seed = '0, poly = 16'h002D;
  logic [15:0] state;
  int checks = 0, failures = 0;

  lfsr16_cfg dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] ref_step(logic [15:0] s, logic [15:0] p);
    logic f = 1'b0;
    if (s == 16'd0) return 16'd1;
    for (int i = 0; i < 16; i++) f ^= s[i] & p[i];
    return {s[14:0], f};
  endfunction

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (state=%h)", what, state);
    end
  endtask

  task automatic do_load(input logic [15:0] s);
    @(negedge clk); load = 1'b1; seed = s;
    @(negedge clk); load = 1'b0;
  endtask

  // Period of the sequence starting at `s0`: length of the tail and the cycle.
  task automatic measure(input logic [15:0] p, input logic [15:0] s0,
                         output int tail, output int cycle);
    logic [15:0] target;
    int n;
    poly = p;
    do_load(s0);
    en = 1'b1;
    // skip a long enough prefix to be on the cycle (tails are short here)
    repeat (64) @(negedge clk);
    target = state;
    n = 0;
    do begin @(negedge clk); n++; end while (state != target && n < 70000);
    cycle = n;
    // tail: steps from s0 until the state is on the cycle
    en = 1'b0;
    tail = 0;
    begin
      logic [15:0] a = s0;
      while (1) begin
        logic [15:0] b = target;
        bit on_cycle = 0;
        for (int k = 0; k < cycle && k < 128; k++) begin
          if (a == b) on_cycle = 1;
          b = ref_step(b, p);
        end
        if (on_cycle || tail > 100) break;
        a = ref_step(a, p);
        tail++;
      end
    end
  endtask

  initial begin
    logic [15:0] expect_s;
    int tail, cycle;
    repeat (2) @(negedge clk);
    check(state == 16'h0001, "reset state is 0x0001");
    rst_n = 1'b1;

    // Reset polynomial 0x002D from seed 1: compare 200 steps with the model.
    en = 1'b1;
    expect_s = 16'h0001;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      expect_s = ref_step(expect_s, 16'h002D);
      check(state == expect_s, "default polynomial sequence");
    end

    // Hold with en low.
    en = 1'b0;
    expect_s = state;
    repeat (5) @(negedge clk);
    check(state == expect_s, "hold while en is low");

    // Random polynomials and seeds.
    for (int trial = 0; trial < 40; trial++) begin
      poly = 16'($urandom);
      do_load(16'($urandom));
      check(state == seed, "seed load");
      en = 1'b1;
      expect_s = state;
      for (int i = 0; i < 100; i++) begin
        @(negedge clk);
        expect_s = ref_step(expect_s, poly);
        check(state == expect_s, "random polynomial sequence");
      end
      en = 1'b0;
    end

    // Zero state is reseeded to 1.
    poly = 16'hB400;
    do_load(16'h0000);
    check(state == 16'h0000, "zero seed loads");
    en = 1'b1; @(negedge clk); en = 1'b0;
    check(state == 16'h0001, "zero state reseeds to 1");

    // Load has priority over stepping.
    @(negedge clk); en = 1'b1; load = 1'b1; seed = 16'h1234;
    @(negedge clk); load = 1'b0; en = 1'b0;
    check(state == 16'h1234, "load wins over en");

    // Periods (cycle counts).
    measure(16'h002D, 16'h0001, tail, cycle);
    check(cycle == 63, $sformatf("0x002D period 63 (got %0d)", cycle));
    check(tail == 10,  $sformatf("0x002D transient 10 from seed 1 (got %0d)", tail));
    measure(16'hB400, 16'h0001, tail, cycle);
    check(cycle == 65535, $sformatf("0xB400 period 65535 (got %0d)", cycle));
    measure(16'hD008, 16'hACE1, tail, cycle);
    check(cycle == 65535, $sformatf("0xD008 period 65535 (got %0d)", cycle));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
