// tb_neuron_regfile: self-checking testbench of the sixteen-register file.
// Checks the reset value of every register, write and read-back through a
// shadow copy kept here, the decoded configuration fields, that STATUS is
// read-only and reflects the live status input, that addresses 0x10..0x7F
// read 0 and ignore writes, and the one-cycle seed_load pulse after a write
// to SEED_L or SEED_H (and only then).
module tb_neuron_regfile;
  import stoch_neuron_pkg::*;
  logic              clk = 1'b0, rst_n = 1'b0;
  reg_req_t          req = '0;
  logic [6:0]        rd_addr = '0;
  logic [7:0]        rd_data;
  status_t           status = '0;
  neuron_cfg_t       cfg;
  logic              seed_load;
  int checks = 0, failures = 0;

  neuron_regfile dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] shadow [16] = '{8'h01, 8'h2D, 8'h00, 8'h01, 8'h00, 8'h80, 8'h04, 8'h00,
                              8'd16, 8'd32, 8'd64, 8'd128, 8'd192, 8'd224, 8'd240, 8'd248};

  task automatic write(input logic [6:0] a, input logic [7:0] d);
    @(negedge clk); req.we = 1; req.addr = a; req.wdata = d;
    @(negedge clk); req.we = 0;
    if (a < 16 && a != 7) shadow[a] = d;
  endtask

  task automatic read_check(input logic [6:0] a, input string what);
    rd_addr = a; #1;
    check(rd_data == ((a < 16 && a != 7) ? shadow[a] : 8'h00),
          $sformatf("%s: addr %h read %h want %h", what, a, rd_data, (a < 16) ? shadow[a] : 8'h00));
  endtask

  task automatic cfg_check();
    check(cfg.ctrl == shadow[0] && cfg.poly == {shadow[2], shadow[1]} &&
          cfg.seed == {shadow[4], shadow[3]} && cfg.threshold == shadow[5] &&
          cfg.decay == shadow[6], "decoded configuration");
    for (int i = 0; i < 8; i++) check(cfg.lut[i] == shadow[8 + i], $sformatf("lut[%0d]", i));
  endtask

  int pulses = 0;
  always @(posedge clk) if (seed_load) pulses++;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 16; a++) read_check(7'(a), "reset value");
    cfg_check();
    check(cfg.ctrl.enable && !cfg.ctrl.acc_reset && cfg.ctrl.refractory == 0, "CTRL fields");

    // Random writes everywhere, including STATUS and unused addresses.
    for (int i = 0; i < 300; i++) begin
      automatic logic [6:0] a = ($urandom % 4 == 0) ? 7'($urandom) : 7'($urandom % 16);
      automatic int n0 = pulses;
      write(a, 8'($urandom));
      @(negedge clk);
      check((pulses - n0) == ((a == 3 || a == 4) ? 1 : 0), $sformatf("seed_load pulses after write to %h", a));
      read_check(a, "after write");
    end
    for (int a = 0; a < 128; a++) read_check(7'(a), "final sweep");
    cfg_check();

    // STATUS follows its input.
    for (int i = 0; i < 20; i++) begin
      status = status_t'($urandom);
      rd_addr = 7'h07; #1;
      check(rd_data == status, "STATUS read");
    end

    // Reset restores defaults.
    rst_n = 0; #1; rst_n = 1;
    rd_addr = 7'h01; #1; check(rd_data == 8'h2D, "POLY_L after reset");
    rd_addr = 7'h0F; #1; check(rd_data == 8'd248, "LUT7 after reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
