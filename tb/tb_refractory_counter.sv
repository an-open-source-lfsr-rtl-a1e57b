// tb_refractory_counter: self-checking testbench of the refractory counter.
// For every period 0..7 the busy time after a load must be exactly that many
// cycles; clear must win over load; en low must hold the count.
module tb_refractory_counter;
  logic       clk = 1'b0, rst_n = 1'b0;
  logic       en = 1'b1, clear = 1'b0, load = 1'b0;
  logic [2:0] value = '0;
  logic [2:0] count;
  logic       busy;
  int checks = 0, failures = 0;

  refractory_counter dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (count=%0d)", what, count); end
  endtask

  initial begin
    int n;
    repeat (2) @(negedge clk);
    check(count == 0 && !busy, "reset count 0");
    rst_n = 1'b1;
    for (int r = 0; r < 8; r++) begin
      @(negedge clk); load = 1'b1; value = 3'(r);
      @(negedge clk); load = 1'b0;
      check(count == 3'(r), $sformatf("loaded %0d", r));
      n = 0;
      while (busy && n < 20) begin @(negedge clk); n++; end
      check(n == r, $sformatf("busy for %0d cycles, want %0d", n, r));
    end
    // hold with en low
    @(negedge clk); load = 1'b1; value = 3'd6;
    @(negedge clk); load = 1'b0; en = 1'b0;
    repeat (4) @(negedge clk);
    check(count == 3'd6, "hold while disabled");
    en = 1'b1; @(negedge clk);
    check(count == 3'd5, "decrement after enable");
    // clear wins over load
    clear = 1'b1; load = 1'b1; value = 3'd7;
    @(negedge clk); clear = 1'b0; load = 1'b0;
    check(count == 0 && !busy, "clear has priority");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
