// tb_spi_slave: self-checking testbench of the serial slave.
//
// A mode-0 SPI master here sends 16-bit frames (R/W, A6..A0, D7..D0, MSB
// first) at SCLK = clk/10. A memory of 128 bytes here answers rd_addr. Write
// frames must produce exactly one req.we pulse with the sent address and
// data; read frames must return the addressed byte on MISO, sampled by the
// master on SCLK rising edges. A frame cut short by CS must do nothing and
// the next frame must still decode.
module tb_spi_slave;
  timeunit 1ns; timeprecision 1ps;
  import stoch_neuron_pkg::*;
  logic       clk = 1'b0, rst_n = 1'b0;
  logic       sclk = 1'b0, cs_n = 1'b1, mosi = 1'b0;
  logic       miso;
  reg_req_t   req;
  logic [6:0] rd_addr;
  logic [7:0] rd_data;
  int checks = 0, failures = 0;

  logic [7:0] mem [128];
  assign rd_data = mem[rd_addr];

  spi_slave dut (.*);
  always #10 clk = ~clk;            // 50 MHz

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam time HALF = 100ns;     // SCLK 5 MHz

  // One frame; `nbits` < 16 aborts it early.
  task automatic frame(input logic rw, input logic [6:0] a, input logic [7:0] d,
                       output logic [7:0] rx, input int nbits = 16);
    logic [15:0] word = {rw, a, d};
    rx = '0;
    cs_n = 0; #(HALF);
    for (int i = 15; i >= 16 - nbits; i--) begin
      mosi = word[i];
      #(HALF); sclk = 1;
      if (i < 8) rx[i] = miso;
      #(HALF); sclk = 0;
    end
    #(HALF); cs_n = 1; #(4 * HALF);
  endtask

  int we_count = 0;
  reg_req_t last_req;
  always @(posedge clk) if (req.we) begin we_count++; last_req <= req; end

  initial begin
    logic [7:0] rx;
    for (int i = 0; i < 128; i++) mem[i] = 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    check(miso == 0 && req.we == 0, "idle outputs");

    for (int t = 0; t < 60; t++) begin
      automatic logic [6:0] a = 7'($urandom);
      automatic logic [7:0] d = 8'($urandom);
      automatic int n0 = we_count;
      if (t % 2 == 0) begin
        frame(1'b1, a, d, rx);
        check(we_count == n0 + 1, "one write strobe per write frame");
        check(last_req.addr == a && last_req.wdata == d,
              $sformatf("write addr %h data %h, got %h %h", a, d, last_req.addr, last_req.wdata));
      end else begin
        frame(1'b0, a, d, rx);
        check(we_count == n0, "no write strobe on a read frame");
        check(rx == mem[a], $sformatf("read addr %h got %h want %h", a, rx, mem[a]));
      end
    end

    // Aborted frames.
    begin
      automatic int n0 = we_count;
      frame(1'b1, 7'h05, 8'hAA, rx, 12);
      frame(1'b1, 7'h06, 8'h55, rx, 15);
      check(we_count == n0, "aborted frames write nothing");
      frame(1'b1, 7'h11, 8'h3C, rx);
      check(we_count == n0 + 1 && last_req.addr == 7'h11 && last_req.wdata == 8'h3C,
            "frame after an aborted one");
      frame(1'b0, 7'h11, 8'h00, rx);
      check(rx == mem[7'h11], "read after an aborted frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
