// spi_slave: serial configuration port of the neuron (SPI mode 0, MSB first).
//
// A frame is 16 bits while cs_n is low: one R/W bit (1 = write, 0 = read),
// seven address bits A6..A0, then eight data bits D7..D0. MOSI is sampled on
// SCLK rising edges and MISO changes on SCLK falling edges.
//
// SCLK, MOSI and CS are asynchronous to the system clock; each passes a
// two-flop synchroniser and SCLK edges are detected in the clock domain, so
// SCLK must stay below about clk/8 (6.25 MHz at 50 MHz). After the 8th rising
// edge the address is held on `rd_addr`; on the following falling edge the
// addressed register (`rd_data`) is copied into the transmit shifter and its
// bits leave on MISO, D7 first, during the data phase of a read. MISO is 0
// otherwise. After the 16th rising edge of a write frame `req.we` pulses for
// one clock with the address and data. Raising cs_n aborts a frame; with cs_n
// held low, frames follow back to back.
//
// The frame format and SPI mode follow the published design; the R/W
// polarity, the oversampling structure and the read timing are choices of
// this design. Asynchronous active-low reset; the simulation-only assertion at
// the end also uses rst_n in its disable condition, which lint reports as a
// reset used both asynchronously and synchronously.
module spi_slave
  import stoch_neuron_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sclk,
  input  logic              cs_n,
  input  logic              mosi,
  output logic              miso,
  output reg_req_t          req,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic [DATA_W-1:0] rd_data
);

  logic [1:0] sclk_sync, cs_sync, mosi_sync;
  logic       sclk_prev;
  logic       sclk_rise, sclk_fall, selected, mosi_s;

  logic [6:0]  shift_in;    // last seven bits received
  logic [3:0]  bit_cnt;     // number of bits received in this frame, mod 16
  logic        rw_q;        // 1 = write
  logic [DATA_W-1:0] tx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_sync <= '0;
      cs_sync   <= '1;
      mosi_sync <= '0;
      sclk_prev <= 1'b0;
    end else begin
      sclk_sync <= {sclk_sync[0], sclk};
      cs_sync   <= {cs_sync[0], cs_n};
      mosi_sync <= {mosi_sync[0], mosi};
      sclk_prev <= sclk_sync[1];
    end
  end

  assign selected  = ~cs_sync[1];
  assign mosi_s    = mosi_sync[1];
  assign sclk_rise =  sclk_sync[1] & ~sclk_prev;
  assign sclk_fall = ~sclk_sync[1] &  sclk_prev;
  assign miso      = tx[DATA_W-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shift_in <= '0;
      bit_cnt  <= '0;
      rw_q     <= 1'b0;
      rd_addr  <= '0;
      tx       <= '0;
      req      <= '0;
    end else begin
      req.we <= 1'b0;
      if (!selected) begin
        bit_cnt <= '0;
        tx      <= '0;
      end else begin
        if (sclk_rise) begin
          shift_in <= {shift_in[5:0], mosi_s};
          bit_cnt  <= bit_cnt + 4'd1;
          if (bit_cnt == 4'd7) begin
            rw_q    <= shift_in[6];
            rd_addr <= {shift_in[5:0], mosi_s};
          end
          if (bit_cnt == 4'd15 && rw_q) begin
            req.we    <= 1'b1;
            req.addr  <= rd_addr;
            req.wdata <= {shift_in[6:0], mosi_s};
          end
        end
        if (sclk_fall) begin
          if (bit_cnt == 4'd8 && !rw_q) tx <= rd_data;
          else                          tx <= {tx[DATA_W-2:0], 1'b0};
        end
      end
    end
  end

  // A write request lasts exactly one clock cycle.
  assert property (@(posedge clk) disable iff (!rst_n) req.we |=> !req.we)
    else $error("spi_slave: write strobe longer than one cycle");

endmodule
