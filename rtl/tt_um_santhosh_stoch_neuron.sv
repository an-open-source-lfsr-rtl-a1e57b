// tt_um_santhosh_stoch_neuron: stochastic leaky integrate-and-fire neuron on
// one Tiny Tapeout tile.
//
// Datapath: a configurable 16-bit LFSR steps every enabled cycle; its top
// three bits pick an activation a from an eight-entry table and its low byte
// is compared with a, giving a stochastic event with probability a/256. The
// event (or an external spike) adds the input current to a saturating 16-bit
// membrane, which otherwise leaks by the programmed decay. A spike is emitted
// when membrane[15:8] >= threshold; the membrane then resets and a 0..7 cycle
// refractory counter blocks integration and firing. The input current is the
// activation itself in free-run mode or the 4-bit weight on ui_in[7:4] in
// host mode. Everything else is set through sixteen registers behind a
// mode-0 SPI port.
//
// Pins (Tiny Tapeout harness):
//   ui_in[0]   external spike          ui_in[1]   1 = free-run, 0 = host
//   ui_in[7:4] host-mode weight        ui_in[3:2] unused
//   uo_out[0]  spike                   uo_out[1]  LFSR MSB (randomness monitor)
//   uo_out[5:2] membrane[15:12]        uo_out[6]  overflow flag
//   uo_out[7]  latched-spike flag
//   uio[0] CS_n (in), uio[1] MOSI (in), uio[2] MISO (out), uio[3] SCLK (in)
// Clock 50 MHz, asynchronous active-low reset; `ena` is not used.
//
// The blocks, the mode pin ui_in[1], the weight pins ui_in[7:4] and the set of
// observed signals follow the published design. The other pin positions, the
// SPI pins and the output ordering are choices of this design.
module tt_um_santhosh_stoch_neuron
  import stoch_neuron_pkg::*;
(
  input  logic [7:0] ui_in,
  output logic [7:0] uo_out,
  input  logic [7:0] uio_in,
  output logic [7:0] uio_out,
  output logic [7:0] uio_oe,
  input  logic       ena,
  input  logic       clk,
  input  logic       rst_n
);

  reg_req_t          req;
  logic [ADDR_W-1:0] rd_addr;
  logic [DATA_W-1:0] rd_data;
  neuron_cfg_t       cfg;
  status_t           status;
  logic              seed_load;
  logic              miso;

  logic [LFSR_W-1:0] lfsr_state;
  logic [7:0]        activation;
  logic              stoch_fire;
  logic [V_W-1:0]    current;
  logic              spike, overflow, spike_latched, ref_busy;
  logic [V_W-1:0]    membrane;
  logic [REF_W-1:0]  ref_count;

  logic unused;
  assign unused = &{1'b0, ena, ui_in[3:2], uio_in[7:4], uio_in[2]};

  spi_slave u_spi (
    .clk     (clk),
    .rst_n   (rst_n),
    .sclk    (uio_in[3]),
    .cs_n    (uio_in[0]),
    .mosi    (uio_in[1]),
    .miso    (miso),
    .req     (req),
    .rd_addr (rd_addr),
    .rd_data (rd_data)
  );

  neuron_regfile u_regs (
    .clk       (clk),
    .rst_n     (rst_n),
    .req       (req),
    .rd_addr   (rd_addr),
    .rd_data   (rd_data),
    .status    (status),
    .cfg       (cfg),
    .seed_load (seed_load)
  );

  lfsr16_cfg #(.WIDTH(LFSR_W), .RESET_SEED(SEED_DEFAULT)) u_lfsr (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (cfg.ctrl.enable),
    .load  (seed_load),
    .seed  (cfg.seed),
    .poly  (cfg.poly),
    .state (lfsr_state)
  );

  stoch_activation u_act (
    .lfsr_state (lfsr_state),
    .lut        (cfg.lut),
    .activation (activation),
    .stoch_fire (stoch_fire)
  );

  input_current_mux u_mux (
    .free_run   (ui_in[1]),
    .activation (activation),
    .weight     (ui_in[7:4]),
    .current    (current)
  );

  lif_core u_lif (
    .clk           (clk),
    .rst_n         (rst_n),
    .en            (cfg.ctrl.enable),
    .acc_reset     (cfg.ctrl.acc_reset),
    .stoch_fire    (stoch_fire),
    .ext_spike     (ui_in[0]),
    .current       (current),
    .decay         (cfg.decay),
    .threshold     (cfg.threshold),
    .refractory    (cfg.ctrl.refractory),
    .spike         (spike),
    .membrane      (membrane),
    .overflow      (overflow),
    .spike_latched (spike_latched),
    .ref_count     (ref_count),
    .ref_busy      (ref_busy)
  );

  always_comb begin
    status.ref_count     = ref_count;
    status.ref_busy      = ref_busy;
    status.membrane_msb  = membrane[V_W-1];
    status.spike_latched = spike_latched;
    status.overflow      = overflow;
    status.spike         = spike;
  end

  assign uo_out  = {spike_latched, overflow, membrane[V_W-1 -: 4], lfsr_state[LFSR_W-1], spike};
  assign uio_out = {5'b0, miso, 2'b0};
  assign uio_oe  = 8'b0000_0100;

endmodule
