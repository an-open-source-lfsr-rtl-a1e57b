// stoch_neuron_pkg: types and constants shared by the stochastic LIF neuron.
//
// Holds the serial register map (sixteen single-byte registers at addresses
// 0x00..0x0F), the field layout of CTRL and STATUS, the reset value of every
// register, and the structs that carry a register request and the decoded
// configuration between modules.
//
// From the published register map: the addresses, the CTRL fields (enable,
// accumulator reset, free-run, refractory period in [7:5]), the default
// polynomial 0x002D and the default activation table 16, 32, 64, 128, 192,
// 224, 240, 248. Choices of this design: the reset seed 0x0001 (a seed that
// reaches the 63-state cycle of 0x002D after a 10-state transient, as the
// published default does), the reset threshold 0x80, decay 4 and CTRL 0x01
// (enabled), and the STATUS bit positions.
package stoch_neuron_pkg;

  localparam int unsigned ADDR_W  = 7;   // address bits in a serial frame
  localparam int unsigned DATA_W  = 8;   // every register is one byte
  localparam int unsigned NREGS   = 16;
  localparam int unsigned LFSR_W  = 16;
  localparam int unsigned V_W     = 16;  // membrane width
  localparam int unsigned REF_W   = 3;   // refractory period 0..7
  localparam int unsigned LUT_N   = 8;   // activation table entries
  localparam int unsigned WEIGHT_W = 4;  // host-mode weight on ui_in[7:4]

  // Register addresses.
  typedef enum logic [ADDR_W-1:0] {
    A_CTRL      = 7'h00,
    A_POLY_L    = 7'h01,
    A_POLY_H    = 7'h02,
    A_SEED_L    = 7'h03,
    A_SEED_H    = 7'h04,
    A_THRESHOLD = 7'h05,
    A_DECAY     = 7'h06,
    A_STATUS    = 7'h07,
    A_LUT0      = 7'h08   // LUT0..LUT7 at 0x08..0x0F
  } reg_addr_e;

  // CTRL register, address 0x00.
  typedef struct packed {
    logic [2:0] refractory;  // [7:5] refractory period r
    logic [1:0] reserved;    // [4:3]
    logic       free_run;    // [2]   stored only; the mode comes from ui_in[1]
    logic       acc_reset;   // [1]   level: hold membrane and flags cleared
    logic       enable;      // [0]
  } ctrl_t;

  // STATUS register, address 0x07 (read-only).
  typedef struct packed {
    logic [2:0] ref_count;     // [7:5] live refractory counter
    logic       ref_busy;      // [4]
    logic       membrane_msb;  // [3]
    logic       spike_latched; // [2]
    logic       overflow;      // [1]
    logic       spike;         // [0]
  } status_t;

  // One register write, issued by the serial slave for one clock cycle.
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } reg_req_t;

  // Decoded configuration seen by the datapath.
  typedef struct packed {
    ctrl_t                 ctrl;
    logic [LFSR_W-1:0]     poly;
    logic [LFSR_W-1:0]     seed;
    logic [7:0]            threshold;
    logic [7:0]            decay;
    logic [LUT_N-1:0][7:0] lut;      // lut[i] = LUTi
  } neuron_cfg_t;

  // Reset values.
  localparam logic [7:0]        CTRL_DEFAULT      = 8'h01;
  localparam logic [LFSR_W-1:0] POLY_DEFAULT      = 16'h002D;
  localparam logic [LFSR_W-1:0] SEED_DEFAULT      = 16'h0001;
  localparam logic [7:0]        THRESHOLD_DEFAULT = 8'h80;
  localparam logic [7:0]        DECAY_DEFAULT     = 8'h04;
  localparam logic [LUT_N-1:0][7:0] LUT_DEFAULT   =
    {8'd248, 8'd240, 8'd224, 8'd192, 8'd128, 8'd64, 8'd32, 8'd16};

endpackage
