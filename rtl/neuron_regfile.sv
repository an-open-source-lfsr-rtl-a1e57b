// neuron_regfile: the sixteen single-byte configuration registers.
//
//   0x00 CTRL      [0] enable, [1] accumulator reset, [2] free-run (stored,
//                  not used: the mode is the ui_in[1] pin), [7:5] refractory
//   0x01 POLY_L    0x02 POLY_H   LFSR feedback polynomial
//   0x03 SEED_L    0x04 SEED_H   LFSR seed
//   0x05 THRESHOLD compared with membrane[15:8]
//   0x06 DECAY     membrane leak per cycle
//   0x07 STATUS    read-only: [0] spike, [1] overflow, [2] latched spike,
//                  [3] membrane MSB, [4] refractory busy, [7:5] refractory count
//   0x08..0x0F     LUT0..LUT7 activation entries
//
// A write request (`req.we` for one cycle) updates the addressed register at
// the next clock edge; writes to STATUS and to addresses 0x10..0x7F are
// ignored. Reads are combinational on `rd_addr`; unused addresses read 0.
// A write to SEED_L or SEED_H raises `seed_load` for one cycle after the
// register has taken the new byte, so the LFSR restarts from the new seed.
// Asynchronous active-low reset to the defaults in stoch_neuron_pkg.
//
// The map and the defaults of the polynomial and the table follow the
// published design; the STATUS bit positions, the refractory count in
// STATUS[7:5], the other reset values and the seed reload are choices of this
// design.
module neuron_regfile
  import stoch_neuron_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  reg_req_t          req,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [DATA_W-1:0] rd_data,
  input  status_t           status,
  output neuron_cfg_t       cfg,
  output logic              seed_load
);

  logic [DATA_W-1:0] regs [NREGS];

  function automatic logic [DATA_W-1:0] reset_value(int unsigned idx);
    case (idx)
      32'(A_CTRL):      return CTRL_DEFAULT;
      32'(A_POLY_L):    return POLY_DEFAULT[7:0];
      32'(A_POLY_H):    return POLY_DEFAULT[15:8];
      32'(A_SEED_L):    return SEED_DEFAULT[7:0];
      32'(A_SEED_H):    return SEED_DEFAULT[15:8];
      32'(A_THRESHOLD): return THRESHOLD_DEFAULT;
      32'(A_DECAY):     return DECAY_DEFAULT;
      32'(A_STATUS):    return '0;
      default:          return LUT_DEFAULT[idx - 32'(A_LUT0)];
    endcase
  endfunction

  logic write_ok;
  assign write_ok = req.we && (req.addr < ADDR_W'(NREGS)) && (req.addr != A_STATUS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NREGS; i++) regs[i] <= reset_value(i);
      seed_load <= 1'b0;
    end else begin
      if (write_ok) regs[req.addr[3:0]] <= req.wdata;
      seed_load <= write_ok && (req.addr == A_SEED_L || req.addr == A_SEED_H);
    end
  end

  always_comb begin
    cfg.ctrl      = ctrl_t'(regs[4'(A_CTRL)]);
    cfg.poly      = {regs[4'(A_POLY_H)], regs[4'(A_POLY_L)]};
    cfg.seed      = {regs[4'(A_SEED_H)], regs[4'(A_SEED_L)]};
    cfg.threshold = regs[4'(A_THRESHOLD)];
    cfg.decay     = regs[4'(A_DECAY)];
    for (int unsigned i = 0; i < LUT_N; i++) cfg.lut[i] = regs[4'(32'(A_LUT0) + i)];
  end

  always_comb begin
    if (rd_addr == A_STATUS)              rd_data = status;
    else if (rd_addr < ADDR_W'(NREGS))    rd_data = regs[rd_addr[3:0]];
    else                                  rd_data = '0;
  end

endmodule
