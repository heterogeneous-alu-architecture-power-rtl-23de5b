// power_governor -- energy-aware configuration controller of the
// heterogeneous ALU core.
//
// What it does: decides which adders are powered and how ADDs are routed,
// from the energy level the supply reports:
//   * 100 % (E_FULL): heterogeneous configuration, every adder powered, each
//     ADD on the adder matching its operand size. The system may instead ask
//     for a homogeneous configuration (homo_req, homo_idx): then only that
//     adder is powered and takes every ADD.
//   * 50 % and 25 % (E_HALF, E_QUARTER): every ADD goes to the reduced-energy
//     adder (REDUCED_IDX, the 8-bit adder by default) and all other adders
//     are powered off. The energy level overrides homo_req. An unused
//     encoding counts as 25 %.
//
// How: the requested configuration is computed combinationally; the active
// one (cfg) is a register that takes the request only while the core is idle,
// so no adder is switched off under an ADD in flight. While the two differ,
// switch_pending is high and the core holds off new ADDs; mode_switch pulses
// on the cycle after the active configuration changed.
//
// Interface: energy_lvl, homo_req, homo_idx and idle in; cfg, pwr_en (one bit
// per adder), switch_pending and mode_switch out.
// Timing: a request made while idle takes effect at the next clock edge.
//
// From the paper: the three energy levels, heterogeneous routing at full
// energy and moving all work to the 8-bit adder at 50 % and 25 %, powering
// unused adders off, and governor-chosen homogeneous configurations. This
// design's own choices: the request ports, deferring a switch until idle,
// and the reset state (heterogeneous).
module power_governor
  import halu_pkg::*;
#(
  parameter int unsigned N_ADDERS    = DEF_N_ADDERS,
  parameter int unsigned REDUCED_IDX = DEF_REDUCED_IDX
) (
  input  logic                clk,
  input  logic                rst_n,
  input  energy_lvl_e         energy_lvl,
  input  logic                homo_req,
  input  logic [IDX_W-1:0]    homo_idx,
  input  logic                idle,
  output alu_cfg_t            cfg,
  output logic [N_ADDERS-1:0] pwr_en,
  output logic                switch_pending,
  output logic                mode_switch
);

  alu_cfg_t req;

  always_comb begin
    if (energy_lvl == E_FULL) begin
      if (homo_req && homo_idx < IDX_W'(N_ADDERS)) begin
        req.hetero = 1'b0;
        req.idx    = homo_idx;
      end else begin
        req.hetero = 1'b1;
        req.idx    = '0;
      end
    end else begin
      req.hetero = 1'b0;
      req.idx    = IDX_W'(REDUCED_IDX);
    end
  end

  assign switch_pending = (req != cfg);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg         <= '{hetero: 1'b1, idx: '0};
      mode_switch <= 1'b0;
    end else begin
      mode_switch <= 1'b0;
      if (idle && switch_pending) begin
        cfg         <= req;
        mode_switch <= 1'b1;
      end
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < N_ADDERS; i++)
      pwr_en[i] = cfg.hetero || (cfg.idx == IDX_W'(i));
  end

  initial begin
    if (REDUCED_IDX >= N_ADDERS) $error("REDUCED_IDX out of range");
  end

endmodule
