// hetero_alu_core -- power-aware heterogeneous adder ALU core (top level).
//
// What it does: executes ADD operations O = A + B + Cin (OP_W bits, carry out
// of the top bit in cout) on a set of ripple-carry adders of different
// widths, 4, 8, 16 and 32 bits by default. Small operands run on a small,
// cheap adder; larger ones on a wider adder or in several passes on a
// narrower one. The power governor decides, from the supply energy level,
// whether ADDs are routed by operand size (heterogeneous configuration, full
// energy) or all sent to the 8-bit adder with the others powered off (50 %
// and 25 % energy), or to one adder the system asks for (homogeneous
// configuration). The sum is exact in every configuration; only latency and
// the adders that toggle change.
//
// How: unit_selector picks the adder from the larger operand's active width
// and the active configuration; the selected rc_adder_unit is started and
// the core waits for it to finish. One ADD is in flight at a time. Until the
// last cycle of the ADD in flight, and while the governor has a
// configuration change to apply, in_ready is low (the caller stalls). The
// governor applies a change only when the core is idle, which costs one
// cycle.
//
// Interface: valid/ready input (in_valid, in_ready, a, b, cin); output is a
// one-cycle out_valid pulse with o, cout and out_idx (which adder ran the
// ADD); there is no output back-pressure. energy_lvl, homo_req and homo_idx
// steer the governor; pwr_en shows which adders are powered, cfg_hetero the
// active routing mode, mode_switch pulses when the configuration changed.
//
// Timing: an ADD accepted at a clock edge raises out_valid after
// ceil(act_w / W_sel) * PASS_CYC_sel cycles, where act_w is the number of
// significant bits of the larger operand (e.g. 1 cycle for 4-bit data on the
// 4-bit adder, 8 cycles for 32-bit data on the 4-bit adder, 6 cycles for
// 64-bit data on the 32-bit adder). The next ADD can be accepted at the same
// edge that captures the previous result (one cycle before its out_valid),
// so back-to-back ADDs each occupy the core for exactly their latency.
//
// From the paper: the adder set, the per-pass cycle counts, the routing by
// operand size, the energy levels and the 8-bit reduced-energy mode. This
// design's own choices: the 64-bit operand width (so that 64-bit data run on
// the 32-bit adder in two passes), the handshake, one ADD in flight, and the
// port names.
module hetero_alu_core
  import halu_pkg::*;
#(
  parameter int unsigned OP_W        = DEF_OP_W,
  parameter int unsigned N_ADDERS    = DEF_N_ADDERS,
  parameter adder_list_t  ADDER_W     = DEF_ADDER_W,
  parameter adder_list_t  PASS_CYC    = DEF_PASS_CYC,
  parameter int unsigned REDUCED_IDX = DEF_REDUCED_IDX
) (
  input  logic                clk,
  input  logic                rst_n,
  // supply / governor
  input  energy_lvl_e         energy_lvl,
  input  logic                homo_req,
  input  logic [IDX_W-1:0]    homo_idx,
  output logic [N_ADDERS-1:0] pwr_en,
  output logic                cfg_hetero,
  output logic                mode_switch,
  // ADD request
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [OP_W-1:0]     a,
  input  logic [OP_W-1:0]     b,
  input  logic                cin,
  // ADD result
  output logic                out_valid,
  output logic [OP_W-1:0]     o,
  output logic                cout,
  output logic [IDX_W-1:0]    out_idx
);

  localparam int unsigned AW_W = $clog2(OP_W + 1);

  alu_cfg_t              cfg;
  logic                  switch_pending, idle, issue, inflight_q, any_done, any_last;
  logic [AW_W-1:0]       act_w;
  logic [IDX_W-1:0]      sel_idx;
  logic [N_ADDERS-1:0]   sel_onehot, u_busy, u_last, u_done, u_cout;
  logic [OP_W-1:0]       u_sum [N_ADDERS];

  power_governor #(
    .N_ADDERS    (N_ADDERS),
    .REDUCED_IDX (REDUCED_IDX)
  ) u_gov (
    .clk, .rst_n, .energy_lvl, .homo_req, .homo_idx, .idle,
    .cfg, .pwr_en, .switch_pending, .mode_switch
  );

  unit_selector #(
    .OP_W     (OP_W),
    .N_ADDERS (N_ADDERS),
    .ADDER_W  (ADDER_W)
  ) u_sel (
    .a, .b, .cfg, .act_w, .sel_idx, .sel_onehot
  );

  for (genvar i = 0; i < N_ADDERS; i++) begin : g_add
    rc_adder_unit #(
      .W        (ADDER_W[i]),
      .OP_W     (OP_W),
      .PASS_CYC (PASS_CYC[i])
    ) u_add (
      .clk, .rst_n,
      .en    (pwr_en[i]),
      .start (issue && sel_onehot[i]),
      .a, .b, .cin, .act_w,
      .busy  (u_busy[i]),
      .last  (u_last[i]),
      .done  (u_done[i]),
      .sum   (u_sum[i]),
      .cout  (u_cout[i])
    );
  end

  assign any_done = |u_done;
  assign any_last = |u_last;
  assign in_ready = (!inflight_q || any_last) && !switch_pending;
  assign issue    = in_valid && in_ready;
  assign idle     = (!inflight_q || any_last) && !issue;
  assign cfg_hetero = cfg.hetero;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        inflight_q <= 1'b0;
    else if (issue)    inflight_q <= 1'b1;
    else if (any_last) inflight_q <= 1'b0;
  end

  // Result mux: exactly one unit finishes at a time.
  always_comb begin
    out_valid = any_done;
    o         = '0;
    cout      = 1'b0;
    out_idx   = '0;
    for (int unsigned i = 0; i < N_ADDERS; i++)
      if (u_done[i]) begin
        o       = u_sum[i];
        cout    = u_cout[i];
        out_idx = IDX_W'(i);
      end
  end

  a_one_done: assert property (@(posedge clk) disable iff (!rst_n)
                               $onehot0(u_done));
  a_sel_powered: assert property (@(posedge clk) disable iff (!rst_n)
                                  issue |-> |(sel_onehot & pwr_en));
  a_last_inflight: assert property (@(posedge clk) disable iff (!rst_n)
                                    any_last |-> inflight_q);
  a_issue_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 issue |-> (u_busy & ~u_last) == '0);
  a_sel_consistent: assert property (@(posedge clk) disable iff (!rst_n)
                                     sel_onehot == (N_ADDERS'(1) << sel_idx));

endmodule
