// unit_selector -- operand-size based adder selector of the heterogeneous
// ALU core (the "unit selector (op-size)" between the operand inputs and the
// adders).
//
// What it does: for each ADD it measures the active width, the number of
// significant bits of the larger of the two operands, and picks the adder
// that executes it:
//   * heterogeneous configuration: the smallest adder at least as wide as the
//     active width (4-bit data to the 4-bit adder, 12- and 16-bit data to the
//     16-bit adder, ...); data wider than every adder goes to the widest one,
//     which then works in several passes;
//   * homogeneous configuration: always the single adder cfg.idx.
//
// How: purely combinational. The active width is a priority search for the
// highest set bit of (a | b); the adder choice is a search over the adder
// widths, which must be given in ascending order.
//
// Interface: a, b, cfg in; act_w (1..OP_W), sel_idx and its one-hot form out.
// Timing: no registers, zero latency.
//
// From the paper: sizing by the larger operand and routing each size to the
// adder of that size. This design's own choices: measuring size as the exact
// highest set bit and the rounding up to the next adder for in-between sizes.
module unit_selector
  import halu_pkg::*;
#(
  parameter int unsigned OP_W     = DEF_OP_W,
  parameter int unsigned N_ADDERS = DEF_N_ADDERS,
  parameter adder_list_t  ADDER_W  = DEF_ADDER_W,
  localparam int unsigned AW_W    = $clog2(OP_W + 1)
) (
  input  logic [OP_W-1:0]     a,
  input  logic [OP_W-1:0]     b,
  input  alu_cfg_t            cfg,
  output logic [AW_W-1:0]     act_w,
  output logic [IDX_W-1:0]    sel_idx,
  output logic [N_ADDERS-1:0] sel_onehot
);

  logic [OP_W-1:0] v;
  assign v = a | b;

  always_comb begin
    act_w = AW_W'(1);
    for (int unsigned i = 0; i < OP_W; i++)
      if (v[i]) act_w = AW_W'(i + 1);
  end

  always_comb begin
    if (cfg.hetero) begin
      sel_idx = IDX_W'(N_ADDERS - 1);
      for (int i = N_ADDERS - 1; i >= 0; i--)
        if (ADDER_W[i] >= int'(act_w)) sel_idx = IDX_W'(i);
    end else begin
      sel_idx = cfg.idx;
    end
    sel_onehot = '0;
    for (int unsigned i = 0; i < N_ADDERS; i++)
      if (sel_idx == IDX_W'(i)) sel_onehot[i] = 1'b1;
  end

  initial begin
    for (int unsigned i = 1; i < N_ADDERS; i++)
      if (ADDER_W[i] <= ADDER_W[i-1]) $error("ADDER_W must be ascending");
    if (N_ADDERS > (1 << IDX_W)) $error("too many adders for IDX_W");
  end

endmodule
