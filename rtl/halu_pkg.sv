// halu_pkg -- types, constants and helper functions shared by the
// heterogeneous adder ALU core.
//
// The core holds several ripple-carry adders of different widths. Each ADD is
// sent to one of them according to the size of its larger operand and to the
// energy level the supply reports. This package defines:
//   * energy_lvl_e : the supply levels the governor distinguishes (100%, 50%,
//                    25%), the three levels the power-aware scheme is built on;
//   * the default adder set (4, 8, 16 and 32 bits) and the clock cycles one
//     pass of each adder is given to settle at 1 GHz (1, 1, 2, 3), the values
//     the CPI chart of the characterisation gives for operands that fit;
//   * alu_cfg_t    : the active adder configuration (heterogeneous, or one
//                    adder only);
//   * active_width(): the number of significant bits of the larger operand,
//     which decides the operand size class of an ADD.
// The encodings of the enum are this design's own choice.
package halu_pkg;

  // Supply energy level seen by the power governor.
  typedef enum logic [1:0] {
    E_FULL    = 2'd0,   // 100 % : heterogeneous routing, all adders powered
    E_HALF    = 2'd1,   // 50 %  : every ADD on the reduced-energy adder
    E_QUARTER = 2'd2    // 25 %  : every ADD on the reduced-energy adder
  } energy_lvl_e;

  // Active adder configuration chosen by the governor: heterogeneous routing
  // (every adder powered, each ADD on the adder matching its size) or a
  // homogeneous configuration in which only adder idx is powered and used.
  localparam int unsigned IDX_W = 3;      // up to 8 adders
  typedef struct packed {
    logic             hetero;
    logic [IDX_W-1:0] idx;
  } alu_cfg_t;

  // Default adder set of the core (ascending widths) and the cycles one pass
  // of each needs at 1 GHz.
  // Lists of per-adder values have a fixed length of MAX_ADDERS; only the
  // first N_ADDERS entries are used.
  localparam int unsigned MAX_ADDERS = 8;
  typedef int unsigned adder_list_t [MAX_ADDERS];
  localparam int unsigned DEF_N_ADDERS = 4;
  localparam adder_list_t DEF_ADDER_W  = '{4, 8, 16, 32, 0, 0, 0, 0};
  localparam adder_list_t DEF_PASS_CYC = '{1, 1, 2, 3, 0, 0, 0, 0};
  // Index of the 8-bit adder, the one all work moves to at reduced energy.
  localparam int unsigned DEF_REDUCED_IDX = 1;
  // Operand width of the core (64-bit operands are run on the adders in
  // several passes).
  localparam int unsigned DEF_OP_W = 64;

  // Active width of an ADD: position of the highest set bit of either operand,
  // plus one; 1 when both operands are zero.
  function automatic int unsigned active_width(input logic [127:0] a,
                                               input logic [127:0] b);
    logic [127:0] v;
    int unsigned  w;
    v = a | b;
    w = 1;
    for (int unsigned i = 0; i < 128; i++)
      if (v[i]) w = i + 1;
    return w;
  endfunction

  // Passes an adder of width aw needs for an operand of active width w.
  function automatic int unsigned num_passes(input int unsigned w,
                                             input int unsigned aw);
    return (w + aw - 1) / aw;
  endfunction

endpackage
