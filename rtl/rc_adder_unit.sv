// rc_adder_unit -- W-bit ripple-carry adder that adds OP_W-bit operands in
// one or more passes.
//
// What it does: computes O = A + B + Cin over OP_W bits and the carry out of
// bit OP_W-1. Operands that fit in W bits take one pass; wider operands are
// cut into W-bit chunks, least significant first, and added one chunk per
// pass with the carry of each pass fed into the next. A 4-bit unit therefore
// needs 8 passes for a 32-bit operand and a 32-bit unit 2 passes for a 64-bit
// one.
//
// How: the chunk adder is an explicit ripple chain of W full adders fed from
// registers. The chain is treated as a multicycle path: each pass holds its
// inputs for PASS_CYC clock cycles before the chunk sum and carry are
// captured, which models a ripple delay longer than one clock period (at
// 1 GHz the characterisation gives 1, 1, 2, 3 and 6 cycles for the 4, 8, 16,
// 32 and 64-bit adders). The number of passes comes from the active width of
// the operation (act_w, significant bits of the larger operand): ceil(act_w/W).
// When the passes cover k < OP_W bits, the bits above k of both operands are
// zero, so the final carry is written into result bit k and cout is 0; the
// result is then the same exact OP_W-bit sum whichever unit ran the ADD.
//
// Interface: start (one cycle, only while en and either !busy or last)
// latches a, b, cin and act_w. busy stays high while the unit works; last is
// high in the final cycle of the final pass, when the result is captured at
// the coming edge, so a new ADD may start at that same edge and the unit
// takes one ADD every ceil(act_w/W) * PASS_CYC cycles. done pulses for one
// cycle with sum/cout valid; sum/cout hold their value until the next result.
// en is the power enable from the governor: a unit that is off ignores start
// and its registers hold (clock-gating stand-in).
//
// Timing: latency from the start edge to the edge that raises done is
// ceil(act_w/W) * PASS_CYC cycles.
//
// From the paper: ripple-carry structure, the adder widths, the cycles per
// pass, and running larger operands over several cycles on a smaller adder.
// This design's own choices: the start/busy/done handshake, chunk order,
// placing the final carry above the covered bits, and the enable behaviour.
module rc_adder_unit #(
  parameter int unsigned W        = 8,
  parameter int unsigned OP_W     = 64,
  parameter int unsigned PASS_CYC = 1,
  localparam int unsigned AW_W    = $clog2(OP_W + 1),
  localparam int unsigned NP      = OP_W / W,
  localparam int unsigned NP_W    = $clog2(NP + 1),
  localparam int unsigned CYC_W   = $clog2(PASS_CYC + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic            start,
  input  logic [OP_W-1:0] a,
  input  logic [OP_W-1:0] b,
  input  logic            cin,
  input  logic [AW_W-1:0] act_w,
  output logic            busy,
  output logic            last,
  output logic            done,
  output logic [OP_W-1:0] sum,
  output logic            cout
);

  logic [OP_W-1:0]  a_q, b_q, res_q, res_next, sum_q;
  logic             carry_q;
  logic [NP_W-1:0]  npass_q, pass_q;
  logic [CYC_W-1:0] cyc_q;
  logic [W-1:0]     chunk;
  logic [W:0]       rc;          // ripple carries, rc[0] = carry in
  logic             last_pass, pass_end;
  logic [NP_W-1:0]  npass_in;

  // Ripple-carry chunk adder: W full adders in a chain.
  assign rc[0] = carry_q;
  for (genvar i = 0; i < W; i++) begin : g_fa
    assign chunk[i] = a_q[i] ^ b_q[i] ^ rc[i];
    assign rc[i+1]  = (a_q[i] & b_q[i]) | (rc[i] & (a_q[i] ^ b_q[i]));
  end

  // Passes needed: ceil(act_w / W), at least 1.
  always_comb begin
    int unsigned np;
    np = (int'(act_w) + W - 1) / W;
    if (np == 0) np = 1;
    if (np > NP) np = NP;
    npass_in = NP_W'(np);
  end

  assign pass_end  = busy && (cyc_q == CYC_W'(PASS_CYC - 1));
  assign last_pass = (pass_q == npass_q - 1'b1);
  assign last      = pass_end && last_pass;

  // Result with the current chunk written in, and on the last pass the final
  // carry placed just above the covered bits when they do not reach OP_W.
  always_comb begin
    int unsigned k;
    res_next = res_q;
    res_next[pass_q*W +: W] = chunk;
    k = (int'(pass_q) + 1) * W;
    if (last_pass && k < OP_W) res_next[k] = rc[W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q     <= '0;
      b_q     <= '0;
      res_q   <= '0;
      sum_q   <= '0;
      carry_q <= 1'b0;
      npass_q <= NP_W'(1);
      pass_q  <= '0;
      cyc_q   <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      cout    <= 1'b0;
    end else if (en) begin
      done <= 1'b0;
      // Finish the ADD in flight.
      if (busy) begin
        if (pass_end) begin
          res_q   <= res_next;
          carry_q <= rc[W];
          a_q     <= a_q >> W;
          b_q     <= b_q >> W;
          cyc_q   <= '0;
          if (last_pass) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            sum_q <= res_next;
            cout  <= ((int'(pass_q) + 1) * W >= OP_W) ? rc[W] : 1'b0;
          end else begin
            pass_q <= pass_q + 1'b1;
          end
        end else begin
          cyc_q <= cyc_q + 1'b1;
        end
      end
      // Start a new ADD (may coincide with the last edge of the previous one).
      if (start && (!busy || last)) begin
        a_q     <= a;
        b_q     <= b;
        carry_q <= cin;
        res_q   <= '0;
        npass_q <= npass_in;
        pass_q  <= '0;
        cyc_q   <= '0;
        busy    <= 1'b1;
      end
    end else begin
      done <= 1'b0;
    end
  end

  assign sum = sum_q;

  // A powered-off unit must not be started, nor may a busy one.
  a_start_ok: assert property (@(posedge clk) disable iff (!rst_n)
                               start |-> (en && (!busy || last)));

  initial begin
    if (OP_W % W != 0) $error("OP_W must be a multiple of W");
  end

endmodule
