// tb_unit_selector -- self-checking testbench for unit_selector.
//
// Drives operand pairs of every active width 1..64 (random values with the
// top bit set in one operand or the other, plus both-zero) through the
// default selector (adders 4/8/16/32, 64-bit operands). In heterogeneous
// mode it checks the active width and that the chosen adder is the smallest
// one at least that wide (the 32-bit adder for anything wider); in
// homogeneous mode that the requested adder is always chosen. The expected
// values come from a size-class table written out here by hand.
module tb_unit_selector;
  import halu_pkg::*;

  logic [63:0] a, b;
  alu_cfg_t    cfg;
  logic [6:0]  act_w;
  logic [2:0]  sel_idx;
  logic [3:0]  sel_onehot;
  int checks = 0, failures = 0;

  unit_selector dut (.a, .b, .cfg, .act_w, .sel_idx, .sel_onehot);

  // Expected adder index for an active width: 1-4 -> 4-bit, 5-8 -> 8-bit,
  // 9-16 -> 16-bit, 17-64 -> 32-bit.
  function automatic int exp_idx(input int w);
    if (w <= 4)  return 0;
    if (w <= 8)  return 1;
    if (w <= 16) return 2;
    return 3;
  endfunction

  task automatic check(input int w, input bit hetero, input int hidx);
    int e;
    #1;
    e = hetero ? exp_idx(w) : hidx;
    checks++;
    if (int'(act_w) != w) begin
      failures++;
      $display("FAIL act_w a=%h b=%h got %0d exp %0d", a, b, act_w, w);
    end
    checks++;
    if (int'(sel_idx) != e || sel_onehot != (4'b1 << e)) begin
      failures++;
      $display("FAIL sel a=%h b=%h hetero=%0d got %0d/%b exp %0d",
               a, b, hetero, sel_idx, sel_onehot, e);
    end
  endtask

  initial begin
    for (int mode = 0; mode < 5; mode++) begin
      cfg.hetero = (mode == 0);
      cfg.idx    = (mode == 0) ? 3'd0 : 3'(mode - 1);
      a = '0; b = '0;
      check(1, cfg.hetero, int'(cfg.idx));
      for (int w = 1; w <= 64; w++) begin
        for (int r = 0; r < 6; r++) begin
          logic [63:0] m, top;
          m   = (w == 64) ? '1 : ((64'd1 << w) - 1);
          top = 64'd1 << (w - 1);
          a = {$urandom, $urandom} & m;
          b = {$urandom, $urandom} & m;
          if (r % 2 == 0) a = a | top; else b = b | top;
          if (r == 5) a = a & (m >> 1);   // top bit only in b
          check(w, cfg.hetero, int'(cfg.idx));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
