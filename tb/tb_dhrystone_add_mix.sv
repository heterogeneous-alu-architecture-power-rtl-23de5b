// tb_dhrystone_add_mix -- runs a Dhrystone-like mix of ADD operand sizes
// through the core in every adder configuration and checks the cycle totals.
//
// Mix: the ADD counts per operand size class measured on Dhrystone (4-bit
// 200,776; 8-bit 52,734; 12-bit 14,070; 16-bit 83,628; 32-bit 196; 64-bit
// 712,433), scaled down by SCALE (default 1/100, at least one ADD per class).
// Each ADD gets operands whose larger one uses exactly the class width, so
// every ADD of a class costs the same number of cycles.
//
// Two cores are exercised: the default one (adders up to 32 bits, 64-bit
// operands run in two passes on the 32-bit adder) and a 64-bit variant that
// adds a 64-bit adder with 6 cycles per pass. Each is run in the
// heterogeneous configuration, in each homogeneous configuration, and at 50 %
// energy. ADDs are issued back to back, so the cycles from the first issue
// to the capture of the last result equal the sum of the ADD latencies.
//
// Checks: every sum; the total cycle count of each run against one computed
// from the printed per-adder cycle table (cycles to complete an ADD of
// 4/8/16/32/64-bit operands on each adder; 12-bit operands use the pass
// count rule); and the ordering that the characterisation reports: the
// heterogeneous configuration needs fewer cycles than any homogeneous one,
// the 8-bit homogeneous configuration is slower than the 32-bit one, and
// at 50 % energy every ADD runs on the 8-bit adder. Finally the cycle ratios
// are compared, within 0.02, with the ones reported for the benchmark:
// heterogeneous / 32-bit homogeneous about 0.88 and 8-bit / 32-bit about
// 1.15 (32-bit architecture); heterogeneous / 64-bit about 0.74, 8-bit /
// 64-bit about 0.96 and 32-bit / 64-bit about 0.83 (64-bit architecture).
module tb_dhrystone_add_mix;
  import halu_pkg::*;

  localparam int SCALE = 100;
  localparam int NCLS = 6;
  localparam int CLS_W [NCLS] = '{4, 8, 12, 16, 32, 64};
  localparam int CLS_N [NCLS] = '{200776, 52734, 14070, 83628, 196, 712433};
  // Printed cycles to complete an ADD (rows: 4/8/16/32/64-bit adder; columns:
  // 4/8/16/32/64-bit operands). 12-bit column derived: passes * cycles/pass.
  localparam int CPI_TAB [5][5] = '{'{ 1, 2, 4, 8, 16},
                                    '{ 1, 1, 2, 4,  8},
                                    '{ 2, 2, 2, 4,  8},
                                    '{ 3, 3, 3, 3,  6},
                                    '{ 6, 6, 6, 6,  6}};
  localparam int CPI12 [5] = '{3, 2, 2, 3, 6};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---- default core (32-bit architecture) and 64-bit variant ------------
  energy_lvl_e lvl;
  logic        homo_req;
  logic [2:0]  homo_idx;
  logic        in_valid, cin;
  logic [63:0] a, b;
  logic        rdy32, ov32, co32, rdy64, ov64, co64;
  logic [63:0] o32, o64;
  logic [2:0]  ix32, ix64;
  logic [3:0]  pe32;
  logic [4:0]  pe64;
  logic        h32, h64, ms32, ms64;
  logic        sel64;   // 1: stimulus goes to the 64-bit variant

  hetero_alu_core dut32 (
    .clk, .rst_n, .energy_lvl(lvl), .homo_req, .homo_idx, .pwr_en(pe32),
    .cfg_hetero(h32), .mode_switch(ms32), .in_valid(in_valid && !sel64),
    .in_ready(rdy32), .a, .b, .cin, .out_valid(ov32), .o(o32), .cout(co32),
    .out_idx(ix32));

  hetero_alu_core #(
    .OP_W(64), .N_ADDERS(5), .ADDER_W('{4, 8, 16, 32, 64, 0, 0, 0}),
    .PASS_CYC('{1, 1, 2, 3, 6, 0, 0, 0}), .REDUCED_IDX(1)
  ) dut64 (
    .clk, .rst_n, .energy_lvl(lvl), .homo_req, .homo_idx, .pwr_en(pe64),
    .cfg_hetero(h64), .mode_switch(ms64), .in_valid(in_valid && sel64),
    .in_ready(rdy64), .a, .b, .cin, .out_valid(ov64), .o(o64), .cout(co64),
    .out_idx(ix64));

  function automatic int col_of(input int w);
    case (w) 4: return 0; 8: return 1; 16: return 2; 32: return 3; default: return 4; endcase
  endfunction

  // Expected cycles of one ADD of class c on adder row r.
  function automatic int exp_cpi(input int r, input int c);
    return (CLS_W[c] == 12) ? CPI12[r] : CPI_TAB[r][col_of(CLS_W[c])];
  endfunction

  // Runs the whole scaled mix; returns the cycles from first issue to the
  // cycle after the last result, and checks results on the fly.
  task automatic run_mix(input bit on64, input bit hetero, input int row,
                         output longint cycles);
    int n_cls [NCLS];
    int total, issued, got;
    logic [64:0] exp_q [$];
    longint t0;
    int cls_seq [$];
    foreach (n_cls[c]) n_cls[c] = (CLS_N[c] / SCALE > 0) ? CLS_N[c] / SCALE : 1;
    // Interleave the classes pseudo-randomly.
    foreach (n_cls[c]) for (int k = 0; k < n_cls[c]; k++) cls_seq.push_back(c);
    cls_seq.shuffle();
    total = cls_seq.size();
    issued = 0; got = 0;
    sel64 = on64;
    @(negedge clk);
    t0 = 0; cycles = 0;
    while (got < total) begin
      logic rdy, ov, co;
      logic [63:0] o;
      // present the next ADD
      if (issued < total) begin
        int w = CLS_W[cls_seq[issued]];
        logic [63:0] m = (w == 64) ? '1 : ((64'd1 << w) - 1);
        a = {$urandom, $urandom} & m;
        b = {$urandom, $urandom} & m;
        if ($urandom_range(1) != 0) a[w-1] = 1'b1; else b[w-1] = 1'b1;
        cin = 1'($urandom);
        in_valid = 1'b1;
      end else in_valid = 1'b0;
      @(posedge clk);
      rdy = on64 ? rdy64 : rdy32;
      ov  = on64 ? ov64  : ov32;
      o   = on64 ? o64   : o32;
      co  = on64 ? co64  : co32;
      if (ov) begin
        logic [64:0] e = exp_q.pop_front();
        got++;
        checks++;
        if ({co, o} !== e) begin
          failures++;
          $display("FAIL sum %h exp %h", {co, o}, e);
        end
        if (!hetero) begin
          checks++;
          if ((on64 ? int'(ix64) : int'(ix32)) != row) begin
            failures++;
            $display("FAIL ADD ran on adder %0d, exp %0d", on64 ? int'(ix64) : int'(ix32), row);
          end
        end
      end
      if (in_valid && rdy) begin
        if (issued == 0) t0 = cycles;
        exp_q.push_back({1'b0, a} + {1'b0, b} + {64'd0, cin});
        issued++;
      end
      cycles++;
      #1;
    end
    in_valid = 1'b0;
    cycles = cycles - t0 - 2;   // edge of first issue .. edge of last capture
  endtask

  function automatic longint expected(input bit on64, input bit hetero, input int row);
    longint s = 0;
    for (int c = 0; c < NCLS; c++) begin
      int n = (CLS_N[c] / SCALE > 0) ? CLS_N[c] / SCALE : 1;
      int r = row;
      if (hetero) begin
        // smallest adder at least the class width; widest otherwise
        r = on64 ? 4 : 3;
        for (int i = (on64 ? 4 : 3); i >= 0; i--)
          if ((4 << i) >= CLS_W[c]) r = i;
      end
      s += longint'(n) * exp_cpi(r, c);
    end
    return s;
  endfunction

  task automatic set_cfg(input energy_lvl_e l, input bit hq, input int hi);
    @(negedge clk);
    lvl = l; homo_req = hq; homo_idx = 3'(hi);
    repeat (3) @(negedge clk);
  endtask

  longint cyc_het [2], cyc_homo [2][5], cyc_half [2];

  initial begin
    lvl = E_FULL; homo_req = 1'b0; homo_idx = 3'd0;
    in_valid = 1'b0; a = '0; b = '0; cin = 1'b0; sel64 = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int arch = 0; arch < 2; arch++) begin
      int nad;
      longint e;
      nad = (arch != 0) ? 5 : 4;
      set_cfg(E_FULL, 1'b0, 0);
      run_mix(arch[0], 1'b1, 0, cyc_het[arch]);
      e = expected(arch[0], 1'b1, 0);
      checks++;
      if (cyc_het[arch] != e) begin
        failures++;
        $display("FAIL arch%0d hetero cycles %0d exp %0d", (arch != 0) ? 64 : 32, cyc_het[arch], e);
      end
      for (int r = 0; r < nad; r++) begin
        set_cfg(E_FULL, 1'b1, r);
        run_mix(arch[0], 1'b0, r, cyc_homo[arch][r]);
        e = expected(arch[0], 1'b0, r);
        checks++;
        if (cyc_homo[arch][r] != e) begin
          failures++;
          $display("FAIL arch%0d homo%0d cycles %0d exp %0d", (arch != 0) ? 64 : 32,
                   4 << r, cyc_homo[arch][r], e);
        end
        checks++;
        if (cyc_het[arch] >= cyc_homo[arch][r]) begin
          failures++;
          $display("FAIL hetero not faster than homogeneous %0d-bit", 4 << r);
        end
      end
      set_cfg(E_HALF, 1'b0, 0);
      run_mix(arch[0], 1'b0, 1, cyc_half[arch]);
      checks++;
      if (cyc_half[arch] != cyc_homo[arch][1]) begin
        failures++;
        $display("FAIL 50%% energy cycles %0d differ from 8-bit homogeneous %0d",
                 cyc_half[arch], cyc_homo[arch][1]);
      end
      checks++;
      if (cyc_homo[arch][1] <= cyc_homo[arch][3]) begin
        failures++;
        $display("FAIL 8-bit homogeneous not slower than 32-bit");
      end
      $display("%0d-bit architecture: cycles hetero=%0d, 50%% energy=%0d", (arch != 0) ? 64 : 32,
               cyc_het[arch], cyc_half[arch]);
      for (int r = 0; r < nad; r++)
        $display("  homogeneous %0d-bit: %0d cycles, hetero/homo = %0.3f, homo/homo%0d = %0.3f",
                 4 << r, cyc_homo[arch][r],
                 real'(cyc_het[arch]) / real'(cyc_homo[arch][r]), (arch != 0) ? 64 : 32,
                 real'(cyc_homo[arch][r]) / real'(cyc_homo[arch][nad-1]));
    end
    check_ratio("32-bit arch hetero/homo32", cyc_het[0], cyc_homo[0][3], 0.88);
    check_ratio("32-bit arch homo8/homo32", cyc_homo[0][1], cyc_homo[0][3], 1.15);
    check_ratio("64-bit arch hetero/homo64", cyc_het[1], cyc_homo[1][4], 0.74);
    check_ratio("64-bit arch homo8/homo64", cyc_homo[1][1], cyc_homo[1][4], 0.96);
    check_ratio("64-bit arch homo32/homo64", cyc_homo[1][3], cyc_homo[1][4], 0.83);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_ratio(input string what, input longint num, den,
                             input real paper);
    real r = real'(num) / real'(den);
    checks++;
    if (r < paper - 0.02 || r > paper + 0.02) begin
      failures++;
      $display("FAIL %s = %0.3f, reported about %0.2f", what, r, paper);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
