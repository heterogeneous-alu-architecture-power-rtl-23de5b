// tb_core_op32 -- checks the heterogeneous ALU core built with 32-bit
// operands (OP_W = 32, adders 4/8/16/32), the width printed on the block
// diagram's operand inputs.
//
// ADDs with random active widths 1..32 and random carry in are issued back
// to back in the heterogeneous configuration, then at 50 % energy. Each
// result is compared with a 33-bit reference sum (carry out of bit 31), and
// each latency with ceil(act_w / W) * PASS_CYC of the adder that must run
// it: the smallest adder at least act_w wide, or the 8-bit adder at reduced
// energy.
module tb_core_op32;
  import halu_pkg::*;

  localparam int unsigned AW [4] = '{4, 8, 16, 32};
  localparam int unsigned PC [4] = '{1, 1, 2, 3};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  energy_lvl_e energy_lvl;
  logic        homo_req, cfg_hetero, mode_switch;
  logic [2:0]  homo_idx, out_idx;
  logic [3:0]  pwr_en;
  logic        in_valid, in_ready, cin, out_valid, cout;
  logic [31:0] a, b, o;
  int checks = 0, failures = 0, n_carry = 0;

  hetero_alu_core #(.OP_W(32)) dut (
    .clk, .rst_n, .energy_lvl, .homo_req, .homo_idx, .pwr_en, .cfg_hetero,
    .mode_switch, .in_valid, .in_ready, .a, .b, .cin, .out_valid, .o, .cout,
    .out_idx);

  task automatic one_add(input int w, input bit reduced);
    logic [31:0] m, ta, tb_;
    logic        tc;
    logic [32:0] e;
    int ix, lat, t;
    m  = (w == 32) ? '1 : ((32'd1 << w) - 1);
    ta = $urandom & m; tb_ = $urandom & m; tc = 1'($urandom);
    if ($urandom_range(1) != 0) ta[w-1] = 1'b1; else tb_[w-1] = 1'b1;
    e = {1'b0, ta} + {1'b0, tb_} + {32'd0, tc};
    ix = 3;
    for (int i = 3; i >= 0; i--) if (int'(AW[i]) >= w) ix = i;
    if (reduced) ix = 1;
    lat = ((w + int'(AW[ix]) - 1) / int'(AW[ix])) * int'(PC[ix]);
    @(negedge clk);
    a = ta; b = tb_; cin = tc; in_valid = 1'b1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 1'b0;
    t = 0;
    while (!out_valid && t < 100) begin @(posedge clk); #1 t++; end
    checks++;
    if ({cout, o} !== e || int'(out_idx) != ix || t != lat) begin
      failures++;
      $display("FAIL w=%0d %h+%h+%0d: got %0d_%h on %0d after %0d, exp %h on %0d after %0d",
               w, ta, tb_, tc, cout, o, out_idx, t, e, ix, lat);
    end
    if (cout) n_carry++;
  endtask

  initial begin
    energy_lvl = E_FULL; homo_req = 1'b0; homo_idx = 3'd0;
    in_valid = 1'b0; a = '0; b = '0; cin = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) one_add($urandom_range(1, 32), 1'b0);
    energy_lvl = E_HALF;
    repeat (3) @(negedge clk);
    for (int n = 0; n < 200; n++) one_add($urandom_range(1, 32), 1'b1);
    checks++;
    if (n_carry == 0) begin failures++; $display("FAIL: no carry out seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
