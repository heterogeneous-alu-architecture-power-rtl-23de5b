// tb_rc_adder_unit -- self-checking testbench for rc_adder_unit.
//
// Four units (4, 8, 16 and 32 bits wide with 1, 1, 2 and 3 cycles per pass,
// 64-bit operands) are started together on the same random ADD. For each
// unit the testbench checks the sum and carry out against a 65-bit reference
// sum and the latency against ceil(active_width / W) * PASS_CYC. Operand
// active widths are drawn uniformly from 1..64, with directed corner cases
// (all ones, carries into the top bit, zero operands). A second phase drops
// the power enable of a busy unit for a few cycles and checks that the
// result is still right and arrives exactly that many cycles later.
module tb_rc_adder_unit;
  localparam int unsigned OP_W = 64;
  localparam int unsigned N = 4;
  localparam int unsigned AW [N] = '{4, 8, 16, 32};
  localparam int unsigned PC [N] = '{1, 1, 2, 3};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]    en, start, busy, last, done, cout;
  logic [OP_W-1:0] a, b, sum [N];
  logic            cin;
  logic [6:0]      act_w;

  int checks = 0, failures = 0;

  for (genvar i = 0; i < N; i++) begin : g_u
    rc_adder_unit #(.W(AW[i]), .OP_W(OP_W), .PASS_CYC(PC[i])) dut (
      .clk, .rst_n, .en(en[i]), .start(start[i]), .a, .b, .cin, .act_w,
      .busy(busy[i]), .last(last[i]), .done(done[i]), .sum(sum[i]), .cout(cout[i]));
  end

  function automatic logic [63:0] mask(input int unsigned w);
    return (w >= 64) ? '1 : ((64'd1 << w) - 1);
  endfunction

  function automatic int unsigned awidth(input logic [63:0] x, y);
    int unsigned w = 1;
    for (int i = 0; i < 64; i++) if (x[i] | y[i]) w = i + 1;
    return w;
  endfunction

  // Run one ADD on all units; gate_unit >= 0 drops that unit's enable for
  // gate_cycles cycles, two cycles after the start.
  task automatic run_op(input logic [63:0] ta, tb_, input logic tc,
                        input int gate_unit = -1, input int gate_cycles = 0);
    logic [64:0] ref_sum;
    int unsigned w, exp_lat [N], lat [N];
    logic [N-1:0] seen;
    int cyc;
    ref_sum = {1'b0, ta} + {1'b0, tb_} + {64'd0, tc};
    w = awidth(ta, tb_);
    @(negedge clk);
    a = ta; b = tb_; cin = tc; act_w = 7'(w);
    start = '1;
    @(negedge clk);
    start = '0;
    a = {$urandom, $urandom}; b = {$urandom, $urandom}; cin = 1'($urandom);   // inputs must be latched
    for (int i = 0; i < N; i++) begin
      exp_lat[i] = ((w + AW[i] - 1) / AW[i]) * PC[i] +
                   ((i == gate_unit) ? gate_cycles : 0);
      lat[i] = 0;
    end
    seen = '0;
    cyc = 0;
    while (seen != '1 && cyc < 200) begin
      if (gate_unit >= 0) en[gate_unit] = !(cyc >= 2 && cyc < 2 + gate_cycles);
      for (int i = 0; i < N; i++)
        if (done[i] && !seen[i]) begin
          seen[i] = 1'b1;
          lat[i] = cyc;
          checks++;
          if ({cout[i], sum[i]} !== ref_sum) begin
            failures++;
            $display("FAIL unit W=%0d: %h+%h+%0d got %0d_%h exp %h",
                     AW[i], ta, tb_, tc, cout[i], sum[i], ref_sum);
          end
          checks++;
          if (lat[i] != exp_lat[i]) begin
            failures++;
            $display("FAIL unit W=%0d latency %0d exp %0d (w=%0d)",
                     AW[i], lat[i], exp_lat[i], w);
          end
        end
      @(negedge clk);
      cyc++;
    end
    en = '1;
    checks++;
    if (seen != '1) begin
      failures++;
      $display("FAIL: a unit never finished");
    end
  endtask

  initial begin
    en = '1; start = '0; a = '0; b = '0; cin = 1'b0; act_w = 7'd1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Directed cases.
    run_op(64'hF, 64'h1, 1'b0);                  // 4-bit, carry into bit 4
    run_op(64'hFFFF_FFFF_FFFF_FFFF, 64'h1, 1'b0); // full carry out
    run_op(64'hFFFF_FFFF_FFFF_FFFF, 64'h0, 1'b1);
    run_op(64'h0, 64'h0, 1'b0);
    run_op(64'h0, 64'h0, 1'b1);
    run_op(64'hFFFF_FFFF, 64'hFFFF_FFFF, 1'b1);  // 32-bit, carry into bit 32
    run_op(64'h6020a0, 64'h660, 1'b0);           // operand pairs of the form
    run_op(64'h604960, 64'h20, 1'b0);            // logged from a benchmark
    run_op(64'h3f63, 64'h1, 1'b0);
    // Random widths.
    for (int n = 0; n < 400; n++) begin
      automatic int unsigned w = 1 + $urandom_range(63);
      run_op({$urandom, $urandom} & mask(w), {$urandom, $urandom} & mask(w),
             1'($urandom));
    end
    // Power enable dropped while busy.
    for (int n = 0; n < 12; n++) begin
      run_op({$urandom, $urandom}, {$urandom, $urandom}, 1'($urandom),
             n % N, 1 + n % 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
