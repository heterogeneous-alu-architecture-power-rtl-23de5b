// tb_hetero_alu_core -- end-to-end self-checking testbench of the
// heterogeneous ALU core at its default parameters (64-bit operands,
// 4/8/16/32-bit adders with 1/1/2/3 cycles per pass, 8-bit reduced adder).
//
// Stimulus: a stream of ADDs whose active widths follow a mix of small and
// large operands, with random gaps, while the supply level moves between
// 100 %, 50 % and 25 % and the system now and then asks for a homogeneous
// configuration. Changes are made both while the core is idle and while an
// ADD is in flight.
//
// Checking: a reference model in the testbench tracks the active
// configuration (including deferral of a switch until the core is idle),
// predicts in_ready every cycle, and for every accepted ADD predicts the
// sum, carry out, the adder that must run it and the exact latency
// ceil(act_w / W) * PASS_CYC. Results are compared in order as out_valid
// pulses; the powered-adder vector is compared each cycle.
//
// Coverage: the run fails if any of these never happened: a stall of the
// caller, routing to each of the four adders in heterogeneous mode, a
// multi-pass ADD, an ADD at 50 % and at 25 % energy, an ADD in a homogeneous
// configuration, a configuration switch, a switch deferred by an ADD in
// flight, a carry out, and an ADD accepted at the edge that completes the previous one.
module tb_hetero_alu_core;
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
  logic [63:0] a, b, o;

  hetero_alu_core dut (
    .clk, .rst_n, .energy_lvl, .homo_req, .homo_idx, .pwr_en, .cfg_hetero,
    .mode_switch, .in_valid, .in_ready, .a, .b, .cin, .out_valid, .o, .cout,
    .out_idx);

  int checks = 0, failures = 0;
  int n_ops = 0, n_res = 0;
  int cnt_stall = 0, cnt_multipass = 0, cnt_half = 0, cnt_quarter = 0;
  int cnt_homo = 0, cnt_switch = 0, cnt_deferred = 0, cnt_cout = 0;
  int cnt_b2b = 0;
  int cnt_route [4] = '{0, 0, 0, 0};

  typedef struct {
    logic [64:0] sum;
    int          idx;
    int          lat;
    int          t_issue;
  } exp_t;
  exp_t q [$];

  // Reference model of the configuration.
  logic       m_het = 1'b1;
  logic [2:0] m_idx = 3'd0;
  logic       m_inflight = 1'b0;
  int         cyc = 0;

  function automatic int awidth(input logic [63:0] x, y);
    int w = 1;
    for (int i = 0; i < 64; i++) if (x[i] | y[i]) w = i + 1;
    return w;
  endfunction

  function automatic void req_of(output logic het, output logic [2:0] idx);
    if (energy_lvl == E_FULL) begin
      if (homo_req && homo_idx < 3'd4) begin het = 1'b0; idx = homo_idx; end
      else begin het = 1'b1; idx = 3'd0; end
    end else begin
      het = 1'b0; idx = 3'd1;
    end
  endfunction

  always @(posedge clk) if (rst_n) begin
    logic rh, pending, exp_ready, issue, idle, finishing;
    logic [2:0] ri;
    cyc++;
    req_of(rh, ri);
    pending   = (rh != m_het) || (!rh && ri != m_idx);
    finishing = m_inflight && q.size() > 0 &&
                (cyc - q[$].t_issue == q[$].lat);
    exp_ready = (!m_inflight || finishing) && !pending;
    checks++;
    if (in_ready !== exp_ready) begin
      failures++;
      $display("FAIL cyc %0d in_ready=%b exp %b", cyc, in_ready, exp_ready);
    end
    checks++;
    if (pwr_en !== (m_het ? 4'b1111 : (4'b1 << m_idx)) || cfg_hetero !== m_het) begin
      failures++;
      $display("FAIL cyc %0d pwr_en=%b", cyc, pwr_en);
    end
    if (in_valid && !in_ready) cnt_stall++;
    if (pending && m_inflight && !finishing) cnt_deferred++;
    // Result.
    if (out_valid) begin
      exp_t e;
      n_res++;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL cyc %0d unexpected result", cyc);
      end else begin
        e = q.pop_front();
        if ({cout, o} !== e.sum || int'(out_idx) != e.idx ||
            cyc - e.t_issue - 1 != e.lat) begin
          failures++;
          $display("FAIL cyc %0d got %0d_%h on %0d lat %0d, exp %h on %0d lat %0d",
                   cyc, cout, o, out_idx, cyc - e.t_issue - 1, e.sum, e.idx, e.lat);
        end
        if (cout) cnt_cout++;
      end
    end
    // Issue.
    issue = in_valid && in_ready;
    if (issue) begin
      exp_t e;
      int w, ix;
      w = awidth(a, b);
      if (m_het) begin
        ix = 3;
        for (int i = 3; i >= 0; i--) if (AW[i] >= w) ix = i;
        cnt_route[ix]++;
      end else begin
        ix = int'(m_idx);
        if (energy_lvl == E_HALF) cnt_half++;
        else if (energy_lvl == E_FULL) cnt_homo++;
        else cnt_quarter++;
      end
      e.sum = {1'b0, a} + {1'b0, b} + {64'd0, cin};
      e.idx = ix;
      e.lat = ((w + AW[ix] - 1) / AW[ix]) * PC[ix];
      e.t_issue = cyc;
      if (w > int'(AW[ix])) cnt_multipass++;
      if (finishing) cnt_b2b++;
      q.push_back(e);
      n_ops++;
    end
    idle = (!m_inflight || finishing) && !issue;
    if (issue) m_inflight <= 1'b1;
    else if (finishing) m_inflight <= 1'b0;
    if (idle && pending) begin
      m_het <= rh; m_idx <= ri;
      cnt_switch++;
    end
  end

  // Operand generator: active width drawn from a mix of size classes.
  function automatic logic [63:0] rand_operand(input int w);
    logic [63:0] m = (w >= 64) ? '1 : ((64'd1 << w) - 1);
    return {$urandom, $urandom} & m;
  endfunction

  function automatic int rand_width();
    int r = $urandom_range(99);
    if (r < 20) return $urandom_range(1, 4);
    if (r < 30) return $urandom_range(5, 8);
    if (r < 35) return $urandom_range(9, 12);
    if (r < 45) return $urandom_range(13, 16);
    if (r < 55) return $urandom_range(17, 32);
    return $urandom_range(33, 64);
  endfunction

  task automatic drive_ops(input int n);
    for (int k = 0; k < n; k++) begin
      int w = rand_width();
      a = rand_operand(w); b = rand_operand(w);
      if ($urandom_range(9) == 0) begin a = '1; b = rand_operand(w) | 64'd1; end
      cin = 1'($urandom);
      in_valid = 1'b1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
      in_valid = 1'b0;
      if ($urandom_range(3) == 0) repeat ($urandom_range(1, 3)) @(posedge clk);
      #1;
    end
  endtask

  initial begin
    energy_lvl = E_FULL; homo_req = 1'b0; homo_idx = 3'd0;
    in_valid = 1'b0; a = '0; b = '0; cin = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    drive_ops(300);                               // heterogeneous, full energy
    energy_lvl = E_HALF;   drive_ops(100);        // reduced energy
    energy_lvl = E_QUARTER; drive_ops(100);
    energy_lvl = E_FULL;   drive_ops(50);
    for (int i = 0; i < 4; i++) begin             // homogeneous configurations
      homo_req = 1'b1; homo_idx = 3'(i); drive_ops(40);
    end
    homo_req = 1'b0;
    // Level changes while an ADD is in flight.
    for (int n = 0; n < 60; n++) begin
      fork
        drive_ops(5);
        begin
          repeat ($urandom_range(1, 12)) @(posedge clk);
          #2;
          energy_lvl = energy_lvl_e'($urandom_range(2));
          homo_req = ($urandom_range(3) == 0);
          homo_idx = 3'($urandom_range(3));
        end
      join
    end
    repeat (40) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_res != n_ops) begin
      failures++;
      $display("FAIL: %0d ADDs issued, %0d results", n_ops, n_res);
    end
    $display("ops=%0d stalls=%0d route4=%0d route8=%0d route16=%0d route32=%0d",
             n_ops, cnt_stall, cnt_route[0], cnt_route[1], cnt_route[2], cnt_route[3]);
    $display("multipass=%0d half=%0d quarter=%0d homo=%0d switches=%0d deferred=%0d cout=%0d b2b=%0d",
             cnt_multipass, cnt_half, cnt_quarter, cnt_homo, cnt_switch,
             cnt_deferred, cnt_cout, cnt_b2b);
    foreach (cnt_route[i]) begin
      checks++;
      if (cnt_route[i] == 0) begin failures++; $display("FAIL: no ADD routed to adder %0d", i); end
    end
    checks++; if (cnt_stall == 0)     begin failures++; $display("FAIL: no stall"); end
    checks++; if (cnt_multipass == 0) begin failures++; $display("FAIL: no multi-pass ADD"); end
    checks++; if (cnt_half == 0)      begin failures++; $display("FAIL: no ADD at 50%%"); end
    checks++; if (cnt_quarter == 0)   begin failures++; $display("FAIL: no ADD at 25%%"); end
    checks++; if (cnt_homo == 0)      begin failures++; $display("FAIL: no homogeneous ADD"); end
    checks++; if (cnt_switch == 0)    begin failures++; $display("FAIL: no mode switch"); end
    checks++; if (cnt_deferred == 0)  begin failures++; $display("FAIL: no deferred switch"); end
    checks++; if (cnt_cout == 0)      begin failures++; $display("FAIL: no carry out"); end
    checks++; if (cnt_b2b == 0)       begin failures++; $display("FAIL: no back-to-back ADD"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
