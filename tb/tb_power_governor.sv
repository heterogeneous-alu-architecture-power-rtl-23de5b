// tb_power_governor -- self-checking testbench for power_governor.
//
// Walks the governor through the energy levels and homogeneous requests and
// checks, each cycle, the active configuration, the powered adders, the
// pending flag and the one-cycle mode_switch pulse against a reference
// model kept in the testbench: 100 % gives the heterogeneous configuration
// (all adders on) unless a homogeneous adder is requested; 50 % and 25 %
// give the 8-bit adder only. It also checks that a change requested while
// the core is busy (idle low) waits until idle rises, and takes effect on
// the first clock edge after that.
module tb_power_governor;
  import halu_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  energy_lvl_e energy_lvl;
  logic        homo_req, idle, switch_pending, mode_switch;
  logic [2:0]  homo_idx;
  alu_cfg_t    cfg;
  logic [3:0]  pwr_en;
  int checks = 0, failures = 0;
  int switches = 0, deferred = 0;

  power_governor dut (.clk, .rst_n, .energy_lvl, .homo_req, .homo_idx, .idle,
                      .cfg, .pwr_en, .switch_pending, .mode_switch);

  // Reference model.
  logic       m_het;
  logic [2:0] m_idx;
  logic       m_sw;

  function automatic void req_of(output logic het, output logic [2:0] idx);
    if (energy_lvl == E_FULL) begin
      if (homo_req && homo_idx < 3'd4) begin het = 1'b0; idx = homo_idx; end
      else begin het = 1'b1; idx = 3'd0; end
    end else begin
      het = 1'b0; idx = 3'd1;
    end
  endfunction

  always @(posedge clk) begin
    logic rh; logic [2:0] ri;
    if (rst_n) begin
      req_of(rh, ri);
      m_sw <= 1'b0;
      if ((rh != m_het || (!rh && ri != m_idx)) && idle) begin
        m_het <= rh; m_idx <= ri; m_sw <= 1'b1;
        switches++;
      end else if (rh != m_het || (!rh && ri != m_idx)) begin
        deferred++;
      end
    end
  end

  always @(negedge clk) if (rst_n) begin
    logic [3:0] exp_en;
    logic rh; logic [2:0] ri;
    exp_en = m_het ? 4'b1111 : (4'b1 << m_idx);
    req_of(rh, ri);
    checks++;
    if (cfg.hetero != m_het || (!m_het && cfg.idx != m_idx) || pwr_en != exp_en) begin
      failures++;
      $display("FAIL t=%0t cfg=%b/%0d pwr=%b exp %b/%0d %b", $time,
               cfg.hetero, cfg.idx, pwr_en, m_het, m_idx, exp_en);
    end
    checks++;
    if (mode_switch != m_sw) begin
      failures++;
      $display("FAIL t=%0t mode_switch=%b exp %b", $time, mode_switch, m_sw);
    end
    checks++;
    if (switch_pending != (rh != m_het || (!rh && ri != m_idx))) begin
      failures++;
      $display("FAIL t=%0t switch_pending=%b", $time, switch_pending);
    end
  end

  initial begin
    energy_lvl = E_FULL; homo_req = 1'b0; homo_idx = 3'd0; idle = 1'b1;
    m_het = 1'b1; m_idx = 3'd0; m_sw = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    // Directed: full -> half -> quarter -> full.
    energy_lvl = E_HALF;    repeat (3) @(negedge clk);
    energy_lvl = E_QUARTER; repeat (3) @(negedge clk);
    energy_lvl = E_FULL;    repeat (3) @(negedge clk);
    // Homogeneous requests at full energy.
    for (int i = 0; i < 5; i++) begin
      homo_req = 1'b1; homo_idx = 3'(i); repeat (3) @(negedge clk);
    end
    homo_req = 1'b0; repeat (3) @(negedge clk);
    // Deferred switch: busy while the level drops.
    idle = 1'b0; energy_lvl = E_HALF; repeat (5) @(negedge clk);
    idle = 1'b1; repeat (3) @(negedge clk);
    // Random.
    for (int n = 0; n < 2000; n++) begin
      energy_lvl = energy_lvl_e'($urandom_range(3));
      homo_req   = 1'($urandom);
      homo_idx   = 3'($urandom_range(4));
      idle       = ($urandom_range(3) != 0);
      @(negedge clk);
    end
    checks++;
    if (switches < 5 || deferred < 1) begin
      failures++;
      $display("FAIL: too few switches %0d / deferred %0d", switches, deferred);
    end
    $display("switches=%0d deferred=%0d", switches, deferred);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
