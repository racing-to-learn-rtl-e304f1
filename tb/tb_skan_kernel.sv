// tb_skan_kernel - self-checking test of one adaptable kernel.
//
// Part 1 (directed timing): with dr = 125 and no output spike, one input spike
// must give a kernel that climbs for 80 steps to the peak 10000 and is active
// for exactly 162 steps (80 up, the step at the peak, 80 down, 1 at zero).
// Part 2 (random): random input spikes and random back-propagated spikes s;
// every step r_next, r, dr and the phase are compared with an integer model of
// the update rules written in this file. A step-enable pause is also checked
// to hold the state. The watchdog fails the run if it has not ended in time.
module tb_skan_kernel;
  import skan_pkg::*;

  localparam int W = 10000, DDR = 1, DR_MAX = 400, DR_MIN = 1;
  localparam int R_W = $clog2(W + 1), DR_W = $clog2(DR_MAX + 1);

  logic clk = 0, rst_n = 0, step = 0, u = 0, s_prev = 0;
  logic [DR_W-1:0] dr_init = 125;
  logic [R_W-1:0]  r, r_next;
  logic [DR_W-1:0] dr;
  phase_e          phase;

  int checks = 0, failures = 0;

  skan_kernel dut (.*);

  always #5 clk = ~clk;

  // model state
  int mp, mr, mdr;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s: r=%0d/%0d dr=%0d/%0d p=%0d/%0d", what, r, mr, dr, mdr, phase, mp);
    end
  endtask

  function automatic int penc(phase_e ph);
    return (ph == P_UP) ? 1 : (ph == P_DOWN) ? -1 : 0;
  endfunction

  // advance model one step; returns the expected r(t)
  function automatic int model_step(bit uu, bit sp);
    int pn, rn, drn;
    if (mp == 0)      pn = uu ? 1 : 0;
    else if (mp == 1) pn = (mr >= W) ? -1 : 1;
    else              pn = (mr > 0) ? -1 : 0;
    rn  = mr + mp * mdr;           rn  = rn > W ? W : (rn < 0 ? 0 : rn);
    drn = mdr + mp * DDR * sp;     drn = drn > DR_MAX ? DR_MAX : (drn < DR_MIN ? DR_MIN : drn);
    mp = pn; mr = rn; mdr = drn;
    return rn;
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int active, up_steps, expect_r;
    bit seen_peak;
    repeat (3) @(negedge clk);
    rst_n = 1; step = 1;
    mp = 0; mr = 0; mdr = 125;
    // ---- directed timing ----
    u = 1;
    active = 0; up_steps = -1; seen_peak = 0;
    for (int t = 0; t < 400; t++) begin
      expect_r = model_step(u, 0);
      #1 check(r_next == R_W'(expect_r), "directed r_next");
      @(negedge clk);
      u = 0;
      if (phase != P_IDLE) active++;
      if (!seen_peak && r == R_W'(W)) begin seen_peak = 1; up_steps = t; end
    end
    check(active == 162, "kernel active for 162 steps");
    check(up_steps == 80, "peak reached after 80 steps");
    if (active != 162 || up_steps != 80) $display("active=%0d up=%0d", active, up_steps);
    check(r == 0 && phase == P_IDLE && dr == 125, "idle after kernel, dr unchanged without s");

    // ---- random ----
    for (int t = 0; t < 30000; t++) begin
      u      = ($urandom_range(0, 99) < 3);
      s_prev = ($urandom_range(0, 99) < 30);
      step   = ($urandom_range(0, 99) < 95);
      if (step) expect_r = model_step(u, s_prev);
      #1;
      if (step) check(r_next == R_W'(expect_r), "r_next");
      @(negedge clk);
      check(r == R_W'(mr) && dr == DR_W'(mdr) && penc(phase) == mp, "state");
    end
    // ---- reset reloads the initial step size ----
    dr_init = 77; rst_n = 0; @(negedge clk); rst_n = 1;
    check(r == 0 && dr == 77 && phase == P_IDLE, "reset");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
