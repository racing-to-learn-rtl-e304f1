// tb_skan_network - end-to-end test of the SKAN layer at its default size
// (4 neurons, 16 shared inputs, all learning parameters at their defaults).
//
// Four fixed random spatio-temporal patterns (one spike per channel inside a
// 20-step window) are presented in random order, one every 400 steps, with
// +-1 step jitter and rare noise spikes. Initial step sizes are drawn from
// 100..199 and every threshold starts at half the largest membrane
// potential. Each step the spikes, thresholds, membrane potentials, step sizes
// and inhibition countdown are compared with the reference model in
// skan_ref_pkg; step is sometimes held low to check that the state holds.
// The run fails if any mechanism of the layer never happened: a pulse, a
// start blocked by another neuron's inhibition, threshold rise, fall at zero
// potential, fall at a pulse end, step-size increase, decrease and ceiling,
// expiry of the inhibition, an input spike ignored by a busy kernel, and the
// kernel peak saturation. It also prints which neuron answered which pattern
// over the last presentations. A watchdog ends the run if it stalls.
module tb_skan_network;
  import skan_pkg::*;
  import skan_ref_pkg::*;

  localparam int NEURONS = NEURONS_DEFAULT, INPUTS = INPUTS_DEFAULT;
  localparam int W = W_DEFAULT, DR_MAX = DR_MAX_DEFAULT, INH_MAX = INH_MAX_DEFAULT;
  localparam int DR_W = $clog2(DR_MAX + 1), SUM_W = $clog2(INPUTS * W + 1), TH_W = SUM_W + 1;
  localparam int INH_W = $clog2(INH_MAX + 1);
  localparam int T = 400, PW = 20, PATTERNS = 4, PRESENTATIONS = 300;

  logic clk = 0, rst_n = 0, step = 0;
  logic [INPUTS-1:0]                        u = '0;
  logic [NEURONS-1:0][INPUTS-1:0][DR_W-1:0] dr_init;
  logic [NEURONS-1:0][TH_W-1:0]             theta_init;
  logic [NEURONS-1:0]                       spike;
  logic [NEURONS-1:0][TH_W-1:0]             theta;
  logic [NEURONS-1:0][SUM_W-1:0]            vmem;
  logic [NEURONS-1:0][INPUTS-1:0][DR_W-1:0] dr;
  logic [INH_W-1:0]                         inh;
  logic                                     inh_active;

  int checks = 0, failures = 0;
  skan_model m;

  skan_network dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (T * PRESENTATIONS * 2 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dr0[][], th0[], pat[PATTERNS][INPUTS], jit[INPUTS], answer[PATTERNS][NEURONS];
    bit uu[];
    int p, who;
    bit ok;
    uu = new[INPUTS];
    dr0 = new[NEURONS]; th0 = new[NEURONS];
    foreach (answer[a, b]) answer[a][b] = 0;
    for (int n = 0; n < NEURONS; n++) begin
      dr0[n] = new[INPUTS];
      for (int i = 0; i < INPUTS; i++) begin
        dr0[n][i] = $urandom_range(100, 199);
        dr_init[n][i] = DR_W'(dr0[n][i]);
      end
      th0[n] = INPUTS * W / 2;
      theta_init[n] = TH_W'(th0[n]);
    end
    for (int k = 0; k < PATTERNS; k++)
      for (int i = 0; i < INPUTS; i++) pat[k][i] = $urandom_range(0, PW - 1);
    m = new(NEURONS, INPUTS, W, DDR_DEFAULT, DR_MAX, DR_MIN_DEFAULT,
            THETA_RISE_PER_IN * INPUTS, THETA_FALL_PER_IN * INPUTS, INH_MAX, INH_DECAY_DEFAULT,
            (1 << TH_W) - 1, 1'b1);
    m.reset(dr0, th0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pres = 0; pres < PRESENTATIONS; pres++) begin
      p = $urandom_range(0, PATTERNS - 1);
      for (int i = 0; i < INPUTS; i++) jit[i] = 5 + pat[p][i] + $urandom_range(0, 2) - 1;
      who = -1;
      for (int t = 0; t < T; t++) begin
        for (int i = 0; i < INPUTS; i++) begin
          uu[i] = (t == jit[i]) || ($urandom_range(0, 9999) < 5);
          u[i]  = uu[i];
        end
        // hold the time step now and then; the state must not move
        step = 0;
        if ($urandom_range(0, 99) < 3) begin
          @(negedge clk);
          check(int'(inh) == m.inh, "hold inhibition");
          for (int n = 0; n < NEURONS; n++) check(int'(theta[n]) == m.th[n], "hold theta");
        end
        step = 1;
        m.step(uu);
        @(negedge clk);
        check(int'(inh) == m.inh && inh_active == (m.inh > 0), "inhibition");
        for (int n = 0; n < NEURONS; n++) begin
          ok = spike[n] == m.s[n][0] && int'(theta[n]) == m.th[n] && int'(vmem[n]) == m.vsum[n];
          for (int i = 0; i < INPUTS; i++) ok &= int'(dr[n][i]) == m.dr[n][i];
          check(ok, "neuron state");
          if (spike[n] && who < 0) who = n;
        end
      end
      if (pres >= PRESENTATIONS - 100 && who >= 0) answer[p][who]++;
    end
    $display("events: starts=%0d blocked=%0d rises=%0d fall_zero=%0d fall_edge=%0d dr_inc=%0d dr_dec=%0d dr_at_max=%0d inh_expired=%0d ignored=%0d clipped=%0d",
             m.ev.pulse_starts, m.ev.blocked, m.ev.rises, m.ev.fall_zero, m.ev.fall_edge, m.ev.dr_inc,
             m.ev.dr_dec, m.ev.dr_at_max, m.ev.inh_expired, m.ev.ignored_u, m.ev.r_clipped);
    check(m.ev.pulse_starts > 0, "pulse");
    check(m.ev.blocked > 0, "inhibition blocked a neuron");
    check(m.ev.rises > 0, "threshold rise");
    check(m.ev.fall_zero > 0, "threshold fall at zero potential");
    check(m.ev.fall_edge > 0, "threshold fall at pulse end");
    check(m.ev.dr_inc > 0 && m.ev.dr_dec > 0, "step size adaptation");
    check(m.ev.dr_at_max > 0, "step size ceiling");
    check(m.ev.inh_expired > 0, "inhibition expiry");
    check(m.ev.ignored_u > 0, "spike ignored by busy kernel");
    check(m.ev.r_clipped > 0, "kernel peak saturation");
    for (int k = 0; k < PATTERNS; k++)
      $display("pattern %0d first answered by neuron 0..%0d: %p", k, NEURONS - 1, answer[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
