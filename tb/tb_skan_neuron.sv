// tb_skan_neuron - single SKAN neuron against the reference model.
//
// Two 16-input neurons, one with the layer rules and one with the
// single-neuron rules, see the same stimulus: a fixed random spatio-temporal
// pattern (one spike per channel within a 20-step window) every 400 steps,
// with 2-step jitter, occasional extra noise spikes, and an external
// inhibition input that is raised for some presentations. Initial step sizes
// are drawn from 100..199 as in the reference setting. Every step the spike,
// threshold, membrane potential, kernel values and step sizes are compared
// with skan_ref_pkg. The run fails if kernel adaptation in both directions,
// threshold rise and fall, inhibition blocking and kernel saturation did not
// all occur. A watchdog ends the run if it stalls.
module tb_skan_neuron;
  import skan_pkg::*;
  import skan_ref_pkg::*;

  localparam int INPUTS = 16, W = 10000, DR_MAX = 400;
  localparam int R_W = $clog2(W + 1), DR_W = $clog2(DR_MAX + 1);
  localparam int SUM_W = $clog2(INPUTS * W + 1), TH_W = SUM_W + 1;
  localparam int T = 400, PW = 20, PRESENTATIONS = 40;

  logic clk = 0, rst_n = 0, step = 0, inh_active = 0;
  logic [INPUTS-1:0]           u = '0;
  logic [INPUTS-1:0][DR_W-1:0] dr_init;
  logic [TH_W-1:0]             theta_init = TH_W'(INPUTS * W / 2);

  logic [1:0]                        s_next, s, rise, fall;
  logic [1:0][TH_W-1:0]              theta;
  logic [1:0][SUM_W-1:0]             vmem;
  logic [1:0][INPUTS-1:0][R_W-1:0]   r;
  logic [1:0][INPUTS-1:0][DR_W-1:0]  dr;
  phase_e [1:0][INPUTS-1:0]          phase;

  int checks = 0, failures = 0;
  skan_model m [2];

  for (genvar k = 0; k < 2; k++) begin : g_dut
    skan_neuron #(.NETWORK(k == 0)) dut (
      .clk, .rst_n, .step, .u, .inh_active, .dr_init, .theta_init,
      .s_next(s_next[k]), .s(s[k]), .theta(theta[k]), .vmem(vmem[k]), .r(r[k]),
      .dr(dr[k]), .theta_rise(rise[k]), .theta_fall(fall[k]), .phase(phase[k]));
  end

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (T * PRESENTATIONS + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dr0[][], th0[], offs[INPUTS];
    bit uu[];
    bit inh_window;
    uu = new[INPUTS];
    dr0 = new[1]; dr0[0] = new[INPUTS]; th0 = new[1];
    for (int i = 0; i < INPUTS; i++) begin
      dr_init[i] = DR_W'($urandom_range(100, 199));
      dr0[0][i]  = int'(dr_init[i]);
      offs[i]    = $urandom_range(2, PW - 3);
    end
    th0[0] = int'(theta_init);
    for (int k = 0; k < 2; k++) begin
      m[k] = new(1, INPUTS, W, 1, DR_MAX, 1, 40 * INPUTS, 100 * INPUTS, 100, 1, (1 << TH_W) - 1, k == 0);
      m[k].reset(dr0, th0);
    end
    repeat (2) @(negedge clk);
    rst_n = 1; step = 1;
    for (int pres = 0; pres < PRESENTATIONS; pres++) begin
      inh_window = (pres % 5 == 3);
      for (int t = 0; t < T; t++) begin
        for (int i = 0; i < INPUTS; i++) begin
          uu[i] = (t == offs[i] + ((pres * 7 + i) % 5) - 2);
          if ($urandom_range(0, 999) < 2) uu[i] = 1;
          u[i] = uu[i];
        end
        inh_active = inh_window && (t >= 10 && t < 120);
        step = ($urandom_range(0, 99) < 97);
        if (step) for (int k = 0; k < 2; k++) m[k].step(uu, int'(inh_active));
        @(negedge clk);
        for (int k = 0; k < 2; k++) begin
          check(s[k] == m[k].s[0][0] && int'(theta[k]) == m[k].th[0] && int'(vmem[k]) == m[k].vsum[0], "soma");
          for (int i = 0; i < INPUTS; i++)
            check(int'(r[k][i]) == m[k].r[0][i] && int'(dr[k][i]) == m[k].dr[0][i], "kernel");
        end
      end
    end
    for (int k = 0; k < 2; k++) begin
      $display("neuron %0d: spikes=%0d starts=%0d blocked=%0d rises=%0d fall_zero=%0d fall_edge=%0d dr_inc=%0d dr_dec=%0d ignored=%0d clipped=%0d",
               k, m[k].ev.spikes, m[k].ev.pulse_starts, m[k].ev.blocked, m[k].ev.rises, m[k].ev.fall_zero,
               m[k].ev.fall_edge, m[k].ev.dr_inc, m[k].ev.dr_dec, m[k].ev.ignored_u, m[k].ev.r_clipped);
      check(m[k].ev.pulse_starts > 0 && m[k].ev.dr_inc > 0 && m[k].ev.dr_dec > 0 && m[k].ev.rises > 0 &&
            m[k].ev.ignored_u > 0 && m[k].ev.r_clipped > 0, "mechanisms exercised");
    end
    check(m[0].ev.blocked > 0 && m[0].ev.fall_edge > 0 && m[1].ev.fall_zero > 0, "rule-specific mechanisms");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
