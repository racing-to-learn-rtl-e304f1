// tb_skan_noise - learning a spike pattern through Poisson noise and missing
// spikes (single 4-input neuron, single-neuron rules).
//
// Three neurons learn the same random target pattern (one spike per channel
// inside a 20-step window, repeated every 400 steps) at three signal-to-noise
// ratios, keeping one spike per channel per period on average:
//   1:0  every target spike present, no noise
//   1:1  each target spike kept with probability 1/2, noise rate 1/(2*400)
//   1:2  each target spike kept with probability 1/3, noise rate 2/(3*400)
// After 1000 presentations each neuron gets one clean test presentation and
// the step at which each of its kernels reaches its peak is recorded; a
// well-trained neuron has all peaks on the same step. The noiseless neuron
// must answer the test pattern with all kernel peaks within one step of each
// other; the spread of all three is printed (it is expected to grow with the
// noise). RUNS independent patterns are tried. A watchdog ends the run if it
// stalls.
module tb_skan_noise;
  import skan_pkg::*;

  localparam int W = W_DEFAULT, DR_MAX = DR_MAX_DEFAULT, T = 400, PW = 20;
  localparam int PRES = 1000, RUNS = 5, I = 4, K = 3;
  localparam int R_W = $clog2(W + 1), DR_W = $clog2(DR_MAX + 1);
  localparam int SUM_W = $clog2(I * W + 1), TH_W = SUM_W + 1;

  logic clk = 0, rst_n = 0, step = 1;
  always #5 clk = ~clk;

  logic [K-1:0][I-1:0]           u;
  logic [I-1:0][DR_W-1:0]        dr_init;
  logic [K-1:0]                  s, sn, rise, fall;
  logic [K-1:0][TH_W-1:0]        theta;
  logic [K-1:0][SUM_W-1:0]       vmem;
  logic [K-1:0][I-1:0][R_W-1:0]  r;
  logic [K-1:0][I-1:0][DR_W-1:0] dr;
  phase_e [K-1:0][I-1:0]         ph;

  for (genvar k = 0; k < K; k++) begin : g_n
    skan_neuron #(.INPUTS(I), .NETWORK(1'b0)) dut (
      .clk, .rst_n, .step, .u(u[k]), .inh_active(1'b0), .dr_init,
      .theta_init(TH_W'(I * W / 2)), .s_next(sn[k]), .s(s[k]), .theta(theta[k]),
      .vmem(vmem[k]), .r(r[k]), .dr(dr[k]), .theta_rise(rise[k]), .theta_fall(fall[k]),
      .phase(ph[k]));
  end

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat ((PRES + 2) * T * RUNS + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // keep-probability and noise probability per step, in 1/1200000 units
  localparam int SCALE = 1200000;
  localparam int KEEP  [K] = '{SCALE, SCALE / 2, SCALE / 3};
  localparam int NOISE [K] = '{0, SCALE / (2 * T), 2 * SCALE / (3 * T)};

  initial begin
    int pat[I], peak[K][I], spread[K], lo, hi;
    bit answered[K];
    u = '0;
    for (int run = 0; run < RUNS; run++) begin
      for (int i = 0; i < I; i++) begin
        pat[i] = $urandom_range(0, PW - 1);
        dr_init[i] = DR_W'($urandom_range(100, 199));
      end
      rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
      for (int pres = 0; pres < PRES; pres++) begin
        bit keep[K][I];
        for (int k = 0; k < K; k++)
          for (int i = 0; i < I; i++) keep[k][i] = $urandom_range(0, SCALE - 1) < KEEP[k];
        for (int t = 0; t < T; t++) begin
          for (int k = 0; k < K; k++)
            for (int i = 0; i < I; i++)
              u[k][i] = (t == 5 + pat[i] && keep[k][i]) || ($urandom_range(0, SCALE - 1) < NOISE[k]);
          @(negedge clk);
        end
      end
      // clean test presentation
      foreach (peak[k, i]) peak[k][i] = -1;
      answered = '{default: 0};
      for (int t = 0; t < T; t++) begin
        for (int k = 0; k < K; k++)
          for (int i = 0; i < I; i++) u[k][i] = (t == 5 + pat[i]);
        @(negedge clk);
        for (int k = 0; k < K; k++) begin
          answered[k] |= s[k];
          for (int i = 0; i < I; i++) if (peak[k][i] < 0 && r[k][i] == R_W'(W)) peak[k][i] = t;
        end
      end
      for (int k = 0; k < K; k++) begin
        lo = peak[k][0]; hi = peak[k][0];
        for (int i = 1; i < I; i++) begin
          if (peak[k][i] < lo) lo = peak[k][i];
          if (peak[k][i] > hi) hi = peak[k][i];
        end
        spread[k] = hi - lo;
      end
      $display("run %0d: kernel peak spread 1:0 %0d, 1:1 %0d, 1:2 %0d steps; answered %0d %0d %0d",
               run, spread[0], spread[1], spread[2], answered[0], answered[1], answered[2]);
      checks++; if (!answered[0]) failures++;
      checks++; if (spread[0] > 1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
