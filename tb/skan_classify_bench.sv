// skan_classify_bench - repeated unsupervised classification runs on one
// SKAN layer configuration, used by tb_skan_classify.
//
// Each run resets the layer with new random initial step sizes (100..199),
// fixes PATTERNS distinct random patterns (one spike per input channel at a
// random time inside a PW-step window, no two patterns alike up to a time
// shift) and presents
// them in random order, one every T steps, optionally with uniform timing
// jitter of +-JITTER steps. A presentation is correct when exactly one neuron
// starts exactly one pulse, and the run has converged when 20 consecutive
// presentations were correct with one and the same neuron for each pattern
// and a different neuron for every pattern. A run ends when it converges or
// after MAX_PRES presentations. The bench reports how many of its RUNS
// converged, the mean number of presentations they needed, and per run
// whether inhibition ever blocked a rival pulse.
module skan_classify_bench #(
  parameter int NEURONS  = 2,
  parameter int INPUTS   = 2,
  parameter int PATTERNS = 2,
  parameter int PW       = 20,
  parameter int JITTER   = 0,
  parameter int T        = 400,
  parameter int RUNS     = 10,
  parameter int MAX_PRES = 800,
  parameter int SEED     = 1,
  parameter int THETA0_PCT = 50
) (
  output bit done,
  output int converged,
  output int pres_sum,
  output int blocked_runs
);
  import skan_pkg::*;

  localparam int W = W_DEFAULT, DR_MAX = DR_MAX_DEFAULT, INH_MAX = INH_MAX_DEFAULT;
  localparam int DR_W = $clog2(DR_MAX + 1), SUM_W = $clog2(INPUTS * W + 1), TH_W = SUM_W + 1;
  localparam int INH_W = $clog2(INH_MAX + 1);

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

  skan_network #(.NEURONS(NEURONS), .INPUTS(INPUTS)) dut (.*);

  always #5 clk = ~clk;

  // Two patterns are alike when one is the other shifted in time: a neuron
  // sees only the relative spike times, so such a pair cannot be separated.
  function automatic bit same_pattern(int a[INPUTS], int b[INPUTS]);
    for (int i = 1; i < INPUTS; i++) if (a[i] - a[0] != b[i] - b[0]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    int pat[PATTERNS][INPUTS], when[INPUTS], map[PATTERNS];
    int starts[NEURONS], p, consec, responder, nresp, seed_dummy;
    logic [NEURONS-1:0] prev;
    bit dup, blocked;
    done = 0; converged = 0; pres_sum = 0; blocked_runs = 0;
    seed_dummy = $urandom(SEED);
    for (int run = 0; run < RUNS; run++) begin
      // new random patterns, all distinct
      for (int k = 0; k < PATTERNS; k++) begin
        do begin
          for (int i = 0; i < INPUTS; i++) pat[k][i] = $urandom_range(0, PW - 1);
          dup = 0;
          for (int j = 0; j < k; j++) dup |= same_pattern(pat[k], pat[j]);
        end while (dup);
      end
      for (int n = 0; n < NEURONS; n++) begin
        for (int i = 0; i < INPUTS; i++) dr_init[n][i] = DR_W'($urandom_range(100, 199));
        theta_init[n] = TH_W'(INPUTS * W * THETA0_PCT / 100);
      end
      rst_n = 0; step = 0;
      repeat (2) @(negedge clk);
      rst_n = 1; step = 1;
      foreach (map[k]) map[k] = -1;
      consec = 0; blocked = 0;
      for (int pres = 0; pres < MAX_PRES; pres++) begin
        p = $urandom_range(0, PATTERNS - 1);
        for (int i = 0; i < INPUTS; i++) begin
          when[i] = JITTER + pat[p][i] + $urandom_range(0, 2 * JITTER) - JITTER;
        end
        foreach (starts[n]) starts[n] = 0;
        prev = '0;
        for (int t = 0; t < T; t++) begin
          for (int i = 0; i < INPUTS; i++) u[i] = (t == when[i]);
          @(negedge clk);
          for (int n = 0; n < NEURONS; n++) begin
            if (spike[n] && !prev[n]) starts[n]++;
            // a neuron above threshold but silent while another one spikes
            if (!spike[n] && vmem[n] > SUM_W'(theta[n]) && inh_active) blocked = 1;
          end
          prev = spike;
        end
        nresp = 0; responder = -1;
        for (int n = 0; n < NEURONS; n++)
          if (starts[n] != 0) begin nresp++; responder = n; if (starts[n] > 1) nresp += 2; end
        if (nresp != 1) begin
          consec = 0; foreach (map[k]) map[k] = -1;
        end else begin
          dup = 0;
          for (int k = 0; k < PATTERNS; k++) if (k != p && map[k] == responder) dup = 1;
          if (dup || (map[p] != -1 && map[p] != responder)) begin
            foreach (map[k]) map[k] = -1;
            consec = 0;
          end
          map[p] = responder;
          consec++;
        end
        if (consec == 20) begin
          converged++;
          pres_sum += pres + 1;
          break;
        end
      end
      if (blocked) blocked_runs++;
    end
    done = 1;
  end
endmodule
