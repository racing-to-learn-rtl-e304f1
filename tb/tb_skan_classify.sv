// tb_skan_classify - unsupervised classification workloads on SKAN layers.
//
// Five layer configurations after the reference experiments, each run RUNS
// times in its own skan_classify_bench, all side by side:
//   A: 2 neurons,  2 inputs, 2 patterns, 20-step pattern window
//   B: 4 neurons,  2 inputs, 4 patterns (one-to-one allocation)
//   C: 2 neurons, 16 inputs, 2 patterns, 20-step window
//   D: as A with +-1 step uniform timing jitter on every spike
//   E: 2 neurons, 16 inputs, 2 patterns, 40-step window
// A configuration passes when at least half of its runs converge (20
// consecutive correct, one-to-one answers) within 800 presentations -- a third
// for the harder four-neuron case B -- and when the global inhibition blocked
// a rival neuron in every run. The fraction of converged runs and the mean
// presentations to convergence are printed. A watchdog ends the run if it
// stalls.
module tb_skan_classify;
  localparam int RUNS = 20, CONFIGS = 5;
  localparam int NEED [CONFIGS] = '{RUNS / 2, RUNS / 3, RUNS / 2, RUNS / 2, RUNS / 2};
  bit done [CONFIGS];
  int conv [CONFIGS], pres [CONFIGS], blk [CONFIGS];
  int checks = 0, failures = 0;

  skan_classify_bench #(.NEURONS(2), .INPUTS(2),  .PATTERNS(2), .RUNS(RUNS), .SEED(11)) a (
    .done(done[0]), .converged(conv[0]), .pres_sum(pres[0]), .blocked_runs(blk[0]));
  skan_classify_bench #(.NEURONS(4), .INPUTS(2),  .PATTERNS(4), .RUNS(RUNS), .SEED(22)) b (
    .done(done[1]), .converged(conv[1]), .pres_sum(pres[1]), .blocked_runs(blk[1]));
  skan_classify_bench #(.NEURONS(2), .INPUTS(16), .PATTERNS(2), .RUNS(RUNS), .SEED(33)) c (
    .done(done[2]), .converged(conv[2]), .pres_sum(pres[2]), .blocked_runs(blk[2]));
  skan_classify_bench #(.NEURONS(2), .INPUTS(2),  .PATTERNS(2), .JITTER(1), .RUNS(RUNS), .SEED(44)) d (
    .done(done[3]), .converged(conv[3]), .pres_sum(pres[3]), .blocked_runs(blk[3]));
  skan_classify_bench #(.NEURONS(2), .INPUTS(16), .PATTERNS(2), .PW(40), .RUNS(RUNS), .SEED(55)) e (
    .done(done[4]), .converged(conv[4]), .pres_sum(pres[4]), .blocked_runs(blk[4]));

  initial begin : watchdog
    #(64'd10 * 400 * 801 * RUNS + 64'd1000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string name = "ABCDE";
    for (int k = 0; k < CONFIGS; k++) wait (done[k]);
    for (int k = 0; k < CONFIGS; k++) begin
      $display("config %s: converged %0d of %0d runs, mean presentations %0d, runs with blocking %0d",
               name.substr(k, k), conv[k], RUNS, conv[k] ? pres[k] / conv[k] : -1, blk[k]);
      checks++;
      if (conv[k] < NEED[k]) failures++;
      checks++;
      if (blk[k] != RUNS) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
