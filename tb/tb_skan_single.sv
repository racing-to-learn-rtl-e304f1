// tb_skan_single - single-neuron workloads (single-neuron rule set).
//
// Part 1, commonest pattern: a 4-input neuron sees a random sequence of two
// random patterns x and y (one spike per channel inside a 20-step window,
// one presentation every 400 steps) with P(x) = 0.9. Over the second half
// of a 300-presentation sequence the neuron must answer only one of the two
// patterns, and it must be x in most runs. 10 runs with new random patterns
// and initial step sizes.
// Part 2, ISI tracking: a 2-input neuron sees a pattern whose inter-spike
// interval moves slowly from -20 to 0 steps over 300 presentations. It must
// keep answering: at least 90% of the last 100 presentations produce a pulse.
// A watchdog ends the run if it stalls.
module tb_skan_single;
  import skan_pkg::*;

  localparam int W = W_DEFAULT, DR_MAX = DR_MAX_DEFAULT, T = 400, PW = 20, PRES = 300, RUNS = 10;
  localparam int DR_W = $clog2(DR_MAX + 1);
  localparam int I4 = 4, SUM4 = $clog2(I4 * W + 1), TH4 = SUM4 + 1;
  localparam int I2 = 2, SUM2 = $clog2(I2 * W + 1), TH2 = SUM2 + 1;

  logic clk = 0, rst_n = 0, step = 1;
  always #5 clk = ~clk;

  // 4-input neuron
  logic [I4-1:0] u4 = '0;
  logic [I4-1:0][DR_W-1:0] dr_init4;
  logic s4, sn4, rise4, fall4;
  logic [TH4-1:0] theta4;
  logic [SUM4-1:0] vmem4;
  logic [I4-1:0][$clog2(W+1)-1:0] r4;
  logic [I4-1:0][DR_W-1:0] dr4;
  phase_e [I4-1:0] ph4;
  skan_neuron #(.INPUTS(I4), .NETWORK(1'b0)) n4 (
    .clk, .rst_n, .step, .u(u4), .inh_active(1'b0), .dr_init(dr_init4),
    .theta_init(TH4'(I4 * W / 2)), .s_next(sn4), .s(s4), .theta(theta4), .vmem(vmem4),
    .r(r4), .dr(dr4), .theta_rise(rise4), .theta_fall(fall4), .phase(ph4));

  // 2-input neuron
  logic [I2-1:0] u2 = '0;
  logic [I2-1:0][DR_W-1:0] dr_init2;
  logic s2, sn2, rise2, fall2;
  logic [TH2-1:0] theta2;
  logic [SUM2-1:0] vmem2;
  logic [I2-1:0][$clog2(W+1)-1:0] r2;
  logic [I2-1:0][DR_W-1:0] dr2;
  phase_e [I2-1:0] ph2;
  skan_neuron #(.INPUTS(I2), .NETWORK(1'b0)) n2 (
    .clk, .rst_n, .step, .u(u2), .inh_active(1'b0), .dr_init(dr_init2),
    .theta_init(TH2'(I2 * W / 2)), .s_next(sn2), .s(s2), .theta(theta2), .vmem(vmem2),
    .r(r2), .dr(dr2), .theta_rise(rise2), .theta_fall(fall2), .phase(ph2));

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (T * PRES * (RUNS + 2)) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pat[2][I4], hits[2], shown[2], chose_x, exclusive, answered, isi, first;
    bit is_x, fired;
    chose_x = 0; exclusive = 0;
    // ---- part 1: commonest pattern selection ----
    for (int run = 0; run < RUNS; run++) begin
      for (int k = 0; k < 2; k++) for (int i = 0; i < I4; i++) pat[k][i] = $urandom_range(0, PW - 1);
      for (int i = 0; i < I4; i++) dr_init4[i] = DR_W'($urandom_range(100, 199));
      rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
      hits = '{0, 0}; shown = '{0, 0};
      for (int pres = 0; pres < PRES; pres++) begin
        is_x = $urandom_range(0, 99) < 90;
        fired = 0;
        for (int t = 0; t < T; t++) begin
          for (int i = 0; i < I4; i++) u4[i] = (t == 5 + pat[is_x ? 0 : 1][i]);
          @(negedge clk);
          fired |= s4;
        end
        if (pres >= PRES / 2) begin
          shown[is_x ? 0 : 1]++;
          if (fired) hits[is_x ? 0 : 1]++;
        end
      end
      // exclusive selection: answers one pattern and ignores the other
      if ((hits[0] > 0) != (hits[1] > 0)) exclusive++;
      if (hits[0] > 0 && hits[1] == 0) chose_x++;
      $display("run %0d: x answered %0d/%0d, y answered %0d/%0d", run, hits[0], shown[0], hits[1], shown[1]);
    end
    checks++; if (exclusive < RUNS * 8 / 10) failures++;
    checks++; if (chose_x < RUNS * 7 / 10) failures++;
    $display("commonest pattern: exclusive in %0d of %0d runs, x chosen in %0d", exclusive, RUNS, chose_x);

    // ---- part 2: tracking a moving inter-spike interval ----
    for (int i = 0; i < I2; i++) dr_init2[i] = DR_W'($urandom_range(100, 199));
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    answered = 0;
    for (int pres = 0; pres < PRES; pres++) begin
      isi = -20 + (20 * pres) / PRES;        // channel 1 leads channel 0 by -isi
      first = 5 + 20;
      fired = 0;
      for (int t = 0; t < T; t++) begin
        u2[0] = (t == first + isi);
        u2[1] = (t == first);
        @(negedge clk);
        fired |= s2;
      end
      if (pres >= PRES - 100 && fired) answered++;
    end
    checks++; if (answered < 90) failures++;
    $display("ISI tracking: answered %0d of the last 100 presentations, final dr %0d %0d theta %0d",
             answered, dr2[0], dr2[1], theta2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
