// tb_skan_soma - checks the adaptive-threshold soma in both rule sets.
//
// Two instances share random stimulus: one with the layer (inhibition-gated)
// rules, one with the single-neuron rules. The membrane potential is drawn
// around the current threshold, with frequent returns to zero, and the
// inhibition input toggles randomly. Every step the spike, threshold and
// rise/fall flags are compared with integer models written here. The test
// fails if any of the rules (rise, fall at zero, fall at the end of a pulse,
// a start blocked by inhibition, a pulse continued under inhibition) was never
// exercised. A watchdog ends the run if it stalls.
module tb_skan_soma;
  localparam int INPUTS = 16, W = 10000;
  localparam int TR = 40 * INPUTS, TF = 100 * INPUTS;
  localparam int SUM_W = $clog2(INPUTS * W + 1), TH_W = SUM_W + 1;
  localparam int THMAX = (1 << TH_W) - 1;

  logic clk = 0, rst_n = 0, step = 0, inh_active = 0;
  logic [SUM_W-1:0] vmem_next = '0;
  logic [TH_W-1:0]  theta_init = TH_W'(50000);
  logic             s_next_n, s_n, rise_n, fall_n, s_next_1, s_1, rise_1, fall_1;
  logic [TH_W-1:0]  theta_n, theta_1;
  logic [SUM_W-1:0] vmem_n, vmem_1;
  int checks = 0, failures = 0;
  int n_rise = 0, n_fallz = 0, n_falle = 0, n_block = 0, n_cont = 0;

  skan_soma #(.NETWORK(1'b1)) dut_net (
    .clk, .rst_n, .step, .vmem_next, .inh_active, .theta_init,
    .s_next(s_next_n), .s(s_n), .theta(theta_n), .vmem(vmem_n), .rise(rise_n), .fall(fall_n));
  skan_soma #(.NETWORK(1'b0)) dut_one (
    .clk, .rst_n, .step, .vmem_next, .inh_active, .theta_init,
    .s_next(s_next_1), .s(s_1), .theta(theta_1), .vmem(vmem_1), .rise(rise_1), .fall(fall_1));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int th_n, th_1, vs, s_pn, s_p1, v;
    bit sn, fn, s1, f1;
    repeat (2) @(negedge clk);
    rst_n = 1; step = 1;
    th_n = 50000; th_1 = 50000; vs = 0; s_pn = 0; s_p1 = 0;
    check(theta_n == TH_W'(50000) && !s_n && theta_1 == TH_W'(50000), "reset");
    for (int t = 0; t < 40000; t++) begin
      case ($urandom_range(0, 9))
        0, 1:    v = 0;
        2:       v = $urandom_range(0, INPUTS * W);
        default: v = th_n + $urandom_range(0, 4000) - 2000;
      endcase
      if (v < 0) v = 0;
      if (v > INPUTS * W) v = INPUTS * W;
      vmem_next  = SUM_W'(v);
      if ($urandom_range(0, 99) < 10) inh_active = ~inh_active;
      step = ($urandom_range(0, 99) < 95);
      // models
      sn = (v > th_n) && (!inh_active || s_pn);
      fn = (v == 0 && vs > 0 && !inh_active) || (!sn && s_pn);
      s1 = (v > th_1);
      f1 = (v == 0 && vs > 0);
      #1;
      check(s_next_n == sn && rise_n == sn && fall_n == fn, "layer spike/flags");
      check(s_next_1 == s1 && rise_1 == s1 && fall_1 == f1, "single spike/flags");
      if (step) begin
        if (sn) n_rise++;
        if (!sn && s_pn) n_falle++;
        else if (fn) n_fallz++;
        if (v > th_n && !sn) n_block++;
        if (sn && inh_active) n_cont++;
        th_n = sn ? (th_n + TR > THMAX ? THMAX : th_n + TR) : fn ? (th_n < TF ? 0 : th_n - TF) : th_n;
        th_1 = s1 ? (th_1 + TR > THMAX ? THMAX : th_1 + TR) : f1 ? (th_1 < TF ? 0 : th_1 - TF) : th_1;
        s_pn = sn; s_p1 = s1; vs = v;
      end
      @(negedge clk);
      check(int'(theta_n) == th_n && s_n == s_pn[0] && int'(vmem_n) == vs, "layer state");
      check(int'(theta_1) == th_1 && s_1 == s_p1[0], "single state");
    end
    check(n_rise > 0 && n_fallz > 0 && n_falle > 0 && n_block > 0 && n_cont > 0, "all rules exercised");
    $display("rises=%0d fall_zero=%0d fall_edge=%0d blocked=%0d continued=%0d", n_rise, n_fallz, n_falle, n_block, n_cont);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
