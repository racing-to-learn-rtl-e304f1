// tb_skan_inhibit - checks the global decaying inhibition.
//
// Directed part: a single 3-step pulse on one neuron must hold the countdown
// at 100 during the pulse, then count 99..1, so that the neurons, which read
// the previous step's value, are inhibited for exactly 100 steps after it. Random part: sparse random spike vectors on four neurons, compared
// step by step with an integer model of the countdown. Also checks that the
// state holds while step is low. A watchdog ends the run if it stalls.
module tb_skan_inhibit;
  localparam int NEURONS = 4, INH_MAX = 100, INH_DECAY = 1;
  localparam int INH_W = $clog2(INH_MAX + 1);

  logic clk = 0, rst_n = 0, step = 0;
  logic [NEURONS-1:0] spikes = '0;
  logic [INH_W-1:0]   inh;
  logic               inh_active;
  int checks = 0, failures = 0;
  int m_inh = 0;

  skan_inhibit dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s: inh=%0d model=%0d", what, inh, m_inh);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int active_after;
    repeat (2) @(negedge clk);
    rst_n = 1; step = 1;
    check(inh == 0 && !inh_active, "reset");
    // directed: pulse of 3 steps on neuron 2
    spikes = 4'b0100;
    repeat (3) begin @(negedge clk); check(inh == INH_W'(INH_MAX), "held at max during pulse"); end
    spikes = '0;
    active_after = 0;
    repeat (150) begin @(negedge clk); if (inh_active) active_after++; end
    // the countdown reads 99..1 after the pulse; with the value 100 left by the
    // last pulse step, neurons see inhibition for 100 steps after the pulse
    check(active_after == INH_MAX / INH_DECAY - 1, "countdown 99..1 after pulse");
    if (active_after != INH_MAX / INH_DECAY - 1) $display("active_after=%0d", active_after);
    // random
    m_inh = 0;
    for (int t = 0; t < 20000; t++) begin
      spikes = '0;
      if ($urandom_range(0, 99) < 2) spikes = NEURONS'($urandom_range(1, (1 << NEURONS) - 1));
      step = ($urandom_range(0, 99) < 90);
      if (step) m_inh = (spikes != 0) ? INH_MAX : (m_inh > INH_DECAY ? m_inh - INH_DECAY : 0);
      @(negedge clk);
      check(int'(inh) == m_inh && inh_active == (m_inh > 0), "countdown");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
