// tb_skan_membrane_sum - checks the somatic summation against a model sum.
//
// Drives the 16 kernel inputs with random values (including all-zero and
// all-at-peak corner cases) and compares the membrane potential with the sum
// computed here in integer arithmetic. A watchdog ends the run if it stalls.
module tb_skan_membrane_sum;
  localparam int INPUTS = 16, W = 10000;
  localparam int R_W = $clog2(W + 1), SUM_W = $clog2(INPUTS * W + 1);

  logic [INPUTS-1:0][R_W-1:0] r;
  logic [SUM_W-1:0]           vmem;
  int checks = 0, failures = 0;

  skan_membrane_sum dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expect_sum;
    for (int t = 0; t < 5000; t++) begin
      expect_sum = 0;
      for (int i = 0; i < INPUTS; i++) begin
        case (t)
          0:       r[i] = '0;
          1:       r[i] = R_W'(W);
          default: r[i] = R_W'($urandom_range(0, W));
        endcase
        expect_sum += int'(r[i]);
      end
      #1;
      checks++;
      if (int'(vmem) != expect_sum) begin
        failures++;
        if (failures < 10) $display("FAIL sum %0d expected %0d", vmem, expect_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
