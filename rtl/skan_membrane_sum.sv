// skan_membrane_sum - somatic summation of a neuron's kernels.
//
// Adds the INPUTS kernel values into the membrane potential, the quantity the
// soma compares with its threshold. The potential is never reset: it simply
// follows the kernels, which lets a well-matched pattern hold the neuron above
// threshold for several steps (a wide output pulse).
//
// Purely combinational. The result is wide enough for INPUTS kernels all at
// their peak W, so it cannot overflow. A plain adder chain is used; the
// reference model gives only the sum, not how it is formed.
module skan_membrane_sum #(
  parameter int unsigned INPUTS = skan_pkg::INPUTS_DEFAULT,
  parameter int unsigned W      = skan_pkg::W_DEFAULT,
  localparam int unsigned R_W   = $clog2(W + 1),
  localparam int unsigned SUM_W = $clog2(INPUTS * W + 1)
) (
  input  logic [INPUTS-1:0][R_W-1:0] r,     // kernel values
  output logic [SUM_W-1:0]           vmem   // sum of all kernel values
);

  always_comb begin
    vmem = '0;
    for (int i = 0; i < INPUTS; i++)
      vmem = vmem + SUM_W'(r[i]);
  end

endmodule
