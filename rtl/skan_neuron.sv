// skan_neuron - one Synapto-dendritic Kernel Adapting Neuron (SKAN).
//
// INPUTS adaptable kernels (skan_kernel), one per input channel, feed a
// summation (skan_membrane_sum) whose result, the membrane potential, is
// compared with an adaptive threshold in the soma (skan_soma). The soma's
// output spike is routed back to every kernel (the back-propagation path),
// where it adjusts the kernel step sizes so that all kernel peaks line up on
// the pattern the neuron is learning. The synaptic weight w is the same
// constant for every kernel, as in the paper.
//
// One time step per clock in which step is high. Within a step the kernel
// values r(t) are computed from the previous state, summed and compared
// combinationally, so s_next (the spike of this step) is valid in the same
// cycle for the layer's inhibition block; all state is registered at the end
// of the step. Synchronous active-low reset loads the per-kernel initial step
// sizes dr_init and the initial threshold theta_init.
module skan_neuron
  import skan_pkg::*;
#(
  parameter int unsigned INPUTS     = INPUTS_DEFAULT,
  parameter int unsigned W          = W_DEFAULT,
  parameter int unsigned DDR        = DDR_DEFAULT,
  parameter int unsigned DR_MAX     = DR_MAX_DEFAULT,
  parameter int unsigned DR_MIN     = DR_MIN_DEFAULT,
  parameter int unsigned THETA_RISE = THETA_RISE_PER_IN * INPUTS,
  parameter int unsigned THETA_FALL = THETA_FALL_PER_IN * INPUTS,
  parameter bit          NETWORK    = 1'b1,
  localparam int unsigned R_W       = $clog2(W + 1),
  localparam int unsigned DR_W      = $clog2(DR_MAX + 1),
  localparam int unsigned SUM_W     = $clog2(INPUTS * W + 1),
  localparam int unsigned TH_W      = SUM_W + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        step,
  input  logic [INPUTS-1:0]           u,           // input spikes u_i(t)
  input  logic                        inh_active,  // global inhibition inh(t-1) > 0
  input  logic [INPUTS-1:0][DR_W-1:0] dr_init,     // initial kernel step sizes
  input  logic [TH_W-1:0]             theta_init,  // initial threshold
  output logic                        s_next,      // spike of the current step s(t)
  output logic                        s,           // spike s(t-1)
  output logic [TH_W-1:0]             theta,       // threshold theta(t-1)
  output logic [SUM_W-1:0]            vmem,        // membrane potential (t-1)
  output logic [INPUTS-1:0][R_W-1:0]  r,           // kernel values r_i(t-1)
  output logic [INPUTS-1:0][DR_W-1:0] dr,          // kernel step sizes dr_i(t-1)
  output logic                        theta_rise,  // threshold rises this step
  output logic                        theta_fall,  // threshold falls this step
  output phase_e [INPUTS-1:0]         phase        // kernel ramp phases p_i(t-1)
);

  logic [INPUTS-1:0][R_W-1:0] r_next;
  logic [SUM_W-1:0]           vmem_next;

  for (genvar i = 0; i < INPUTS; i++) begin : g_kernel
    skan_kernel #(
      .W(W), .DDR(DDR), .DR_MAX(DR_MAX), .DR_MIN(DR_MIN)
    ) u_kernel (
      .clk, .rst_n, .step,
      .u       (u[i]),
      .s_prev  (s),
      .dr_init (dr_init[i]),
      .r       (r[i]),
      .r_next  (r_next[i]),
      .dr      (dr[i]),
      .phase   (phase[i])
    );
  end

  skan_membrane_sum #(.INPUTS(INPUTS), .W(W)) u_sum (
    .r    (r_next),
    .vmem (vmem_next)
  );

  skan_soma #(
    .INPUTS(INPUTS), .W(W), .THETA_RISE(THETA_RISE), .THETA_FALL(THETA_FALL),
    .NETWORK(NETWORK)
  ) u_soma (
    .clk, .rst_n, .step,
    .vmem_next,
    .inh_active,
    .theta_init,
    .s_next,
    .s,
    .theta,
    .vmem,
    .rise (theta_rise),
    .fall (theta_fall)
  );

endmodule
