// skan_network - competitive layer of SKAN neurons (top level).
//
// NEURONS neurons receive the same INPUTS spike channels. Their outputs are
// ORed into one global inhibitory countdown (skan_inhibit); while it is
// non-zero no neuron may begin an output pulse or adapt its threshold, except
// the neuron whose pulse is already under way. Since kernels and thresholds
// adapt only during a neuron's own pulse, the first neuron to respond to a
// pattern is the only one that learns it, responds to it faster next time,
// and so keeps it from the others. The layer thus sorts the presented
// spatio-temporal patterns among its neurons without any controller, using
// INPUTS + 2 wires per neuron (inputs, output, inhibition).
//
// The initial kernel step sizes must differ between neurons for them to learn
// different patterns (the reference setting draws each from 100..199
// uniformly); they, and the initial thresholds, are supplied through ports and
// loaded during reset, so any random source can be used.
//
// The structure (shared inputs, one OR-and-countdown inhibition line, no other
// coupling) follows the paper. The default size of 4 neurons by 16 inputs, the
// initial-value ports and the step enable are this design's choices.
//
// Timing: one time step per clock with step high. u is sampled at that clock;
// spike, theta, vmem, dr and inh show the state after it (one register stage,
// no other latency). Reset is synchronous and active low.
module skan_network
  import skan_pkg::*;
#(
  parameter int unsigned NEURONS    = NEURONS_DEFAULT,
  parameter int unsigned INPUTS     = INPUTS_DEFAULT,
  parameter int unsigned W          = W_DEFAULT,
  parameter int unsigned DDR        = DDR_DEFAULT,
  parameter int unsigned DR_MAX     = DR_MAX_DEFAULT,
  parameter int unsigned DR_MIN     = DR_MIN_DEFAULT,
  parameter int unsigned THETA_RISE = THETA_RISE_PER_IN * INPUTS,
  parameter int unsigned THETA_FALL = THETA_FALL_PER_IN * INPUTS,
  parameter int unsigned INH_MAX    = INH_MAX_DEFAULT,
  parameter int unsigned INH_DECAY  = INH_DECAY_DEFAULT,
  localparam int unsigned R_W       = $clog2(W + 1),
  localparam int unsigned DR_W      = $clog2(DR_MAX + 1),
  localparam int unsigned SUM_W     = $clog2(INPUTS * W + 1),
  localparam int unsigned TH_W      = SUM_W + 1,
  localparam int unsigned INH_W     = $clog2(INH_MAX + 1)
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  logic                                     step,
  input  logic [INPUTS-1:0]                        u,           // shared input spikes
  input  logic [NEURONS-1:0][INPUTS-1:0][DR_W-1:0] dr_init,     // initial step sizes
  input  logic [NEURONS-1:0][TH_W-1:0]             theta_init,  // initial thresholds
  output logic [NEURONS-1:0]                       spike,       // output spikes s_n
  output logic [NEURONS-1:0][TH_W-1:0]             theta,       // thresholds
  output logic [NEURONS-1:0][SUM_W-1:0]            vmem,        // membrane potentials
  output logic [NEURONS-1:0][INPUTS-1:0][DR_W-1:0] dr,          // kernel step sizes
  output logic [INH_W-1:0]                         inh,         // inhibitory countdown
  output logic                                     inh_active   // inh > 0
);

  logic [NEURONS-1:0] s_next;

  for (genvar n = 0; n < NEURONS; n++) begin : g_neuron
    logic [INPUTS-1:0][R_W-1:0] r_unused;
    logic                       rise_unused, fall_unused;
    phase_e [INPUTS-1:0]        phase_unused;
    skan_neuron #(
      .INPUTS(INPUTS), .W(W), .DDR(DDR), .DR_MAX(DR_MAX), .DR_MIN(DR_MIN),
      .THETA_RISE(THETA_RISE), .THETA_FALL(THETA_FALL), .NETWORK(1'b1)
    ) u_neuron (
      .clk, .rst_n, .step, .u, .inh_active,
      .dr_init    (dr_init[n]),
      .theta_init (theta_init[n]),
      .s_next     (s_next[n]),
      .s          (spike[n]),
      .theta      (theta[n]),
      .vmem       (vmem[n]),
      .r          (r_unused),
      .dr         (dr[n]),
      .theta_rise (rise_unused),
      .theta_fall (fall_unused),
      .phase      (phase_unused)
    );
  end

  skan_inhibit #(
    .NEURONS(NEURONS), .INH_MAX(INH_MAX), .INH_DECAY(INH_DECAY)
  ) u_inhibit (
    .clk, .rst_n, .step,
    .spikes     (s_next),
    .inh,
    .inh_active
  );

endmodule
