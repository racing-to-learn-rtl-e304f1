// skan_pkg - constants and types shared by the SKAN (Synapto-dendritic Kernel
// Adapting Neuron) blocks.
//
// The numeric defaults are the learning parameters used for every result of
// the reference model (weight/maximum kernel height 10000, ddr 1, maximum step
// size 400, inhibitory countdown 100 decaying by 1, threshold rise 40 and fall
// 100 per input channel). Everything is integer arithmetic: there are no
// multipliers anywhere in the datapath, only adders, comparators and
// saturation. The ternary ramp state p in {+1,-1,0} is encoded as an enum.
package skan_pkg;

  // Learning parameters (integers, one unit = one LSB of the kernel value).
  localparam int unsigned W_DEFAULT          = 10000; // kernel peak / synaptic weight w
  localparam int unsigned DDR_DEFAULT        = 1;     // step-size adaptation increment
  localparam int unsigned DR_MAX_DEFAULT     = 400;   // step-size ceiling
  localparam int unsigned DR_MIN_DEFAULT     = 1;     // step-size floor (own choice)
  localparam int unsigned THETA_RISE_PER_IN  = 40;    // threshold rise per step, per input
  localparam int unsigned THETA_FALL_PER_IN  = 100;   // threshold fall per event, per input
  localparam int unsigned INH_MAX_DEFAULT    = 100;   // inhibitory countdown start value
  localparam int unsigned INH_DECAY_DEFAULT  = 1;     // inhibitory countdown step

  // Network size defaults.
  localparam int unsigned INPUTS_DEFAULT     = 16;    // input channels (synapses) per neuron
  localparam int unsigned NEURONS_DEFAULT    = 4;     // neurons sharing the inputs

  // Ramp phase of a kernel (the "physiological process" p_i).
  typedef enum logic [1:0] {
    P_IDLE = 2'b00,   // p =  0 : kernel at rest, waiting for an input spike
    P_UP   = 2'b01,   // p = +1 : ramping up towards w
    P_DOWN = 2'b10    // p = -1 : ramping down towards zero
  } phase_e;

endpackage
