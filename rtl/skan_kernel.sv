// skan_kernel - one adaptable synapto-dendritic kernel (one input channel of a
// SKAN neuron).
//
// An input spike u starts a triangular kernel: the accumulator r climbs by the
// step size dr every time step until it reaches the peak W, then descends by
// the same dr until it reaches zero, after which the kernel is idle and can be
// triggered again. Spikes that arrive while the kernel is active are ignored,
// so a burst counts as its first spike. The step size itself learns from the
// neuron's output spike s, fed back along the back-propagation path: for every
// step in which s was high, dr grows by DDR if the kernel was still ramping up
// (its peak is late) and shrinks by DDR if it was already ramping down (its
// peak is early). dr is held in [DR_MIN, DR_MAX].
//
// Update rule, evaluated once per time step (step = 1), with q denoting the
// value at the previous step:
//   phase : IDLE->UP on u; UP->DOWN when r_q >= W; DOWN->IDLE when r_q == 0
//   r     = r_q + p_q * dr_q            (saturated to [0, W])
//   dr    = dr_q + p_q * DDR * s_q      (saturated to [DR_MIN, DR_MAX])
// The phase rule and the two update equations follow the paper's model. The
// saturation of r at W (the maximum kernel height) and at zero, the floor
// DR_MIN and the step-enable input are this design's choices.
//
// Interface and timing: r_next is the combinational value r(t) the kernel
// will hold after the current step; the soma needs it in the same step to form
// the membrane potential. On reset the kernel is idle with r = 0 and
// dr = dr_init (the random initial step size, supplied from outside). All
// state changes on the rising clock edge when step is high.
module skan_kernel
  import skan_pkg::*;
#(
  parameter int unsigned W      = W_DEFAULT,
  parameter int unsigned DDR    = DDR_DEFAULT,
  parameter int unsigned DR_MAX = DR_MAX_DEFAULT,
  parameter int unsigned DR_MIN = DR_MIN_DEFAULT,
  localparam int unsigned R_W   = $clog2(W + 1),
  localparam int unsigned DR_W  = $clog2(DR_MAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,     // synchronous, active low
  input  logic            step,      // advance one time step
  input  logic            u,         // input spike u_i(t)
  input  logic            s_prev,    // neuron output s(t-1), back-propagated
  input  logic [DR_W-1:0] dr_init,   // initial step size, loaded on reset
  output logic [R_W-1:0]  r,         // kernel value r_i(t-1) (registered)
  output logic [R_W-1:0]  r_next,    // kernel value r_i(t) for this step
  output logic [DR_W-1:0] dr,        // step size dr_i(t-1) (registered)
  output phase_e          phase      // ramp phase p_i(t-1) (registered)
);

  phase_e          phase_next;
  logic [DR_W-1:0] dr_next;
  logic [R_W:0]    r_up;             // one spare bit for the overflow check

  // Phase (Eq. 1 of the model)
  always_comb begin
    unique case (phase)
      P_IDLE:  phase_next = u ? P_UP : P_IDLE;
      P_UP:    phase_next = (r >= R_W'(W)) ? P_DOWN : P_UP;
      P_DOWN:  phase_next = (r > '0) ? P_DOWN : P_IDLE;
      default: phase_next = P_IDLE;
    endcase
  end

  // Kernel accumulator and step-size adaptation (Eq. 3), saturating
  always_comb begin
    r_up    = {1'b0, r} + (R_W+1)'(dr);
    r_next  = r;
    dr_next = dr;
    unique case (phase)
      P_UP: begin
        r_next = (r_up >= (R_W+1)'(W)) ? R_W'(W) : r_up[R_W-1:0];
        if (s_prev)
          dr_next = (DR_W+1)'(dr) + (DR_W+1)'(DDR) >= (DR_W+1)'(DR_MAX)
                    ? DR_W'(DR_MAX) : dr + DR_W'(DDR);
      end
      P_DOWN: begin
        r_next = (r > R_W'(dr)) ? r - R_W'(dr) : '0;
        if (s_prev)
          dr_next = (dr >= DR_W'(DR_MIN + DDR)) ? dr - DR_W'(DDR) : DR_W'(DR_MIN);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase <= P_IDLE;
      r     <= '0;
      dr    <= dr_init;
    end else if (step) begin
      phase <= phase_next;
      r     <= r_next;
      dr    <= dr_next;
    end
  end

endmodule
