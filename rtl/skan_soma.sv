// skan_soma - adaptive-threshold soma of a SKAN neuron.
//
// Each time step the soma compares the membrane potential vmem_next (the sum
// of the kernels at this step) with the threshold of the previous step and
// raises the output s while the potential is above it. The threshold is
// homeostatic: it rises by THETA_RISE on every step of an output pulse, and
// falls by THETA_FALL once the membrane potential has returned to zero, so a
// missed pattern lowers it and a matched one raises it.
//
// With NETWORK = 1 (the default, for neurons in a competing layer) the global
// inhibitory signal gates both rules:
//   s(t)   = vmem(t) > theta(t-1) and (inh(t-1) == 0 or s(t-1))
//   rise   when s(t)
//   fall   when (vmem(t) == 0 and vmem(t-1) > 0 and inh(t-1) == 0)
//          or   (s(t) == 0 and s(t-1) == 1)
// so a neuron can only start a pulse while nobody else is inhibiting it, and
// only the neuron that produced the inhibition adapts its threshold (its fall
// happens on its own pulse's falling edge). With NETWORK = 0 the single-neuron
// rules apply: s(t) = vmem(t) > theta(t-1); rise when s(t); fall when
// vmem(t) == 0 and vmem(t-1) > 0. Rise takes precedence over fall. These rules
// follow the paper's model; the threshold's saturation at zero and at its
// all-ones maximum, its width and the initial value port are this design's.
//
// Interface and timing: s_next is combinational (s(t) of the step being
// computed) and goes to the global inhibition block in the same step; s,
// theta and vmem are registered at the rising edge when step is high and hold
// s(t-1), theta(t-1) and vmem(t-1). Synchronous active-low reset loads
// theta_init and clears s and vmem.
module skan_soma #(
  parameter int unsigned INPUTS     = skan_pkg::INPUTS_DEFAULT,
  parameter int unsigned W          = skan_pkg::W_DEFAULT,
  parameter int unsigned THETA_RISE = skan_pkg::THETA_RISE_PER_IN * INPUTS,
  parameter int unsigned THETA_FALL = skan_pkg::THETA_FALL_PER_IN * INPUTS,
  parameter bit          NETWORK    = 1'b1,
  localparam int unsigned SUM_W     = $clog2(INPUTS * W + 1),
  localparam int unsigned TH_W      = SUM_W + 1
) (
  input  logic             clk,
  input  logic             rst_n,       // synchronous, active low
  input  logic             step,        // advance one time step
  input  logic [SUM_W-1:0] vmem_next,   // membrane potential at this step
  input  logic             inh_active,  // global inhibition inh(t-1) > 0
  input  logic [TH_W-1:0]  theta_init,  // threshold loaded on reset
  output logic             s_next,      // output spike s(t) of this step
  output logic             s,           // output spike s(t-1) (registered)
  output logic [TH_W-1:0]  theta,       // threshold theta(t-1) (registered)
  output logic [SUM_W-1:0] vmem,        // membrane potential vmem(t-1)
  output logic             rise,        // threshold rises at this step
  output logic             fall         // threshold falls at this step
);

  localparam logic [TH_W-1:0] TH_MAX = '1;

  logic            above;
  logic [TH_W-1:0] theta_next;

  assign above = {1'b0, vmem_next} > theta;

  always_comb begin
    if (NETWORK) begin
      s_next = above && (!inh_active || s);
      fall   = (vmem_next == '0 && vmem != '0 && !inh_active) || (!s_next && s);
    end else begin
      s_next = above;
      fall   = (vmem_next == '0 && vmem != '0);
    end
    rise = s_next;
  end

  // Threshold adaptation, saturating at both ends
  always_comb begin
    theta_next = theta;
    if (rise)
      theta_next = (TH_MAX - theta < TH_W'(THETA_RISE)) ? TH_MAX : theta + TH_W'(THETA_RISE);
    else if (fall)
      theta_next = (theta < TH_W'(THETA_FALL)) ? '0 : theta - TH_W'(THETA_FALL);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s     <= 1'b0;
      theta <= theta_init;
      vmem  <= '0;
    end else if (step) begin
      s     <= s_next;
      theta <= theta_next;
      vmem  <= vmem_next;
    end
  end

endmodule
