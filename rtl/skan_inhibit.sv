// skan_inhibit - global decaying inhibition of a SKAN layer.
//
// The output spikes of all neurons are ORed. While any neuron spikes the
// countdown inh is held at INH_MAX; once every output is low it counts down by
// INH_DECAY per time step until it reaches zero. The comparator inh > 0 is the
// single inhibitory wire broadcast back to every neuron, which then cannot
// start a new pulse (a neuron already spiking may continue). Because the
// countdown only starts at the end of a pulse, the block acts as a peak
// detector that covers pulses of any width.
//
//   inh(t) = INH_MAX            if OR_n s_n(t)
//          = inh(t-1)-INH_DECAY if inh(t-1) > 0   (floored at zero)
//          = 0                  otherwise
//
// This is the OR gate, counter and comparator of the paper's network; the
// floor at zero when INH_DECAY does not divide INH_MAX is this design's.
//
// Interface and timing: spikes are the combinational s_n(t) of the current
// step; inh and inh_active are registered (inh(t-1) during the next step).
// Synchronous active-low reset clears the counter.
module skan_inhibit #(
  parameter int unsigned NEURONS   = skan_pkg::NEURONS_DEFAULT,
  parameter int unsigned INH_MAX   = skan_pkg::INH_MAX_DEFAULT,
  parameter int unsigned INH_DECAY = skan_pkg::INH_DECAY_DEFAULT,
  localparam int unsigned INH_W    = $clog2(INH_MAX + 1)
) (
  input  logic               clk,
  input  logic               rst_n,       // synchronous, active low
  input  logic               step,        // advance one time step
  input  logic [NEURONS-1:0] spikes,      // s_n(t) of all neurons
  output logic [INH_W-1:0]   inh,         // countdown inh(t-1)
  output logic               inh_active   // inh(t-1) > 0
);

  logic [INH_W-1:0] inh_next;

  always_comb begin
    if (|spikes)
      inh_next = INH_W'(INH_MAX);
    else if (inh > INH_W'(INH_DECAY))
      inh_next = inh - INH_W'(INH_DECAY);
    else
      inh_next = '0;
  end

  assign inh_active = (inh != '0);

  always_ff @(posedge clk) begin
    if (!rst_n)
      inh <= '0;
    else if (step)
      inh <= inh_next;
  end

endmodule
