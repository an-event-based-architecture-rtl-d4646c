// if_oscillator: behavioural model of a node's analog oscillator.
//
// On the chip each node's oscillator is an integrate-and-fire neuron driven by a
// constant injected current; it fires a regular train of pulses whose rate differs
// from node to node because of transistor mismatch (measured spread on the prototype:
// mean 209.84 Hz, standard deviation 22 Hz). This model is not the analog circuit: it
// integrates a digital bias word, scaled by a per-instance mismatch gain, into a
// membrane accumulator once per clock, and emits a one-cycle spike each time the
// accumulator reaches the threshold, keeping the remainder so that the phase is not
// lost. The firing rate is bias_i * GAIN / 1024 / VTH spikes per clock. Instances with
// different GAIN and V0 give rates that are not simple multiples of each other over
// any practical run length.
//
// Interface: bias_i stands for the current set by the bias generator; spike_o is the
// node's internal input event (port in.0). Both the model and its fixed-point
// parameters are this design's own; the paper gives only the neuron type.
module if_oscillator #(
  parameter int unsigned VTH  = 32'd1 << 20,  // firing threshold
  parameter int unsigned GAIN = 1024,         // mismatch gain, 1024 = nominal
  parameter int unsigned V0   = 0             // membrane value after reset (phase)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [csp_pkg::BIAS_W-1:0] bias_i,
  output logic                      spike_o
);

  logic [31:0] v_q;
  logic [31:0] incr;
  logic [31:0] v_next;

  assign incr   = (32'(bias_i) * 32'(GAIN)) >> 10;
  assign v_next = v_q + incr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q     <= 32'(V0 % VTH);
      spike_o <= 1'b0;
    end else if (v_next >= VTH) begin
      v_q     <= v_next - VTH;
      spike_o <= 1'b1;
    end else begin
      v_q     <= v_next;
      spike_o <= 1'b0;
    end
  end

endmodule
