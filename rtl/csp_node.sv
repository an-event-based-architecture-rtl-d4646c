// csp_node: digital logic of one binary node of the array.
//
// A node holds two one-hot state bits, s[0] for "state 1" and s[1] for "state 2" of a
// binary variable. When nodes are merged (link = 1 means "this node continues the
// variable of its left neighbour"), node j of the chain holds states 2j+1 and 2j+2 of
// the merged 2k-valued variable, and exactly one bit of the whole chain is set.
//
// Input event (input-port word i, f_HW of the paper): the variable keeps its state if
// the state's bit in i is 1, otherwise it moves to the lowest-index state allowed by i.
// Across a chain this needs three carry signals: an event carry and a "some lower bit
// allowed" carry running left to right, and "current state allowed" / "some bit
// allowed" carries running in both directions. They are combinational along the
// chain; the state registers update on the clock edge after the event.
//
// Oscillator event (port 0, g_HW of the paper): the variable emits one event on the
// output port of its current state. Only the leftmost node's oscillator counts; it is
// forwarded along the chain and the node that holds the set state bit raises a request
// to the output AER interface, which it keeps until ack. An oscillator event that
// arrives while the previous request is still waiting replaces it (the older event is
// lost; lost_o pulses). The emitted port uses the state before any input event of the
// same cycle.
//
// From the paper: f_HW, g_HW, the merging of adjacent nodes, the handshake with the
// output interface. Own choices: the one-hot slice encoding, the link bit, the carry
// chains, the synchronous clocked form (the chip is asynchronous), the state_init
// input (leftmost node to state 1), the drop of a word with no allowed bit inside the
// variable, and replace-on-overflow of a waiting request.
module csp_node (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       link_i,        // config: continue left neighbour's variable
  input  logic       state_init_i,  // load the initial state (1) of the variable
  // input event, from the input AER interface
  input  logic       ev_base_i,     // this node's row and base column selected
  input  logic [1:0] ev_word_i,     // this node's two bits of the input-port word
  // chain from the left neighbour
  input  logic       ev_l_i,        // event reached the left neighbour
  input  logic       seen_l_i,      // an allowed bit exists left of this node
  input  logic       keep_l_i,      // current state allowed, left of this node
  input  logic       osc_l_i,       // oscillator event of the variable, from the left
  // chain from the right neighbour (already gated by its link bit)
  input  logic       keep_r_i,
  input  logic       any_r_i,
  // chain outputs
  output logic       ev_o,
  output logic       seen_o,
  output logic       keep_l_o,      // to the right neighbour
  output logic       osc_o,
  output logic       keep_r_o,      // to the left neighbour
  output logic       any_r_o,
  // own oscillator
  input  logic       osc_i,
  // output AER handshake
  output logic       req_o,
  output logic       port_o,
  input  logic       ack_i,
  output logic       lost_o,
  output logic [1:0] state_o
);

  logic [1:0] s_q, s_d;
  logic       hit, osc_hit, my_keep, my_any, seen_l, keep_l, keep_all, any_all;
  logic       emit;

  assign hit      = (ev_base_i & ~link_i) | (link_i & ev_l_i);
  assign seen_l   = link_i & seen_l_i;
  assign keep_l   = link_i & keep_l_i;
  assign my_keep  = |(ev_word_i & s_q);
  assign my_any   = |ev_word_i;

  assign ev_o     = hit;
  assign seen_o   = hit & (seen_l | my_any);
  assign keep_l_o = hit & (keep_l | my_keep);
  assign keep_r_o = hit & (keep_r_i | my_keep);
  assign any_r_o  = hit & (any_r_i | my_any);

  assign keep_all = keep_l | my_keep | keep_r_i;
  assign any_all  = seen_l | my_any | any_r_i;

  always_comb begin
    s_d = s_q;
    if (hit && any_all && !keep_all) begin
      if (seen_l)            s_d = 2'b00;
      else if (ev_word_i[0]) s_d = 2'b01;
      else if (ev_word_i[1]) s_d = 2'b10;
      else                   s_d = 2'b00;
    end
  end

  assign osc_hit = (osc_i & ~link_i) | (link_i & osc_l_i);
  assign osc_o   = osc_hit;
  assign emit    = osc_hit & (|s_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q    <= 2'b00;
      req_o  <= 1'b0;
      port_o <= 1'b0;
      lost_o <= 1'b0;
    end else begin
      if (state_init_i) s_q <= link_i ? 2'b00 : 2'b01;
      else              s_q <= s_d;
      lost_o <= emit & req_o & ~ack_i;
      if (emit) begin
        req_o  <= 1'b1;
        port_o <= s_q[1];
      end else if (ack_i) begin
        req_o  <= 1'b0;
      end
    end
  end

  assign state_o = s_q;

endmodule
