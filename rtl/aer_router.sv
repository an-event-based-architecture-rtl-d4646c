// aer_router: the off-chip event router that closes the loop between the chip's output
// and input AER interfaces.
//
// For every output-port address (event source) a programmable routing table lists the
// input addresses (event targets) the event must reach: a fan-out of zero drops the
// event, a fan-out of many sends one copy to each target, one after another. The table
// is stored in two memories: lut[src] = {base, count} points into tgt_mem, where
// tgt_mem[base .. base+count-1] hold the target addresses {row, base column, word}.
//
// Operation: in IDLE the router accepts one source event (src_valid_i & src_ready_o),
// reads its lut entry and, if the count is non-zero, enters SEND. In SEND it presents
// tgt_mem[ptr] on the target bus; each accepted word (dst_valid_o & dst_ready_i)
// advances ptr; after the last target it returns to IDLE. So an event with fan-out F
// occupies the router for 1 + F clocks (F >= 1) or 1 clock (F = 0). Both buses use a
// valid/ready handshake.
//
// After reset the router first walks through lut and sets every count to zero (CLEAR,
// SRC_DEPTH clocks, table_ready_o low), so sources that were never programmed are
// dropped. Both memories are then written through the programming port; lut writes
// made during CLEAR are lost. The table should not change under an event being sent.
//
// From the paper: an FPGA router that forwards events from output ports to input ports
// according to a programmable routing table, serially. Own choices: the two-level table
// layout, its sizes (TGT_DEPTH, CNT_W), the handshakes and the timing.
module aer_router #(
  parameter int unsigned SRC_DEPTH = 1 << csp_pkg::OUT_ADDR_W,  // 4096 output ports
  parameter int unsigned TGT_DEPTH = 32768,                     // target list entries
  parameter int unsigned CNT_W     = 8                          // largest fan-out 255
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // table programming
  input  logic                         lut_we_i,
  input  csp_pkg::out_addr_t           lut_addr_i,
  input  logic [$clog2(TGT_DEPTH)-1:0] lut_base_i,
  input  logic [CNT_W-1:0]             lut_count_i,
  input  logic                         tgt_we_i,
  input  logic [$clog2(TGT_DEPTH)-1:0] tgt_addr_i,
  input  csp_pkg::in_addr_t            tgt_data_i,
  // events from the chip's output interface
  input  csp_pkg::out_addr_t           src_addr_i,
  input  logic                         src_valid_i,
  output logic                         src_ready_o,
  // events to the chip's input interface
  output csp_pkg::in_addr_t            dst_addr_o,
  output logic                         dst_valid_o,
  input  logic                         dst_ready_i,
  output logic                         table_ready_o
);
  import csp_pkg::*;

  localparam int unsigned TAW = $clog2(TGT_DEPTH);
  localparam int unsigned SAW = $clog2(SRC_DEPTH);

  typedef struct packed {
    logic [TAW-1:0]   base;
    logic [CNT_W-1:0] count;
  } lut_entry_t;

  typedef enum logic [1:0] {CLEAR, IDLE, SEND} state_t;

  lut_entry_t lut_mem [SRC_DEPTH];
  in_addr_t   tgt_mem [TGT_DEPTH];

  state_t           state_q;
  logic [TAW-1:0]   ptr_q;
  logic [CNT_W-1:0] left_q;
  logic [SAW-1:0]   clr_q;
  lut_entry_t       entry;

  always_ff @(posedge clk) begin
    if (state_q == CLEAR) lut_mem[clr_q]          <= '0;
    else if (lut_we_i)    lut_mem[SAW'(lut_addr_i)] <= '{base: lut_base_i, count: lut_count_i};
    if (tgt_we_i) tgt_mem[tgt_addr_i]       <= tgt_data_i;
  end

  assign entry       = lut_mem[SAW'(src_addr_i)];
  assign src_ready_o = (state_q == IDLE);
  assign dst_valid_o = (state_q == SEND);
  assign dst_addr_o  = tgt_mem[ptr_q];
  assign table_ready_o = (state_q != CLEAR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= CLEAR;
      ptr_q   <= '0;
      left_q  <= '0;
      clr_q   <= '0;
    end else begin
      unique case (state_q)
        CLEAR: begin
          clr_q <= clr_q + 1'b1;
          if (clr_q == SAW'(SRC_DEPTH - 1)) state_q <= IDLE;
        end
        IDLE: if (src_valid_i && entry.count != '0) begin
          state_q <= SEND;
          ptr_q   <= entry.base;
          left_q  <= entry.count;
        end
        SEND: if (dst_ready_i) begin
          ptr_q  <= ptr_q + 1'b1;
          left_q <= left_q - 1'b1;
          if (left_q == CNT_W'(1)) state_q <= IDLE;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  a_dst_hold: assert property (@(posedge clk) disable iff (!rst_n)
    dst_valid_o && !dst_ready_i |=> dst_valid_o && $stable(ptr_q));

endmodule
