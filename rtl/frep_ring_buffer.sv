// FREP ring buffer.
//
// Holds the loop-capable instructions the sequencer has accepted. Writes go
// to the write pointer rb_wptr; the instruction at the read address rb_raddr
// (owned by the nest controller, which may rewind it to a loop base) is
// issued whenever the buffer is not empty, i.e. rb_raddr != rb_wptr. An issue
// handshake (valid and the downstream ready) is the seq_next pulse.
//
// Pointers carry one wrap bit above the index. The entries from rb_tail to
// rb_wptr are still needed (rb_tail is the oldest instruction that may be
// issued again, supplied by the nest controller), so a write is accepted only
// while fewer than Depth entries are held. Storage is a plain register array,
// written on the clock edge and read combinationally, so an instruction can be
// issued in the cycle after it was written.
//
// The ring buffer and the seq_next/rb_wptr/rb_raddr names follow the paper.
// The depth is not given there: 32 entries are chosen so that a whole matmul
// loop nest with unroll 8 (8 + 8 + 8 instructions) fits.
module frep_ring_buffer
  import zonl_pkg::*;
#(
  parameter int unsigned Depth = 32,
  localparam int unsigned PtrW = $clog2(Depth) + 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // write side
  input  logic            w_valid_i,
  output logic            w_ready_o,
  input  instr_t          w_instr_i,
  output logic [PtrW-1:0] rb_wptr_o,
  // read side
  input  logic [PtrW-1:0] rb_raddr_i,
  input  logic [PtrW-1:0] rb_tail_i,
  output logic            r_valid_o,
  input  logic            r_ready_i,
  output instr_t          r_instr_o,
  output logic            seq_next_o
);

  instr_t          mem_q [Depth];
  logic [PtrW-1:0] wptr_q;
  logic [PtrW-1:0] used;

  assign used      = wptr_q - rb_tail_i;
  assign w_ready_o = (used < PtrW'(Depth));
  assign rb_wptr_o = wptr_q;

  assign r_valid_o  = (rb_raddr_i != wptr_q);
  assign r_instr_o  = mem_q[rb_raddr_i[PtrW-2:0]];
  assign seq_next_o = r_valid_o & r_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
    end else if (w_valid_i && w_ready_o) begin
      wptr_q <= wptr_q + 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (w_valid_i && w_ready_o) mem_q[wptr_q[PtrW-2:0]] <= w_instr_i;
  end

  // The read address never runs ahead of the write pointer.
  a_raddr_in_range: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (wptr_q - rb_raddr_i) <= PtrW'(Depth));

endmodule
