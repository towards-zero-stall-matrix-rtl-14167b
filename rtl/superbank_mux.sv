// Superbank mux: shares the 8 banks of one superbank between the core branch
// (8 independent 64-bit lanes, one per bank) and the DMA branch (one 512-bit
// request covering all 8 banks).
//
// Without contention every request is granted at once. When the DMA and at
// least one core lane request in the same cycle, one side wins the whole
// superbank: the DMA (all 8 banks) or the core lanes (the DMA waits). The
// winner alternates from one contended cycle to the next (round robin), so
// neither branch starves; conflict_o flags such a cycle. A granted DMA read
// returns the 8 bank words as one 512-bit line one cycle later; core lane
// responses are the bank outputs, routed back by the branch that issued them.
// Readiness is combinational from the valids only.
// The per-superbank mux between the two branches follows the paper; its
// arbitration policy is not given there and is this design's choice.
module superbank_mux
  import zonl_pkg::*;
#(
  parameter int unsigned Lanes = BanksPerSb
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // core branch
  input  logic      core_valid_i [Lanes],
  output logic      core_ready_o [Lanes],
  input  bank_req_t core_req_i   [Lanes],
  output data_t     core_rsp_o   [Lanes],
  // DMA branch
  input  logic      dma_valid_i,
  output logic      dma_ready_o,
  input  sb_req_t   dma_req_i,
  output dma_data_t dma_rsp_o,
  // banks
  output logic      bank_valid_o [Lanes],
  output bank_req_t bank_req_o   [Lanes],
  input  data_t     bank_rsp_i   [Lanes],
  // statistics
  output logic      conflict_o
);

  logic any_core, dma_wins, prio_dma_q;

  always_comb begin
    any_core = 1'b0;
    for (int unsigned l = 0; l < Lanes; l++) any_core |= core_valid_i[l];
  end

  assign conflict_o  = dma_valid_i && any_core;
  assign dma_wins    = dma_valid_i && (!any_core || prio_dma_q);
  assign dma_ready_o = dma_wins;

  always_comb begin
    for (int unsigned l = 0; l < Lanes; l++) begin
      core_ready_o[l] = !dma_wins;
      core_rsp_o[l]   = bank_rsp_i[l];
      dma_rsp_o[64*l +: 64] = bank_rsp_i[l];
      if (dma_wins) begin
        bank_valid_o[l]    = 1'b1;
        bank_req_o[l].row  = dma_req_i.row;
        bank_req_o[l].write = dma_req_i.write;
        bank_req_o[l].data = dma_req_i.data[64*l +: 64];
        bank_req_o[l].strb = dma_req_i.strb[8*l +: 8];
      end else begin
        bank_valid_o[l] = core_valid_i[l];
        bank_req_o[l]   = core_req_i[l];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) prio_dma_q <= 1'b0;
    else if (conflict_o) prio_dma_q <= !prio_dma_q;
  end

endmodule
