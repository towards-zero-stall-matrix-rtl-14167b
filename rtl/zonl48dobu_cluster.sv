// Zonl48dobu cluster datapath: the FREP sequencers of the 8 compute cores and
// the 48-bank zero-conflict TCDM.
//
// Each compute core offloads its FP instructions through its own FREP
// sequencer, which turns a nest of frep.o loops into a stream of one FP
// instruction per cycle. The 25 TCDM core ports (3 per compute core, for the
// stream registers feeding A and B and draining C, plus one of the data-mover
// core) and the 512-bit DMA port all share the Dobu TCDM. The integer cores,
// FPUs, stream registers, DMA engine and instruction caches are not part of
// this RTL: their connections are the ports of this module (seq_* towards
// cores and FPUs, tcdm_* and dma_* towards the memory clients).
//
// Per-core timing and handshakes are those of frep_sequencer; memory timing
// is that of zc_tcdm (grant in the request cycle, data one cycle later).
//
// The core count, the three ports per core, the 25-port core crossbar and the
// 512-bit DMA port follow the paper. Giving the 25th port to the data-mover
// core and the default nest depth (4) and ring-buffer depth (32) are this
// design's choices.
module zonl48dobu_cluster
  import zonl_pkg::*;
#(
  parameter int unsigned NumCoresP = NumCores,
  parameter int unsigned NestDepth = 4,
  parameter int unsigned RbDepth   = 32,
  parameter int unsigned NumPorts  = NumCorePorts,
  parameter int unsigned Words     = BankWords,
  localparam int unsigned IdxW     = $clog2(NestDepth + 1)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // per compute core: integer core -> sequencer
  input  logic        inp_valid_i [NumCoresP],
  output logic        inp_ready_o [NumCoresP],
  input  instr_t      inp_instr_i [NumCoresP],
  input  logic [31:0] inp_op_a_i  [NumCoresP],
  // per compute core: sequencer -> FPU
  output logic        oup_valid_o [NumCoresP],
  input  logic        oup_ready_i [NumCoresP],
  output instr_t      oup_instr_o [NumCoresP],
  output logic [31:0] oup_op_a_o  [NumCoresP],
  // per compute core: sequencer status
  output logic        seq_busy_o      [NumCoresP],
  output logic        seq_rewind_o    [NumCoresP],
  output logic        seq_nest_ends_o [NumCoresP],
  output logic        seq_frep_stall_o [NumCoresP],
  output logic [IdxW-1:0] seq_loop_idx_o [NumCoresP],
  // TCDM core ports
  input  logic        tcdm_req_valid_i [NumPorts],
  output logic        tcdm_req_gnt_o   [NumPorts],
  input  tcdm_req_t   tcdm_req_i       [NumPorts],
  output logic        tcdm_rsp_valid_o [NumPorts],
  output data_t       tcdm_rsp_data_o  [NumPorts],
  // DMA port
  input  logic        dma_req_valid_i,
  output logic        dma_req_gnt_o,
  input  dma_req_t    dma_req_i,
  output logic        dma_rsp_valid_o,
  output dma_data_t   dma_rsp_data_o,
  output logic [2*SbPerHb-1:0] sb_conflict_o
);

  for (genvar c = 0; c < NumCoresP; c++) begin : gen_core
    frep_sequencer #(.N(NestDepth), .Depth(RbDepth)) i_seq (
      .clk_i, .rst_ni,
      .inp_valid_i  (inp_valid_i[c]),
      .inp_ready_o  (inp_ready_o[c]),
      .inp_instr_i  (inp_instr_i[c]),
      .inp_op_a_i   (inp_op_a_i[c]),
      .oup_valid_o  (oup_valid_o[c]),
      .oup_ready_i  (oup_ready_i[c]),
      .oup_instr_o  (oup_instr_o[c]),
      .oup_op_a_o   (oup_op_a_o[c]),
      .busy_o       (seq_busy_o[c]),
      .seq_next_o   (),
      .rewind_o     (seq_rewind_o[c]),
      .nest_ends_o  (seq_nest_ends_o[c]),
      .frep_stall_o (seq_frep_stall_o[c]),
      .loop_idx_o   (seq_loop_idx_o[c])
    );
  end

  zc_tcdm #(.NumPorts(NumPorts), .Words(Words)) i_tcdm (
    .clk_i, .rst_ni,
    .core_req_valid_i (tcdm_req_valid_i),
    .core_req_gnt_o   (tcdm_req_gnt_o),
    .core_req_i       (tcdm_req_i),
    .core_rsp_valid_o (tcdm_rsp_valid_o),
    .core_rsp_data_o  (tcdm_rsp_data_o),
    .dma_req_valid_i,
    .dma_req_gnt_o,
    .dma_req_i,
    .dma_rsp_valid_o,
    .dma_rsp_data_o,
    .sb_conflict_o
  );

endmodule
