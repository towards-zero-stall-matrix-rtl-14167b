// Zero-conflict memory subsystem: the double-buffering-aware ("Dobu") TCDM
// interconnect and its banks.
//
// The TCDM is split into two hyperbanks, each a contiguous address region
// selected by the address MSB, with 64-bit words interleaved over the banks of
// the hyperbank. The core branch is a single fully connected crossbar as wide
// as one hyperbank (NumPorts inputs to BanksPerHyperbank outputs), followed by
// one 1-to-2 demux per crossbar output that sends the request to the same bank
// index in the hyperbank named by the MSB. The DMA branch is a 512-bit
// crossbar to the superbanks of a hyperbank followed by one 512-bit 1-to-2
// demux per superbank. At each superbank (8 banks) a mux arbitrates between
// the two branches. When the cores work in one hyperbank while the DMA fills
// or drains the other (double buffering), the two branches never meet at a
// superbank mux, so the DMA costs the cores no cycle; bank conflicts among the
// cores remain only where their own addresses collide on a bank index.
//
// Interface: NumPorts core ports with a valid/gnt request handshake and a
// response (rsp_valid with read data, or an acknowledge for a write) exactly
// one cycle after the grant; one DMA
// port moving a 64-byte aligned line per beat with the same timing. conflict
// flags, per superbank, a cycle in which the core and DMA branches competed.
// Structure, widths and counts (25 core ports, 2 x 24 banks, 2 KiB banks, 512
// bit DMA) follow the paper's 48-bank configuration; address decoding,
// arbitration policies and response timing are this design's choices.
module zc_tcdm
  import zonl_pkg::*;
#(
  parameter int unsigned NumPorts = NumCorePorts,
  parameter int unsigned Words    = BankWords,
  localparam int unsigned NumHb   = 2,
  localparam int unsigned NumSb   = NumHb * SbPerHb
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // core ports
  input  logic      core_req_valid_i [NumPorts],
  output logic      core_req_gnt_o   [NumPorts],
  input  tcdm_req_t core_req_i       [NumPorts],
  output logic      core_rsp_valid_o [NumPorts],
  output data_t     core_rsp_data_o  [NumPorts],
  // DMA port
  input  logic      dma_req_valid_i,
  output logic      dma_req_gnt_o,
  input  dma_req_t  dma_req_i,
  output logic      dma_rsp_valid_o,
  output dma_data_t dma_rsp_data_o,
  // statistics
  output logic [NumSb-1:0] sb_conflict_o
);

  // core crossbar outputs
  logic      xo_valid [BanksPerHb];
  logic      xo_ready [BanksPerHb];
  bank_req_t xo_req   [BanksPerHb];
  logic      xo_hb    [BanksPerHb];
  data_t     xo_rsp   [BanksPerHb];
  // per-superbank core lanes ("pack": 8 demux outputs form one superbank)
  logic      cl_valid [NumSb][BanksPerSb];
  logic      cl_ready [NumSb][BanksPerSb];
  bank_req_t cl_req   [NumSb][BanksPerSb];
  data_t     cl_rsp   [NumSb][BanksPerSb];
  // DMA crossbar outputs and per-superbank DMA requests
  logic      do_valid [SbPerHb];
  logic      do_ready [SbPerHb];
  sb_req_t   do_req   [SbPerHb];
  logic      do_hb    [SbPerHb];
  dma_data_t do_rsp   [SbPerHb];
  logic      sd_valid [NumSb];
  logic      sd_ready [NumSb];
  sb_req_t   sd_req   [NumSb];
  dma_data_t sd_rsp   [NumSb];
  // banks
  logic      b_valid  [NumSb][BanksPerSb];
  bank_req_t b_req    [NumSb][BanksPerSb];
  data_t     b_rsp    [NumSb][BanksPerSb];

  core_xbar #(.NumIn(NumPorts), .NumOut(BanksPerHb)) i_core_xbar (
    .clk_i, .rst_ni,
    .in_valid_i     (core_req_valid_i),
    .in_gnt_o       (core_req_gnt_o),
    .in_req_i       (core_req_i),
    .in_rsp_valid_o (core_rsp_valid_o),
    .in_rsp_data_o  (core_rsp_data_o),
    .out_valid_o    (xo_valid),
    .out_ready_i    (xo_ready),
    .out_req_o      (xo_req),
    .out_hb_o       (xo_hb),
    .out_rsp_i      (xo_rsp)
  );

  for (genvar j = 0; j < BanksPerHb; j++) begin : gen_core_demux
    localparam int unsigned Sb = j / BanksPerSb;
    localparam int unsigned L  = j % BanksPerSb;
    logic      d_valid [NumHb];
    logic      d_ready [NumHb];
    bank_req_t d_req   [NumHb];
    data_t     d_rsp   [NumHb];
    hb_demux #(.NumOut(NumHb), .req_t(bank_req_t), .rsp_t(data_t)) i_demux (
      .clk_i, .rst_ni,
      .in_valid_i  (xo_valid[j]),
      .in_ready_o  (xo_ready[j]),
      .sel_i       (xo_hb[j]),
      .in_req_i    (xo_req[j]),
      .in_rsp_o    (xo_rsp[j]),
      .out_valid_o (d_valid),
      .out_ready_i (d_ready),
      .out_req_o   (d_req),
      .out_rsp_i   (d_rsp)
    );
    for (genvar h = 0; h < NumHb; h++) begin : gen_hb
      assign cl_valid[h*SbPerHb+Sb][L] = d_valid[h];
      assign cl_req[h*SbPerHb+Sb][L]   = d_req[h];
      assign d_ready[h] = cl_ready[h*SbPerHb+Sb][L];
      assign d_rsp[h]   = cl_rsp[h*SbPerHb+Sb][L];
    end
  end

  dma_xbar #(.NumSb(SbPerHb)) i_dma_xbar (
    .clk_i, .rst_ni,
    .in_valid_i     (dma_req_valid_i),
    .in_gnt_o       (dma_req_gnt_o),
    .in_req_i       (dma_req_i),
    .in_rsp_valid_o (dma_rsp_valid_o),
    .in_rsp_data_o  (dma_rsp_data_o),
    .out_valid_o    (do_valid),
    .out_ready_i    (do_ready),
    .out_req_o      (do_req),
    .out_hb_o       (do_hb),
    .out_rsp_i      (do_rsp)
  );

  for (genvar s = 0; s < SbPerHb; s++) begin : gen_dma_demux
    logic      d_valid [NumHb];
    logic      d_ready [NumHb];
    sb_req_t   d_req   [NumHb];
    dma_data_t d_rsp   [NumHb];
    hb_demux #(.NumOut(NumHb), .req_t(sb_req_t), .rsp_t(dma_data_t)) i_demux (
      .clk_i, .rst_ni,
      .in_valid_i  (do_valid[s]),
      .in_ready_o  (do_ready[s]),
      .sel_i       (do_hb[s]),
      .in_req_i    (do_req[s]),
      .in_rsp_o    (do_rsp[s]),
      .out_valid_o (d_valid),
      .out_ready_i (d_ready),
      .out_req_o   (d_req),
      .out_rsp_i   (d_rsp)
    );
    for (genvar h = 0; h < NumHb; h++) begin : gen_hb
      assign sd_valid[h*SbPerHb+s] = d_valid[h];
      assign sd_req[h*SbPerHb+s]   = d_req[h];
      assign d_ready[h] = sd_ready[h*SbPerHb+s];
      assign d_rsp[h]   = sd_rsp[h*SbPerHb+s];
    end
  end

  for (genvar s = 0; s < NumSb; s++) begin : gen_sb
    superbank_mux #(.Lanes(BanksPerSb)) i_mux (
      .clk_i, .rst_ni,
      .core_valid_i (cl_valid[s]),
      .core_ready_o (cl_ready[s]),
      .core_req_i   (cl_req[s]),
      .core_rsp_o   (cl_rsp[s]),
      .dma_valid_i  (sd_valid[s]),
      .dma_ready_o  (sd_ready[s]),
      .dma_req_i    (sd_req[s]),
      .dma_rsp_o    (sd_rsp[s]),
      .bank_valid_o (b_valid[s]),
      .bank_req_o   (b_req[s]),
      .bank_rsp_i   (b_rsp[s]),
      .conflict_o   (sb_conflict_o[s])
    );
    for (genvar l = 0; l < BanksPerSb; l++) begin : gen_bank
      tcdm_bank #(.Words(Words)) i_bank (
        .clk_i,
        .req_valid_i (b_valid[s][l]),
        .row_i       (b_req[s][l].row[$clog2(Words)-1:0]),
        .write_i     (b_req[s][l].write),
        .wdata_i     (b_req[s][l].data),
        .strb_i      (b_req[s][l].strb),
        .rsp_data_o  (b_rsp[s][l])
      );
    end
  end

endmodule
