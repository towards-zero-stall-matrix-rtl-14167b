// Shared constants and types of the zero-overhead-loop-nest (ZONL) cluster
// with the 48-bank double-buffering-aware (Dobu) TCDM.
//
// The cluster numbers follow the main configuration: 8 compute cores with 3
// 64-bit TCDM ports each, one data-mover core port, a 96 KiB TCDM built from
// 48 single-ported 64-bit banks, split into 2 hyperbanks of 24 banks, and a
// 512-bit DMA port that reaches one superbank (8 contiguous banks) per cycle.
//
// Address map (TCDM-local byte address, 17 bits): bit 16 selects the
// hyperbank, so each hyperbank owns a contiguous 64 KiB window of which the
// lower 48 KiB are populated. Inside a window, 64-bit words are interleaved
// across the 24 banks: bank = word % 24, row = word / 24. The window size and
// the modulo mapping are this design's choice; the split by the address MSB
// and the interleaving inside a hyperbank follow the paper.
package zonl_pkg;

  // ---------------------------------------------------------------- cluster
  localparam int unsigned NumCores      = 8;
  localparam int unsigned PortsPerCore  = 3;
  // 24 compute-core ports plus one port of the data-mover core.
  localparam int unsigned NumCorePorts  = 25;
  localparam int unsigned NumHyperbanks = 2;
  localparam int unsigned BanksPerHb    = 24;
  localparam int unsigned BanksPerSb    = 8;
  localparam int unsigned SbPerHb       = BanksPerHb / BanksPerSb;
  localparam int unsigned DataWidth     = 64;
  localparam int unsigned StrbWidth     = DataWidth / 8;
  localparam int unsigned DmaWidth      = DataWidth * BanksPerSb;
  localparam int unsigned DmaStrbWidth  = DmaWidth / 8;
  // 96 KiB / 48 banks / 8 byte = 256 words per bank.
  localparam int unsigned BankWords     = 256;
  localparam int unsigned RowWidth      = $clog2(BankWords);
  localparam int unsigned HbWinBits     = 16;          // 64 KiB window per hyperbank
  localparam int unsigned TcdmAddrWidth = HbWinBits + 1;

  typedef logic [TcdmAddrWidth-1:0] tcdm_addr_t;
  typedef logic [DataWidth-1:0]     data_t;
  typedef logic [StrbWidth-1:0]     strb_t;

  // 64-bit TCDM request from a core port (valid/gnt handshake alongside).
  typedef struct packed {
    tcdm_addr_t addr;
    logic       write;
    data_t      data;
    strb_t      strb;
  } tcdm_req_t;

  // 512-bit request of the DMA branch; addr is 64-byte aligned.
  typedef struct packed {
    tcdm_addr_t                addr;
    logic                      write;
    logic [DmaWidth-1:0]       data;
    logic [DmaStrbWidth-1:0]   strb;
  } dma_req_t;

  // Request as seen by a bank: already decoded row.
  typedef struct packed {
    logic [RowWidth-1:0] row;
    logic                write;
    data_t               data;
    strb_t               strb;
  } bank_req_t;

  // Superbank-wide request of the DMA branch after address decoding.
  typedef struct packed {
    logic [RowWidth-1:0]     row;
    logic                    write;
    logic [DmaWidth-1:0]     data;
    logic [DmaStrbWidth-1:0] strb;
  } sb_req_t;

  typedef logic [DmaWidth-1:0] dma_data_t;

  // ------------------------------------------------------- FREP sequencer
  typedef logic [31:0] instr_t;

  // Category an offloaded instruction is binned into.
  typedef enum logic [1:0] {
    CatFrep   = 2'd0,   // FREP: configures a loop
    CatLoop   = 2'd1,   // FP-only instruction, may be part of a loop body
    CatDirect = 2'd2    // reads or writes the integer register file: bypass
  } inst_cat_e;

  // Loop configuration extracted from an FREP (both fields are "count - 1").
  typedef struct packed {
    logic [11:0] num_inst;   // body length - 1
    logic [31:0] num_iter;   // iterations - 1
  } frep_cfg_t;

  // RISC-V major opcodes used by the decoder.
  localparam logic [6:0] OpcCustom0 = 7'b0001011;   // frep.o / frep.i
  localparam logic [6:0] OpcLoadFp  = 7'b0000111;
  localparam logic [6:0] OpcStoreFp = 7'b0100111;
  localparam logic [6:0] OpcMadd    = 7'b1000011;
  localparam logic [6:0] OpcMsub    = 7'b1000111;
  localparam logic [6:0] OpcNmsub   = 7'b1001011;
  localparam logic [6:0] OpcNmadd   = 7'b1001111;
  localparam logic [6:0] OpcOpFp    = 7'b1010011;

  // frep.o rs1, max_inst: rs1 holds iterations - 1, instr[31:20] body - 1.
  function automatic instr_t enc_frep_o(logic [4:0] rs1, logic [11:0] max_inst);
    return {max_inst, rs1, 3'b000, 4'b0000, 1'b1, OpcCustom0};
  endfunction

  // fmadd.d rd, rs1, rs2, rs3 (dynamic rounding mode).
  function automatic instr_t enc_fmadd_d(logic [4:0] rd, logic [4:0] rs1,
                                         logic [4:0] rs2, logic [4:0] rs3);
    return {rs3, 2'b01, rs2, rs1, 3'b111, rd, OpcMadd};
  endfunction

  // fmul.d rd, rs1, rs2.
  function automatic instr_t enc_fmul_d(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {7'b0001001, rs2, rs1, 3'b111, rd, OpcOpFp};
  endfunction

  // fmv.x.d rd, rs1 (FP -> integer register file).
  function automatic instr_t enc_fmv_x_d(logic [4:0] rd, logic [4:0] rs1);
    return {7'b1110001, 5'd0, rs1, 3'b000, rd, OpcOpFp};
  endfunction

endpackage
