// DMA crossbar: routes the 512-bit DMA request to one superbank of a
// hyperbank.
//
// The DMA moves one superbank line (8 contiguous 64-bit words, 64-byte
// aligned) per beat. Its address is decoded like a core address: bit
// HbWinBits is the hyperbank bit (passed on to the DMA hyperbank demuxes);
// inside the window word = addr / 8 is interleaved over the 24 banks of the
// hyperbank, so the line lands in superbank (word % 24) / 8 at row
// word / 24. With a single input the crossbar needs no arbitration: the
// request goes to the selected output with its valid/ready handshake, and the
// registered selection returns the superbank's 512-bit response one cycle
// after the grant (rsp_valid_o).
// The 1-to-superbanks crossbar on a dedicated DMA branch follows the paper
// (1-to-4 drawn for 32 banks per hyperbank, 1-to-3 here for 24); the address
// decoding is this design's.
module dma_xbar
  import zonl_pkg::*;
#(
  parameter int unsigned NumSb = SbPerHb,
  localparam int unsigned SbW = (NumSb > 1) ? $clog2(NumSb) : 1
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      in_valid_i,
  output logic      in_gnt_o,
  input  dma_req_t  in_req_i,
  output logic      in_rsp_valid_o,
  output dma_data_t in_rsp_data_o,
  output logic      out_valid_o [NumSb],
  input  logic      out_ready_i [NumSb],
  output sb_req_t   out_req_o   [NumSb],
  output logic      out_hb_o    [NumSb],
  input  dma_data_t out_rsp_i   [NumSb]
);

  localparam int unsigned WordW = HbWinBits - 3;
  localparam int unsigned NumBanks = NumSb * BanksPerSb;

  logic [WordW-1:0] word;
  logic [SbW-1:0]   sb, rsp_sb_q;
  logic             rsp_vld_q;
  sb_req_t          req;

  assign word      = in_req_i.addr[HbWinBits-1:3];
  assign sb        = SbW'((word % WordW'(NumBanks)) / WordW'(BanksPerSb));
  assign req.row   = RowWidth'(word / WordW'(NumBanks));
  assign req.write = in_req_i.write;
  assign req.data  = in_req_i.data;
  assign req.strb  = in_req_i.strb;

  always_comb begin
    in_gnt_o = 1'b0;
    for (int unsigned s = 0; s < NumSb; s++) begin
      out_valid_o[s] = in_valid_i && (sb == SbW'(s));
      out_req_o[s]   = req;
      out_hb_o[s]    = in_req_i.addr[HbWinBits];
      if (sb == SbW'(s)) in_gnt_o = in_valid_i && out_ready_i[s];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_vld_q <= 1'b0;
      rsp_sb_q  <= '0;
    end else begin
      rsp_vld_q <= in_gnt_o;
      if (in_gnt_o) rsp_sb_q <= sb;
    end
  end

  assign in_rsp_valid_o = rsp_vld_q;
  assign in_rsp_data_o  = out_rsp_i[rsp_sb_q];

  a_aligned: assert property (@(posedge clk_i) disable iff (!rst_ni)
    in_valid_i |-> (in_req_i.addr[5:0] == '0));

endmodule
