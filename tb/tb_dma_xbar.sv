// Self-checking testbench of the DMA crossbar: each 64-byte line must reach
// superbank (word % 24) / 8 of its hyperbank at row word / 24, be granted when
// that superbank is ready, and get the response of that superbank one cycle
// later.
//
// Reaching any superbank in every cycle is the paper's property; the row and
// superbank decode checked here is this design's address map.
module tb_dma_xbar;
  import zonl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_gnt, rsp_valid;
  dma_req_t in_req;
  dma_data_t rsp_data;
  logic o_valid [SbPerHb], o_ready [SbPerHb], o_hb [SbPerHb];
  sb_req_t o_req [SbPerHb];
  dma_data_t o_rsp [SbPerHb];
  int checks = 0, failures = 0;

  dma_xbar dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_gnt_o(in_gnt),
    .in_req_i(in_req), .in_rsp_valid_o(rsp_valid), .in_rsp_data_o(rsp_data),
    .out_valid_o(o_valid), .out_ready_i(o_ready), .out_req_o(o_req), .out_hb_o(o_hb),
    .out_rsp_i(o_rsp));

  initial begin
    int w, sb, psb;
    logic pend;
    pend = 0; psb = 0;
    in_valid = 0; in_req = '0;
    for (int s = 0; s < SbPerHb; s++) begin o_ready[s] = 0; o_rsp[s] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      for (int s = 0; s < SbPerHb; s++) begin
        o_rsp[s] = {16{$urandom()}};
        o_ready[s] = $urandom_range(1);
      end
      #1;
      checks++;
      if (rsp_valid !== pend) failures++;
      if (pend) begin checks++; if (rsp_data !== o_rsp[psb]) failures++; end
      w = 8 * $urandom_range(BanksPerHb * BankWords / 8 - 1);
      sb = (w % BanksPerHb) / BanksPerSb;
      in_valid = $urandom_range(1);
      in_req.addr = tcdm_addr_t'(($urandom_range(1) << HbWinBits) | (w << 3));
      in_req.write = $urandom_range(1);
      in_req.data = {16{$urandom()}};
      in_req.strb = {$urandom(), $urandom()};
      #1;
      for (int s = 0; s < SbPerHb; s++) begin
        checks++;
        if (o_valid[s] !== (in_valid && s == sb)) failures++;
      end
      checks += 5;
      if (o_req[sb].row !== RowWidth'(w / BanksPerHb)) failures++;
      if (o_hb[sb] !== in_req.addr[HbWinBits]) failures++;
      if (o_req[sb].data !== in_req.data || o_req[sb].strb !== in_req.strb) failures++;
      if (o_req[sb].write !== in_req.write) failures++;
      if (in_gnt !== (in_valid && o_ready[sb])) failures++;
      pend = in_gnt;
      psb = sb;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
