// Self-checking testbench of the superbank mux: without contention both
// branches pass; under contention exactly one branch owns all 8 banks and
// the owner alternates between contended cycles; DMA writes are split into
// the 8 bank words and DMA reads collect the 8 bank outputs.
//
// A mux between the two branches at every superbank follows the paper; the
// alternating priority and the DMA taking all 8 banks or none are this
// design's choices.
module tb_superbank_mux;
  import zonl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic c_valid [8], c_ready [8], b_valid [8];
  bank_req_t c_req [8], b_req [8];
  data_t c_rsp [8], b_rsp [8];
  logic d_valid, d_ready, conflict;
  sb_req_t d_req;
  dma_data_t d_rsp;
  int checks = 0, failures = 0, n_conf = 0;

  superbank_mux dut (.clk_i(clk), .rst_ni(rst_n), .core_valid_i(c_valid), .core_ready_o(c_ready),
    .core_req_i(c_req), .core_rsp_o(c_rsp), .dma_valid_i(d_valid), .dma_ready_o(d_ready),
    .dma_req_i(d_req), .dma_rsp_o(d_rsp), .bank_valid_o(b_valid), .bank_req_o(b_req),
    .bank_rsp_i(b_rsp), .conflict_o(conflict));

  initial begin
    logic any, last_winner_dma, have_last;
    have_last = 0; last_winner_dma = 0;
    d_valid = 0; d_req = '0;
    for (int l = 0; l < 8; l++) begin c_valid[l] = 0; c_req[l] = '0; b_rsp[l] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      any = 0;
      for (int l = 0; l < 8; l++) begin
        c_valid[l] = ($urandom_range(3) == 0);
        any |= c_valid[l];
        c_req[l] = {$urandom(), $urandom(), $urandom()};
        b_rsp[l] = {$urandom(), $urandom()};
      end
      d_valid = $urandom_range(1);
      d_req = {16{$urandom()}};
      #1;
      for (int l = 0; l < 8; l++) begin
        checks += 2;
        if (c_rsp[l] !== b_rsp[l]) failures++;
        if (d_rsp[64*l +: 64] !== b_rsp[l]) failures++;
      end
      checks++;
      if (conflict !== (d_valid && any)) failures++;
      if (d_valid && any) begin
        n_conf++;
        checks++;
        if (have_last && d_ready == last_winner_dma) failures++;   // must alternate
        have_last = 1;
        last_winner_dma = d_ready;
      end else begin
        checks++;
        if (d_ready !== d_valid) failures++;
      end
      for (int l = 0; l < 8; l++) begin
        checks += 2;
        if (d_ready) begin
          if (!b_valid[l] || c_ready[l]) failures++;
          if (b_req[l].row !== d_req.row || b_req[l].data !== d_req.data[64*l +: 64] ||
              b_req[l].strb !== d_req.strb[8*l +: 8] || b_req[l].write !== d_req.write) failures++;
        end else begin
          if (b_valid[l] !== c_valid[l] || !c_ready[l]) failures++;
          if (c_valid[l] && b_req[l] !== c_req[l]) failures++;
        end
      end
    end
    checks++;
    if (n_conf == 0) failures++;
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
