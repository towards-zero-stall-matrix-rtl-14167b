// Self-checking testbench of the core crossbar. 25 ports issue random
// requests (held until granted) to random banks of either hyperbank, with
// random output back-pressure. Checks: a granted request appears on output
// word % 24 with row word / 24, its hyperbank bit and its data; at most one
// grant per output; an output is valid exactly when some port addresses it;
// no port waits more than 25 ready cycles of its bank (round robin); each
// grant gets its output's response one cycle later and nothing else does.
//
// Full connectivity follows the paper. The round-robin bound it checks and
// the one-cycle response are this design's own arbitration and timing.
module tb_core_xbar;
  import zonl_pkg::*;
  localparam int P = NumCorePorts, B = BanksPerHb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic i_valid [P], i_gnt [P], i_rvalid [P];
  tcdm_req_t i_req [P];
  data_t i_rdata [P];
  logic o_valid [B], o_ready [B], o_hb [B];
  bank_req_t o_req [B];
  data_t o_rsp [B];
  int checks = 0, failures = 0, max_wait = 0;

  core_xbar dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(i_valid), .in_gnt_o(i_gnt),
    .in_req_i(i_req), .in_rsp_valid_o(i_rvalid), .in_rsp_data_o(i_rdata),
    .out_valid_o(o_valid), .out_ready_i(o_ready), .out_req_o(o_req), .out_hb_o(o_hb),
    .out_rsp_i(o_rsp));

  initial begin
    int wait_cnt [P];
    logic pend [P];
    int pend_bank [P];
    int ngnt [B];
    logic addressed [B];
    for (int p = 0; p < P; p++) begin i_valid[p] = 0; i_req[p] = '0; wait_cnt[p] = 0; pend[p] = 0; pend_bank[p] = 0; end
    for (int b = 0; b < B; b++) begin o_ready[b] = 0; o_rsp[b] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int b = 0; b < B; b++) begin
        o_rsp[b] = {$urandom(), $urandom()};
        o_ready[b] = ($urandom_range(4) != 0);
      end
      // responses for last cycle's grants
      #1;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (i_rvalid[p] !== pend[p]) failures++;
        if (pend[p]) begin checks++; if (i_rdata[p] !== o_rsp[pend_bank[p]]) failures++; end
      end
      for (int p = 0; p < P; p++) begin
        if (!i_valid[p] || pend[p]) begin
          int w;
          w = (c < 1500) ? $urandom_range(B * BankWords - 1) : $urandom_range(3) * B + $urandom_range(2);
          i_valid[p] = ($urandom_range(1) == 1);
          i_req[p].addr = tcdm_addr_t'(($urandom_range(1) << HbWinBits) | (w << 3));
          i_req[p].write = $urandom_range(1);
          i_req[p].data = {$urandom(), $urandom()};
          i_req[p].strb = $urandom();
          wait_cnt[p] = 0;
        end
      end
      #1;
      for (int b = 0; b < B; b++) begin ngnt[b] = 0; addressed[b] = 0; end
      for (int p = 0; p < P; p++) begin
        int w, b;
        w = int'(i_req[p].addr[HbWinBits-1:3]);
        b = w % B;
        pend[p] = 0;
        if (i_valid[p]) addressed[b] = 1;
        if (i_valid[p] && i_gnt[p]) begin
          ngnt[b]++;
          checks += 4;
          if (!o_valid[b] || !o_ready[b]) failures++;
          if (o_req[b].row !== RowWidth'(w / B)) failures++;
          if (o_hb[b] !== i_req[p].addr[HbWinBits]) failures++;
          if (o_req[b].data !== i_req[p].data || o_req[b].write !== i_req[p].write ||
              o_req[b].strb !== i_req[p].strb) failures++;
          pend[p] = 1;
          pend_bank[p] = b;
        end else if (i_valid[p] && o_ready[b]) begin
          wait_cnt[p]++;
          if (wait_cnt[p] > max_wait) max_wait = wait_cnt[p];
        end
        checks++;
        if (i_gnt[p] && !i_valid[p]) failures++;
      end
      for (int b = 0; b < B; b++) begin
        checks += 2;
        if (ngnt[b] > 1) failures++;
        if (o_valid[b] !== addressed[b]) failures++;
        if (o_valid[b] && o_ready[b] && ngnt[b] != 1) failures++;
      end
    end
    checks++;
    if (max_wait > P) begin failures++; $display("max wait %0d", max_wait); end
    $display("max wait %0d cycles", max_wait);
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
