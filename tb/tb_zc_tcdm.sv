// Self-checking testbench of the zero-conflict memory subsystem (Dobu TCDM).
//
// A reference memory (one 64-bit word per address) is updated at every
// granted write and consulted at every granted read; each response, one
// cycle after its grant, must carry the reference word. Phases:
//   1. the DMA fills both hyperbanks with random lines (no core traffic):
//      one line per cycle must be accepted;
//   2. random core and DMA traffic over the whole TCDM, with byte strobes:
//      data checks, and branch conflicts at superbank muxes must occur;
//   3. double buffering: 24 core ports stream through hyperbank 0 on distinct
//      banks while the DMA streams through hyperbank 1: every request must be
//      granted in its own cycle and no superbank conflict may occur;
//   4. the same with the DMA in hyperbank 0: core requests now stall.
// Inputs change at the falling edge; grants and responses are sampled just
// before the rising edge.
//
// No conflicts while the DMA works in the other hyperbank is the paper's
// central claim for this memory; the traffic and the memory model are this
// testbench's own.
module tb_zc_tcdm;
  import zonl_pkg::*;
  localparam int P = NumCorePorts;
  localparam int HbWords = BanksPerHb * BankWords;     // populated words per hyperbank

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      c_valid [P], c_gnt [P], c_rvalid [P];
  tcdm_req_t c_req [P];
  data_t     c_rdata [P];
  logic      d_valid, d_gnt, d_rvalid;
  dma_req_t  d_req;
  dma_data_t d_rdata;
  logic [2*SbPerHb-1:0] conflict;

  zc_tcdm dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(c_valid), .core_req_gnt_o(c_gnt), .core_req_i(c_req),
    .core_rsp_valid_o(c_rvalid), .core_rsp_data_o(c_rdata),
    .dma_req_valid_i(d_valid), .dma_req_gnt_o(d_gnt), .dma_req_i(d_req),
    .dma_rsp_valid_o(d_rvalid), .dma_rsp_data_o(d_rdata), .sb_conflict_o(conflict));

  int checks = 0, failures = 0;
  data_t mem [int];
  typedef struct { logic is_read; data_t d; } exp_t;
  exp_t exp_c [P][$];
  typedef struct { logic is_read; dma_data_t d; } expd_t;
  expd_t exp_d [$];
  int n_conflict_cycles = 0, n_core_stall = 0, n_core_gnt = 0, n_dma_gnt = 0;

  function automatic int widx(tcdm_addr_t a);
    return int'(a[HbWinBits]) * 8192 + int'(a[HbWinBits-1:3]);
  endfunction

  function automatic tcdm_addr_t waddr(int hb, int w);
    return tcdm_addr_t'((hb << HbWinBits) | (w << 3));
  endfunction

  function automatic data_t merge(data_t old, data_t nw, strb_t s);
    data_t r = old;
    for (int b = 0; b < 8; b++) if (s[b]) r[8*b +: 8] = nw[8*b +: 8];
    return r;
  endfunction

  // sample just before the rising edge: grants (apply to the model) and
  // responses (check against the model)
  task automatic sample();
    #4;
    for (int p = 0; p < P; p++) begin
      if (c_rvalid[p]) begin
        checks++;
        if (exp_c[p].size() == 0) begin failures++; $display("port %0d: unexpected response", p); end
        else begin
          exp_t e = exp_c[p].pop_front();
          if (e.is_read && c_rdata[p] !== e.d) begin
            failures++;
            if (failures < 8) $display("port %0d: read %h expected %h", p, c_rdata[p], e.d);
          end
        end
      end
    end
    if (d_rvalid) begin
      checks++;
      if (exp_d.size() == 0) begin failures++; $display("unexpected DMA response"); end
      else begin
        expd_t e = exp_d.pop_front();
        if (e.is_read && d_rdata !== e.d) begin
          failures++;
          if (failures < 8) $display("DMA read mismatch at %0t", $time);
        end
      end
    end
    if (conflict != '0) n_conflict_cycles++;
    for (int p = 0; p < P; p++) begin
      if (c_valid[p] && c_gnt[p]) begin
        int w = widx(c_req[p].addr);
        n_core_gnt++;
        if (c_req[p].write) begin
          mem[w] = merge(mem.exists(w) ? mem[w] : '0, c_req[p].data, c_req[p].strb);
          exp_c[p].push_back('{1'b0, '0});
        end else exp_c[p].push_back('{1'b1, mem[w]});
      end else if (c_valid[p]) n_core_stall++;
    end
    if (d_valid && d_gnt) begin
      int w = widx(d_req.addr);
      dma_data_t line;
      n_dma_gnt++;
      for (int l = 0; l < 8; l++) begin
        if (d_req.write) mem[w+l] = merge(mem.exists(w+l) ? mem[w+l] : '0, d_req.data[64*l +: 64], d_req.strb[8*l +: 8]);
        else line[64*l +: 64] = mem[w+l];
      end
      exp_d.push_back('{!d_req.write, line});
    end
  endtask

  function automatic tcdm_req_t rand_core_req(int hb);
    tcdm_req_t r;
    r.addr  = waddr(hb, $urandom_range(HbWords - 1));
    r.write = ($urandom_range(1) == 1);
    r.data  = {$urandom(), $urandom()};
    r.strb  = ($urandom_range(1) == 1) ? '1 : strb_t'($urandom());
    return r;
  endfunction

  function automatic dma_req_t rand_dma_req(int hb, logic wr);
    dma_req_t r;
    r.addr  = waddr(hb, 8 * $urandom_range(HbWords / 8 - 1));
    r.write = wr;
    for (int l = 0; l < 16; l++) r.data[32*l +: 32] = $urandom();
    r.strb  = '1;
    return r;
  endfunction

  initial begin
    int cyc, base_stall, base_gnt;
    for (int p = 0; p < P; p++) begin c_valid[p] = 0; c_req[p] = '0; end
    d_valid = 0; d_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. DMA fills both hyperbanks
    for (int hb = 0; hb < 2; hb++) begin
      for (int w = 0; w < HbWords; w += 8) begin
        @(negedge clk);
        d_valid = 1;
        d_req = rand_dma_req(hb, 1'b1);
        d_req.addr = waddr(hb, w);
        sample();
        checks++;
        if (!d_gnt) failures++;
      end
    end
    @(negedge clk);
    d_valid = 0;
    sample();

    // 2. random mixed traffic; requests are held until granted
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int p = 0; p < P; p++) begin
        if (!c_valid[p] || c_gnt[p]) begin
          c_valid[p] = ($urandom_range(3) == 0);
          c_req[p]   = rand_core_req($urandom_range(1));
        end
      end
      if (!d_valid || d_gnt) begin
        d_valid = ($urandom_range(1) == 0);
        d_req   = rand_dma_req($urandom_range(1), $urandom_range(1) == 1);
        if (!d_req.write) d_req.strb = '0;
        else if ($urandom_range(1) == 1) d_req.strb = dma_req_t'($urandom()) & 64'hffff_ffff_ffff_ffff;
      end
      sample();
    end
    @(negedge clk);
    for (int p = 0; p < P; p++) c_valid[p] = 0;
    d_valid = 0;
    sample();
    checks++;
    if (n_conflict_cycles == 0) begin failures++; $display("no branch conflict seen"); end
    $display("random phase: conflict cycles=%0d core stalls=%0d", n_conflict_cycles, n_core_stall);

    // 3. double buffering: cores in hyperbank 0, DMA in hyperbank 1
    for (int k = 0; k < 2; k++) begin
      int dma_hb;
      dma_hb = (k == 0) ? 1 : 0;
      n_conflict_cycles = 0;
      base_stall = n_core_stall;
      base_gnt = n_dma_gnt;
      cyc = 0;
      for (int c = 0; c < 400; c++) begin
        @(negedge clk);
        for (int p = 0; p < P; p++) begin
          // port p streams through bank p: word = row * 24 + p
          c_valid[p] = (p < BanksPerHb);
          c_req[p].addr  = waddr(0, ((c + 3 * p) % BankWords) * BanksPerHb + p);
          c_req[p].write = (p % 3 == 2);
          c_req[p].data  = {$urandom(), $urandom()};
          c_req[p].strb  = '1;
        end
        d_valid = 1;
        d_req = rand_dma_req(dma_hb, c % 2 == 0);
        d_req.addr = waddr(dma_hb, (8 * c) % HbWords);
        sample();
        cyc++;
        if (k == 0) begin
          checks += 2;
          for (int p = 0; p < BanksPerHb; p++) if (!c_gnt[p]) begin failures++; break; end
          if (!d_gnt) failures++;
        end
      end
      @(negedge clk);
      for (int p = 0; p < P; p++) c_valid[p] = 0;
      d_valid = 0;
      sample();
      checks++;
      if (k == 0) begin
        if (n_conflict_cycles != 0 || n_core_stall != base_stall) failures++;
        $display("double buffering, DMA in other hyperbank: conflicts=%0d core stalls=%0d dma beats=%0d/%0d",
                 n_conflict_cycles, n_core_stall - base_stall, n_dma_gnt - base_gnt, cyc);
      end else begin
        if (n_conflict_cycles == 0) failures++;
        $display("DMA in the cores' hyperbank: conflicts=%0d core stalls=%0d dma beats=%0d/%0d",
                 n_conflict_cycles, n_core_stall - base_stall, n_dma_gnt - base_gnt, cyc);
      end
    end
    repeat (2) begin @(negedge clk); sample(); end
    for (int p = 0; p < P; p++) begin
      checks++;
      if (exp_c[p].size() != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
