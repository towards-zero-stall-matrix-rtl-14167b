// End-to-end testbench of the Zonl48dobu cluster datapath, at its default
// parameters: two double-buffered 32x32x32 FP64 matrix-multiplication tiles
// on all 8 compute cores.
//
// Around the RTL the testbench models what the cluster takes from elsewhere:
// each compute core offloads the matmul kernel written as two nested frep.o
// loops (unroll 8: 8 fmul.d, an inner loop of 8 fmadd.d repeated K-2 times,
// 8 fmadd.d writing to the C stream), then an fmv.x.d (integer destination,
// so it takes the sequencer bypass). Three stream registers per core fetch A
// and B and store C through the core's three TCDM ports; an FPU model
// executes each issued instruction in one cycle when its operands are there.
// The DMA model loads tile 0's A and B into hyperbank 0, then tile 1's into
// hyperbank 1 while the cores compute tile 0, then reads tile 0's C out of
// hyperbank 0 while the cores compute tile 1 in hyperbank 1. Each matrix sits
// in its own superbank (8 banks), as in the paper's conflict-minimising
// layout. Cores start tile 1 once its data is loaded (a barrier), so a core
// offloads tile 1 while its tile-0 nest is still running.
//
// Checks: every C element of both tiles (read back through the DMA) equals a
// reference computed in the same order; each core issues the expected number
// of compute instructions; no cycle sees the DMA and cores compete at a
// superbank mux. Mechanisms counted (each must occur): loop rewind, nest end,
// stalled non-nested FREP, sequencer bypass, TCDM stall between cores, DMA
// traffic in the hyperbank the cores are not using. FPU utilisation is
// reported.
//
// The kernel (a two-level frep.o nest, unroll 8) and the double-buffering
// schedule follow the paper. The skewed data layout, the models of the cores,
// stream registers, FPU and DMA, and the badly scheduled DMA phase are this
// testbench's own.
module tb_zonl48dobu_cluster;
  import zonl_pkg::*;

  localparam int M = 32, N = 32, K = 32, U = 8;
  localparam int C = NumCores;
  localparam int P = NumCorePorts;
  localparam int RowsPerCore = M / C;
  localparam int Fifo = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        inp_valid [C], inp_ready [C], oup_valid [C], oup_ready [C];
  instr_t      inp_instr [C], oup_instr [C];
  logic [31:0] inp_op_a [C], oup_op_a [C];
  logic        busy [C], rewind [C], nest_ends [C], frep_stall [C];
  logic [2:0]  loop_idx [C];
  logic        t_valid [P], t_gnt [P], t_rvalid [P];
  tcdm_req_t   t_req [P];
  data_t       t_rdata [P];
  logic        d_valid, d_gnt, d_rvalid;
  dma_req_t    d_req;
  dma_data_t   d_rdata;
  logic [2*SbPerHb-1:0] conflict;

  zonl48dobu_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .inp_valid_i(inp_valid), .inp_ready_o(inp_ready), .inp_instr_i(inp_instr), .inp_op_a_i(inp_op_a),
    .oup_valid_o(oup_valid), .oup_ready_i(oup_ready), .oup_instr_o(oup_instr), .oup_op_a_o(oup_op_a),
    .seq_busy_o(busy), .seq_rewind_o(rewind), .seq_nest_ends_o(nest_ends),
    .seq_frep_stall_o(frep_stall), .seq_loop_idx_o(loop_idx),
    .tcdm_req_valid_i(t_valid), .tcdm_req_gnt_o(t_gnt), .tcdm_req_i(t_req),
    .tcdm_rsp_valid_o(t_rvalid), .tcdm_rsp_data_o(t_rdata),
    .dma_req_valid_i(d_valid), .dma_req_gnt_o(d_gnt), .dma_req_i(d_req),
    .dma_rsp_valid_o(d_rvalid), .dma_rsp_data_o(d_rdata), .sb_conflict_o(conflict));

  int checks = 0, failures = 0;
  int n_rewind = 0, n_nest_end = 0, n_frep_stall = 0, n_bypass = 0, n_tcdm_stall = 0;
  int n_dma_other_hb = 0, n_conflict = 0, n_conflict_same_hb = 0, cycle = 0;

  // ---------------------------------------------------------------- data
  real A [2][M*K], B [2][K*N], Cref [2][M*N];

  // Every matrix is 32 columns wide and lives in its own superbank (mat 0 A,
  // 1 B, 2 C). Element e = 32*r + j sits in superbank row e/8, bank
  // (j + r) % 8: the skew lets cores working on different rows, or on
  // rotated columns, hit different banks in the same cycle.
  localparam int W = 32;
  function automatic int elem_bank(int e);
    return (e % 8 + e / W) % 8;
  endfunction
  function automatic tcdm_addr_t elem_addr(int h, int mat, int e);
    int w = (e / 8) * BanksPerHb + mat * BanksPerSb + elem_bank(e);
    return tcdm_addr_t'((h << HbWinBits) | (w << 3));
  endfunction
  // 64-byte aligned address of superbank row l of matrix mat
  function automatic tcdm_addr_t line_addr(int h, int mat, int l);
    return tcdm_addr_t'((h << HbWinBits) | ((l * BanksPerHb + mat * BanksPerSb) << 3));
  endfunction

  // ------------------------------------------------------- core programs
  typedef struct { instr_t instr; logic [31:0] op_a; } item_t;
  item_t prog [C][$];
  int    fed [C];
  int    tile_of_item_start;   // index of the first tile-1 item (same for all cores)
  logic  tile1_released;

  task automatic build_program(int c);
    item_t it;
    // fmv.x.d writes the integer register file: it takes the bypass, once
    // while the sequencer is idle and once behind the second nest
    it.instr = enc_fmv_x_d(5'd10, 5'd10);
    it.op_a = 32'd0;
    prog[c].push_back(it);
    for (int t = 0; t < 2; t++) begin
      it.op_a = 32'(RowsPerCore * (N / U) - 1);
      it.instr = enc_frep_o(5'd5, 12'(3 * U - 1));
      prog[c].push_back(it);
      it.op_a = '0;
      for (int u = 0; u < U; u++) begin
        it.instr = enc_fmul_d(5'(10 + u), 5'd0, 5'd1);
        prog[c].push_back(it);
      end
      it.op_a = 32'(K - 3);
      it.instr = enc_frep_o(5'd6, 12'(U - 1));
      prog[c].push_back(it);
      it.op_a = '0;
      for (int u = 0; u < U; u++) begin
        it.instr = enc_fmadd_d(5'(10 + u), 5'd0, 5'd1, 5'(10 + u));
        prog[c].push_back(it);
      end
      for (int u = 0; u < U; u++) begin
        it.instr = enc_fmadd_d(5'd2, 5'd0, 5'd1, 5'(10 + u));
        prog[c].push_back(it);
      end
      if (t == 0) tile_of_item_start = prog[c].size();
    end
    it.instr = enc_fmv_x_d(5'd10, 5'd10);
    it.op_a = 32'd1;
    prog[c].push_back(it);
  endtask

  // ------------------------------------------------------------ streams
  // stream s of core c uses TCDM port 3c+s; it walks a list of element
  // indices of its matrix in the tile's hyperbank
  int    s_tile [C][3];
  int    s_pos  [C][3];      // next element to request (A/B) or to write (C)
  int    s_inflight [C][3];
  data_t s_fifo [C][3][$];   // A/B: fetched operands; C: results to store

  // Core c computes rows c, c+8, ...; within a block of U columns its
  // unrolled instruction u handles column (u + c) % U. The A stream fetches
  // A[m][k] once and the FPU model reuses it U times (stream repetition).
  function automatic int stream_elem(int c, int s, int i);
    if (s == 0) begin
      int blk = i / K, k = i % K;
      int m = c + C * (blk / (N / U));
      return m * K + k;
    end else if (s == 1) begin
      int blk = i / (K * U), r = i % (K * U), k = r / U, u = r % U;
      int nb = blk % (N / U);
      return k * N + nb * U + (u + c) % U;
    end else begin
      int cb = i / U, cu = i % U;
      int cm = c + C * (cb / (N / U)), cnb = cb % (N / U);
      return cm * N + cnb * U + (cu + c) % U;
    end
  endfunction
  function automatic int stream_len(int s);
    return s == 0 ? RowsPerCore * (N / U) * K :
           s == 1 ? RowsPerCore * (N / U) * K * U : RowsPerCore * N;
  endfunction
  int a_uses [C];

  // ------------------------------------------------------------ FPU model
  real   freg [C][32];
  int    n_compute [C];
  int    first_issue [C][2], last_issue [C][2];
  int    c_written [C];          // C elements stored by the stream
  int    results_total;

  function automatic logic is_compute(instr_t i);
    return i[6:0] == OpcMadd || (i[6:0] == OpcOpFp && i[31:25] == 7'b0001001);
  endfunction

  // ------------------------------------------------------------ DMA model
  typedef enum { DmaLoad0, DmaLoad1, DmaWaitC0, DmaReadC0, DmaWaitC1, DmaReadC1, DmaDone } dma_phase_e;
  dma_phase_e dphase;
  int dline;                 // next line in the current phase
  int d_exp [$];             // tile of each outstanding read, -1 for a write
  int d_exp_line [$];
  int core_in_tile [C];

  function automatic dma_req_t dma_load_req(int h, int line);
    dma_req_t r;
    int mat = (line < M * K / 8) ? 0 : 1;
    int l = (mat == 0) ? line : line - M * K / 8;
    r.addr = line_addr(h, mat, l);
    r.write = 1'b1;
    r.strb = '1;
    for (int j = 0; j < 8; j++)
      r.data[64*elem_bank(8*l+j) +: 64] = $realtobits(mat == 0 ? A[h][8*l+j] : B[h][8*l+j]);
    return r;
  endfunction

  function automatic dma_req_t dma_read_req(int h, int mat, int line);
    dma_req_t r;
    r.addr = line_addr(h, mat, line);
    r.write = 1'b0;
    r.strb = '0;
    r.data = '0;
    return r;
  endfunction

  // ------------------------------------------------------------ main loop
  initial begin
    for (int h = 0; h < 2; h++) begin
      for (int i = 0; i < M * K; i++) A[h][i] = real'($urandom_range(16)) - 8.0;
      for (int i = 0; i < K * N; i++) B[h][i] = real'($urandom_range(16)) - 8.0;
      for (int m = 0; m < M; m++)
        for (int n = 0; n < N; n++) begin
          real acc;
          acc = A[h][m*K] * B[h][n];
          for (int k = 1; k < K; k++) acc = A[h][m*K+k] * B[h][k*N+n] + acc;
          Cref[h][m*N+n] = acc;
        end
    end
    for (int c = 0; c < C; c++) begin
      build_program(c);
      fed[c] = 0;
      inp_valid[c] = 0; inp_instr[c] = '0; inp_op_a[c] = '0; oup_ready[c] = 0;
      n_compute[c] = 0;
      for (int t = 0; t < 2; t++) begin first_issue[c][t] = -1; last_issue[c][t] = 0; end c_written[c] = 0;
      core_in_tile[c] = 0;
      a_uses[c] = 0;
      for (int s = 0; s < 3; s++) begin s_tile[c][s] = 0; s_pos[c][s] = 0; s_inflight[c][s] = 0; end
    end
    for (int p = 0; p < P; p++) begin t_valid[p] = 0; t_req[p] = '0; end
    d_valid = 0; d_req = '0;
    dphase = DmaLoad0; dline = 0;
    tile1_released = 0;
    results_total = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    while (!(dphase == DmaDone && d_exp.size() == 0)) begin
      @(negedge clk);
      cycle++;
      // -- integer cores offload (tile 1 only after the barrier)
      for (int c = 0; c < C; c++) begin
        automatic logic allowed;
        allowed = (dphase != DmaLoad0) && (fed[c] < tile_of_item_start || tile1_released);
        inp_valid[c] = allowed && fed[c] < prog[c].size();
        inp_instr[c] = (fed[c] < prog[c].size()) ? prog[c][fed[c]].instr : '0;
        inp_op_a[c]  = (fed[c] < prog[c].size()) ? prog[c][fed[c]].op_a : '0;
      end
      // -- stream requests
      for (int c = 0; c < C; c++) begin
        for (int s = 0; s < 3; s++) begin
          automatic int p = 3 * c + s;
          automatic int h = s_tile[c][s];
          t_valid[p] = 0;
          if (s < 2) begin
            if (h < 2 && s_inflight[c][s] + s_fifo[c][s].size() < Fifo &&
                (h == 0 ? dphase != DmaLoad0 : tile1_released)) begin
              t_valid[p] = 1;
              t_req[p].addr = elem_addr(h, s, stream_elem(c, s, s_pos[c][s]));
              t_req[p].write = 0;
              t_req[p].strb = '0;
              t_req[p].data = '0;
            end
          end else if (s_fifo[c][s].size() > 0) begin
            t_valid[p] = 1;
            t_req[p].addr = elem_addr(h, 2, stream_elem(c, 2, s_pos[c][s]));
            t_req[p].write = 1;
            t_req[p].strb = '1;
            t_req[p].data = s_fifo[c][s][0];
          end
        end
      end
      // -- DMA
      d_valid = 0;
      case (dphase)
        DmaLoad0, DmaLoad1: begin
          d_valid = 1;
          d_req = dma_load_req(dphase == DmaLoad0 ? 0 : 1, dline);
        end
        DmaReadC0, DmaReadC1: begin
          d_valid = 1;
          d_req = dma_read_req(dphase == DmaReadC0 ? 0 : 1, 2, dline);
        end
        // deliberately badly scheduled: read B of the tile the cores are
        // working on, in their hyperbank, to exercise the superbank muxes
        DmaWaitC1: begin
          d_valid = 1;
          d_req = dma_read_req(1, 1, dline % (K * N / 8));
        end
        default: ;
      endcase
      // -- FPU readiness
      #1;
      for (int c = 0; c < C; c++) begin
        oup_ready[c] = 1'b1;
        if (oup_valid[c] && is_compute(oup_instr[c])) begin
          if (s_fifo[c][0].size() == 0 || s_fifo[c][1].size() == 0) oup_ready[c] = 1'b0;
          if (oup_instr[c][11:7] == 5'd2 && s_fifo[c][2].size() >= Fifo) oup_ready[c] = 1'b0;
        end
      end
      // -- sample just before the edge
      #3;
      sample();
    end

    // ---- final checks
    for (int c = 0; c < C; c++) begin
      checks++;
      if (n_compute[c] != 2 * RowsPerCore * (N / U) * K * U) begin
        failures++;
        $display("core %0d issued %0d compute instructions", c, n_compute[c]);
      end
    end
    checks++;
    if (n_conflict != 0) begin failures++; $display("DMA/core conflicts: %0d", n_conflict); end
    checks += 7;
    if (n_conflict_same_hb == 0) begin failures++; $display("no conflict in the shared hyperbank"); end
    if (n_rewind == 0)       begin failures++; $display("no rewind"); end
    if (n_nest_end == 0)     begin failures++; $display("no nest end"); end
    if (n_frep_stall == 0)   begin failures++; $display("no stalled FREP"); end
    if (n_bypass == 0)       begin failures++; $display("no bypass"); end
    if (n_tcdm_stall == 0)   begin failures++; $display("no TCDM stall"); end
    if (n_dma_other_hb == 0) begin failures++; $display("no DMA beat beside computing cores"); end
    // FPU utilisation per tile: compute instructions over the cycles from a
    // core's first to its last compute issue of that tile
    for (int t = 0; t < 2; t++) begin
      real util = 0.0;
      for (int c = 0; c < C; c++)
        util += real'(RowsPerCore * (N / U) * K * U) / real'(last_issue[c][t] - first_issue[c][t] + 1);
      util = util / C;
      $display("tile %0d: mean FPU utilisation %0.1f%% (%0s)", t, 100.0 * util,
               t == 0 ? "DMA in the other hyperbank" : "DMA also reads the cores' hyperbank");
      if (t == 0) begin
        checks++;
        if (util < 0.95) begin failures++; $display("tile 0 utilisation below 95%%"); end
      end
    end
    $display("cycles=%0d", cycle);
    $display("rewinds=%0d nest_ends=%0d frep_stalls=%0d bypass=%0d tcdm_stalls=%0d dma_beats_beside_cores=%0d",
             n_rewind, n_nest_end, n_frep_stall, n_bypass, n_tcdm_stall, n_dma_other_hb);
    $display("conflicts with DMA in the other hyperbank=%0d, in the cores' hyperbank=%0d",
             n_conflict, n_conflict_same_hb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sample();
    // mechanisms
    for (int c = 0; c < C; c++) begin
      if (rewind[c]) n_rewind++;
      if (nest_ends[c]) n_nest_end++;
      if (frep_stall[c]) n_frep_stall++;
    end
    if (conflict != '0) begin
      if (dphase == DmaWaitC1) n_conflict_same_hb++;
      else n_conflict++;
    end
    // TCDM responses (A/B operand fetches)
    for (int c = 0; c < C; c++)
      for (int s = 0; s < 2; s++)
        if (t_rvalid[3*c+s]) begin
          s_fifo[c][s].push_back(t_rdata[3*c+s]);
          s_inflight[c][s]--;
        end
    // TCDM grants
    for (int c = 0; c < C; c++)
      for (int s = 0; s < 3; s++) begin
        int p = 3 * c + s;
        if (t_valid[p] && !t_gnt[p]) n_tcdm_stall++;
        if (t_valid[p] && t_gnt[p]) begin
          if (s < 2) begin
            s_inflight[c][s]++;
            s_pos[c][s]++;
            if (s_pos[c][s] == stream_len(s)) begin s_pos[c][s] = 0; s_tile[c][s]++; end
          end else begin
            void'(s_fifo[c][s].pop_front());
            s_pos[c][s]++;
            c_written[c]++;
            if (s_pos[c][s] == stream_len(s)) begin s_pos[c][s] = 0; s_tile[c][s]++; end
          end
        end
      end
    // instruction offload
    for (int c = 0; c < C; c++) if (inp_valid[c] && inp_ready[c]) fed[c]++;
    // FPU execution
    for (int c = 0; c < C; c++) begin
      if (oup_valid[c] && oup_ready[c]) begin
        instr_t i = oup_instr[c];
        if (is_compute(i)) begin
          real a, b, r;
          a = $bitstoreal(s_fifo[c][0][0]);
          if (++a_uses[c] == U) begin void'(s_fifo[c][0].pop_front()); a_uses[c] = 0; end
          b = $bitstoreal(s_fifo[c][1].pop_front());
          if (i[6:0] == OpcMadd) r = a * b + freg[c][i[31:27]];
          else r = a * b;
          if (i[11:7] == 5'd2) s_fifo[c][2].push_back($realtobits(r));
          else freg[c][i[11:7]] = r;
          begin
            int t = n_compute[c] / (RowsPerCore * (N / U) * K * U);
            if (first_issue[c][t] < 0) first_issue[c][t] = cycle;
            last_issue[c][t] = cycle;
          end
          n_compute[c]++;
        end else begin
          n_bypass++;
          checks++;
          if (oup_op_a[c] !== 32'(core_in_tile[c])) failures++;
          core_in_tile[c]++;
        end
      end
    end
    // DMA
    if (d_rvalid) begin
      int t = d_exp.pop_front();
      int l = d_exp_line.pop_front();
      for (int j = 0; j < 8 && t == 2; j++) begin
        checks++;
        if ($bitstoreal(d_rdata[64*elem_bank(8*l+j) +: 64]) != B[1][8*l+j]) failures++;
      end
      for (int j = 0; j < 8 && (t == 0 || t == 1); j++) begin
        checks++;
        if ($bitstoreal(d_rdata[64*elem_bank(8*l+j) +: 64]) != Cref[t][8*l+j]) begin
          failures++;
          if (failures < 8) $display("C%0d[%0d] = %f, expected %f", t, 8*l+j,
                                     $bitstoreal(d_rdata[64*elem_bank(8*l+j) +: 64]), Cref[t][8*l+j]);
        end
      end
    end
    if (d_valid && d_gnt) begin
      int busy_cores = 0;
      for (int c = 0; c < C; c++) if (busy[c]) busy_cores++;
      if (busy_cores > 0 && dphase != DmaLoad0 && dphase != DmaWaitC1) n_dma_other_hb++;
      // writes are acknowledged too: queue them as tile -1
      d_exp.push_back(dphase == DmaReadC0 ? 0 : dphase == DmaReadC1 ? 1 :
                      dphase == DmaWaitC1 ? 2 : -1);
      d_exp_line.push_back(dline);
      dline++;
    end
    case (dphase)
      DmaLoad0:  if (dline == (M * K + K * N) / 8) begin dphase = DmaLoad1; dline = 0; end
      DmaLoad1:  if (dline == (M * K + K * N) / 8) begin dphase = DmaWaitC0; dline = 0; tile1_released = 1; end
      DmaWaitC0: begin
        logic all_done = 1;
        for (int c = 0; c < C; c++) if (s_tile[c][2] < 1) all_done = 0;
        if (all_done) dphase = DmaReadC0;
      end
      DmaReadC0: if (dline == M * N / 8) begin dphase = DmaWaitC1; dline = 0; end
      DmaWaitC1: begin
        logic all_done = 1;
        dline = dline % (K * N / 8);
        for (int c = 0; c < C; c++) if (s_tile[c][2] < 2) all_done = 0;
        if (all_done) begin dphase = DmaReadC1; dline = 0; end
      end
      DmaReadC1: if (dline == M * N / 8) begin dphase = DmaDone; dline = 0; end
      default: ;
    endcase
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired: dma phase %s line %0d", dphase.name(), dline);
    for (int c = 0; c < C; c++)
      $display("  core %0d fed %0d/%0d compute %0d streams pos %0d/%0d/%0d tile %0d/%0d/%0d fifo %0d/%0d/%0d oup_valid %b instr %h",
               c, fed[c], prog[c].size(), n_compute[c], s_pos[c][0], s_pos[c][1], s_pos[c][2],
               s_tile[c][0], s_tile[c][1], s_tile[c][2], s_fifo[c][0].size(), s_fifo[c][1].size(),
               s_fifo[c][2].size(), oup_valid[c], oup_instr[c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
