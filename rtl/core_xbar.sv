// Core crossbar: fully connected 64-bit crossbar from the core ports to the
// banks of one hyperbank.
//
// Each input decodes its TCDM address: bit HbWinBits is the hyperbank bit,
// passed on for the hyperbank demux stage behind the crossbar; inside the
// hyperbank window the 64-bit word index is interleaved over NumOut banks
// (bank = word % NumOut, row = word / NumOut). Each output arbitrates among
// the inputs that address it with a round-robin arbiter and forwards the
// winner; an input is granted (gnt) when it wins and its output is ready.
// All selections use fixed indices and vector arithmetic (request matrix,
// lowest-set-bit search above the round-robin mask, one-hot AND-OR muxes)
// so the crossbar maps onto plain logic.
// Because the hyperbank demuxes sit behind the crossbar, a bank index is
// shared by both hyperbanks: two requests to bank j of different hyperbanks
// still compete here. Responses return exactly one cycle after the grant on
// rsp_valid/rsp_data of the granted input.
// The crossbar's place (before the hyperbank demuxes), its width and port
// counts (25 inputs, 24 banks per hyperbank) follow the paper; the modulo
// mapping and round-robin arbitration are this design's choices.
module core_xbar
  import zonl_pkg::*;
#(
  parameter int unsigned NumIn  = NumCorePorts,
  parameter int unsigned NumOut = BanksPerHb,
  localparam int unsigned OutW  = $clog2(NumOut)
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // core side
  input  logic      in_valid_i [NumIn],
  output logic      in_gnt_o   [NumIn],
  input  tcdm_req_t in_req_i   [NumIn],
  output logic      in_rsp_valid_o [NumIn],
  output data_t     in_rsp_data_o  [NumIn],
  // bank side (towards the hyperbank demuxes)
  output logic      out_valid_o [NumOut],
  input  logic      out_ready_i [NumOut],
  output bank_req_t out_req_o   [NumOut],
  output logic      out_hb_o    [NumOut],
  input  data_t     out_rsp_i   [NumOut]
);

  localparam int unsigned WordW = HbWinBits - 3;

  logic [OutW-1:0]  tgt  [NumIn];
  bank_req_t        breq [NumIn];
  logic [NumIn-1:0] req_m [NumOut];   // req_m[o][i]: input i requests output o
  logic [NumIn-1:0] win_oh [NumOut];  // one-hot winner of output o
  logic [NumIn-1:0] hi_q  [NumOut];   // inputs above the last winner
  logic             have  [NumOut];
  logic             fire  [NumOut];
  logic [OutW-1:0]  rsp_src_q [NumIn];  // output that granted input i
  logic             rsp_vld_q [NumIn];

  // address decode
  always_comb begin
    for (int unsigned i = 0; i < NumIn; i++) begin
      logic [WordW-1:0] word;
      word          = in_req_i[i].addr[HbWinBits-1:3];
      tgt[i]        = OutW'(word % WordW'(NumOut));
      breq[i].row   = RowWidth'(word / WordW'(NumOut));
      breq[i].write = in_req_i[i].write;
      breq[i].data  = in_req_i[i].data;
      breq[i].strb  = in_req_i[i].strb;
    end
  end

  // round-robin arbitration per output: the lowest requesting input above
  // the last winner wins, else the lowest requesting input overall. The
  // lowest set bit of a vector x is x & -x.
  always_comb begin
    for (int unsigned o = 0; o < NumOut; o++) begin
      logic [NumIn-1:0] req_hi;
      for (int unsigned i = 0; i < NumIn; i++)
        req_m[o][i] = in_valid_i[i] && (tgt[i] == OutW'(o));
      req_hi    = req_m[o] & hi_q[o];
      have[o]   = |req_m[o];
      win_oh[o] = (req_hi != '0) ? (req_hi & (~req_hi + 1'b1))
                                 : (req_m[o] & (~req_m[o] + 1'b1));
      // one-hot AND-OR selection of the winner's request
      out_req_o[o] = '0;
      out_hb_o[o]  = 1'b0;
      for (int unsigned i = 0; i < NumIn; i++) begin
        out_req_o[o] = out_req_o[o] | (win_oh[o][i] ? breq[i] : '0);
        out_hb_o[o]  = out_hb_o[o] | (win_oh[o][i] & in_req_i[i].addr[HbWinBits]);
      end
      out_valid_o[o] = have[o];
    end
  end

  // grants: kept apart from the request side so that out_valid_o does not
  // even appear to depend on out_ready_i
  always_comb begin
    for (int unsigned o = 0; o < NumOut; o++) fire[o] = have[o] && out_ready_i[o];
    for (int unsigned i = 0; i < NumIn; i++) begin
      in_gnt_o[i] = 1'b0;
      for (int unsigned o = 0; o < NumOut; o++)
        in_gnt_o[i] = in_gnt_o[i] | (fire[o] & win_oh[o][i]);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned o = 0; o < NumOut; o++) hi_q[o] <= '1;
      for (int unsigned i = 0; i < NumIn; i++) begin
        rsp_src_q[i] <= '0;
        rsp_vld_q[i] <= 1'b0;
      end
    end else begin
      for (int unsigned o = 0; o < NumOut; o++) begin
        // inputs strictly above the winner: ~(bits 0..winner)
        if (fire[o]) hi_q[o] <= ~(win_oh[o] | (win_oh[o] - 1'b1));
      end
      for (int unsigned i = 0; i < NumIn; i++) begin
        rsp_vld_q[i] <= in_gnt_o[i];
        if (in_gnt_o[i]) rsp_src_q[i] <= tgt[i];
      end
    end
  end

  // response routing: each input has at most one response in flight
  for (genvar i = 0; i < NumIn; i++) begin : gen_rsp
    assign in_rsp_valid_o[i] = rsp_vld_q[i];
    assign in_rsp_data_o[i]  = out_rsp_i[rsp_src_q[i]];
  end

  for (genvar i = 0; i < NumIn; i++) begin : gen_assert
    a_gnt_needs_valid: assert property (@(posedge clk_i) disable iff (!rst_ni)
      in_gnt_o[i] |-> in_valid_i[i]);
  end

endmodule
