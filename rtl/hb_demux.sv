// Hyperbank demux: routes one request to one of NumOut targets and the
// target's response back.
//
// The target is sel_i, the hyperbank bit (the TCDM address MSB). The request
// is forwarded with its handshake to that output only (valid/ready); the
// selection of a granted request is registered so that the response
// arriving one cycle later is taken from the same target. Responses carry no
// valid of their own here: the upstream branch knows when to expect one.
// Used with 64-bit bank requests after the core crossbar and with 512-bit
// superbank requests after the DMA crossbar. The demux stage and its
// selection by the address MSB follow the paper; the generic payload types
// and the registered response select are this design's.
module hb_demux #(
  parameter int unsigned NumOut = 2,
  parameter type req_t = logic [63:0],
  parameter type rsp_t = logic [63:0],
  localparam int unsigned SelW = (NumOut > 1) ? $clog2(NumOut) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            in_valid_i,
  output logic            in_ready_o,
  input  logic [SelW-1:0] sel_i,
  input  req_t            in_req_i,
  output rsp_t            in_rsp_o,
  output logic            out_valid_o [NumOut],
  input  logic            out_ready_i [NumOut],
  output req_t            out_req_o   [NumOut],
  input  rsp_t            out_rsp_i   [NumOut]
);

  logic [SelW-1:0] rsp_sel_q;

  always_comb begin
    in_ready_o = 1'b0;
    for (int unsigned o = 0; o < NumOut; o++) begin
      out_valid_o[o] = in_valid_i && (sel_i == SelW'(o));
      out_req_o[o]   = in_req_i;
      if (sel_i == SelW'(o)) in_ready_o = out_ready_i[o];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rsp_sel_q <= '0;
    else if (in_valid_i && in_ready_o) rsp_sel_q <= sel_i;
  end

  assign in_rsp_o = out_rsp_i[rsp_sel_q];

endmodule
