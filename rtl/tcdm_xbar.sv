// tcdm_xbar: full crossbar for requests and the responses that come back.
//
// Request side: input i names its output in in_sel_i[i]; every output has a
// round-robin arbiter over the inputs that name it, and the winner goes
// through in the same cycle. out_idx_o tells which input won, so that the
// target can send its response back. Response side: output o names the
// input its response belongs to in out_resp_sel_i[o]; every input has a
// round-robin arbiter over the responses for it. Both directions are purely
// combinational; registers are placed by the users of the crossbar. The
// published design names its crossbars but not their insides; this shared
// structure is this design's.
module tcdm_xbar #(
  parameter int unsigned NumIn   = 4,
  parameter int unsigned NumOut  = 4,
  parameter type         req_t   = logic [31:0],
  parameter type         resp_t  = logic [31:0],
  localparam int unsigned InW    = (NumIn  > 1) ? $clog2(NumIn)  : 1,
  localparam int unsigned OutW   = (NumOut > 1) ? $clog2(NumOut) : 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // request side
  input  logic [NumIn-1:0]  in_req_valid_i,
  output logic [NumIn-1:0]  in_req_ready_o,
  input  req_t              in_req_i       [NumIn],
  input  logic [OutW-1:0]   in_sel_i       [NumIn],
  output logic [NumOut-1:0] out_req_valid_o,
  input  logic [NumOut-1:0] out_req_ready_i,
  output req_t              out_req_o      [NumOut],
  output logic [InW-1:0]    out_idx_o      [NumOut],
  // response side
  input  logic [NumOut-1:0] out_resp_valid_i,
  output logic [NumOut-1:0] out_resp_ready_o,
  input  resp_t             out_resp_i     [NumOut],
  input  logic [InW-1:0]    out_resp_sel_i [NumOut],
  output logic [NumIn-1:0]  in_resp_valid_o,
  input  logic [NumIn-1:0]  in_resp_ready_i,
  output resp_t             in_resp_o      [NumIn]
);

  logic [NumOut-1:0][NumIn-1:0] req_valid_m, req_ready_m;
  logic [NumIn-1:0][NumOut-1:0] resp_valid_m, resp_ready_m;

  for (genvar o = 0; o < NumOut; o++) begin : g_out
    for (genvar i = 0; i < NumIn; i++) begin : g_in
      assign req_valid_m[o][i] = in_req_valid_i[i] && (int'(in_sel_i[i]) == o);
    end
    rr_arbiter #(.NumIn(NumIn), .data_t(req_t)) i_arb (
      .clk_i, .rst_ni,
      .valid_i (req_valid_m[o]),
      .ready_o (req_ready_m[o]),
      .data_i  (in_req_i),
      .valid_o (out_req_valid_o[o]),
      .ready_i (out_req_ready_i[o]),
      .data_o  (out_req_o[o]),
      .idx_o   (out_idx_o[o])
    );
  end

  for (genvar i = 0; i < NumIn; i++) begin : g_in_resp
    for (genvar o = 0; o < NumOut; o++) begin : g_out
      assign resp_valid_m[i][o] = out_resp_valid_i[o] && (int'(out_resp_sel_i[o]) == i);
    end
    logic [OutW-1:0] unused_idx;
    rr_arbiter #(.NumIn(NumOut), .data_t(resp_t)) i_arb (
      .clk_i, .rst_ni,
      .valid_i (resp_valid_m[i]),
      .ready_o (resp_ready_m[i]),
      .data_i  (out_resp_i),
      .valid_o (in_resp_valid_o[i]),
      .ready_i (in_resp_ready_i[i]),
      .data_o  (in_resp_o[i]),
      .idx_o   (unused_idx)
    );
  end

  always_comb begin
    in_req_ready_o   = '0;
    out_resp_ready_o = '0;
    for (int unsigned o = 0; o < NumOut; o++) begin
      in_req_ready_o |= req_ready_m[o];
    end
    for (int unsigned i = 0; i < NumIn; i++) begin
      out_resp_ready_o |= resp_ready_m[i];
    end
  end

endmodule
