// rr_arbiter: round-robin arbiter with a valid/ready handshake on every side.
//
// Among the inputs whose valid is high, the first one at or after the
// priority pointer wins and is passed to the output in the same cycle
// (combinational path from valid_i/data_i to valid_o/data_o, and from
// ready_i to ready_o). After a handshake on the output the pointer moves to
// the input after the winner, so every requester is served within NumIn
// handshakes. idx_o gives the winner's index. Round robin is this design's
// choice; the paper does not say how its interconnects arbitrate.
module rr_arbiter #(
  parameter int unsigned NumIn  = 4,
  parameter type         data_t = logic [31:0],
  localparam int unsigned IdxW  = (NumIn > 1) ? $clog2(NumIn) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [NumIn-1:0] valid_i,
  output logic [NumIn-1:0] ready_o,
  input  data_t            data_i [NumIn],
  output logic             valid_o,
  input  logic             ready_i,
  output data_t            data_o,
  output logic [IdxW-1:0]  idx_o
);

  logic [IdxW-1:0] ptr_q;
  logic [IdxW-1:0] idx;
  logic            found;
  int unsigned     j;

  always_comb begin
    found = 1'b0;
    idx   = '0;
    j     = 0;
    for (int unsigned i = 0; i < NumIn; i++) begin
      j = (int'(ptr_q) + i) % NumIn;
      if (!found && valid_i[j]) begin
        found = 1'b1;
        idx   = IdxW'(j);
      end
    end
  end

  assign valid_o = found;
  assign data_o  = data_i[idx];
  assign idx_o   = idx;

  always_comb begin
    ready_o      = '0;
    ready_o[idx] = found & ready_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0;
    end else if (found && ready_i) begin
      ptr_q <= (int'(idx) == NumIn - 1) ? '0 : idx + 1'b1;
    end
  end

endmodule
