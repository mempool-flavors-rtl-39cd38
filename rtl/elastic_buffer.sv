// elastic_buffer: two-entry FIFO used as a pipeline register on a
// valid/ready link.
//
// Data written in one cycle appears at the output in the next, so the buffer
// adds exactly one cycle of latency. ready_o depends only on the buffer's own
// fill level, which cuts the combinational ready path, and two entries let it
// accept one item per cycle while the consumer also takes one per cycle.
// The published design states the latency each level adds, not how the
// register stages are built; this buffer is this design's choice.
module elastic_buffer #(
  parameter type data_t = logic [31:0]
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  valid_i,
  output logic  ready_o,
  input  data_t data_i,
  output logic  valid_o,
  input  logic  ready_i,
  output data_t data_o
);

  data_t      mem_q [2];
  logic       rd_q, wr_q;
  logic [1:0] cnt_q;

  wire push = valid_i & ready_o;
  wire pop  = valid_o & ready_i;

  assign ready_o = (cnt_q != 2'd2);
  assign valid_o = (cnt_q != 2'd0);
  assign data_o  = mem_q[rd_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= 1'b0;
      wr_q  <= 1'b0;
      cnt_q <= 2'd0;
    end else begin
      if (push) wr_q <= ~wr_q;
      if (pop)  rd_q <= ~rd_q;
      cnt_q <= cnt_q + {1'b0, push} - {1'b0, pop};
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= data_i;
  end

`ifndef SYNTHESIS
  assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= 2'd2)
    else $error("elastic_buffer: overflow");
`endif

endmodule
