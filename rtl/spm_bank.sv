// spm_bank: one bank of the L1 scratchpad memory (SPM).
//
// The paper gives the bank's place and count (16 per tile, 1 MiB for 256
// cores, hence 256 words of 32 bits) and that a tile reaches its banks in a
// single cycle; the rest is this design's choice. The bank is written as a
// register array, not a foundry SRAM macro.
//
// Interface and timing: a request (row, write enable, byte enables, write
// data, metadata) is accepted when req_valid_i and req_ready_o are high at a
// clock edge. The response appears in the next cycle in a one-entry register:
// the read data for a load, zero for a store, and the request's metadata
// unchanged. req_ready_o is high when that register is empty or is being
// emptied in the same cycle, so the bank sustains one access per cycle and
// stalls only when its response is held back. Stores write only the bytes
// whose enable is set. The contents are not reset.
module spm_bank #(
  parameter int unsigned NumWords  = mempool_pkg::BankWords,
  parameter int unsigned DataWidth = mempool_pkg::DataWidth,
  parameter type         meta_t    = mempool_pkg::bank_meta_t,
  localparam int unsigned RowW     = $clog2(NumWords),
  localparam int unsigned BeW      = DataWidth / 8
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 req_valid_i,
  output logic                 req_ready_o,
  input  logic [RowW-1:0]      req_row_i,
  input  logic                 req_we_i,
  input  logic [BeW-1:0]       req_be_i,
  input  logic [DataWidth-1:0] req_wdata_i,
  input  meta_t                req_meta_i,
  output logic                 resp_valid_o,
  input  logic                 resp_ready_i,
  output logic [DataWidth-1:0] resp_rdata_o,
  output meta_t                resp_meta_o
);

  logic [DataWidth-1:0] mem_q [NumWords];
  logic                 resp_valid_q;
  logic [DataWidth-1:0] rdata_q;
  meta_t                meta_q;

  assign req_ready_o  = !resp_valid_q || resp_ready_i;
  wire   accept       = req_valid_i && req_ready_o;

  always_ff @(posedge clk_i) begin
    if (accept && req_we_i) begin
      for (int unsigned b = 0; b < BeW; b++) begin
        if (req_be_i[b]) mem_q[req_row_i][8*b +: 8] <= req_wdata_i[8*b +: 8];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      resp_valid_q <= 1'b0;
      rdata_q      <= '0;
      meta_q       <= '0;
    end else if (accept) begin
      resp_valid_q <= 1'b1;
      rdata_q      <= req_we_i ? '0 : mem_q[req_row_i];
      meta_q       <= req_meta_i;
    end else if (resp_ready_i) begin
      resp_valid_q <= 1'b0;
    end
  end

  assign resp_valid_o = resp_valid_q;
  assign resp_rdata_o = rdata_q;
  assign resp_meta_o  = meta_q;

`ifndef SYNTHESIS
  // A held response must stay stable until it is taken.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      resp_valid_o && !resp_ready_i |=> resp_valid_o && $stable(resp_rdata_o))
    else $error("spm_bank: response changed while stalled");
`endif

endmodule
