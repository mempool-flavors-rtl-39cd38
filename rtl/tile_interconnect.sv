// tile_interconnect: the crossbar that joins a tile's requesters to its 16
// SPM banks.
//
// Requesters, in port order: the tile's 4 cores, the 4 incoming remote ports
// (L = other tiles of the group, N, E, NE = the three other groups) and one
// DMA port. The paper draws exactly these inputs and states single-cycle
// access; the arbitration and the encoding are this design's.
//
// Each request selects its bank with address bits [BankLsb +: log2(NumBanks)]
// and its row with [RowLsb +: log2(BankWords)]. One round-robin arbiter per
// bank picks a request; request valid to bank and bank ready back to the
// requester are combinational, so a request to a free bank is taken in the
// cycle it is presented and answered by the bank in the next cycle. The index
// of the winning port is stored in the bank with the request, and the bank's
// response is routed back to that port through one round-robin arbiter per
// port (several banks may answer the same port in one cycle).
module tile_interconnect #(
  parameter int unsigned NumPorts  = mempool_pkg::TilePorts,
  parameter int unsigned NumBanks  = mempool_pkg::NumBanksPerTile,
  parameter int unsigned BankLsb   = 2,
  parameter int unsigned RowLsb    = 12,
  localparam int unsigned BankSelW = $clog2(NumBanks)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [NumPorts-1:0]     in_req_valid_i,
  output logic [NumPorts-1:0]     in_req_ready_o,
  input  mempool_pkg::tcdm_req_t  in_req_i        [NumPorts],
  output logic [NumPorts-1:0]     in_resp_valid_o,
  input  logic [NumPorts-1:0]     in_resp_ready_i,
  output mempool_pkg::tcdm_resp_t in_resp_o       [NumPorts],
  output logic [NumBanks-1:0]     bank_req_valid_o,
  input  logic [NumBanks-1:0]     bank_req_ready_i,
  output mempool_pkg::bank_req_t  bank_req_o      [NumBanks],
  input  logic [NumBanks-1:0]     bank_resp_valid_i,
  output logic [NumBanks-1:0]     bank_resp_ready_o,
  input  mempool_pkg::bank_resp_t bank_resp_i     [NumBanks]
);
  import mempool_pkg::*;

  localparam int unsigned PortW = $clog2(NumPorts);

  logic [BankSelW-1:0]     sel      [NumPorts];
  tcdm_req_t               xbar_req [NumBanks];
  logic [PortW-1:0]        xbar_idx [NumBanks];
  logic [PortW-1:0]        resp_sel [NumBanks];
  tcdm_resp_t              bank_tcdm_resp [NumBanks];

  for (genvar i = 0; i < NumPorts; i++) begin : g_sel
    assign sel[i] = in_req_i[i].addr[BankLsb +: BankSelW];
  end

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    assign bank_req_o[b].row        = xbar_req[b].addr[RowLsb +: RowWidth];
    assign bank_req_o[b].we         = xbar_req[b].we;
    assign bank_req_o[b].be         = xbar_req[b].be;
    assign bank_req_o[b].wdata      = xbar_req[b].wdata;
    assign bank_req_o[b].meta.src   = xbar_req[b].src;
    assign bank_req_o[b].meta.tag   = xbar_req[b].tag;
    assign bank_req_o[b].meta.port  = TilePortWidth'(xbar_idx[b]);
    assign resp_sel[b]              = PortW'(bank_resp_i[b].meta.port);
    assign bank_tcdm_resp[b].rdata  = bank_resp_i[b].rdata;
    assign bank_tcdm_resp[b].src    = bank_resp_i[b].meta.src;
    assign bank_tcdm_resp[b].tag    = bank_resp_i[b].meta.tag;
  end

  tcdm_xbar #(
    .NumIn  (NumPorts),
    .NumOut (NumBanks),
    .req_t  (tcdm_req_t),
    .resp_t (tcdm_resp_t)
  ) i_xbar (
    .clk_i, .rst_ni,
    .in_req_valid_i   (in_req_valid_i),
    .in_req_ready_o   (in_req_ready_o),
    .in_req_i         (in_req_i),
    .in_sel_i         (sel),
    .out_req_valid_o  (bank_req_valid_o),
    .out_req_ready_i  (bank_req_ready_i),
    .out_req_o        (xbar_req),
    .out_idx_o        (xbar_idx),
    .out_resp_valid_i (bank_resp_valid_i),
    .out_resp_ready_o (bank_resp_ready_o),
    .out_resp_i       (bank_tcdm_resp),
    .out_resp_sel_i   (resp_sel),
    .in_resp_valid_o  (in_resp_valid_o),
    .in_resp_ready_i  (in_resp_ready_i),
    .in_resp_o        (in_resp_o)
  );

endmodule
