// tile: four core data ports and sixteen SPM banks, the smallest level of
// the MemPool hierarchy.
//
// A core request whose address falls in this tile (tile and group fields
// equal tile_id_i and group_id_i) goes straight through the tile
// interconnect to a bank and is answered in the next cycle, the paper's
// single-cycle access. Any other request goes through the remote
// interconnect to one of the four outgoing ports (L, N, E, NE; see
// mempool_pkg::dir_e), each with a register stage (elastic_buffer). Requests
// from other tiles arrive on the four incoming ports, which are inputs of the
// tile interconnect next to the cores and the DMA port. Responses coming back
// on an outgoing port also pass a register stage. So a request leaving the
// tile costs two cycles more than a local one: the paper's "each hierarchy
// level adds two cycles of latency".
//
// The tile overwrites the source id of each core request with the hardware
// id {group, tile, core}; the response network routes by that id. A core
// that has requests in flight to its own tile and to remote tiles receives
// the responses round robin and matches them by tag, in any order.
// The cores themselves (Snitch), their instruction caches and the AXI port
// are not part of this module; the core ports are its data-memory side.
module tile #(
  parameter int unsigned NumCores         = mempool_pkg::NumCoresPerTile,
  parameter int unsigned NumBanks         = mempool_pkg::NumBanksPerTile,
  parameter int unsigned NumTilesPerGroup = mempool_pkg::NumTilesPerGroup,
  parameter int unsigned NumGroups        = mempool_pkg::NumGroups,
  localparam int unsigned NumDirs  = mempool_pkg::NumRemotePorts,
  localparam int unsigned TileW    = $clog2(NumTilesPerGroup),
  localparam int unsigned GroupW   = $clog2(NumGroups),
  localparam int unsigned CoreW    = $clog2(NumCores),
  localparam int unsigned TileLsb  = 2 + $clog2(NumBanks),
  localparam int unsigned GroupLsb = TileLsb + TileW,
  localparam int unsigned RowLsb   = GroupLsb + GroupW
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [TileW-1:0]        tile_id_i,
  input  logic [GroupW-1:0]       group_id_i,
  // core data ports
  input  logic [NumCores-1:0]     core_req_valid_i,
  output logic [NumCores-1:0]     core_req_ready_o,
  input  mempool_pkg::tcdm_req_t  core_req_i       [NumCores],
  output logic [NumCores-1:0]     core_resp_valid_o,
  input  logic [NumCores-1:0]     core_resp_ready_i,
  output mempool_pkg::tcdm_resp_t core_resp_o      [NumCores],
  // DMA port (this tile's banks only)
  input  logic                    dma_req_valid_i,
  output logic                    dma_req_ready_o,
  input  mempool_pkg::tcdm_req_t  dma_req_i,
  output logic                    dma_resp_valid_o,
  input  logic                    dma_resp_ready_i,
  output mempool_pkg::tcdm_resp_t dma_resp_o,
  // outgoing ports L, N, E, NE (registered)
  output logic [NumDirs-1:0]      out_req_valid_o,
  input  logic [NumDirs-1:0]      out_req_ready_i,
  output mempool_pkg::tcdm_req_t  out_req_o        [NumDirs],
  input  logic [NumDirs-1:0]      out_resp_valid_i,
  output logic [NumDirs-1:0]      out_resp_ready_o,
  input  mempool_pkg::tcdm_resp_t out_resp_i       [NumDirs],
  // incoming ports L, N, E, NE
  input  logic [NumDirs-1:0]      in_req_valid_i,
  output logic [NumDirs-1:0]      in_req_ready_o,
  input  mempool_pkg::tcdm_req_t  in_req_i         [NumDirs],
  output logic [NumDirs-1:0]      in_resp_valid_o,
  input  logic [NumDirs-1:0]      in_resp_ready_i,
  output mempool_pkg::tcdm_resp_t in_resp_o        [NumDirs]
);
  import mempool_pkg::*;

  localparam int unsigned NumPorts = NumCores + NumDirs + 1;
  localparam int unsigned DmaPort  = NumCores + NumDirs;

  // ---------------------------------------------------------------------------
  // Core requests: stamp the source id and split into local / remote
  // ---------------------------------------------------------------------------
  tcdm_req_t              core_req   [NumCores];
  logic [NumCores-1:0]    is_local;
  logic [NumCores-1:0]    rem_req_valid, rem_req_ready, rem_resp_valid, rem_resp_ready;
  tcdm_resp_t             rem_resp   [NumCores];

  // tile interconnect ports
  logic [NumPorts-1:0]    x_req_valid, x_req_ready, x_resp_valid, x_resp_ready;
  tcdm_req_t              x_req      [NumPorts];
  tcdm_resp_t             x_resp     [NumPorts];

  for (genvar c = 0; c < NumCores; c++) begin : g_core
    always_comb begin
      core_req[c]     = core_req_i[c];
      core_req[c].src = core_id_t'({group_id_i, tile_id_i, CoreW'(c)});
    end
    assign is_local[c] = (core_req_i[c].addr[TileLsb +: TileW]   == tile_id_i) &&
                         (core_req_i[c].addr[GroupLsb +: GroupW] == group_id_i);
    assign x_req_valid[c]   = core_req_valid_i[c] &&  is_local[c];
    assign rem_req_valid[c] = core_req_valid_i[c] && !is_local[c];
    assign x_req[c]         = core_req[c];
    assign core_req_ready_o[c] = is_local[c] ? x_req_ready[c] : rem_req_ready[c];

    // merge local and remote responses
    logic [1:0]  m_valid, m_ready;
    tcdm_resp_t  m_data [2];
    logic        unused_idx;
    assign m_valid   = {rem_resp_valid[c], x_resp_valid[c]};
    assign m_data[0] = x_resp[c];
    assign m_data[1] = rem_resp[c];
    assign x_resp_ready[c]   = m_ready[0];
    assign rem_resp_ready[c] = m_ready[1];
    rr_arbiter #(.NumIn(2), .data_t(tcdm_resp_t)) i_resp_merge (
      .clk_i, .rst_ni,
      .valid_i (m_valid),
      .ready_o (m_ready),
      .data_i  (m_data),
      .valid_o (core_resp_valid_o[c]),
      .ready_i (core_resp_ready_i[c]),
      .data_o  (core_resp_o[c]),
      .idx_o   (unused_idx)
    );
  end

  // incoming remote ports and DMA port into the tile interconnect
  for (genvar d = 0; d < NumDirs; d++) begin : g_in
    assign x_req_valid[NumCores+d]  = in_req_valid_i[d];
    assign in_req_ready_o[d]        = x_req_ready[NumCores+d];
    assign x_req[NumCores+d]        = in_req_i[d];
    assign in_resp_valid_o[d]       = x_resp_valid[NumCores+d];
    assign x_resp_ready[NumCores+d] = in_resp_ready_i[d];
    assign in_resp_o[d]             = x_resp[NumCores+d];
  end
  assign x_req_valid[DmaPort]  = dma_req_valid_i;
  assign dma_req_ready_o       = x_req_ready[DmaPort];
  assign x_req[DmaPort]        = dma_req_i;
  assign dma_resp_valid_o      = x_resp_valid[DmaPort];
  assign x_resp_ready[DmaPort] = dma_resp_ready_i;
  assign dma_resp_o            = x_resp[DmaPort];

  // ---------------------------------------------------------------------------
  // Tile interconnect and banks
  // ---------------------------------------------------------------------------
  logic [NumBanks-1:0] b_req_valid, b_req_ready, b_resp_valid, b_resp_ready;
  bank_req_t           b_req  [NumBanks];
  bank_resp_t          b_resp [NumBanks];

  tile_interconnect #(
    .NumPorts (NumPorts),
    .NumBanks (NumBanks),
    .BankLsb  (2),
    .RowLsb   (RowLsb)
  ) i_tile_interconnect (
    .clk_i, .rst_ni,
    .in_req_valid_i    (x_req_valid),
    .in_req_ready_o    (x_req_ready),
    .in_req_i          (x_req),
    .in_resp_valid_o   (x_resp_valid),
    .in_resp_ready_i   (x_resp_ready),
    .in_resp_o         (x_resp),
    .bank_req_valid_o  (b_req_valid),
    .bank_req_ready_i  (b_req_ready),
    .bank_req_o        (b_req),
    .bank_resp_valid_i (b_resp_valid),
    .bank_resp_ready_o (b_resp_ready),
    .bank_resp_i       (b_resp)
  );

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    spm_bank #(
      .NumWords  (BankWords),
      .DataWidth (DataWidth),
      .meta_t    (bank_meta_t)
    ) i_bank (
      .clk_i, .rst_ni,
      .req_valid_i  (b_req_valid[b]),
      .req_ready_o  (b_req_ready[b]),
      .req_row_i    (b_req[b].row),
      .req_we_i     (b_req[b].we),
      .req_be_i     (b_req[b].be),
      .req_wdata_i  (b_req[b].wdata),
      .req_meta_i   (b_req[b].meta),
      .resp_valid_o (b_resp_valid[b]),
      .resp_ready_i (b_resp_ready[b]),
      .resp_rdata_o (b_resp[b].rdata),
      .resp_meta_o  (b_resp[b].meta)
    );
  end

  // ---------------------------------------------------------------------------
  // Remote interconnect and the register stages of the outgoing ports
  // ---------------------------------------------------------------------------
  logic [NumDirs-1:0] r_req_valid, r_req_ready, r_resp_valid, r_resp_ready;
  tcdm_req_t          r_req  [NumDirs];
  tcdm_resp_t         r_resp [NumDirs];

  remote_interconnect #(
    .NumCores  (NumCores),
    .NumGroups (NumGroups),
    .GroupLsb  (GroupLsb)
  ) i_remote_interconnect (
    .clk_i, .rst_ni,
    .group_id_i,
    .core_req_valid_i    (rem_req_valid),
    .core_req_ready_o    (rem_req_ready),
    .core_req_i          (core_req),
    .core_resp_valid_o   (rem_resp_valid),
    .core_resp_ready_i   (rem_resp_ready),
    .core_resp_o         (rem_resp),
    .remote_req_valid_o  (r_req_valid),
    .remote_req_ready_i  (r_req_ready),
    .remote_req_o        (r_req),
    .remote_resp_valid_i (r_resp_valid),
    .remote_resp_ready_o (r_resp_ready),
    .remote_resp_i       (r_resp)
  );

  for (genvar d = 0; d < NumDirs; d++) begin : g_out
    elastic_buffer #(.data_t(tcdm_req_t)) i_req_reg (
      .clk_i, .rst_ni,
      .valid_i (r_req_valid[d]),
      .ready_o (r_req_ready[d]),
      .data_i  (r_req[d]),
      .valid_o (out_req_valid_o[d]),
      .ready_i (out_req_ready_i[d]),
      .data_o  (out_req_o[d])
    );
    elastic_buffer #(.data_t(tcdm_resp_t)) i_resp_reg (
      .clk_i, .rst_ni,
      .valid_i (out_resp_valid_i[d]),
      .ready_o (out_resp_ready_o[d]),
      .data_i  (out_resp_i[d]),
      .valid_o (r_resp_valid[d]),
      .ready_i (r_resp_ready[d]),
      .data_o  (r_resp[d])
    );
  end

endmodule
