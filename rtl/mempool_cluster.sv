// mempool_cluster: the L1 memory system of the baseline MemPool cluster,
// 256 core data ports sharing 1 MiB of scratchpad memory.
//
// Four groups of sixteen tiles of four cores and sixteen banks. The groups
// sit in a 2x2 arrangement: group g has group g^1 to its North, g^2 to its
// East and g^3 to its Northeast (the paper names these directions; the
// numbering is this design's). Each group's North, East and Northeast
// crossbars feed the N, E and NE inputs of the tiles of that neighbour, and
// since the relation is symmetric, the neighbour's responses come back on
// the same link.
//
// Any core reaches any address: 1 cycle in its own tile, 3 cycles in another
// tile of its group, 5 cycles in another group, plus any waiting for a busy
// bank or port. Core c (= group*64 + tile*4 + core) is at index c of the
// core ports; its requests use the address map of mempool_pkg. Each tile's
// DMA port (index group*16 + tile) reaches that tile's banks only.
//
// The cores, the instruction caches, the AXI interconnect and the DMA
// engines that the paper shows around this memory system are not part of
// this RTL; their data-memory sides are the ports of this module.
module mempool_cluster #(
  parameter int unsigned NumGroups        = mempool_pkg::NumGroups,
  parameter int unsigned NumTilesPerGroup = mempool_pkg::NumTilesPerGroup,
  parameter int unsigned NumCoresPerTile  = mempool_pkg::NumCoresPerTile,
  parameter int unsigned NumBanksPerTile  = mempool_pkg::NumBanksPerTile,
  localparam int unsigned CoresPerGroup = NumTilesPerGroup * NumCoresPerTile,
  localparam int unsigned NumCores      = NumGroups * CoresPerGroup,
  localparam int unsigned NumTiles      = NumGroups * NumTilesPerGroup,
  localparam int unsigned NumExt        = mempool_pkg::NumRemotePorts - 1,
  localparam int unsigned GroupW        = $clog2(NumGroups)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [NumCores-1:0]     core_req_valid_i,
  output logic [NumCores-1:0]     core_req_ready_o,
  input  mempool_pkg::tcdm_req_t  core_req_i        [NumCores],
  output logic [NumCores-1:0]     core_resp_valid_o,
  input  logic [NumCores-1:0]     core_resp_ready_i,
  output mempool_pkg::tcdm_resp_t core_resp_o       [NumCores],
  input  logic [NumTiles-1:0]     dma_req_valid_i,
  output logic [NumTiles-1:0]     dma_req_ready_o,
  input  mempool_pkg::tcdm_req_t  dma_req_i         [NumTiles],
  output logic [NumTiles-1:0]     dma_resp_valid_o,
  input  logic [NumTiles-1:0]     dma_resp_ready_i,
  output mempool_pkg::tcdm_resp_t dma_resp_o        [NumTiles]
);
  import mempool_pkg::*;

  typedef logic [NumExt-1:0][NumTilesPerGroup-1:0] link_bits_t;

  link_bits_t out_req_valid [NumGroups], out_req_ready [NumGroups];
  link_bits_t out_resp_valid[NumGroups], out_resp_ready[NumGroups];
  link_bits_t in_req_valid  [NumGroups], in_req_ready  [NumGroups];
  link_bits_t in_resp_valid [NumGroups], in_resp_ready [NumGroups];
  tcdm_req_t  out_req  [NumGroups][NumExt][NumTilesPerGroup];
  tcdm_resp_t out_resp [NumGroups][NumExt][NumTilesPerGroup];
  tcdm_req_t  in_req   [NumGroups][NumExt][NumTilesPerGroup];
  tcdm_resp_t in_resp  [NumGroups][NumExt][NumTilesPerGroup];

  for (genvar g = 0; g < NumGroups; g++) begin : g_group
    localparam int unsigned C0 = g * CoresPerGroup;
    localparam int unsigned T0 = g * NumTilesPerGroup;
    tcdm_req_t  c_req  [CoresPerGroup];
    tcdm_resp_t c_resp [CoresPerGroup];
    tcdm_req_t  d_req  [NumTilesPerGroup];
    tcdm_resp_t d_resp [NumTilesPerGroup];

    for (genvar k = 0; k < CoresPerGroup; k++) begin : g_core
      assign c_req[k]          = core_req_i[C0+k];
      assign core_resp_o[C0+k] = c_resp[k];
    end
    for (genvar t = 0; t < NumTilesPerGroup; t++) begin : g_dma
      assign d_req[t]         = dma_req_i[T0+t];
      assign dma_resp_o[T0+t] = d_resp[t];
    end

    // link r (direction r+1) of group g goes to group g ^ (r+1)
    for (genvar r = 0; r < NumExt; r++) begin : g_link
      localparam int unsigned P = g ^ (r + 1);
      assign in_req_valid[P][r]  = out_req_valid[g][r];
      assign out_req_ready[g][r] = in_req_ready[P][r];
      assign in_req[P][r]        = out_req[g][r];
      assign out_resp_valid[g][r] = in_resp_valid[P][r];
      assign in_resp_ready[P][r]  = out_resp_ready[g][r];
      assign out_resp[g][r]       = in_resp[P][r];
    end

    group #(
      .NumTiles        (NumTilesPerGroup),
      .NumCoresPerTile (NumCoresPerTile),
      .NumBanks        (NumBanksPerTile),
      .NumGroups       (NumGroups)
    ) i_group (
      .clk_i, .rst_ni,
      .group_id_i           (GroupW'(g)),
      .core_req_valid_i     (core_req_valid_i[C0 +: CoresPerGroup]),
      .core_req_ready_o     (core_req_ready_o[C0 +: CoresPerGroup]),
      .core_req_i           (c_req),
      .core_resp_valid_o    (core_resp_valid_o[C0 +: CoresPerGroup]),
      .core_resp_ready_i    (core_resp_ready_i[C0 +: CoresPerGroup]),
      .core_resp_o          (c_resp),
      .dma_req_valid_i      (dma_req_valid_i[T0 +: NumTilesPerGroup]),
      .dma_req_ready_o      (dma_req_ready_o[T0 +: NumTilesPerGroup]),
      .dma_req_i            (d_req),
      .dma_resp_valid_o     (dma_resp_valid_o[T0 +: NumTilesPerGroup]),
      .dma_resp_ready_i     (dma_resp_ready_i[T0 +: NumTilesPerGroup]),
      .dma_resp_o           (d_resp),
      .grp_out_req_valid_o  (out_req_valid[g]),
      .grp_out_req_ready_i  (out_req_ready[g]),
      .grp_out_req_o        (out_req[g]),
      .grp_out_resp_valid_i (out_resp_valid[g]),
      .grp_out_resp_ready_o (out_resp_ready[g]),
      .grp_out_resp_i       (out_resp[g]),
      .grp_in_req_valid_i   (in_req_valid[g]),
      .grp_in_req_ready_o   (in_req_ready[g]),
      .grp_in_req_i         (in_req[g]),
      .grp_in_resp_valid_o  (in_resp_valid[g]),
      .grp_in_resp_ready_i  (in_resp_ready[g]),
      .grp_in_resp_o        (in_resp[g])
    );
  end

endmodule
