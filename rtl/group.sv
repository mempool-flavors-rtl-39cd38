// group: sixteen tiles joined by four directional crossbars.
//
// Every tile has one outgoing and one incoming port per direction (L, N, E,
// NE). The Local group_interconnect connects all L ports of the group with
// each other, which makes the group fully connected. The North, East and
// Northeast crossbars take the tiles' N, E and NE ports and deliver to one of
// the 16 tiles of the neighbouring group in that direction; their outputs
// leave the group through a register stage (elastic_buffer) and the
// responses enter it through another one. Requests that other groups send
// here arrive on grp_in_* and go directly to the tiles' N, E and NE inputs.
//
// With the registers in the tiles, the latencies of an unloaded access are
// 1 cycle to the own tile, 3 cycles to another tile of the group and 5
// cycles to another group, as the paper states. Index r of the grp_* ports is
// direction r+1: 0 = North, 1 = East, 2 = Northeast. The DMA engines are not
// part of the group; each tile's DMA port is a port of the group.
module group #(
  parameter int unsigned NumTiles        = mempool_pkg::NumTilesPerGroup,
  parameter int unsigned NumCoresPerTile = mempool_pkg::NumCoresPerTile,
  parameter int unsigned NumBanks        = mempool_pkg::NumBanksPerTile,
  parameter int unsigned NumGroups       = mempool_pkg::NumGroups,
  localparam int unsigned NumCores = NumTiles * NumCoresPerTile,
  localparam int unsigned NumDirs  = mempool_pkg::NumRemotePorts,
  localparam int unsigned NumExt   = NumDirs - 1,
  localparam int unsigned TileW    = $clog2(NumTiles),
  localparam int unsigned GroupW   = $clog2(NumGroups)
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic [GroupW-1:0]             group_id_i,
  // core data ports, core k of tile t at index t*NumCoresPerTile+k
  input  logic [NumCores-1:0]           core_req_valid_i,
  output logic [NumCores-1:0]           core_req_ready_o,
  input  mempool_pkg::tcdm_req_t        core_req_i        [NumCores],
  output logic [NumCores-1:0]           core_resp_valid_o,
  input  logic [NumCores-1:0]           core_resp_ready_i,
  output mempool_pkg::tcdm_resp_t       core_resp_o       [NumCores],
  // DMA ports, one per tile
  input  logic [NumTiles-1:0]           dma_req_valid_i,
  output logic [NumTiles-1:0]           dma_req_ready_o,
  input  mempool_pkg::tcdm_req_t        dma_req_i         [NumTiles],
  output logic [NumTiles-1:0]           dma_resp_valid_o,
  input  logic [NumTiles-1:0]           dma_resp_ready_i,
  output mempool_pkg::tcdm_resp_t       dma_resp_o        [NumTiles],
  // requests to the neighbouring groups, per destination tile
  output logic [NumExt-1:0][NumTiles-1:0] grp_out_req_valid_o,
  input  logic [NumExt-1:0][NumTiles-1:0] grp_out_req_ready_i,
  output mempool_pkg::tcdm_req_t        grp_out_req_o     [NumExt][NumTiles],
  input  logic [NumExt-1:0][NumTiles-1:0] grp_out_resp_valid_i,
  output logic [NumExt-1:0][NumTiles-1:0] grp_out_resp_ready_o,
  input  mempool_pkg::tcdm_resp_t       grp_out_resp_i    [NumExt][NumTiles],
  // requests from the neighbouring groups, per destination tile here
  input  logic [NumExt-1:0][NumTiles-1:0] grp_in_req_valid_i,
  output logic [NumExt-1:0][NumTiles-1:0] grp_in_req_ready_o,
  input  mempool_pkg::tcdm_req_t        grp_in_req_i      [NumExt][NumTiles],
  output logic [NumExt-1:0][NumTiles-1:0] grp_in_resp_valid_o,
  input  logic [NumExt-1:0][NumTiles-1:0] grp_in_resp_ready_i,
  output mempool_pkg::tcdm_resp_t       grp_in_resp_o     [NumExt][NumTiles]
);
  import mempool_pkg::*;

  // per direction, per tile: the tiles' outgoing and incoming ports
  logic [NumDirs-1:0][NumTiles-1:0] o_req_valid, o_req_ready, o_resp_valid, o_resp_ready;
  logic [NumDirs-1:0][NumTiles-1:0] i_req_valid, i_req_ready, i_resp_valid, i_resp_ready;
  tcdm_req_t  o_req  [NumDirs][NumTiles];
  tcdm_resp_t o_resp [NumDirs][NumTiles];
  tcdm_req_t  i_req  [NumDirs][NumTiles];
  tcdm_resp_t i_resp [NumDirs][NumTiles];

  for (genvar t = 0; t < NumTiles; t++) begin : g_tile
    localparam int unsigned C0 = t * NumCoresPerTile;
    tcdm_req_t           c_req  [NumCoresPerTile];
    tcdm_resp_t          c_resp [NumCoresPerTile];
    logic [NumDirs-1:0]  to_req_valid, to_req_ready, to_resp_valid, to_resp_ready;
    logic [NumDirs-1:0]  ti_req_valid, ti_req_ready, ti_resp_valid, ti_resp_ready;
    tcdm_req_t           to_req  [NumDirs];
    tcdm_resp_t          to_resp [NumDirs];
    tcdm_req_t           ti_req  [NumDirs];
    tcdm_resp_t          ti_resp [NumDirs];

    for (genvar k = 0; k < NumCoresPerTile; k++) begin : g_core
      assign c_req[k]             = core_req_i[C0+k];
      assign core_resp_o[C0+k]    = c_resp[k];
    end
    for (genvar d = 0; d < NumDirs; d++) begin : g_dir
      assign o_req_valid[d][t]  = to_req_valid[d];
      assign to_req_ready[d]    = o_req_ready[d][t];
      assign o_req[d][t]        = to_req[d];
      assign to_resp_valid[d]   = o_resp_valid[d][t];
      assign o_resp_ready[d][t] = to_resp_ready[d];
      assign to_resp[d]         = o_resp[d][t];
      assign ti_req_valid[d]    = i_req_valid[d][t];
      assign i_req_ready[d][t]  = ti_req_ready[d];
      assign ti_req[d]          = i_req[d][t];
      assign i_resp_valid[d][t] = ti_resp_valid[d];
      assign ti_resp_ready[d]   = i_resp_ready[d][t];
      assign i_resp[d][t]       = ti_resp[d];
    end

    tile #(
      .NumCores         (NumCoresPerTile),
      .NumBanks         (NumBanks),
      .NumTilesPerGroup (NumTiles),
      .NumGroups        (NumGroups)
    ) i_tile (
      .clk_i, .rst_ni,
      .tile_id_i         (TileW'(t)),
      .group_id_i,
      .core_req_valid_i  (core_req_valid_i[C0 +: NumCoresPerTile]),
      .core_req_ready_o  (core_req_ready_o[C0 +: NumCoresPerTile]),
      .core_req_i        (c_req),
      .core_resp_valid_o (core_resp_valid_o[C0 +: NumCoresPerTile]),
      .core_resp_ready_i (core_resp_ready_i[C0 +: NumCoresPerTile]),
      .core_resp_o       (c_resp),
      .dma_req_valid_i   (dma_req_valid_i[t]),
      .dma_req_ready_o   (dma_req_ready_o[t]),
      .dma_req_i         (dma_req_i[t]),
      .dma_resp_valid_o  (dma_resp_valid_o[t]),
      .dma_resp_ready_i  (dma_resp_ready_i[t]),
      .dma_resp_o        (dma_resp_o[t]),
      .out_req_valid_o   (to_req_valid),
      .out_req_ready_i   (to_req_ready),
      .out_req_o         (to_req),
      .out_resp_valid_i  (to_resp_valid),
      .out_resp_ready_o  (to_resp_ready),
      .out_resp_i        (to_resp),
      .in_req_valid_i    (ti_req_valid),
      .in_req_ready_o    (ti_req_ready),
      .in_req_i          (ti_req),
      .in_resp_valid_o   (ti_resp_valid),
      .in_resp_ready_i   (ti_resp_ready),
      .in_resp_o         (ti_resp)
    );
  end

  // Local interconnect: L ports of this group to L inputs of this group
  group_interconnect #(
    .NumTiles        (NumTiles),
    .TileLsb         (2 + $clog2(NumBanks)),
    .NumCoresPerTile (NumCoresPerTile)
  ) i_local (
    .clk_i, .rst_ni,
    .src_req_valid_i  (o_req_valid[DirLocal]),
    .src_req_ready_o  (o_req_ready[DirLocal]),
    .src_req_i        (o_req[DirLocal]),
    .src_resp_valid_o (o_resp_valid[DirLocal]),
    .src_resp_ready_i (o_resp_ready[DirLocal]),
    .src_resp_o       (o_resp[DirLocal]),
    .dst_req_valid_o  (i_req_valid[DirLocal]),
    .dst_req_ready_i  (i_req_ready[DirLocal]),
    .dst_req_o        (i_req[DirLocal]),
    .dst_resp_valid_i (i_resp_valid[DirLocal]),
    .dst_resp_ready_o (i_resp_ready[DirLocal]),
    .dst_resp_i       (i_resp[DirLocal])
  );

  // North, East, Northeast interconnects towards the other groups
  for (genvar r = 0; r < NumExt; r++) begin : g_ext
    localparam int unsigned D = r + 1;
    logic [NumTiles-1:0] x_req_valid, x_req_ready, x_resp_valid, x_resp_ready;
    tcdm_req_t           x_req  [NumTiles];
    tcdm_resp_t          x_resp [NumTiles];

    group_interconnect #(
      .NumTiles        (NumTiles),
      .TileLsb         (2 + $clog2(NumBanks)),
      .NumCoresPerTile (NumCoresPerTile)
    ) i_dir (
      .clk_i, .rst_ni,
      .src_req_valid_i  (o_req_valid[D]),
      .src_req_ready_o  (o_req_ready[D]),
      .src_req_i        (o_req[D]),
      .src_resp_valid_o (o_resp_valid[D]),
      .src_resp_ready_i (o_resp_ready[D]),
      .src_resp_o       (o_resp[D]),
      .dst_req_valid_o  (x_req_valid),
      .dst_req_ready_i  (x_req_ready),
      .dst_req_o        (x_req),
      .dst_resp_valid_i (x_resp_valid),
      .dst_resp_ready_o (x_resp_ready),
      .dst_resp_i       (x_resp)
    );

    for (genvar t = 0; t < NumTiles; t++) begin : g_link
      elastic_buffer #(.data_t(tcdm_req_t)) i_req_reg (
        .clk_i, .rst_ni,
        .valid_i (x_req_valid[t]),
        .ready_o (x_req_ready[t]),
        .data_i  (x_req[t]),
        .valid_o (grp_out_req_valid_o[r][t]),
        .ready_i (grp_out_req_ready_i[r][t]),
        .data_o  (grp_out_req_o[r][t])
      );
      elastic_buffer #(.data_t(tcdm_resp_t)) i_resp_reg (
        .clk_i, .rst_ni,
        .valid_i (grp_out_resp_valid_i[r][t]),
        .ready_o (grp_out_resp_ready_o[r][t]),
        .data_i  (grp_out_resp_i[r][t]),
        .valid_o (x_resp_valid[t]),
        .ready_i (x_resp_ready[t]),
        .data_o  (x_resp[t])
      );
      // incoming requests from the group in direction D
      assign i_req_valid[D][t]         = grp_in_req_valid_i[r][t];
      assign grp_in_req_ready_o[r][t]  = i_req_ready[D][t];
      assign i_req[D][t]               = grp_in_req_i[r][t];
      assign grp_in_resp_valid_o[r][t] = i_resp_valid[D][t];
      assign i_resp_ready[D][t]        = grp_in_resp_ready_i[r][t];
      assign grp_in_resp_o[r][t]       = i_resp[D][t];
    end
  end

endmodule
