// group_interconnect: fully connected crossbar between the 16 tiles of a
// group and 16 destination tiles.
//
// A group holds four of these, named in the paper Local, North, Northeast and
// East. Local connects each tile's L port to the L input of every tile of
// the same group; the other three connect the tiles' N, NE or E ports to the
// N, NE or E inputs of the tiles of the neighbouring group in that
// direction. The destination tile is address bits [TileLsb +: 4]; a response
// goes back to the tile named by the source core id (bits above the core
// index). Round-robin arbitration on both sides; the block is combinational,
// the register stages sit in the tiles and on the links between groups.
module group_interconnect #(
  parameter int unsigned NumTiles        = mempool_pkg::NumTilesPerGroup,
  parameter int unsigned TileLsb         = 6,
  parameter int unsigned NumCoresPerTile = mempool_pkg::NumCoresPerTile,
  localparam int unsigned TileW          = $clog2(NumTiles),
  localparam int unsigned CoreW          = $clog2(NumCoresPerTile)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [NumTiles-1:0]     src_req_valid_i,
  output logic [NumTiles-1:0]     src_req_ready_o,
  input  mempool_pkg::tcdm_req_t  src_req_i        [NumTiles],
  output logic [NumTiles-1:0]     src_resp_valid_o,
  input  logic [NumTiles-1:0]     src_resp_ready_i,
  output mempool_pkg::tcdm_resp_t src_resp_o       [NumTiles],
  output logic [NumTiles-1:0]     dst_req_valid_o,
  input  logic [NumTiles-1:0]     dst_req_ready_i,
  output mempool_pkg::tcdm_req_t  dst_req_o        [NumTiles],
  input  logic [NumTiles-1:0]     dst_resp_valid_i,
  output logic [NumTiles-1:0]     dst_resp_ready_o,
  input  mempool_pkg::tcdm_resp_t dst_resp_i       [NumTiles]
);
  import mempool_pkg::*;

  logic [TileW-1:0] sel        [NumTiles];
  logic [TileW-1:0] resp_sel   [NumTiles];
  logic [TileW-1:0] unused_idx [NumTiles];

  for (genvar t = 0; t < NumTiles; t++) begin : g_sel
    assign sel[t]      = src_req_i[t].addr[TileLsb +: TileW];
    assign resp_sel[t] = dst_resp_i[t].src[CoreW +: TileW];
  end

  tcdm_xbar #(
    .NumIn  (NumTiles),
    .NumOut (NumTiles),
    .req_t  (tcdm_req_t),
    .resp_t (tcdm_resp_t)
  ) i_xbar (
    .clk_i, .rst_ni,
    .in_req_valid_i   (src_req_valid_i),
    .in_req_ready_o   (src_req_ready_o),
    .in_req_i         (src_req_i),
    .in_sel_i         (sel),
    .out_req_valid_o  (dst_req_valid_o),
    .out_req_ready_i  (dst_req_ready_i),
    .out_req_o        (dst_req_o),
    .out_idx_o        (unused_idx),
    .out_resp_valid_i (dst_resp_valid_i),
    .out_resp_ready_o (dst_resp_ready_o),
    .out_resp_i       (dst_resp_i),
    .out_resp_sel_i   (resp_sel),
    .in_resp_valid_o  (src_resp_valid_o),
    .in_resp_ready_i  (src_resp_ready_i),
    .in_resp_o        (src_resp_o)
  );

endmodule
