// remote_interconnect: steers a tile's requests for other tiles onto the
// tile's four outgoing ports and brings the responses back to the cores.
//
// The paper shows this block with the outgoing ports L, N, NE and E. Here
// the port is (destination group XOR own group): 0 = L (a tile of the same
// group), 1 = N, 2 = E, 3 = NE; the four groups sit in a 2x2 arrangement, so
// each group has exactly one neighbour in each of those directions. The
// destination group is read from address bits [GroupLsb +: 2].
//
// Each outgoing port has a round-robin arbiter over the cores; a response on
// port d goes to the core whose index is the low bits of the request's source
// core id (responses of several ports for one core are arbitrated round
// robin). The block is combinational; the tile puts a register stage on each
// outgoing port.
module remote_interconnect #(
  parameter int unsigned NumCores  = mempool_pkg::NumCoresPerTile,
  parameter int unsigned NumGroups = mempool_pkg::NumGroups,
  parameter int unsigned GroupLsb  = 10,
  localparam int unsigned NumDirs  = mempool_pkg::NumRemotePorts,
  localparam int unsigned GroupW   = $clog2(NumGroups),
  localparam int unsigned CoreW    = $clog2(NumCores)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [GroupW-1:0]       group_id_i,
  input  logic [NumCores-1:0]     core_req_valid_i,
  output logic [NumCores-1:0]     core_req_ready_o,
  input  mempool_pkg::tcdm_req_t  core_req_i        [NumCores],
  output logic [NumCores-1:0]     core_resp_valid_o,
  input  logic [NumCores-1:0]     core_resp_ready_i,
  output mempool_pkg::tcdm_resp_t core_resp_o       [NumCores],
  output logic [NumDirs-1:0]      remote_req_valid_o,
  input  logic [NumDirs-1:0]      remote_req_ready_i,
  output mempool_pkg::tcdm_req_t  remote_req_o      [NumDirs],
  input  logic [NumDirs-1:0]      remote_resp_valid_i,
  output logic [NumDirs-1:0]      remote_resp_ready_o,
  input  mempool_pkg::tcdm_resp_t remote_resp_i     [NumDirs]
);
  import mempool_pkg::*;

  logic [1:0]       dir      [NumCores];
  logic [CoreW-1:0] resp_sel [NumDirs];
  logic [CoreW-1:0] unused_idx [NumDirs];

  for (genvar c = 0; c < NumCores; c++) begin : g_dir
    assign dir[c] = 2'(core_req_i[c].addr[GroupLsb +: GroupW] ^ group_id_i);
  end
  for (genvar d = 0; d < NumDirs; d++) begin : g_resp_sel
    assign resp_sel[d] = remote_resp_i[d].src[CoreW-1:0];
  end

  tcdm_xbar #(
    .NumIn  (NumCores),
    .NumOut (NumDirs),
    .req_t  (tcdm_req_t),
    .resp_t (tcdm_resp_t)
  ) i_xbar (
    .clk_i, .rst_ni,
    .in_req_valid_i   (core_req_valid_i),
    .in_req_ready_o   (core_req_ready_o),
    .in_req_i         (core_req_i),
    .in_sel_i         (dir),
    .out_req_valid_o  (remote_req_valid_o),
    .out_req_ready_i  (remote_req_ready_i),
    .out_req_o        (remote_req_o),
    .out_idx_o        (unused_idx),
    .out_resp_valid_i (remote_resp_valid_i),
    .out_resp_ready_o (remote_resp_ready_o),
    .out_resp_i       (remote_resp_i),
    .out_resp_sel_i   (resp_sel),
    .in_resp_valid_o  (core_resp_valid_o),
    .in_resp_ready_i  (core_resp_ready_i),
    .in_resp_o        (core_resp_o)
  );

endmodule
