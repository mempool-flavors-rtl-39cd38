// tb_tile_interconnect: self-checking test of the tile crossbar.
//
// Nine requesters (4 cores, 4 remote ports, DMA) send random requests with
// their own tags to 16 bank models. A bank model answers one cycle after it
// accepts, with data computed from the bank number and row, and at random
// refuses requests. Checks: every request reaches the bank its address
// selects, every response comes back to the port that sent the request with
// the right tag and data, an uncontended request is accepted in the cycle
// it is presented (so the tile's bank access stays single-cycle), and both
// bank conflicts and response contention occur. Signals change only after
// the falling edge; handshakes are sampled just before the rising edge.
module tb_tile_interconnect;
  import mempool_pkg::*;

  localparam int unsigned NI = TilePorts;
  localparam int unsigned NO = NumBanksPerTile;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NI-1:0] in_req_valid, in_req_ready, in_resp_valid, in_resp_ready;
  tcdm_req_t     in_req  [NI];
  tcdm_resp_t    in_resp [NI];
  logic [NO-1:0] b_req_valid, b_req_ready, b_resp_valid, b_resp_ready;
  bank_req_t     b_req  [NO];
  bank_resp_t    b_resp [NO];

  tile_interconnect dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_req_valid_i(in_req_valid), .in_req_ready_o(in_req_ready), .in_req_i(in_req),
    .in_resp_valid_o(in_resp_valid), .in_resp_ready_i(in_resp_ready), .in_resp_o(in_resp),
    .bank_req_valid_o(b_req_valid), .bank_req_ready_i(b_req_ready), .bank_req_o(b_req),
    .bank_resp_valid_i(b_resp_valid), .bank_resp_ready_o(b_resp_ready), .bank_resp_i(b_resp)
  );

  int unsigned checks = 0, failures = 0;
  int unsigned n_conflict = 0, n_resp_contention = 0, n_resp = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  function automatic logic [31:0] bank_data(int unsigned b, logic [7:0] row);
    return 32'h9e37_79b9 * (b + 1) ^ {24'h0, row} << 8 ^ 32'(b);
  endfunction

  // scoreboard per port and tag
  bit          busy     [NI][16];
  int unsigned exp_bank [NI][16];
  logic [31:0] exp_data [NI][16];
  // bank models
  logic        bm_valid [NO];
  bank_resp_t  bm_resp  [NO];
  logic        bm_valid_n [NO];
  bank_resp_t  bm_resp_n  [NO];
  logic [NO-1:0] bm_rnd;
  logic [NI-1:0] hs;
  bit          traffic;

  for (genvar b = 0; b < NO; b++) begin : g_bm
    assign b_resp_valid[b] = bm_valid[b];
    assign b_resp[b]       = bm_resp[b];
    assign b_req_ready[b]  = (!bm_valid[b] || b_resp_ready[b]) && bm_rnd[b];
  end

  function automatic tcdm_req_t new_req(int unsigned port, int unsigned tag);
    tcdm_req_t r;
    r.addr  = $urandom;
    r.we    = $urandom % 2 == 0;
    r.be    = 4'hf;
    r.wdata = $urandom;
    r.src   = core_id_t'($urandom);
    r.tag   = tag_t'(tag);
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_req_valid = '0; in_resp_ready = '1; bm_rnd = '1; hs = '0; traffic = 0;
    for (int i = 0; i < NI; i++) begin
      in_req[i] = '0;
      for (int t = 0; t < 16; t++) busy[i][t] = 0;
    end
    for (int b = 0; b < NO; b++) begin
      bm_valid[b] = 0; bm_resp[b] = '0; bm_valid_n[b] = 0; bm_resp_n[b] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // directed: one request from each port alone is taken in the same cycle
    for (int i = 0; i < NI; i++) begin
      @(negedge clk);
      in_req_valid = '0;
      in_req_valid[i] = 1'b1;
      in_req[i] = new_req(i, 0);
      in_req[i].we = 1'b0;
      #4;
      check(in_req_ready[i], "uncontended request accepted at once");
      check(b_req_valid[in_req[i].addr[5:2]], "request at the selected bank");
      check(b_req[in_req[i].addr[5:2]].meta.port == TilePortWidth'(i), "port index stored");
      @(negedge clk);
      in_req_valid = '0;
    end
    repeat (2) @(negedge clk);

    // random traffic
    traffic = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      for (int b = 0; b < NO; b++) begin bm_valid[b] = bm_valid_n[b]; bm_resp[b] = bm_resp_n[b]; end
      for (int i = 0; i < NI; i++) begin
        if (!in_req_valid[i] || hs[i]) begin
          int ft;
          ft = -1;
          for (int t = 0; t < 16; t++) if (!busy[i][t] && ft < 0 && ($urandom % 3 == 0)) ft = t;
          in_req_valid[i] = (ft >= 0) && ($urandom % 4 != 0) && (n < 4800);
          if (in_req_valid[i]) in_req[i] = new_req(i, ft);
          // concentrate traffic on a few banks to force conflicts
          if (in_req_valid[i] && ($urandom % 2 == 0)) in_req[i].addr[5:2] = 4'($urandom % 3);
        end
      end
      in_resp_ready = NI'($urandom) | NI'($urandom);
      bm_rnd        = NO'($urandom) | NO'($urandom) | NO'($urandom);
      #4;
      // responses to ports
      for (int i = 0; i < NI; i++) begin
        if (in_resp_valid[i] && in_resp_ready[i]) begin
          int t;
          t = int'(in_resp[i].tag);
          n_resp++;
          check(busy[i][t], "response for an outstanding tag");
          check(in_resp[i].rdata == exp_data[i][t], "response data");
          busy[i][t] = 0;
        end
      end
      // requests accepted
      for (int i = 0; i < NI; i++) begin
        int same;
        same = 0;
        for (int j = 0; j < NI; j++)
          if (j != i && in_req_valid[j] && in_req_valid[i] && in_req[j].addr[5:2] == in_req[i].addr[5:2]) same++;
        if (same > 0 && i == 0) n_conflict++;
        hs[i] = in_req_valid[i] && in_req_ready[i];
        if (hs[i]) begin
          int t;
          t = int'(in_req[i].tag);
          busy[i][t]     = 1;
          exp_bank[i][t] = in_req[i].addr[5:2];
          exp_data[i][t] = in_req[i].we ? 32'h0 : bank_data(in_req[i].addr[5:2], in_req[i].addr[19:12]);
        end
      end
      // bank models
      begin
        int unsigned cnt [NI];
        for (int i = 0; i < NI; i++) cnt[i] = 0;
        for (int b = 0; b < NO; b++) if (bm_valid[b]) cnt[bm_resp[b].meta.port]++;
        for (int i = 0; i < NI; i++) if (cnt[i] > 1) n_resp_contention++;
      end
      for (int b = 0; b < NO; b++) begin
        bm_valid_n[b] = bm_valid[b] && !b_resp_ready[b];
        bm_resp_n[b]  = bm_resp[b];
        if (b_req_valid[b] && b_req_ready[b]) begin
          int p, t;
          p = int'(b_req[b].meta.port);
          t = int'(b_req[b].meta.tag);
          check(p < int'(NI) && exp_bank[p][t] == b, "request routed to its bank");
          bm_valid_n[b]          = 1'b1;
          bm_resp_n[b].meta      = b_req[b].meta;
          bm_resp_n[b].rdata     = b_req[b].we ? 32'h0 : bank_data(b, b_req[b].row);
        end
      end
    end
    for (int i = 0; i < NI; i++) for (int t = 0; t < 16; t++) check(!busy[i][t], "all responses returned");
    check(n_conflict > 0, "bank conflicts exercised");
    check(n_resp_contention > 0, "response contention exercised");
    check(n_resp > 1000, "enough traffic");
    $display("conflicts=%0d resp_contention=%0d responses=%0d", n_conflict, n_resp_contention, n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
