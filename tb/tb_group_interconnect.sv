// tb_group_interconnect: self-checking test of one directional group
// crossbar (Local, North, East or Northeast: they are the same module).
//
// The 16 source tiles send random requests with their own tags; 16
// destination-tile models answer one cycle after accepting, with data
// computed from the address, and at random refuse requests. Checks: each
// request reaches the tile given by its address bits [9:6], each response
// returns to the tile named in its source id with the right tag and data, a
// lone request passes in the cycle it is presented, and contention occurs
// on both sides. Signals change after the falling edge and are sampled just
// before the rising edge.
module tb_group_interconnect;
  import mempool_pkg::*;

  localparam int unsigned NI = NumTilesPerGroup;
  localparam int unsigned NO = NumTilesPerGroup;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NI-1:0] in_req_valid, in_req_ready, in_resp_valid, in_resp_ready;
  tcdm_req_t     in_req  [NI];
  tcdm_resp_t    in_resp [NI];
  logic [NO-1:0] o_req_valid, o_req_ready, o_resp_valid, o_resp_ready;
  tcdm_req_t     o_req  [NO];
  tcdm_resp_t    o_resp [NO];

  group_interconnect dut (
    .clk_i(clk), .rst_ni(rst_n),
    .src_req_valid_i(in_req_valid), .src_req_ready_o(in_req_ready), .src_req_i(in_req),
    .src_resp_valid_o(in_resp_valid), .src_resp_ready_i(in_resp_ready), .src_resp_o(in_resp),
    .dst_req_valid_o(o_req_valid), .dst_req_ready_i(o_req_ready), .dst_req_o(o_req),
    .dst_resp_valid_i(o_resp_valid), .dst_resp_ready_o(o_resp_ready), .dst_resp_i(o_resp)
  );

  function automatic int unsigned route(logic [31:0] addr);
    return int'(addr[9:6]);
  endfunction
  function automatic core_id_t src_of(int unsigned i);
    return core_id_t'({2'($urandom), 4'(i), 2'($urandom)});
  endfunction

  int unsigned checks = 0, failures = 0;
  int unsigned n_conflict = 0, n_resp_contention = 0, n_resp = 0;
  int unsigned n_dir [NO];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  function automatic logic [31:0] data_of(logic [31:0] addr);
    return (addr * 32'h9e37_79b9) ^ 32'h5a5a_0000;
  endfunction

  bit            busy    [NI][16];
  int unsigned   exp_out [NI][16];
  logic [31:0]   exp_data[NI][16];
  logic          bm_valid [NO];
  tcdm_resp_t    bm_resp  [NO];
  logic          bm_valid_n [NO];
  tcdm_resp_t    bm_resp_n  [NO];
  logic [NO-1:0] bm_rnd;
  logic [NI-1:0] hs;

  for (genvar b = 0; b < NO; b++) begin : g_bm
    assign o_resp_valid[b] = bm_valid[b];
    assign o_resp[b]       = bm_resp[b];
    assign o_req_ready[b]  = (!bm_valid[b] || o_resp_ready[b]) && bm_rnd[b];
  end

  function automatic tcdm_req_t new_req(int unsigned port, int unsigned tag);
    tcdm_req_t r;
    r.addr  = $urandom;
    r.we    = $urandom % 2 == 0;
    r.be    = 4'hf;
    r.wdata = $urandom;
    r.src   = src_of(port);
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
    in_req_valid = '0; in_resp_ready = '1; bm_rnd = '1; hs = '0;
    for (int i = 0; i < NO; i++) n_dir[i] = 0;
    for (int i = 0; i < NI; i++) begin
      in_req[i] = '0;
      for (int t = 0; t < 16; t++) busy[i][t] = 0;
    end
    for (int b = 0; b < NO; b++) begin
      bm_valid[b] = 0; bm_resp[b] = '0; bm_valid_n[b] = 0; bm_resp_n[b] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // directed: a lone request passes at once to its port
    for (int i = 0; i < NI; i++) begin
      @(negedge clk);
      in_req_valid = '0;
      in_req_valid[i] = 1'b1;
      in_req[i] = new_req(i, 0);
      #4;
      check(in_req_ready[i], "uncontended request accepted at once");
      check(o_req_valid[route(in_req[i].addr)], "request on its port");
      check(o_req[route(in_req[i].addr)] == in_req[i], "request passed unchanged");
      @(negedge clk);
      in_req_valid = '0;
    end
    repeat (2) @(negedge clk);

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
        end
      end
      in_resp_ready = NI'($urandom) | NI'($urandom);
      bm_rnd        = NO'($urandom) | NO'($urandom) | NO'($urandom);
      #4;
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
      for (int i = 0; i < NI; i++) begin
        for (int j = 0; j < NI; j++)
          if (j > i && in_req_valid[j] && in_req_valid[i] && route(in_req[j].addr) == route(in_req[i].addr)) n_conflict++;
        hs[i] = in_req_valid[i] && in_req_ready[i];
        if (hs[i]) begin
          int t;
          t = int'(in_req[i].tag);
          busy[i][t]     = 1;
          exp_out[i][t]  = route(in_req[i].addr);
          exp_data[i][t] = data_of(in_req[i].addr);
        end
      end
      begin
        int unsigned cnt [NI];
        for (int i = 0; i < NI; i++) cnt[i] = 0;
        for (int b = 0; b < NO; b++) if (bm_valid[b]) cnt[int'(bm_resp[b].src[5:2])]++;
        for (int i = 0; i < NI; i++) if (cnt[i] > 1) n_resp_contention++;
      end
      for (int b = 0; b < NO; b++) begin
        bm_valid_n[b] = bm_valid[b] && !o_resp_ready[b];
        bm_resp_n[b]  = bm_resp[b];
        if (o_req_valid[b] && o_req_ready[b]) begin
          int p, t;
          p = int'(o_req[b].src[5:2]);
          t = int'(o_req[b].tag);
          n_dir[b]++;
          check(busy[p][t] && exp_out[p][t] == b, "request routed to its port");
          bm_valid_n[b]      = 1'b1;
          bm_resp_n[b].src   = o_req[b].src;
          bm_resp_n[b].tag   = o_req[b].tag;
          bm_resp_n[b].rdata = data_of(o_req[b].addr);
        end
      end
    end
    for (int i = 0; i < NI; i++) for (int t = 0; t < 16; t++) check(!busy[i][t], "all responses returned");
    for (int b = 0; b < NO; b++) check(n_dir[b] > 0, "every port used");
    check(n_conflict > 0, "port conflicts exercised");
    check(n_resp_contention > 0, "response contention exercised");
    check(n_resp > 1000, "enough traffic");
    $display("conflicts=%0d resp_contention=%0d responses=%0d", n_conflict, n_resp_contention, n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
