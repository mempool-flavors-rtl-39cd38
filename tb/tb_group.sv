// tb_group: self-checking test of one group (group 0 of the cluster).
//
// Requesters: the 64 cores, the 48 incoming links from the three other
// groups (one per direction and destination tile) and the 16 DMA ports.
// Requester k owns the rows r with r % 128 == k, so a shadow copy of the
// group's 256 banks predicts every read under concurrent traffic. Cores send
// requests anywhere in the group and to the other groups; models of the 48
// outgoing links accept them (with random back-pressure) and answer one
// cycle later with data computed from the address.
// Checks: data, tags, that all requests are answered, that link requests go
// to the right group and tile, and the unloaded latencies: 1 cycle to the own
// tile, 3 cycles to another tile of the group, and 5 cycles to another group
// when the far side answers in one cycle.
module tb_group;
  import mempool_pkg::*;

  localparam int unsigned NT = NumTilesPerGroup;
  localparam int unsigned NC = NT * NumCoresPerTile;
  localparam int unsigned NL = 3 * NT;          // links per direction of travel
  localparam int unsigned NR = NC + NL + NT;     // requesters
  localparam logic [1:0]  MyGroup = 2'd0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NR-1:0] rq_valid, rq_ready, rs_valid, rs_ready;
  tcdm_req_t     rq [NR];
  tcdm_resp_t    rs [NR];

  tcdm_req_t     c_req [NC];
  tcdm_resp_t    c_resp [NC];
  tcdm_req_t     d_req [NT];
  tcdm_resp_t    d_resp [NT];
  logic [2:0][NT-1:0] go_req_valid, go_req_ready, go_resp_valid, go_resp_ready;
  logic [2:0][NT-1:0] gi_req_valid, gi_req_ready, gi_resp_valid, gi_resp_ready;
  tcdm_req_t     go_req  [3][NT];
  tcdm_resp_t    go_resp [3][NT];
  tcdm_req_t     gi_req  [3][NT];
  tcdm_resp_t    gi_resp [3][NT];

  for (genvar k = 0; k < NC; k++) begin : g_c
    assign c_req[k] = rq[k];
    assign rs[k]    = c_resp[k];
  end
  for (genvar r = 0; r < 3; r++) begin : g_r
    for (genvar t = 0; t < NT; t++) begin : g_t
      assign gi_req_valid[r][t]   = rq_valid[NC + r*NT + t];
      assign rq_ready[NC + r*NT + t] = gi_req_ready[r][t];
      assign gi_req[r][t]         = rq[NC + r*NT + t];
      assign rs_valid[NC + r*NT + t] = gi_resp_valid[r][t];
      assign gi_resp_ready[r][t]  = rs_ready[NC + r*NT + t];
      assign rs[NC + r*NT + t]    = gi_resp[r][t];
    end
  end
  for (genvar t = 0; t < NT; t++) begin : g_d
    assign d_req[t]          = rq[NC + NL + t];
    assign rs[NC + NL + t]   = d_resp[t];
  end

  group dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(MyGroup),
    .core_req_valid_i(rq_valid[NC-1:0]), .core_req_ready_o(rq_ready[NC-1:0]), .core_req_i(c_req),
    .core_resp_valid_o(rs_valid[NC-1:0]), .core_resp_ready_i(rs_ready[NC-1:0]), .core_resp_o(c_resp),
    .dma_req_valid_i(rq_valid[NR-1 -: NT]), .dma_req_ready_o(rq_ready[NR-1 -: NT]), .dma_req_i(d_req),
    .dma_resp_valid_o(rs_valid[NR-1 -: NT]), .dma_resp_ready_i(rs_ready[NR-1 -: NT]), .dma_resp_o(d_resp),
    .grp_out_req_valid_o(go_req_valid), .grp_out_req_ready_i(go_req_ready), .grp_out_req_o(go_req),
    .grp_out_resp_valid_i(go_resp_valid), .grp_out_resp_ready_o(go_resp_ready), .grp_out_resp_i(go_resp),
    .grp_in_req_valid_i(gi_req_valid), .grp_in_req_ready_o(gi_req_ready), .grp_in_req_i(gi_req),
    .grp_in_resp_valid_o(gi_resp_valid), .grp_in_resp_ready_i(gi_resp_ready), .grp_in_resp_o(gi_resp)
  );

  int unsigned checks = 0, failures = 0;
  int unsigned n_tile = 0, n_group = 0, n_far = 0, n_in = 0, n_dma = 0, n_stall = 0;
  int unsigned n_link [3];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  function automatic logic [31:0] data_of(logic [31:0] addr);
    return (addr * 32'h9e37_79b9) ^ 32'h1234_4321;
  endfunction
  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] wd, logic [3:0] be);
    logic [31:0] r;
    r = old;
    for (int b = 0; b < 4; b++) if (be[b]) r[8*b +: 8] = wd[8*b +: 8];
    return r;
  endfunction
  function automatic logic [31:0] gaddr(int unsigned row, int unsigned tile, int unsigned bank, logic [1:0] grp);
    return {12'h0, 8'(row), grp, 4'(tile), 4'(bank), 2'b00};
  endfunction

  logic [31:0]   shadow [NT][16][256];
  bit            busy     [NR][16];
  logic [31:0]   exp_data [NR][16];
  logic          lm_valid [3][NT], lm_valid_n [3][NT];
  tcdm_resp_t    lm_resp  [3][NT], lm_resp_n  [3][NT];
  logic [2:0][NT-1:0] lm_rnd;
  logic [NR-1:0] hs;

  for (genvar r = 0; r < 3; r++) begin : g_lm
    for (genvar t = 0; t < NT; t++) begin : g_t
      assign go_resp_valid[r][t] = lm_valid[r][t];
      assign go_resp[r][t]       = lm_resp[r][t];
      assign go_req_ready[r][t]  = (!lm_valid[r][t] || go_resp_ready[r][t]) && lm_rnd[r][t];
    end
  end

  function automatic tcdm_req_t new_req(int unsigned p, int unsigned tag);
    tcdm_req_t q;
    int unsigned row;
    row     = (($urandom % 2) * 128 + p) % 256;
    q.we    = $urandom % 2 == 0;
    q.be    = ($urandom % 2 == 0) ? 4'hf : 4'($urandom);
    q.wdata = $urandom;
    q.src   = core_id_t'($urandom);
    q.tag   = tag_t'(tag);
    if (p < NC) begin
      q.addr = gaddr(row, (p / 4 + ($urandom % 2)) % NT, $urandom % 16, MyGroup);
      if ($urandom % 3 == 0) q.addr = $urandom;   // possibly another group
      if (q.addr[11:10] == MyGroup) q.addr[19:12] = 8'(row);
    end else if (p < NC + NL) begin
      q.addr = gaddr(row, (p - NC) % NT, $urandom % 16, MyGroup);
    end else begin
      q.addr = gaddr(row, p - NC - NL, $urandom % 16, MyGroup);
    end
    return q;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lone_read(int unsigned core, logic [31:0] addr, int unsigned lat, bit far, string what);
    tcdm_req_t seen;
    int unsigned r, t;
    @(negedge clk);
    rq_valid[core] = 1'b1;
    rq[core] = '{addr: addr, we: 1'b0, be: 4'hf, wdata: '0, src: '0, tag: 4'd1};
    #4; check(rq_ready[core], {what, ": accepted at once"});
    @(negedge clk); rq_valid[core] = 1'b0;
    for (int c = 1; c < lat; c++) begin
      #4; check(!rs_valid[core], {what, ": not early"});
      if (far && c == 2) begin
        r = int'(addr[11:10] ^ MyGroup) - 1;
        t = int'(addr[9:6]);
        check(go_req_valid[r][t], {what, ": on its link after 2 cycles"});
        seen = go_req[r][t];
      end
      @(negedge clk);
      if (far) lm_valid[r][t] = (c == 2);
      if (far && c == 2) lm_resp[r][t] = '{rdata: data_of(addr), src: seen.src, tag: seen.tag};
    end
    #4;
    check(rs_valid[core] && rs[core].tag == 4'd1, {what, ": response in time"});
    if (!far) check(rs[core].rdata == shadow[addr[9:6]][addr[5:2]][addr[19:12]], {what, ": data"});
    else      check(rs[core].rdata == data_of(addr), {what, ": data"});
    @(negedge clk);
  endtask

  initial begin
    rq_valid = '0; rs_ready = '1; lm_rnd = '1; hs = '0;
    for (int r = 0; r < 3; r++) begin
      n_link[r] = 0;
      for (int t = 0; t < NT; t++) begin
        lm_valid[r][t] = 0; lm_resp[r][t] = '0; lm_valid_n[r][t] = 0; lm_resp_n[r][t] = '0;
      end
    end
    for (int i = 0; i < NR; i++) begin
      rq[i] = '0;
      for (int t = 0; t < 16; t++) busy[i][t] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // initialise all banks through the DMA ports, 16 tiles in parallel
    for (int row = 0; row < 256; row++) begin
      for (int b = 0; b < 16; b++) begin
        @(negedge clk);
        for (int t = 0; t < NT; t++) begin
          rq_valid[NC + NL + t] = 1'b1;
          rq[NC + NL + t] = '{addr: gaddr(row, t, b, MyGroup), we: 1'b1, be: 4'hf,
                              wdata: $urandom, src: '0, tag: '0};
          shadow[t][b][row] = rq[NC + NL + t].wdata;
        end
      end
    end
    @(negedge clk); rq_valid = '0;
    repeat (3) @(negedge clk);

    lone_read(9,  gaddr(3, 2, 7, MyGroup), 1, 0, "own tile");
    lone_read(9,  gaddr(3, 11, 7, MyGroup), 3, 0, "other tile of the group");
    lone_read(20, gaddr(4, 6, 1, 2'd1), 5, 1, "North group");
    lone_read(33, gaddr(4, 0, 1, 2'd2), 5, 1, "East group");
    lone_read(63, gaddr(4, 15, 9, 2'd3), 5, 1, "Northeast group");
    repeat (3) @(negedge clk);

    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      for (int r = 0; r < 3; r++) for (int t = 0; t < NT; t++) begin
        lm_valid[r][t] = lm_valid_n[r][t]; lm_resp[r][t] = lm_resp_n[r][t];
      end
      for (int i = 0; i < NR; i++) begin
        if (!rq_valid[i] || hs[i]) begin
          int ft;
          ft = -1;
          for (int t = 0; t < 16; t++) if (!busy[i][t] && ft < 0 && ($urandom % 3 == 0)) ft = t;
          rq_valid[i] = (ft >= 0) && ($urandom % 3 != 0) && (n < 3700);
          if (rq_valid[i]) rq[i] = new_req(i, ft);
        end
      end
      for (int i = 0; i < NR; i++) rs_ready[i] = ($urandom % 5) != 0;
      for (int r = 0; r < 3; r++) for (int t = 0; t < NT; t++) lm_rnd[r][t] = ($urandom % 4) != 0;
      #4;
      for (int i = 0; i < NR; i++) begin
        if (rs_valid[i] && rs_ready[i]) begin
          int t;
          t = int'(rs[i].tag);
          check(busy[i][t], "response for an outstanding tag");
          check(rs[i].rdata == exp_data[i][t], "response data");
          busy[i][t] = 0;
        end
        if (rq_valid[i] && !rq_ready[i]) n_stall++;
      end
      for (int i = 0; i < NR; i++) begin
        hs[i] = rq_valid[i] && rq_ready[i];
        if (hs[i]) begin
          int t, tl, b, row;
          t = int'(rq[i].tag);
          busy[i][t] = 1;
          if (rq[i].addr[11:10] == MyGroup) begin
            tl  = int'(rq[i].addr[9:6]);
            b   = int'(rq[i].addr[5:2]);
            row = int'(rq[i].addr[19:12]);
            if (i < NC) begin
              if (tl == i / 4) n_tile++; else n_group++;
            end else if (i < NC + NL) n_in++; else n_dma++;
            if (rq[i].we) begin
              exp_data[i][t] = '0;
              shadow[tl][b][row] = merge(shadow[tl][b][row], rq[i].wdata, rq[i].be);
            end else begin
              exp_data[i][t] = shadow[tl][b][row];
            end
          end else begin
            n_far++;
            exp_data[i][t] = data_of(rq[i].addr);
          end
        end
      end
      for (int r = 0; r < 3; r++) for (int t = 0; t < NT; t++) begin
        lm_valid_n[r][t] = lm_valid[r][t] && !go_resp_ready[r][t];
        lm_resp_n[r][t]  = lm_resp[r][t];
        if (go_req_valid[r][t] && go_req_ready[r][t]) begin
          n_link[r]++;
          check(int'(go_req[r][t].addr[11:10] ^ MyGroup) == r + 1, "link chosen by group");
          check(int'(go_req[r][t].addr[9:6]) == t, "link for the destination tile");
          lm_valid_n[r][t]      = 1'b1;
          lm_resp_n[r][t].src   = go_req[r][t].src;
          lm_resp_n[r][t].tag   = go_req[r][t].tag;
          lm_resp_n[r][t].rdata = data_of(go_req[r][t].addr);
        end
      end
    end
    for (int i = 0; i < NR; i++) for (int t = 0; t < 16; t++) check(!busy[i][t], "all responses returned");
    for (int r = 0; r < 3; r++) check(n_link[r] > 0, "every direction used");
    check(n_tile > 100 && n_group > 100 && n_far > 100 && n_in > 100 && n_dma > 100, "all kinds of access");
    check(n_stall > 0, "stalls exercised");
    $display("tile=%0d group=%0d far=%0d incoming=%0d dma=%0d stalls=%0d", n_tile, n_group, n_far, n_in, n_dma, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
