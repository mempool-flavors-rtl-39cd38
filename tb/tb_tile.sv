// tb_tile: self-checking test of one tile (tile 5 of group 1).
//
// Nine requesters share the tile: its 4 cores, the 4 incoming remote ports
// and the DMA port. Each requester owns the rows r with r % 9 equal to its
// index, so a shadow copy of the 16 banks predicts every read although all
// write concurrently. Cores also send requests to other tiles; models of the
// four outgoing links accept them (at random, with back-pressure) and answer
// one cycle later with data computed from the address.
// Checks: read data, tags and that every request is answered; a core's
// request to its own tile is answered 1 cycle after issue; a request to
// another tile leaves after 1 cycle on the port (address group XOR own
// group) with the core's id stamped in, and with a link that answers in one
// cycle the core has its response 3 cycles after issue.
module tb_tile;
  import mempool_pkg::*;

  localparam logic [3:0] MyTile  = 4'd5;
  localparam logic [1:0] MyGroup = 2'd1;
  localparam int unsigned NR = 9;   // requesters
  localparam int unsigned ND = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NR-1:0] rq_valid, rq_ready, rs_valid, rs_ready;
  tcdm_req_t     rq [NR];
  tcdm_resp_t    rs [NR];
  tcdm_req_t     core_req [4];
  tcdm_resp_t    core_resp [4];
  tcdm_req_t     in_req [ND];
  tcdm_resp_t    in_resp [ND];
  logic [ND-1:0] o_req_valid, o_req_ready, o_resp_valid, o_resp_ready;
  tcdm_req_t     o_req  [ND];
  tcdm_resp_t    o_resp [ND];

  for (genvar i = 0; i < 4; i++) begin : g_c
    assign core_req[i] = rq[i];
    assign rs[i]       = core_resp[i];
  end
  for (genvar d = 0; d < ND; d++) begin : g_i
    assign in_req[d] = rq[4+d];
    assign rs[4+d]   = in_resp[d];
  end

  tile dut (
    .clk_i(clk), .rst_ni(rst_n), .tile_id_i(MyTile), .group_id_i(MyGroup),
    .core_req_valid_i(rq_valid[3:0]), .core_req_ready_o(rq_ready[3:0]), .core_req_i(core_req),
    .core_resp_valid_o(rs_valid[3:0]), .core_resp_ready_i(rs_ready[3:0]), .core_resp_o(core_resp),
    .dma_req_valid_i(rq_valid[8]), .dma_req_ready_o(rq_ready[8]), .dma_req_i(rq[8]),
    .dma_resp_valid_o(rs_valid[8]), .dma_resp_ready_i(rs_ready[8]), .dma_resp_o(rs[8]),
    .out_req_valid_o(o_req_valid), .out_req_ready_i(o_req_ready), .out_req_o(o_req),
    .out_resp_valid_i(o_resp_valid), .out_resp_ready_o(o_resp_ready), .out_resp_i(o_resp),
    .in_req_valid_i(rq_valid[7:4]), .in_req_ready_o(rq_ready[7:4]), .in_req_i(in_req),
    .in_resp_valid_o(rs_valid[7:4]), .in_resp_ready_i(rs_ready[7:4]), .in_resp_o(in_resp)
  );

  int unsigned checks = 0, failures = 0;
  int unsigned n_local = 0, n_remote = 0, n_in = 0, n_dma = 0, n_stall = 0;
  int unsigned n_dir [ND];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  function automatic logic [31:0] data_of(logic [31:0] addr);
    return (addr * 32'h9e37_79b9) ^ 32'h0bad_f00d;
  endfunction
  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] wd, logic [3:0] be);
    logic [31:0] r;
    r = old;
    for (int b = 0; b < 4; b++) if (be[b]) r[8*b +: 8] = wd[8*b +: 8];
    return r;
  endfunction
  function automatic logic [31:0] local_addr(int unsigned row, int unsigned bank);
    return {12'h0, 8'(row), MyGroup, MyTile, 4'(bank), 2'b00};
  endfunction

  logic [31:0]   shadow [16][256];
  bit            busy     [NR][16];
  logic [31:0]   exp_data [NR][16];
  logic          lm_valid [ND], lm_valid_n [ND];
  tcdm_resp_t    lm_resp  [ND], lm_resp_n  [ND];
  logic [ND-1:0] lm_rnd;
  logic [NR-1:0] hs;

  for (genvar d = 0; d < ND; d++) begin : g_lm
    assign o_resp_valid[d] = lm_valid[d];
    assign o_resp[d]       = lm_resp[d];
    assign o_req_ready[d]  = (!lm_valid[d] || o_resp_ready[d]) && lm_rnd[d];
  end

  function automatic tcdm_req_t new_req(int unsigned p, int unsigned tag);
    tcdm_req_t r;
    int unsigned row;
    row     = (($urandom % 28) * NR + p) % 256;
    r.addr  = local_addr(row, $urandom % 16);
    r.we    = $urandom % 2 == 0;
    r.be    = ($urandom % 2 == 0) ? 4'hf : 4'($urandom);
    r.wdata = $urandom;
    r.src   = core_id_t'($urandom);
    r.tag   = tag_t'(tag);
    if (p < 4 && $urandom % 2 == 0) begin
      // a core's request for another tile
      r.addr = $urandom;
      if (r.addr[11:10] == MyGroup && r.addr[9:6] == MyTile) r.addr[9:6] = ~MyTile;
    end
    return r;
  endfunction

  function automatic bit is_local(logic [31:0] addr);
    return addr[11:10] == MyGroup && addr[9:6] == MyTile;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rq_valid = '0; rs_ready = '1; lm_rnd = '1; hs = '0;
    for (int d = 0; d < ND; d++) begin
      n_dir[d] = 0; lm_valid[d] = 0; lm_resp[d] = '0; lm_valid_n[d] = 0; lm_resp_n[d] = '0;
    end
    for (int i = 0; i < NR; i++) begin
      rq[i] = '0;
      for (int t = 0; t < 16; t++) busy[i][t] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // initialise the banks through the DMA port
    for (int r = 0; r < 256; r++) begin
      for (int b = 0; b < 16; b++) begin
        @(negedge clk);
        rq_valid[8] = 1'b1;
        rq[8] = '{addr: local_addr(r, b), we: 1'b1, be: 4'hf, wdata: $urandom, src: '0, tag: '0};
        shadow[b][r] = rq[8].wdata;
      end
    end
    @(negedge clk); rq_valid[8] = 1'b0;
    repeat (3) @(negedge clk);

    // directed latency: local read answered after 1 cycle
    begin
      tcdm_req_t seen;
      rq_valid[1] = 1'b1;
      rq[1] = '{addr: local_addr(7, 3), we: 1'b0, be: 4'hf, wdata: '0, src: '0, tag: 4'd9};
      #4;
      check(rq_ready[1], "local request accepted at once");
      @(negedge clk); rq_valid[1] = 1'b0; #4;
      check(rs_valid[1] && rs[1].rdata == shadow[3][7] && rs[1].tag == 4'd9, "local read after 1 cycle");
      // remote request: leaves after 1 cycle, response 3 cycles after issue
      @(negedge clk);
      rq_valid[2] = 1'b1;
      rq[2] = '{addr: {20'h0, 2'd3, 4'd2, 4'd1, 2'b0}, we: 1'b0, be: 4'hf, wdata: '0, src: '0, tag: 4'd4};
      #4;
      check(rq_ready[2], "remote request accepted at once");
      check(o_req_valid == '0, "nothing on the links yet");
      @(negedge clk); rq_valid[2] = 1'b0; #4;
      // group 3 seen from group 1: 3^1 = 2 = East
      check(o_req_valid == 4'b0100, "request on the East link after 1 cycle");
      check(o_req[2].src == core_id_t'({MyGroup, MyTile, 2'd2}), "source id stamped");
      seen = o_req[2];
      @(negedge clk);
      lm_valid[2] = 1'b1; lm_resp[2] = '{rdata: 32'hcafe_0001, src: seen.src, tag: seen.tag};
      #4; check(!rs_valid[2], "no response before 3 cycles");
      @(negedge clk); lm_valid[2] = 1'b0; #4;
      check(rs_valid[2] && rs[2].rdata == 32'hcafe_0001 && rs[2].tag == 4'd4, "remote response after 3 cycles");
      @(negedge clk);
    end
    repeat (3) @(negedge clk);

    // random traffic
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      for (int d = 0; d < ND; d++) begin lm_valid[d] = lm_valid_n[d]; lm_resp[d] = lm_resp_n[d]; end
      for (int i = 0; i < NR; i++) begin
        if (!rq_valid[i] || hs[i]) begin
          int ft;
          ft = -1;
          for (int t = 0; t < 16; t++) if (!busy[i][t] && ft < 0 && ($urandom % 3 == 0)) ft = t;
          rq_valid[i] = (ft >= 0) && ($urandom % 3 != 0) && (n < 5700);
          if (rq_valid[i]) rq[i] = new_req(i, ft);
        end
      end
      rs_ready = NR'($urandom) | NR'($urandom) | NR'($urandom);
      lm_rnd   = ND'($urandom) | ND'($urandom);
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
          int t, b, r;
          t = int'(rq[i].tag);
          busy[i][t] = 1;
          if (is_local(rq[i].addr)) begin
            b = int'(rq[i].addr[5:2]);
            r = int'(rq[i].addr[19:12]);
            if (i < 4) n_local++; else if (i < 8) n_in++; else n_dma++;
            if (rq[i].we) begin
              exp_data[i][t] = '0;
              shadow[b][r] = merge(shadow[b][r], rq[i].wdata, rq[i].be);
            end else begin
              exp_data[i][t] = shadow[b][r];
            end
          end else begin
            n_remote++;
            exp_data[i][t] = data_of(rq[i].addr);
          end
        end
      end
      for (int d = 0; d < ND; d++) begin
        lm_valid_n[d] = lm_valid[d] && !o_resp_ready[d];
        lm_resp_n[d]  = lm_resp[d];
        if (o_req_valid[d] && o_req_ready[d]) begin
          n_dir[d]++;
          check(int'(o_req[d].addr[11:10] ^ MyGroup) == d, "link chosen by group");
          check(!is_local(o_req[d].addr), "only remote addresses leave");
          check(o_req[d].src[7:2] == {MyGroup, MyTile}, "source id of this tile");
          lm_valid_n[d]      = 1'b1;
          lm_resp_n[d].src   = o_req[d].src;
          lm_resp_n[d].tag   = o_req[d].tag;
          lm_resp_n[d].rdata = data_of(o_req[d].addr);
        end
      end
    end
    for (int i = 0; i < NR; i++) for (int t = 0; t < 16; t++) check(!busy[i][t], "all responses returned");
    for (int d = 0; d < ND; d++) check(n_dir[d] > 0, "every link used");
    check(n_local > 100 && n_remote > 100 && n_in > 100 && n_dma > 100, "all kinds of access");
    check(n_stall > 0, "stalls exercised");
    $display("local=%0d remote=%0d incoming=%0d dma=%0d stalls=%0d", n_local, n_remote, n_in, n_dma, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
