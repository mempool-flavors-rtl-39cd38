// tb_mempool_cluster: end-to-end test of the whole cluster at its full size
// (256 cores, 64 tiles, 1024 banks, 1 MiB), parameters left at their
// defaults.
//
// 1. The 64 DMA ports fill all 1 MiB in parallel, then read part of it back.
// 2. Lone reads from one core measure the unloaded latency of each level:
//    1 cycle to its own tile, 3 to another tile of its group, 5 to each of the
//    North, East and Northeast groups.
// 3. Hot spot: every core reads from the same bank at once; all must be
//    served (fair arbitration, no lost response).
// 4. Random traffic: core c reads and writes (with random byte enables) row c
//    of any bank in the cluster, so a shadow copy predicts every read.
//    Responses are refused at random to exercise back-pressure.
// Every mechanism of the design is counted and must occur at least once.
module tb_mempool_cluster;
  import mempool_pkg::*;

  localparam int unsigned NC = NumCores;
  localparam int unsigned NT = NumTiles;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NC-1:0] c_req_valid, c_req_ready, c_resp_valid, c_resp_ready;
  tcdm_req_t     c_req  [NC];
  tcdm_resp_t    c_resp [NC];
  logic [NT-1:0] d_req_valid, d_req_ready, d_resp_valid, d_resp_ready;
  tcdm_req_t     d_req  [NT];
  tcdm_resp_t    d_resp [NT];

  mempool_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(c_req_valid), .core_req_ready_o(c_req_ready), .core_req_i(c_req),
    .core_resp_valid_o(c_resp_valid), .core_resp_ready_i(c_resp_ready), .core_resp_o(c_resp),
    .dma_req_valid_i(d_req_valid), .dma_req_ready_o(d_req_ready), .dma_req_i(d_req),
    .dma_resp_valid_o(d_resp_valid), .dma_resp_ready_i(d_resp_ready), .dma_resp_o(d_resp)
  );

  int unsigned checks = 0, failures = 0;
  // mechanism counters
  int unsigned n_tile = 0, n_group = 0, n_dir [4], n_stall = 0, n_backpressure = 0;
  int unsigned n_dma_wr = 0, n_dma_rd = 0, n_partial = 0, n_hot = 0, hot_cycles = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] wd, logic [3:0] be);
    logic [31:0] r;
    r = old;
    for (int b = 0; b < 4; b++) if (be[b]) r[8*b +: 8] = wd[8*b +: 8];
    return r;
  endfunction
  // word index in the shadow = address bits [19:2]
  function automatic logic [31:0] caddr(int unsigned row, int unsigned grp, int unsigned tile, int unsigned bank);
    return {12'h0, 8'(row), 2'(grp), 4'(tile), 4'(bank), 2'b00};
  endfunction
  function automatic logic [31:0] init_val(int unsigned w);
    return 32'(w) * 32'h2545_f491 + 32'h1357_9bdf;
  endfunction

  logic [31:0] shadow [1 << 18];
  bit          busy     [NC][16];
  logic [31:0] exp_data [NC][16];
  logic [NC-1:0] hs;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lone_read(int unsigned core, logic [31:0] addr, int unsigned lat, string what);
    @(negedge clk);
    c_req_valid[core] = 1'b1;
    c_req[core] = '{addr: addr, we: 1'b0, be: 4'hf, wdata: '0, src: '0, tag: 4'd2};
    #4; check(c_req_ready[core], {what, ": accepted at once"});
    @(negedge clk); c_req_valid[core] = 1'b0;
    for (int c = 1; c < lat; c++) begin
      #4; check(!c_resp_valid[core], {what, ": not early"});
      @(negedge clk);
    end
    #4;
    check(c_resp_valid[core] && c_resp[core].tag == 4'd2 &&
          c_resp[core].rdata == shadow[addr[19:2]], {what, ": answered with the right data in time"});
    @(negedge clk);
  endtask

  initial begin
    int unsigned me_g, me_t;
    c_req_valid = '0; c_resp_ready = '1; d_req_valid = '0; d_resp_ready = '1; hs = '0;
    for (int d = 0; d < 4; d++) n_dir[d] = 0;
    for (int i = 0; i < NC; i++) begin
      c_req[i] = '0;
      for (int t = 0; t < 16; t++) busy[i][t] = 0;
    end
    for (int t = 0; t < NT; t++) d_req[t] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. DMA fill of the whole memory, then read-back of rows 0..3
    for (int row = 0; row < 256; row++) begin
      for (int b = 0; b < 16; b++) begin
        @(negedge clk);
        for (int t = 0; t < NT; t++) begin
          d_req_valid[t] = 1'b1;
          d_req[t] = '{addr: caddr(row, t / 16, t % 16, b), we: 1'b1, be: 4'hf,
                       wdata: init_val(int'(caddr(row, t / 16, t % 16, b) >> 2)), src: '0, tag: '0};
          shadow[d_req[t].addr[19:2]] = d_req[t].wdata;
        end
        #4;
        for (int t = 0; t < NT; t++) begin
          check(d_req_ready[t], "DMA write accepted");
          n_dma_wr++;
        end
      end
    end
    for (int row = 0; row < 4; row++) begin
      for (int b = 0; b < 16; b++) begin
        @(negedge clk);
        for (int t = 0; t < NT; t++) begin
          d_req_valid[t] = 1'b1;
          d_req[t] = '{addr: caddr(row, t / 16, t % 16, b), we: 1'b0, be: 4'hf, wdata: '0, src: '0, tag: 4'(b)};
        end
        #4;
        if (row > 0 || b > 0)
          for (int t = 0; t < NT; t++) begin
            check(d_resp_valid[t] && d_resp[t].rdata == shadow[caddr(row - (b == 0 ? 1 : 0), t / 16, t % 16, (b + 15) % 16) >> 2],
                  "DMA read-back, one cycle later");
            n_dma_rd++;
          end
      end
    end
    @(negedge clk); d_req_valid = '0;
    repeat (3) @(negedge clk);

    // 2. unloaded latencies, seen from core 37 (group 0, tile 9)
    lone_read(37, caddr(10, 0, 9, 4),  1, "own tile");
    lone_read(37, caddr(10, 0, 3, 4),  3, "other tile of the group");
    lone_read(37, caddr(10, 1, 9, 4),  5, "North group");
    lone_read(37, caddr(10, 2, 0, 15), 5, "East group");
    lone_read(37, caddr(10, 3, 15, 0), 5, "Northeast group");
    repeat (3) @(negedge clk);

    // 3. hot spot: all cores read bank 5 of tile 7 in group 2
    @(negedge clk);
    for (int i = 0; i < NC; i++) begin
      c_req_valid[i] = 1'b1;
      c_req[i] = '{addr: caddr(i, 2, 7, 5), we: 1'b0, be: 4'hf, wdata: '0, src: '0, tag: 4'd3};
    end
    for (int n = 0; n < 3000 && n_hot < NC; n++) begin
      hot_cycles++;
      #4;
      for (int i = 0; i < NC; i++) begin
        if (c_resp_valid[i]) begin
          n_hot++;
          check(c_resp[i].rdata == shadow[caddr(i, 2, 7, 5) >> 2], "hot-spot read data");
        end
        if (c_req_valid[i] && !c_req_ready[i]) n_stall++;
        hs[i] = c_req_valid[i] && c_req_ready[i];
      end
      @(negedge clk);
      for (int i = 0; i < NC; i++) if (hs[i]) c_req_valid[i] = 1'b0;
    end
    // the single bank serves one read per cycle
    // the bank serves one read per cycle and is kept busy: 256 reads take
    // 256 cycles plus the 5-cycle round trip of the last one
    check(hot_cycles >= NC && hot_cycles <= NC + 8, "hot-spot bank serves one read per cycle");
    $display("hot spot: %0d reads in %0d cycles", n_hot, hot_cycles);
    check(n_hot == NC, "every hot-spot read answered once");
    hs = '0;
    repeat (3) @(negedge clk);

    // 4. random traffic
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int i = 0; i < NC; i++) begin
        if (!c_req_valid[i] || hs[i]) begin
          int ft;
          ft = -1;
          for (int t = 0; t < 16; t++) if (!busy[i][t] && ft < 0 && ($urandom % 3 == 0)) ft = t;
          c_req_valid[i] = (ft >= 0) && ($urandom % 3 != 0) && (n < 2800);
          if (c_req_valid[i]) begin
            c_req[i].addr  = {12'h0, 8'(i), 10'($urandom), 2'b00};
            if ($urandom % 2 == 0) c_req[i].addr[11:6] = 6'(i / 4);   // own group, often own tile
            c_req[i].we    = $urandom % 2 == 0;
            c_req[i].be    = ($urandom % 2 == 0) ? 4'hf : 4'($urandom);
            c_req[i].wdata = $urandom;
            c_req[i].src   = core_id_t'($urandom);
            c_req[i].tag   = tag_t'(ft);
          end
        end
      end
      for (int i = 0; i < NC; i++) c_resp_ready[i] = ($urandom % 5) != 0;
      #4;
      for (int i = 0; i < NC; i++) begin
        if (c_resp_valid[i] && c_resp_ready[i]) begin
          int t;
          t = int'(c_resp[i].tag);
          check(busy[i][t], "response for an outstanding tag");
          check(c_resp[i].rdata == exp_data[i][t], "response data");
          check(c_resp[i].src == core_id_t'(i), "response carries the core's id");
          busy[i][t] = 0;
        end
        if (c_resp_valid[i] && !c_resp_ready[i]) n_backpressure++;
        if (c_req_valid[i] && !c_req_ready[i]) n_stall++;
      end
      for (int i = 0; i < NC; i++) begin
        hs[i] = c_req_valid[i] && c_req_ready[i];
        if (hs[i]) begin
          int t, w;
          t = int'(c_req[i].tag);
          w = int'(c_req[i].addr[19:2]);
          busy[i][t] = 1;
          me_g = i / 64;
          me_t = (i / 4) % 16;
          if (int'(c_req[i].addr[11:10]) != me_g) n_dir[int'(c_req[i].addr[11:10]) ^ me_g]++;
          else if (int'(c_req[i].addr[9:6]) != me_t) n_group++;
          else n_tile++;
          if (c_req[i].we) begin
            if (c_req[i].be != 4'hf) n_partial++;
            exp_data[i][t] = '0;
            shadow[w] = merge(shadow[w], c_req[i].wdata, c_req[i].be);
          end else begin
            exp_data[i][t] = shadow[w];
          end
        end
      end
    end
    for (int i = 0; i < NC; i++) for (int t = 0; t < 16; t++) check(!busy[i][t], "all responses returned");

    // mechanisms
    check(n_tile > 0,  "own-tile access occurred");
    check(n_group > 0, "same-group access occurred");
    check(n_dir[DirNorth] > 0 && n_dir[DirEast] > 0 && n_dir[DirNortheast] > 0, "access to every other group occurred");
    check(n_stall > 0, "conflict stalls occurred");
    check(n_backpressure > 0, "response back-pressure occurred");
    check(n_dma_wr > 0 && n_dma_rd > 0, "DMA writes and reads occurred");
    check(n_partial > 0, "byte-masked writes occurred");
    $display("own-tile=%0d group=%0d north=%0d east=%0d northeast=%0d stalls=%0d backpressure=%0d",
             n_tile, n_group, n_dir[DirNorth], n_dir[DirEast], n_dir[DirNortheast], n_stall, n_backpressure);
    $display("dma_writes=%0d dma_reads=%0d partial_writes=%0d hotspot_reads=%0d",
             n_dma_wr, n_dma_rd, n_partial, n_hot);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
