// tb_spm_bank: self-checking test of one SPM bank.
//
// Random reads and byte-masked writes against a shadow copy of the bank,
// with the response side randomly stalled. Checks: read data and metadata,
// that every accepted request is answered in the very next cycle (single-
// cycle bank), that the bank refuses requests while its response is held,
// and that a held response does not change. Inputs are driven after the
// falling edge and sampled shortly before the rising edge.
module tb_spm_bank;
  import mempool_pkg::*;

  localparam int unsigned Words = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 req_valid, req_ready, req_we;
  logic [7:0]           req_row;
  logic [3:0]           req_be;
  logic [31:0]          req_wdata;
  bank_meta_t           req_meta;
  logic                 resp_valid, resp_ready;
  logic [31:0]          resp_rdata;
  bank_meta_t           resp_meta;

  spm_bank #(.NumWords(Words)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_row_i(req_row),
    .req_we_i(req_we), .req_be_i(req_be), .req_wdata_i(req_wdata), .req_meta_i(req_meta),
    .resp_valid_o(resp_valid), .resp_ready_i(resp_ready),
    .resp_rdata_o(resp_rdata), .resp_meta_o(resp_meta)
  );

  int unsigned checks = 0, failures = 0;
  logic [31:0] shadow [Words];
  logic        exp_pending;
  logic [31:0] exp_rdata;
  bank_meta_t  exp_meta;
  logic        was_stalled;
  logic [31:0] stalled_rdata;
  int unsigned n_stall = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] wd, logic [3:0] be);
    logic [31:0] r = old;
    for (int b = 0; b < 4; b++) if (be[b]) r[8*b +: 8] = wd[8*b +: 8];
    return r;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; resp_ready = 1; req_row = 0; req_we = 0; req_be = 0;
    req_wdata = 0; req_meta = '0;
    exp_pending = 0; was_stalled = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // initialise every word with full writes
    for (int w = 0; w < Words; w++) begin
      @(negedge clk);
      req_valid = 1; req_we = 1; req_be = 4'hf; req_row = 8'(w);
      req_wdata = $urandom; shadow[w] = req_wdata;
    end
    @(negedge clk); req_valid = 0;
    @(negedge clk);
    // random traffic
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      req_valid  = ($urandom % 4) != 0;
      req_we     = ($urandom % 2) != 0;
      req_be     = 4'($urandom);
      req_row    = 8'($urandom);
      req_wdata  = $urandom;
      req_meta   = bank_meta_t'($urandom);
      resp_ready = ($urandom % 3) != 0;
      #4;
      // response side
      if (exp_pending) begin
        check(resp_valid, "response one cycle after acceptance");
        if (resp_valid) begin
          check(resp_rdata == exp_rdata, "read data");
          check(resp_meta == exp_meta, "metadata");
          if (was_stalled) check(resp_rdata == stalled_rdata, "held response stable");
        end
      end else begin
        check(!resp_valid, "no spurious response");
      end
      check(req_ready == (!resp_valid || resp_ready), "ready rule");
      if (resp_valid && !resp_ready) n_stall++;
      was_stalled   = resp_valid && !resp_ready;
      stalled_rdata = resp_rdata;
      if (resp_valid && resp_ready) exp_pending = 0;
      // request side
      if (req_valid && req_ready) begin
        exp_pending = 1;
        exp_meta    = req_meta;
        if (req_we) begin
          exp_rdata = '0;
          shadow[req_row] = merge(shadow[req_row], req_wdata, req_be);
        end else begin
          exp_rdata = shadow[req_row];
        end
      end
    end
    check(n_stall > 0, "response stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
