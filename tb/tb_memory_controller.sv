// tb_memory_controller: self-checking test of the memory controller with
// its four request sources active at the same time on one memory model.
// In parallel: the Tensor Remapper regroups 90 elements by mode 2, the DMA
// input buffer streams 120 words, the Cache Engine serves 150 random row
// reads from a small working set (two-word cache lines), and the DMA output
// buffer writes 40 words.
// Every read result, the remapped area and the written area are compared
// with values computed here; the arbiter must have queued requests (real
// contention) and the cache must have both hit and missed.
module tb_memory_controller;
  import mc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cache_invalidate = 0;
  logic c_req_valid = 0, c_req_ready, c_rsp_valid, c_rsp_ready = 1;
  addr_t c_req_addr = '0;
  word_t c_rsp_data;
  logic rd_cmd_valid = 0, rd_cmd_ready, rd_data_valid, rd_data_ready = 0, rd_busy;
  addr_t rd_cmd_addr = '0;
  logic [31:0] rd_cmd_len = '0;
  word_t rd_data;
  logic wr_cmd_valid = 0, wr_cmd_ready, wr_data_valid = 0, wr_data_ready, wr_busy;
  addr_t wr_cmd_addr = '0;
  logic [31:0] wr_cmd_len = '0;
  word_t wr_data = '0;
  logic ptr_wr_valid = 0;
  logic [7:0] ptr_wr_idx = '0;
  addr_t ptr_wr_addr = '0;
  logic remap_start = 0;
  mode_t remap_mode = 2'd2;
  addr_t remap_src = 32'd3000;
  logic [31:0] remap_nnz = 32'd90;
  logic remap_busy, remap_done;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  word_t mem_rsp_data;
  logic [31:0] cache_hits, cache_misses, remap_stored, remap_range_err, dsl_bypass, dsl_queued;

  memory_controller #(.CACHE_LINES(32), .CACHE_ASSOC(2), .CACHE_LINE_WORDS(2), .DMA_BUF_DEPTH(16),
                      .REMAP_BUF_DEPTH(8), .MAX_PTRS(256), .MAX_OUTSTANDING(16)) dut (.*);
  ext_mem_model #(.WORDS(8192), .LATENCY(9), .STALL_PCT(10)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  function automatic word_t pattern(int a);
    word_t w;
    for (int r = 0; r < RANK; r++) w[r*32 +: 32] = 32'(a * 31 + r * 7);
    return w;
  endfunction

  elem_t t [90];
  int cnt [256], pos [256];

  initial begin
    int p;
    for (int a = 0; a < 8192; a++) u_mem.mem[a] = pattern(a);
    foreach (cnt[i]) cnt[i] = 0;
    for (int z = 0; z < 90; z++) begin
      t[z].coord[0] = $urandom; t[z].coord[1] = $urandom;
      t[z].coord[2] = $urandom_range(30); t[z].val = $urandom;
      u_mem.mem[3000 + z / EPW][(z % EPW)*ELEM_W +: ELEM_W] = t[z];
      cnt[t[z].coord[2]]++;
    end
    p = 0;
    for (int i = 0; i < 256; i++) begin pos[i] = p; p += cnt[i]; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      ptr_wr_valid = 1; ptr_wr_idx = 8'(i); ptr_wr_addr = addr_t'(5000 * EPW + pos[i]);
    end
    @(negedge clk);
    ptr_wr_valid = 0;
    fork
      begin : remap
        remap_start = 1; @(negedge clk); remap_start = 0;
        while (!remap_done) @(negedge clk);
      end
      begin : dma_read
        int got = 0;
        rd_cmd_valid = 1; rd_cmd_addr = 32'd1000; rd_cmd_len = 32'd120;
        do @(posedge clk); while (!rd_cmd_ready);
        @(negedge clk); rd_cmd_valid = 0;
        while (got < 120) begin
          rd_data_ready = ($urandom_range(4) != 0);
          @(posedge clk);
          if (rd_data_valid && rd_data_ready) begin
            check(rd_data == pattern(1000 + got), $sformatf("dma word %0d", got));
            got++;
          end
          @(negedge clk);
        end
        rd_data_ready = 0;
      end
      begin : cache_reads
        for (int n = 0; n < 150; n++) begin
          int a;
          a = 200 + $urandom_range(20);
          c_req_valid = 1; c_req_addr = addr_t'(a);
          do @(posedge clk); while (!c_req_ready);
          @(negedge clk); c_req_valid = 0;
          while (!c_rsp_valid) @(negedge clk);
          check(c_rsp_data == pattern(a), $sformatf("cache row %0d", a));
          @(negedge clk);
        end
      end
      begin : dma_write
        int sent = 0;
        wr_cmd_valid = 1; wr_cmd_addr = 32'd6000; wr_cmd_len = 32'd40;
        do @(posedge clk); while (!wr_cmd_ready);
        @(negedge clk); wr_cmd_valid = 0;
        while (sent < 40) begin
          wr_data_valid = 1; wr_data = ~pattern(6000 + sent);
          @(posedge clk);
          if (wr_data_ready) sent++;
          @(negedge clk);
        end
        wr_data_valid = 0;
        while (wr_busy) @(negedge clk);
      end
    join
    repeat (30) @(negedge clk);
    begin
      elem_t exp [90];
      for (int z = 0; z < 90; z++) begin exp[pos[t[z].coord[2]]] = t[z]; pos[t[z].coord[2]]++; end
      for (int z = 0; z < 90; z++)
        check(elem_t'(u_mem.mem[5000 + z / EPW][(z % EPW)*ELEM_W +: ELEM_W]) == exp[z],
              $sformatf("remapped slot %0d", z));
    end
    for (int a = 6000; a < 6040; a++) check(u_mem.mem[a] == ~pattern(a), $sformatf("dma write %0d", a));
    check(u_mem.mem[6040] == pattern(6040), "no write past the region");
    $display("hits=%0d misses=%0d bypass=%0d queued=%0d stored=%0d",
             cache_hits, cache_misses, dsl_bypass, dsl_queued, remap_stored);
    check(cache_hits > 0 && cache_misses > 0, "cache hit and miss");
    check(dsl_queued > 0, "arbiter contention");
    check(remap_stored == 90 && remap_range_err == 0, "remap counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
