// tb_mttkrp_top: end-to-end test of the accelerator at its default sizes.
//
// A random three-mode COO tensor (I0 x I1 x I2, NNZ non-zeros, unsorted)
// and three random factor matrices are placed in the external memory
// model. One CP-ALS sweep is then run as the hardware would run it: for
// each mode m = 0, 1, 2 the host computes the per-coordinate counts and
// their prefix sums, writes them as remapper pointers, remaps the tensor
// into the other of two tensor areas, invalidates the cache, and lets the
// processing element compute the new factor matrix of mode m in place.
// After every remap the tensor area is compared with a stable grouping
// computed here; after every compute the whole factor matrix is compared
// with a reference MTTKRP computed here with 32-bit wrap-around arithmetic.
// A last remap carries a coordinate beyond the pointer table and checks
// that it is dropped. Every mechanism (cache hit, miss and invalidate,
// arbiter bypass and queued grant, memory stall, zero row, pointer range
// drop, all three modes) must have happened at least once.
module tb_mttkrp_top;
  import mc_pkg::*;

  localparam int I0 = 37, I1 = 29, I2 = 23;
  localparam int NNZ = 301;
  localparam addr_t AREA [2] = '{32'h0000_1000, 32'h0000_2000};
  localparam addr_t FMB  [3] = '{32'h0000_4000, 32'h0000_5000, 32'h0000_6000};
  localparam int DIMS [3] = '{I0, I1, I2};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        ptr_wr_valid = 0;
  logic [15:0] ptr_wr_idx = '0;
  addr_t       ptr_wr_addr = '0;
  logic        remap_start = 0;
  mode_t       remap_mode = '0;
  addr_t       remap_src = '0;
  logic [31:0] remap_nnz = '0;
  logic        remap_busy, remap_done;
  logic        cache_invalidate = 0, pe_start = 0;
  mode_t       pe_mode = '0;
  addr_t       pe_tensor_addr = '0, pe_out_base = '0;
  logic [31:0] pe_nnz = '0, pe_out_dim = '0;
  addr_t       pe_fm_base [DEF_NMODES];
  logic        pe_busy, pe_done;
  logic        mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t    mem_req;
  word_t       mem_rsp_data;
  logic [31:0] cache_hits, cache_misses, remap_stored, remap_range_err,
               dsl_bypass, dsl_queued, rows_written, zero_rows, order_err_count;

  mttkrp_top dut (.*);

  ext_mem_model #(.WORDS(65536), .LATENCY(12), .STALL_PCT(15)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  int unsigned stalls_seen = 0, invalidates = 0, modes_done = 0;

  // reference data
  elem_t tens [NNZ];
  logic signed [31:0] fm [3][][RANK];

  function automatic void put_elem(addr_t word_base, int idx, elem_t e);
    u_mem.mem[word_base + addr_t'(idx / EPW)][(idx % EPW)*ELEM_W +: ELEM_W] = e;
  endfunction
  function automatic elem_t get_elem(addr_t word_base, int idx);
    return elem_t'(u_mem.mem[word_base + addr_t'(idx / EPW)][(idx % EPW)*ELEM_W +: ELEM_W]);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // remap tens (already in area src) into area dst by mode m
  task automatic do_remap(int m, int src, int dst);
    int cnt [];
    int start_pos [];
    elem_t exp [NNZ];
    int pos;
    cnt = new[DIMS[m]];
    start_pos = new[DIMS[m]];
    foreach (cnt[i]) cnt[i] = 0;
    for (int z = 0; z < NNZ; z++) cnt[tens[z].coord[m]]++;
    pos = 0;
    for (int i = 0; i < DIMS[m]; i++) begin
      start_pos[i] = pos;
      pos += cnt[i];
    end
    // program pointers
    for (int i = 0; i < DIMS[m]; i++) begin
      @(negedge clk);
      ptr_wr_valid = 1;
      ptr_wr_idx   = 16'(i);
      ptr_wr_addr  = AREA[dst] * EPW + addr_t'(start_pos[i]);
    end
    @(negedge clk);
    ptr_wr_valid = 0;
    remap_mode = mode_t'(m);
    remap_src  = AREA[src];
    remap_nnz  = NNZ;
    remap_start = 1;
    @(negedge clk);
    remap_start = 0;
    wait (remap_done);
    repeat (40) @(posedge clk);   // let the last writes land
    // expected stable grouping
    for (int z = 0; z < NNZ; z++) begin
      exp[start_pos[tens[z].coord[m]]] = tens[z];
      start_pos[tens[z].coord[m]]++;
    end
    for (int z = 0; z < NNZ; z++) begin
      check(get_elem(AREA[dst], z) == exp[z], $sformatf("remap mode %0d pos %0d", m, z));
    end
    tens = exp;
  endtask

  task automatic do_compute(int m, int area);
    int m1, m2;
    logic signed [31:0] ref_row [][RANK];
    word_t w;
    m1 = (m == 0) ? 1 : 0;
    m2 = (m == 2) ? 1 : 2;
    ref_row = new[DIMS[m]];
    for (int i = 0; i < DIMS[m]; i++)
      for (int r = 0; r < RANK; r++) ref_row[i][r] = 0;
    for (int z = 0; z < NNZ; z++)
      for (int r = 0; r < RANK; r++)
        ref_row[tens[z].coord[m]][r] += tens[z].val * fm[m1][tens[z].coord[m1]][r]
                                        * fm[m2][tens[z].coord[m2]][r];
    @(negedge clk);
    cache_invalidate = 1;
    invalidates++;
    @(negedge clk);
    cache_invalidate = 0;
    pe_mode = mode_t'(m);
    pe_tensor_addr = AREA[area];
    pe_nnz = NNZ;
    pe_out_dim = DIMS[m];
    pe_out_base = FMB[m];
    pe_start = 1;
    @(negedge clk);
    pe_start = 0;
    wait (pe_done);
    repeat (40) @(posedge clk);
    for (int i = 0; i < DIMS[m]; i++) begin
      w = u_mem.mem[FMB[m] + addr_t'(i)];
      for (int r = 0; r < RANK; r++)
        check($signed(w[r*32 +: 32]) == ref_row[i][r],
              $sformatf("mode %0d row %0d lane %0d: got %0d exp %0d", m, i, r,
                        $signed(w[r*32 +: 32]), ref_row[i][r]));
    end
    for (int i = 0; i < DIMS[m]; i++) fm[m][i] = ref_row[i];
    modes_done++;
  endtask

  always @(posedge clk) if (mem_req_valid && !mem_req_ready) stalls_seen++;

  initial begin
    for (int k = 0; k < 3; k++) pe_fm_base[k] = FMB[k];
    // random tensor; coordinates of the last few indices of each mode left
    // empty to produce zero rows
    for (int z = 0; z < NNZ; z++) begin
      tens[z].coord[0] = $urandom_range(I0 - 3);
      tens[z].coord[1] = $urandom_range(I1 - 3);
      tens[z].coord[2] = $urandom_range(I2 - 3);
      tens[z].val      = $signed(32'($urandom_range(15))) - 7;
    end
    for (int k = 0; k < 3; k++) begin
      fm[k] = new[DIMS[k]];
      for (int i = 0; i < DIMS[k]; i++) begin
        word_t w;
        for (int r = 0; r < RANK; r++) begin
          fm[k][i][r] = $signed(32'($urandom_range(200))) - 100;
          w[r*32 +: 32] = fm[k][i][r];
        end
        u_mem.mem[FMB[k] + addr_t'(i)] = w;
      end
    end
    for (int z = 0; z < NNZ; z++) put_elem(AREA[0], z, tens[z]);

    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    do_remap(0, 0, 1);  do_compute(0, 1);
    do_remap(1, 1, 0);  do_compute(1, 0);
    do_remap(2, 0, 1);  do_compute(2, 1);

    // pointer range: one of four elements has a coordinate beyond MAX_PTRS
    begin
      logic [31:0] err0, st0;
      elem_t e;
      err0 = remap_range_err;
      st0  = remap_stored;
      for (int z = 0; z < 4; z++) begin
        e.coord[0] = (z == 2) ? 32'd70000 : 32'(z);
        e.coord[1] = 0; e.coord[2] = 0; e.val = 32'(z + 1);
        put_elem(32'h0000_7000, z, e);
      end
      for (int z = 0; z < 4; z++) begin
        @(negedge clk);
        ptr_wr_valid = 1; ptr_wr_idx = 16'(z); ptr_wr_addr = 32'h0000_7100 * EPW + 32'(z);
      end
      @(negedge clk);
      ptr_wr_valid = 0; remap_mode = 0; remap_src = 32'h0000_7000; remap_nnz = 4;
      remap_start = 1;
      @(negedge clk);
      remap_start = 0;
      wait (remap_done);
      repeat (40) @(posedge clk);
      check(remap_range_err == err0 + 1, "range error counted");
      check(remap_stored == st0 + 3, "three in-range elements stored");
      check(get_elem(32'h0000_7100, 3).val == 4, "element 3 stored at its pointer");
    end

    // mechanism coverage
    $display("mechanisms: cache_hits=%0d cache_misses=%0d invalidates=%0d bypass=%0d queued=%0d mem_stalls=%0d zero_rows=%0d range_drops=%0d modes=%0d order_err=%0d",
             cache_hits, cache_misses, invalidates, dsl_bypass, dsl_queued, stalls_seen,
             zero_rows, remap_range_err, modes_done, order_err_count);
    check(cache_hits > 0,    "cache hit happened");
    check(cache_misses > 0,  "cache miss happened");
    check(invalidates > 0,   "cache invalidate happened");
    check(dsl_bypass > 0,    "arbiter bypass happened");
    check(dsl_queued > 0,    "arbiter queued grant happened");
    check(stalls_seen > 0,   "memory stall happened");
    check(zero_rows > 0,     "zero output row happened");
    check(remap_range_err > 0, "pointer range drop happened");
    check(modes_done == 3,   "all three modes computed");
    check(order_err_count == 0, "no ordering error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
