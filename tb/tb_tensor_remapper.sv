// tb_tensor_remapper: self-checking test of the remapper on its own, with
// the external memory model as its only memory client.
// Two random tensors (with nnz not a multiple of EPW) are remapped, one by
// mode 1 and one by mode 2, into a destination area whose pointers are the
// prefix sums of the per-coordinate counts. The destination must hold the
// elements grouped by coordinate in input order, words around it must be
// untouched (byte enables), every pointer must have advanced by its count,
// and an element beyond the pointer table must be dropped and counted.
// With the memory never stalling, one element store per cycle must be
// sustained: the run may take at most nnz + nnz/EPW + latency + margin cycles.
module tb_tensor_remapper;
  import mc_pkg::*;
  localparam int PTRS = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ptr_wr_valid = 0;
  logic [5:0] ptr_wr_idx = '0;
  addr_t ptr_wr_addr = '0;
  logic start = 0;
  mode_t mode = '0;
  addr_t src_addr = '0;
  logic [31:0] nnz = '0;
  logic busy, done;
  logic mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t mreq;
  word_t mrsp_data;
  logic [31:0] elems_stored, range_err_count;

  tensor_remapper #(.MAX_PTRS(PTRS), .BUF_DEPTH(16)) dut (.*);
  ext_mem_model #(.WORDS(4096), .LATENCY(8), .STALL_PCT(0)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .rsp_valid(mrsp_valid), .rsp_data(mrsp_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic elem_t get_elem(int base, int idx);
    return elem_t'(u_mem.mem[base + idx / EPW][(idx % EPW)*ELEM_W +: ELEM_W]);
  endfunction

  task automatic run(int m, int n, int dim, int src, int dst, bit with_bad);
    elem_t t [];
    elem_t exp [];
    int cnt [PTRS];
    int pos [PTRS];
    int p = 0, n_ok = 0, t0, cyc;
    logic [31:0] st0, er0;
    t = new[n];
    foreach (cnt[i]) cnt[i] = 0;
    for (int z = 0; z < n; z++) begin
      t[z].coord[0] = $urandom; t[z].coord[1] = $urandom_range(dim - 1);
      t[z].coord[2] = $urandom_range(dim - 1); t[z].coord[0] = $urandom_range(dim - 1);
      t[z].val = $urandom;
      if (with_bad && z == n / 2) t[z].coord[m] = PTRS + 5;
      u_mem.mem[src + z / EPW][(z % EPW)*ELEM_W +: ELEM_W] = t[z];
      if (t[z].coord[m] < PTRS) begin cnt[t[z].coord[m]]++; n_ok++; end
    end
    for (int i = 0; i < PTRS; i++) begin pos[i] = p; p += cnt[i]; end
    // guard words around the destination
    u_mem.mem[dst - 1] = '1;
    u_mem.mem[dst + (n_ok + EPW - 1) / EPW] = '1;
    for (int i = 0; i < PTRS; i++) begin
      @(negedge clk);
      ptr_wr_valid = 1; ptr_wr_idx = 6'(i); ptr_wr_addr = addr_t'(dst * EPW + pos[i]);
    end
    @(negedge clk);
    ptr_wr_valid = 0;
    st0 = elems_stored; er0 = range_err_count;
    mode = mode_t'(m); src_addr = addr_t'(src); nnz = 32'(n); start = 1;
    @(posedge clk); t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cyc = ($time - t0) / 10;
    repeat (12) @(negedge clk);
    exp = new[n_ok];
    for (int z = 0; z < n; z++)
      if (t[z].coord[m] < PTRS) begin exp[pos[t[z].coord[m]]] = t[z]; pos[t[z].coord[m]]++; end
    for (int z = 0; z < n_ok; z++)
      check(get_elem(dst, z) == exp[z], $sformatf("mode %0d slot %0d", m, z));
    check(u_mem.mem[dst - 1] == '1, "guard word below");
    check(u_mem.mem[dst + (n_ok + EPW - 1) / EPW] == '1, "guard word above");
    for (int i = 0; i < PTRS; i++)
      check(dut.ptr_mem[i] == addr_t'(dst * EPW + pos[i]), $sformatf("pointer %0d advanced", i));
    check(elems_stored - st0 == 32'(n_ok), "stored count");
    check(range_err_count - er0 == (with_bad ? 1 : 0), "range drops");
    $display("mode %0d: %0d elements in %0d cycles", m, n, cyc);
    check(cyc <= n + n / EPW + 8 + 20, $sformatf("store rate: %0d cycles for %0d elements", cyc, n));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 203, 40, 16, 512, 0);
    run(2, 150, 64, 256, 1024, 1);
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
