// nmode_sweep: one CP-ALS sweep of an NM-mode tensor through mttkrp_top
// built with NMODES = NM, checked against a reference computed here.
// Used by tb_mttkrp_nmodes for the 4- and 5-mode configurations. Element
// slots are elem_slot_w(NM) bits: coordinate k at bits 32k+31:32k, the
// value right after the last coordinate. For every mode m the tensor is
// remapped (pointers = prefix sums of the per-coordinate counts) into the
// other tensor area and checked, the cache is invalidated, and the new
// factor matrix of mode m is computed in place and checked row by row.
// Reports its totals on checks/failures and raises done at the end.
module nmode_sweep
  import mc_pkg::*;
#(
  parameter int NM  = 4,
  parameter int NNZ = 120
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   modes_done
);
  localparam int SW   = elem_slot_w(NM);
  localparam int SEPW = MEM_DW / SW;
  localparam addr_t AREA [2] = '{32'h0000_1000, 32'h0000_2000};

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
  addr_t       pe_fm_base [NM];
  logic        pe_busy, pe_done;
  logic        mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t    mem_req;
  word_t       mem_rsp_data;
  logic [31:0] cache_hits, cache_misses, remap_stored, remap_range_err,
               dsl_bypass, dsl_queued, rows_written, zero_rows, order_err_count;

  mttkrp_top #(.NMODES(NM)) dut (.*);
  ext_mem_model #(.WORDS(65536), .LATENCY(10), .STALL_PCT(10)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int dims [NM];
  int crd [NNZ][NM];
  int val [NNZ];
  logic signed [31:0] fm [NM][32][RANK];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL (%0d modes): %s", NM, what);
    end
  endtask

  function automatic logic [SW-1:0] pack(int z);
    logic [SW-1:0] e = '0;
    for (int k = 0; k < NM; k++) e[k*32 +: 32] = 32'(crd[z][k]);
    e[NM*32 +: 32] = 32'(val[z]);
    return e;
  endfunction
  function automatic logic [SW-1:0] slot(addr_t base, int z);
    return u_mem.mem[base + addr_t'(z / SEPW)][(z % SEPW)*SW +: SW];
  endfunction

  task automatic remap(int m, int src, int dst);
    int cnt [32], pos [32], p;
    int order [NNZ];
    int ncrd [NNZ][NM];
    int nval [NNZ];
    foreach (cnt[i]) cnt[i] = 0;
    for (int z = 0; z < NNZ; z++) cnt[crd[z][m]]++;
    p = 0;
    for (int i = 0; i < 32; i++) begin pos[i] = p; p += cnt[i]; end
    for (int i = 0; i < dims[m]; i++) begin
      @(negedge clk);
      ptr_wr_valid = 1; ptr_wr_idx = 16'(i);
      ptr_wr_addr = AREA[dst] * SEPW + addr_t'(pos[i]);
    end
    @(negedge clk);
    ptr_wr_valid = 0; remap_mode = mode_t'(m); remap_src = AREA[src]; remap_nnz = NNZ;
    remap_start = 1;
    @(negedge clk);
    remap_start = 0;
    while (!remap_done) @(negedge clk);
    repeat (40) @(negedge clk);
    for (int z = 0; z < NNZ; z++) begin order[pos[crd[z][m]]] = z; pos[crd[z][m]]++; end
    for (int z = 0; z < NNZ; z++) begin
      check(slot(AREA[dst], z) == pack(order[z]), $sformatf("remap mode %0d slot %0d", m, z));
      for (int k = 0; k < NM; k++) ncrd[z][k] = crd[order[z]][k];
      nval[z] = val[order[z]];
    end
    crd = ncrd;
    val = nval;
  endtask

  task automatic compute(int m, int area);
    logic signed [31:0] ref_row [32][RANK];
    logic signed [31:0] prod;
    word_t w;
    for (int i = 0; i < 32; i++) for (int r = 0; r < RANK; r++) ref_row[i][r] = 0;
    for (int z = 0; z < NNZ; z++)
      for (int r = 0; r < RANK; r++) begin
        prod = val[z];
        for (int k = 0; k < NM; k++) if (k != m) prod = prod * fm[k][crd[z][k]][r];
        ref_row[crd[z][m]][r] += prod;
      end
    @(negedge clk); cache_invalidate = 1;
    @(negedge clk); cache_invalidate = 0;
    pe_mode = mode_t'(m); pe_tensor_addr = AREA[area]; pe_nnz = NNZ;
    pe_out_dim = 32'(dims[m]); pe_out_base = pe_fm_base[m];
    pe_start = 1;
    @(negedge clk);
    pe_start = 0;
    while (!pe_done) @(negedge clk);
    repeat (40) @(negedge clk);
    for (int i = 0; i < dims[m]; i++) begin
      w = u_mem.mem[pe_fm_base[m] + addr_t'(i)];
      for (int r = 0; r < RANK; r++)
        check($signed(w[r*32 +: 32]) == ref_row[i][r], $sformatf("mode %0d row %0d lane %0d", m, i, r));
    end
    for (int i = 0; i < dims[m]; i++) fm[m][i] = ref_row[i];
    modes_done++;
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; modes_done = 0;
    for (int k = 0; k < NM; k++) begin
      dims[k] = 9 + 3 * k;
      pe_fm_base[k] = 32'h0000_4000 + addr_t'(k) * 32'h1000;
      for (int i = 0; i < dims[k]; i++) begin
        word_t w;
        for (int r = 0; r < RANK; r++) begin
          fm[k][i][r] = $signed(32'($urandom_range(40))) - 20;
          w[r*32 +: 32] = fm[k][i][r];
        end
        u_mem.mem[pe_fm_base[k] + addr_t'(i)] = w;
      end
    end
    for (int z = 0; z < NNZ; z++) begin
      for (int k = 0; k < NM; k++) crd[z][k] = $urandom_range(dims[k] - 2);
      val[z] = $urandom_range(9) - 4;
      u_mem.mem[AREA[0] + addr_t'(z / SEPW)][(z % SEPW)*SW +: SW] = pack(z);
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);
    for (int m = 0; m < NM; m++) begin
      remap(m, m % 2, 1 - m % 2);
      compute(m, 1 - m % 2);
    end
    check(order_err_count == 0, "no ordering error");
    done = 1;
  end
endmodule
