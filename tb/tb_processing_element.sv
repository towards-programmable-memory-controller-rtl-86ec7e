// tb_processing_element: self-checking test of the MTTKRP processing
// element against behavioural stand-ins for its three memory-controller
// ports: a DMA input stream with random gaps, a DMA output sink with random
// back-pressure, and a factor-row server that answers cache requests after
// a random 1-6 cycles. A tensor sorted by the output mode is computed for
// modes 1 and 2; every output row, the row count and the number of zero
// rows are compared with a reference MTTKRP. A third run feeds one element
// out of order and checks that it is counted and skipped.
module tb_processing_element;
  import mc_pkg::*;
  localparam int D [3] = '{11, 13, 9};
  localparam addr_t FMB [3] = '{32'h100, 32'h200, 32'h300};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  mode_t mode = '0;
  addr_t tensor_addr = 32'h40, out_base = 32'h900;
  logic [31:0] nnz = '0, out_dim = '0;
  addr_t fm_base [DEF_NMODES];
  logic busy, done;
  logic c_req_valid, c_req_ready, c_rsp_valid = 0, c_rsp_ready;
  addr_t c_req_addr;
  word_t c_rsp_data = '0;
  logic rd_cmd_valid, rd_cmd_ready = 0, rd_data_valid = 0, rd_data_ready;
  addr_t rd_cmd_addr;
  logic [31:0] rd_cmd_len;
  word_t rd_data = '0;
  logic wr_cmd_valid, wr_cmd_ready = 0, wr_data_valid, wr_data_ready = 0, wr_busy = 0;
  addr_t wr_cmd_addr;
  logic [31:0] wr_cmd_len;
  word_t wr_data;
  logic [31:0] rows_written, zero_rows, order_err_count;

  processing_element dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic signed [31:0] fm [3][16][RANK];
  word_t  tmem [64];       // tensor words
  word_t  outq [$];
  int     words_expected;

  // factor-row server
  initial forever begin
    c_req_ready = 0;
    @(negedge clk);
    c_req_ready = ($urandom_range(3) != 0);
    @(posedge clk);
    if (c_req_valid && c_req_ready) begin
      int k, row;
      word_t w;
      k   = (int'(c_req_addr) >> 8) - 1;
      row = int'(c_req_addr) & 255;
      for (int r = 0; r < RANK; r++) w[r*32 +: 32] = fm[k][row][r];
      @(negedge clk);
      c_req_ready = 0;
      repeat ($urandom_range(5)) @(negedge clk);
      c_rsp_valid = 1; c_rsp_data = w;
      do @(posedge clk); while (!c_rsp_ready);
      @(negedge clk);
      c_rsp_valid = 0;
    end
  end

  // DMA input stream
  initial forever begin
    @(negedge clk);
    rd_cmd_ready = 1;
    @(posedge clk);
    if (rd_cmd_valid) begin
      int base, len;
      base = int'(rd_cmd_addr); len = int'(rd_cmd_len);
      check(base == 32'h40, "tensor stream address");
      @(negedge clk);
      rd_cmd_ready = 0;
      for (int i = 0; i < len; i++) begin
        repeat ($urandom_range(2)) @(negedge clk);
        rd_data_valid = 1; rd_data = tmem[i];
        do @(posedge clk); while (!rd_data_ready);
        @(negedge clk);
        rd_data_valid = 0;
      end
    end
  end

  // DMA output sink
  initial forever begin
    @(negedge clk);
    wr_cmd_ready = 1;
    @(posedge clk);
    if (wr_cmd_valid) begin
      words_expected = int'(wr_cmd_len);
      check(wr_cmd_addr == out_base, "output stream address");
      wr_busy = 1;
      @(negedge clk);
      wr_cmd_ready = 0;
      while (outq.size() < words_expected) begin
        wr_data_ready = ($urandom_range(3) != 0);
        @(posedge clk);
        if (wr_data_valid && wr_data_ready) outq.push_back(wr_data);
        @(negedge clk);
      end
      wr_data_ready = 0;
      repeat (2) @(negedge clk);
      wr_busy = 0;
    end
  end

  task automatic run(int m, int n, bit bad);
    elem_t t [];
    logic signed [31:0] ref_row [16][RANK];
    int m1, m2, zeros, e0;
    logic [31:0] w0, z0;
    t = new[n];
    m1 = (m == 0) ? 1 : 0;
    m2 = (m == 2) ? 1 : 2;
    // sorted by output coordinate, last coordinate left empty
    for (int z = 0; z < n; z++) begin
      for (int k = 0; k < 3; k++) t[z].coord[k] = $urandom_range(D[k] - 2);
      t[z].val = $signed(32'($urandom_range(20))) - 10;
    end
    t.sort() with (item.coord[m]);
    if (bad) begin    // element out of order: smaller coordinate at the end
      t[n-1].coord[m] = 0;
      t[n-2].coord[m] = D[m] - 2;
    end
    for (int z = 0; z < n; z++) tmem[z / EPW][(z % EPW)*ELEM_W +: ELEM_W] = t[z];
    for (int i = 0; i < 16; i++) for (int r = 0; r < RANK; r++) ref_row[i][r] = 0;
    for (int z = 0; z < n; z++) begin
      if (bad && z == n - 1) continue;
      for (int r = 0; r < RANK; r++)
        ref_row[t[z].coord[m]][r] += t[z].val * fm[m1][t[z].coord[m1]][r] * fm[m2][t[z].coord[m2]][r];
    end
    zeros = 0;
    for (int i = 0; i < D[m]; i++) begin
      bit any = 0;
      for (int z = 0; z < n; z++) if (t[z].coord[m] == i && !(bad && z == n - 1)) any = 1;
      if (!any) zeros++;
    end
    outq.delete();
    w0 = rows_written; z0 = zero_rows; e0 = int'(order_err_count);
    @(negedge clk);
    mode = mode_t'(m); nnz = 32'(n); out_dim = 32'(D[m]); start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    check(outq.size() == D[m], $sformatf("rows written %0d", outq.size()));
    for (int i = 0; i < D[m] && i < outq.size(); i++)
      for (int r = 0; r < RANK; r++)
        check($signed(outq[i][r*32 +: 32]) == ref_row[i][r],
              $sformatf("mode %0d row %0d lane %0d", m, i, r));
    check(rows_written - w0 == 32'(D[m]), "row counter");
    check(zero_rows - z0 == 32'(zeros), $sformatf("zero rows %0d exp %0d", zero_rows - z0, zeros));
    check(int'(order_err_count) - e0 == (bad ? 1 : 0), "order error count");
  endtask

  initial begin
    for (int k = 0; k < 3; k++) fm_base[k] = FMB[k];
    for (int k = 0; k < 3; k++)
      for (int i = 0; i < 16; i++)
        for (int r = 0; r < RANK; r++) fm[k][i][r] = $signed(32'($urandom_range(60))) - 30;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 37, 0);
    run(2, 24, 0);
    run(0, 30, 1);
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
