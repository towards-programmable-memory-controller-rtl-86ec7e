// tb_dma_engine: self-checking test of the DMA Engine's two buffers.
// Input buffer: three read commands of different lengths are streamed out
// while the consumer stalls at random; every word must equal memory, in
// order, and no more than BUF_DEPTH reads may be in flight plus buffered.
// A long uninterrupted stream must sustain close to one word per cycle
// once the memory latency is covered. Output buffer: two write commands are
// fed by a producer with random gaps; the written region must equal the
// data sent and nothing outside it may change.
module tb_dma_engine;
  import mc_pkg::*;
  localparam int DEPTH = 16;  // above the memory latency, so streaming is not credit bound

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_cmd_valid = 0, rd_cmd_ready, rd_data_valid, rd_data_ready = 0, rd_busy;
  addr_t rd_cmd_addr = '0;
  logic [31:0] rd_cmd_len = '0;
  word_t rd_data;
  logic wr_cmd_valid = 0, wr_cmd_ready, wr_data_valid = 0, wr_data_ready, wr_busy;
  addr_t wr_cmd_addr = '0;
  logic [31:0] wr_cmd_len = '0;
  word_t wr_data = '0;
  logic in_mreq_valid, in_mreq_ready, in_mrsp_valid;
  mem_req_t in_mreq;
  word_t in_mrsp_data;
  logic out_mreq_valid, out_mreq_ready;
  mem_req_t out_mreq;

  dma_engine #(.BUF_DEPTH(DEPTH)) dut (.*);

  // two memory ports onto one model via a tiny fixed-priority mux (test only)
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  word_t m_rsp_data;
  wire sel_out = out_mreq_valid;
  assign m_valid = in_mreq_valid || out_mreq_valid;
  assign m_req   = sel_out ? out_mreq : in_mreq;
  assign in_mreq_ready  = m_ready && !sel_out;
  assign out_mreq_ready = m_ready && sel_out;
  assign in_mrsp_valid = m_rsp_valid;
  assign in_mrsp_data  = m_rsp_data;
  ext_mem_model #(.WORDS(4096), .LATENCY(10), .STALL_PCT(0)) u_mem (
    .clk, .rst_n, .req_valid(m_valid), .req_ready(m_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  function automatic word_t pattern(int a);
    word_t w;
    for (int r = 0; r < RANK; r++) w[r*32 +: 32] = 32'(a * 77 + r * 3 + 1);
    return w;
  endfunction

  int inflight = 0, max_occ = 0;
  always @(posedge clk) begin
    if (in_mreq_valid && in_mreq_ready && !in_mrsp_valid) inflight++;
    else if (!(in_mreq_valid && in_mreq_ready) && in_mrsp_valid) inflight--;
    if (rst_n && inflight + int'(dut.ibuf_count) > max_occ) max_occ = inflight + int'(dut.ibuf_count);
  end

  task automatic read_stream(int base, int len, int stall_pct, output int cycles);
    int got = 0, t0;
    @(negedge clk);
    rd_cmd_valid = 1; rd_cmd_addr = addr_t'(base); rd_cmd_len = 32'(len);
    do @(posedge clk); while (!rd_cmd_ready);
    t0 = $time;
    @(negedge clk);
    rd_cmd_valid = 0;
    while (got < len) begin
      rd_data_ready = ($urandom_range(99) >= stall_pct);
      @(posedge clk);
      if (rd_data_valid && rd_data_ready) begin
        check(rd_data == pattern(base + got), $sformatf("read word %0d of %0d", got, base));
        got++;
      end
      @(negedge clk);
    end
    rd_data_ready = 0;
    cycles = ($time - t0) / 10;
  endtask

  task automatic write_stream(int base, int len);
    int sent = 0;
    @(negedge clk);
    wr_cmd_valid = 1; wr_cmd_addr = addr_t'(base); wr_cmd_len = 32'(len);
    do @(posedge clk); while (!wr_cmd_ready);
    @(negedge clk);
    wr_cmd_valid = 0;
    while (sent < len) begin
      wr_data_valid = ($urandom_range(99) >= 30);
      wr_data = ~pattern(base + sent);
      @(posedge clk);
      if (wr_data_valid && wr_data_ready) sent++;
      @(negedge clk);
    end
    wr_data_valid = 0;
    while (wr_busy) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int a = base - 1; a <= base + len; a++)
      check(u_mem.mem[a] == ((a >= base && a < base + len) ? ~pattern(a) : pattern(a)),
            $sformatf("written word %0d", a));
  endtask

  initial begin
    int cyc;
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = pattern(a);
    repeat (3) @(posedge clk);
    rst_n = 1;
    read_stream(100, 5, 40, cyc);
    read_stream(333, 37, 50, cyc);
    read_stream(7, 1, 0, cyc);
    read_stream(1000, 200, 0, cyc);
    $display("200-word stream took %0d cycles", cyc);
    check(cyc <= 200 + 10 + 8, $sformatf("stream rate: %0d cycles for 200 words", cyc));
    check(max_occ <= DEPTH, $sformatf("buffer credit respected, max %0d", max_occ));
    check(!rd_busy, "input channel idle");
    write_stream(2000, 23);
    write_stream(2500, 3);
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
