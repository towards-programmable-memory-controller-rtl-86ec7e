// tb_cache_engine: self-checking test of the factor-row cache.
// A small cache (16 lines of 4 words, 2-way) sits on the external memory
// model, whose
// words hold a known function of their address. The test checks that every
// response equals memory, that hits and misses follow a reference model
// of a 2-way cache with invalid-first then round-robin replacement, that
// a hit raises rsp_valid two cycles after the cycle in which the request
// is accepted, and that
// `invalidate` turns the next access into a miss. A miss fills the whole
// 4-word line, so neighbouring words of a missed address hit afterwards.
// The default one-word line is exercised by the top-level test.
module tb_cache_engine;
  import mc_pkg::*;
  localparam int LINES = 16, ASSOC = 2, SETS = LINES / ASSOC, LW = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic invalidate = 0, req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  addr_t req_addr = '0;
  word_t rsp_data;
  logic mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t mreq;
  word_t mrsp_data;
  logic [31:0] hit_count, miss_count;

  cache_engine #(.NUM_LINES(LINES), .ASSOC(ASSOC), .LINE_WORDS(LW)) dut (.*);
  ext_mem_model #(.WORDS(1024), .LATENCY(6), .STALL_PCT(20)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .rsp_valid(mrsp_valid), .rsp_data(mrsp_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic word_t pattern(int a);
    word_t w;
    for (int r = 0; r < RANK; r++) w[r*32 +: 32] = 32'(a * 1000 + r);
    return w;
  endfunction

  // reference cache
  int  rtag [SETS][ASSOC];
  bit  rval [SETS][ASSOC];
  int  rrr  [SETS];

  function automatic bit ref_access(int a);
    int s = (a / LW) % SETS, t = (a / LW) / SETS, v;
    bit inv = 0;
    for (int w = 0; w < ASSOC; w++) if (rval[s][w] && rtag[s][w] == t) return 1;
    v = rrr[s];
    for (int w = ASSOC - 1; w >= 0; w--) if (!rval[s][w]) begin v = w; inv = 1; end
    rval[s][v] = 1; rtag[s][v] = t;
    if (!inv) rrr[s] = (rrr[s] + 1) % ASSOC;
    return 0;
  endfunction

  task automatic access(int a);
    int t0, lat;
    bit exp_hit;
    logic [31:0] h0;
    h0 = hit_count;
    exp_hit = ref_access(a);
    @(negedge clk);
    req_valid = 1; req_addr = addr_t'(a);
    do @(posedge clk); while (!req_ready);
    t0 = $time;
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    lat = ($time - t0 + 5) / 10;
    check(rsp_data == pattern(a), $sformatf("data of %0d", a));
    @(negedge clk);
    check((hit_count == h0 + 1) == exp_hit, $sformatf("hit/miss of %0d exp_hit=%0d", a, exp_hit));
    if (exp_hit) check(lat == 2, $sformatf("hit latency %0d", lat));
  endtask

  initial begin
    for (int a = 0; a < 1024; a++) u_mem.mem[a] = pattern(a);
    foreach (rval[s, w]) rval[s][w] = 0;
    foreach (rrr[s]) rrr[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // locality-heavy random stream
    for (int n = 0; n < 300; n++) access($urandom_range(160));
    // conflict set: three tags into one 2-way set
    for (int n = 0; n < 6; n++) access(((n % 3) * SETS + 5) * LW + n % LW);
    // invalidate forces misses
    @(negedge clk); invalidate = 1; @(negedge clk); invalidate = 0;
    foreach (rval[s, w]) rval[s][w] = 0;
    access(3); access(3);
    $display("hits=%0d misses=%0d", hit_count, miss_count);
    check(hit_count > 0 && miss_count > 0, "both hits and misses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
