// tb_data_selection_logic: self-checking test of the first-come
// first-served arbiter and read-data router.
// Four clients issue random reads and writes (each in its own address
// range) with random gaps, holding each request until it is granted. The
// test checks at every grant that no other waiting client had been waiting
// longer (ties go to the lower client number), that a request arriving at
// an idle arbiter is granted in its first cycle when memory is ready, that
// every read returns to the client that issued it with the data of its
// address, in order, and that every write reaches memory.
module tb_data_selection_logic;
  import mc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [NCLIENT-1:0] cl_req_valid = '0, cl_req_ready, cl_rsp_valid;
  mem_req_t [NCLIENT-1:0] cl_req;
  word_t cl_rsp_data;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  word_t mem_rsp_data;
  logic [31:0] bypass_count, queued_grant_count;

  data_selection_logic #(.MAX_OUTSTANDING(8)) dut (.*);
  ext_mem_model #(.WORDS(4096), .LATENCY(7), .STALL_PCT(25)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  function automatic word_t pattern(int a);
    word_t w;
    for (int r = 0; r < RANK; r++) w[r*32 +: 32] = 32'(a * 13 + r);
    return w;
  endfunction

  longint cyc = 0;
  longint since [NCLIENT];
  int exp_rd [NCLIENT][$];
  int n_grant [NCLIENT];
  int wr_addr [$];
  int bypass_seen = 0, queued_seen = 0;
  bit all_idle_prev = 1;

  // grant checker (sampled just before the clock edge)
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < NCLIENT; c++) if (cl_req_ready[c]) begin
      for (int o = 0; o < NCLIENT; o++)
        if (o != c && cl_req_valid[o])
          check(since[o] > since[c] || (since[o] == since[c] && o > c),
                $sformatf("FCFS: granted %0d (since %0d) while %0d waits since %0d",
                          c, since[c], o, since[o]));
      if (since[c] == cyc) bypass_seen++; else queued_seen++;
    end
    // an idle arbiter with memory ready grants a new request at once
    if (all_idle_prev && cl_req_valid != '0 && mem_req_ready && dut.q_cnt == 0)
      check(cl_req_ready != '0, "bypass grant on idle arbiter");
  end

  // response router checker
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCLIENT; c++) if (cl_rsp_valid[c]) begin
      check(exp_rd[c].size() != 0, $sformatf("unexpected response to %0d", c));
      if (exp_rd[c].size() != 0)
        check(cl_rsp_data == pattern(exp_rd[c].pop_front()), $sformatf("read data to %0d", c));
    end
    check($countones(cl_rsp_valid) <= 1, "one response at a time");
  end

  for (genvar g = 0; g < NCLIENT; g++) begin : g_client
    initial begin
      int a;
      cl_req[g] = '0;
      @(posedge rst_n);
      @(negedge clk);
      for (int n = 0; n < 60; n++) begin
        repeat ($urandom_range(3)) @(negedge clk);
        a = g * 512 + $urandom_range(255);
        cl_req[g].we    = ($urandom_range(2) == 0);
        cl_req[g].addr  = addr_t'(cl_req[g].we ? a + 256 : a);
        cl_req[g].wdata = ~pattern(a + 256);
        cl_req[g].wstrb = '1;
        cl_req_valid[g] = 1'b1;
        since[g] = cyc;
        do @(posedge clk); while (!cl_req_ready[g]);
        if (cl_req[g].we) wr_addr.push_back(a + 256);
        else exp_rd[g].push_back(a);
        n_grant[g]++;
        @(negedge clk);
        cl_req_valid[g] = 1'b0;
      end
    end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    all_idle_prev <= (cl_req_valid == '0);
  end

  initial begin
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = pattern(a);
    foreach (n_grant[c]) n_grant[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (n_grant[0] == 60 && n_grant[1] == 60 && n_grant[2] == 60 && n_grant[3] == 60);
    repeat (30) @(posedge clk);
    for (int c = 0; c < NCLIENT; c++) check(exp_rd[c].size() == 0, "all reads answered");
    foreach (wr_addr[i]) check(u_mem.mem[wr_addr[i]] == ~pattern(wr_addr[i]), "write landed");
    $display("bypass=%0d queued=%0d (dut %0d/%0d)", bypass_seen, queued_seen, bypass_count, queued_grant_count);
    check(bypass_seen > 0 && queued_seen > 0, "both grant kinds seen");
    check(bypass_count == 32'(bypass_seen) && queued_grant_count == 32'(queued_seen), "grant counters");
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
