// ext_mem_model: behavioural model of the external memory together with the
// request/response side of its memory interface (not synthesizable, for
// testbenches only). Word addressed, WORDS words of 512 bits. A request is
// taken when req_valid && req_ready; req_ready is dropped at random in
// STALL_PCT percent of cycles to model a busy interface. Writes honour the
// byte enables. Reads are answered in order, LATENCY cycles after they are
// taken, one response per cycle. Addresses wrap modulo WORDS.
module ext_mem_model
  import mc_pkg::*;
#(
  parameter int WORDS     = 65536,
  parameter int LATENCY   = 8,
  parameter int STALL_PCT = 10
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output word_t    rsp_data
);
  word_t mem [WORDS];
  typedef struct { longint due; word_t data; } pend_t;
  pend_t pend [$];
  longint cyc;
  int unsigned reads, writes, stalls;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    cyc = 0; reads = 0; writes = 0; stalls = 0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    req_ready <= ($urandom_range(99) >= STALL_PCT);
    if (!req_ready && req_valid) stalls <= stalls + 1;
    rsp_valid <= 1'b0;
    if (rst_n) begin
      if (pend.size() != 0 && pend[0].due <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_data  <= pend[0].data;
        void'(pend.pop_front());
      end
      if (req_valid && req_ready) begin
        if (req.we) begin
          for (int b = 0; b < STRB_W; b++)
            if (req.wstrb[b]) mem[req.addr % WORDS][b*8 +: 8] <= req.wdata[b*8 +: 8];
          writes <= writes + 1;
        end else begin
          pend.push_back('{due: cyc + longint'(LATENCY), data: mem[req.addr % WORDS]});
          reads <= reads + 1;
        end
      end
    end
  end
endmodule
