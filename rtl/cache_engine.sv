// cache_engine: read cache for input factor-matrix rows.
//
// The processing element asks for one memory word (one factor-matrix row,
// RANK values). The engine looks the address up; on a hit the stored row is
// returned, on a miss the row is read from external memory through the data
// selection logic, written into the cache and returned at the same time.
// This is the Cache Engine's behaviour as the paper gives it; the paper
// names its parameters (line width, number of lines, associativity) but no
// values and no organisation, so the following is this design's own:
//   * NUM_LINES lines of LINE_WORDS memory words each (default one word,
//     i.e. one factor row per line), ASSOC-way set associative. The word
//     address splits into tag | set index | word-in-line offset.
//   * A miss reads the whole aligned line, LINE_WORDS reads issued back to
//     back, and answers once the last word of the line has arrived.
//   * Replacement: an invalid way first, else a per-set round-robin way.
//   * Read only. Factor matrices written by the output DMA must be dropped
//     with `invalidate` before they are read again (between modes).
//   * One request at a time, answered in order (first-in first-out).
// Timing: request accepted in cycle 0, tag compare in cycle 1, a hit
// answers with rsp_valid in cycle 2; a miss answers the cycle after the
// last memory response of the line. rsp_valid holds until rsp_ready.
module cache_engine
  import mc_pkg::*;
#(
  parameter int NUM_LINES  = 1024,
  parameter int ASSOC      = 4,
  parameter int LINE_WORDS = 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      invalidate,
  // processing-unit side
  input  logic      req_valid,
  output logic      req_ready,
  input  addr_t     req_addr,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output word_t     rsp_data,
  // memory side (client of data selection logic)
  output logic      mreq_valid,
  input  logic      mreq_ready,
  output mem_req_t  mreq,
  input  logic      mrsp_valid,
  input  word_t     mrsp_data,
  // statistics
  output logic [31:0] hit_count,
  output logic [31:0] miss_count
);
  localparam int SETS  = NUM_LINES / ASSOC;
  localparam int SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int IDX_W = (SETS > 1) ? $clog2(SETS) : 0;
  localparam int OFF_W = (LINE_WORDS > 1) ? $clog2(LINE_WORDS) : 0;
  localparam int OW    = (LINE_WORDS > 1) ? $clog2(LINE_WORDS) : 1;
  localparam int TAG_W = ADDR_W - IDX_W - OFF_W;
  localparam int DAT_W = $clog2(NUM_LINES * LINE_WORDS);
  localparam int WAY_W = (ASSOC > 1) ? $clog2(ASSOC) : 1;
  localparam int LIN_W = $clog2(NUM_LINES);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_MISS, S_RESP} state_e;
  state_e state;

  word_t               data_mem [NUM_LINES * LINE_WORDS];
  logic [TAG_W-1:0]    tag_mem  [NUM_LINES];
  logic [NUM_LINES-1:0] valid_q;
  logic [WAY_W-1:0]    rr [SETS];

  addr_t               addr_q;
  logic [SET_W-1:0]    set_idx;
  logic [TAG_W-1:0]    tag;
  logic [OW-1:0]       offset;
  logic [OW:0]         req_i, rsp_i;     // miss: words requested / received
  assign set_idx = (SETS > 1) ? SET_W'(addr_q >> OFF_W) : '0;
  assign tag     = TAG_W'(addr_q >> (IDX_W + OFF_W));
  assign offset  = (LINE_WORDS > 1) ? OW'(addr_q) : '0;

  function automatic logic [DAT_W-1:0] word_of(logic [LIN_W-1:0] l, logic [OW:0] o);
    return DAT_W'(int'(l) * LINE_WORDS + int'(o));
  endfunction

  function automatic logic [LIN_W-1:0] line_of(logic [SET_W-1:0] s, logic [WAY_W-1:0] w);
    return LIN_W'(int'(s) * ASSOC + int'(w));
  endfunction

  // tag compare and victim choice for the set of addr_q
  logic             hit;
  logic [WAY_W-1:0] hit_way, victim;
  logic             have_invalid;
  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    have_invalid = 1'b0;
    victim = rr[set_idx];
    for (int w = ASSOC - 1; w >= 0; w--) begin
      if (valid_q[line_of(set_idx, WAY_W'(w))] &&
          tag_mem[line_of(set_idx, WAY_W'(w))] == tag) begin
        hit = 1'b1;
        hit_way = WAY_W'(w);
      end
      if (!valid_q[line_of(set_idx, WAY_W'(w))]) begin
        have_invalid = 1'b1;
        victim = WAY_W'(w);
      end
    end
  end

  assign req_ready  = (state == S_IDLE) && !invalidate;
  assign rsp_valid  = (state == S_RESP);
  assign mreq_valid = (state == S_MISS) && (int'(req_i) < LINE_WORDS);
  always_comb begin
    mreq       = '0;
    mreq.we    = 1'b0;
    mreq.addr  = ((addr_q >> OFF_W) << OFF_W) + ADDR_W'(req_i);
  end
  wire last_rsp = mrsp_valid && (int'(rsp_i) == LINE_WORDS - 1);

  always_ff @(posedge clk) begin
    if (state == S_LOOKUP && hit)
      rsp_data <= data_mem[word_of(line_of(set_idx, hit_way), (OW+1)'(offset))];
    if (state == S_MISS && mrsp_valid) begin
      if (rsp_i == (OW+1)'(offset)) rsp_data <= mrsp_data;
      data_mem[word_of(line_of(set_idx, victim), rsp_i)] <= mrsp_data;
      tag_mem[line_of(set_idx, victim)] <= tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      addr_q     <= '0;
      req_i      <= '0;
      rsp_i      <= '0;
      valid_q    <= '0;
      hit_count  <= '0;
      miss_count <= '0;
      for (int s = 0; s < SETS; s++) rr[s] <= '0;
    end else begin
      if (invalidate) valid_q <= '0;
      unique case (state)
        S_IDLE: if (req_valid && req_ready) begin
          addr_q <= req_addr;
          state  <= S_LOOKUP;
        end
        S_LOOKUP: if (hit) begin
          hit_count <= hit_count + 1'b1;
          state     <= S_RESP;
        end else begin
          miss_count <= miss_count + 1'b1;
          req_i      <= '0;
          rsp_i      <= '0;
          state      <= S_MISS;
        end
        S_MISS: begin
          if (mreq_valid && mreq_ready) req_i <= req_i + 1'b1;
          if (mrsp_valid) rsp_i <= rsp_i + 1'b1;
        end
        default: ;
      endcase
      if (state == S_MISS && last_rsp) begin
        valid_q[line_of(set_idx, victim)] <= 1'b1;
        if (!have_invalid)
          rr[set_idx] <= (rr[set_idx] == WAY_W'(ASSOC - 1)) ? '0 : rr[set_idx] + 1'b1;
        state <= S_RESP;
      end
      if (state == S_RESP && rsp_ready) state <= S_IDLE;
    end
  end

  a_no_stray_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    mrsp_valid |-> state == S_MISS && req_i > rsp_i);
endmodule
