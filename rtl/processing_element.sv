// processing_element: computes one mode of sparse MTTKRP by output-mode
// direction (Approach 1) over a tensor already remapped so that elements
// with the same output coordinate are consecutive and coordinates ascend.
//
// For output mode m, every other mode k is an input mode. For every
// non-zero x at coordinates c the element fetches row c[k] of factor matrix
// k for each input mode in turn through the Cache Engine (address
// fm_base[k] + c[k]), forms prod[r] = x * prod_k F_k[c[k]][r] and adds it to
// acc[r], r = 0..RANK-1, in RANK parallel lanes. With three modes this is
//     acc[r] += x * F_m1[c[m1]][r] * F_m2[c[m2]][r].
// Output rows are produced in order 0..out_dim-1: when an element with a
// larger output coordinate arrives, the finished row (and a zero row for
// every coordinate with no non-zero in between) is pushed to the DMA output
// buffer, which writes them as one stream from out_base. After the last
// element the remaining rows are flushed.
// The tensor is read as one DMA input stream of ceil(nnz / SEPW) words from
// tensor_addr (SEPW elements of elem_slot_w(NMODES) bits per word). An
// element whose output coordinate is below the current row (input not
// sorted) or not below out_dim is counted in order_err_count and skipped.
// The algorithm and the choice of cache for factor rows and DMA for the
// tensor and output stream follow the paper. One processing element
// handling one element at a time (about 4 + 3 * (NMODES-1) cycles plus
// cache latency per element), integer arithmetic modulo 2^32 and zero rows
// for empty coordinates are this design's choices.
// `done` rises after the DMA output buffer has issued the last row write.
module processing_element
  import mc_pkg::*;
#(
  parameter int NMODES = 3
) (
  input  logic      clk,
  input  logic      rst_n,
  // control
  input  logic      start,
  input  mode_t     mode,
  input  addr_t     tensor_addr,
  input  logic [31:0] nnz,
  input  logic [31:0] out_dim,
  input  addr_t     fm_base [NMODES],
  input  addr_t     out_base,
  output logic      busy,
  output logic      done,
  // cache engine
  output logic      c_req_valid,
  input  logic      c_req_ready,
  output addr_t     c_req_addr,
  input  logic      c_rsp_valid,
  output logic      c_rsp_ready,
  input  word_t     c_rsp_data,
  // DMA input buffer
  output logic      rd_cmd_valid,
  input  logic      rd_cmd_ready,
  output addr_t     rd_cmd_addr,
  output logic [31:0] rd_cmd_len,
  input  logic      rd_data_valid,
  output logic      rd_data_ready,
  input  word_t     rd_data,
  // DMA output buffer
  output logic      wr_cmd_valid,
  input  logic      wr_cmd_ready,
  output addr_t     wr_cmd_addr,
  output logic [31:0] wr_cmd_len,
  output logic      wr_data_valid,
  input  logic      wr_data_ready,
  output word_t     wr_data,
  input  logic      wr_busy,
  // statistics
  output logic [31:0] rows_written,
  output logic [31:0] zero_rows,
  output logic [31:0] order_err_count
);
  localparam int SLOT_W  = elem_slot_w(NMODES);
  localparam int SEPW    = MEM_DW / SLOT_W;
  localparam int SLANE_W = $clog2(SEPW);
  localparam int KW      = (NMODES > 1) ? $clog2(NMODES) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_CMD_IN, S_CMD_OUT, S_FETCH, S_CHECK, S_EMIT,
    S_NEXTK, S_REQ, S_WAIT, S_ACC, S_ADV, S_FLUSH, S_DRAIN
  } state_e;
  state_e state;

  mode_t       mode_q, k;
  logic [31:0] el_left, cur_row;
  logic [SLANE_W-1:0] lane;
  logic        word_ok;
  word_t       word_q;
  logic [SLOT_W-1:0] el;
  logic signed [VAL_W-1:0] acc  [RANK];
  logic signed [VAL_W-1:0] prod [RANK];
  logic        acc_nz;       // row has received at least one element

  function automatic logic [COORD_W-1:0] coord_of(logic [SLOT_W-1:0] e, mode_t mm);
    return e[int'(mm)*COORD_W +: COORD_W];
  endfunction

  assign el = word_q[int'(lane)*SLOT_W +: SLOT_W];
  wire [31:0] el_out = coord_of(el, mode_q);
  wire signed [VAL_W-1:0] el_val = el[NMODES*COORD_W +: VAL_W];

  assign rd_cmd_valid  = (state == S_CMD_IN);
  assign rd_cmd_addr   = tensor_addr;
  assign rd_cmd_len    = (nnz + 32'(SEPW - 1)) >> SLANE_W;
  assign wr_cmd_valid  = (state == S_CMD_OUT);
  assign wr_cmd_addr   = out_base;
  assign wr_cmd_len    = out_dim;
  assign rd_data_ready = (state == S_FETCH) && !word_ok && (el_left != '0);

  assign c_req_valid = (state == S_REQ);
  assign c_req_addr  = fm_base[KW'(k)] + coord_of(el, k);
  assign c_rsp_ready = (state == S_WAIT);

  assign wr_data_valid = (state == S_EMIT) || (state == S_FLUSH && cur_row != out_dim);
  always_comb begin
    for (int r = 0; r < RANK; r++) wr_data[r*VAL_W +: VAL_W] = acc[r];
  end
  wire emit = wr_data_valid && wr_data_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      busy    <= 1'b0;
      done    <= 1'b0;
      mode_q  <= '0;
      k       <= '0;
      el_left <= '0;
      cur_row <= '0;
      lane    <= '0;
      word_ok <= 1'b0;
      word_q  <= '0;
      acc_nz  <= 1'b0;
      rows_written    <= '0;
      zero_rows       <= '0;
      order_err_count <= '0;
      for (int r = 0; r < RANK; r++) begin
        acc[r]  <= '0;
        prod[r] <= '0;
      end
    end else begin
      if (emit) begin
        rows_written <= rows_written + 1'b1;
        if (!acc_nz) zero_rows <= zero_rows + 1'b1;
        cur_row <= cur_row + 1'b1;
        acc_nz  <= 1'b0;
        for (int r = 0; r < RANK; r++) acc[r] <= '0;
      end
      unique case (state)
        S_IDLE: if (start) begin
          busy    <= 1'b1;
          done    <= 1'b0;
          mode_q  <= mode;
          el_left <= nnz;
          cur_row <= '0;
          lane    <= '0;
          word_ok <= 1'b0;
          acc_nz  <= 1'b0;
          for (int r = 0; r < RANK; r++) acc[r] <= '0;
          state   <= S_CMD_IN;
        end
        S_CMD_IN:  if (rd_cmd_ready) state <= S_CMD_OUT;
        S_CMD_OUT: if (wr_cmd_ready) state <= S_FETCH;
        S_FETCH: begin
          if (el_left == '0) state <= S_FLUSH;
          else if (word_ok) state <= S_CHECK;
          else if (rd_data_valid) begin
            word_q  <= rd_data;
            word_ok <= 1'b1;
            state   <= S_CHECK;
          end
        end
        S_CHECK: begin
          if (el_out < cur_row || el_out >= out_dim) begin
            order_err_count <= order_err_count + 1'b1;
            state <= S_ADV;          // element skipped
          end else if (el_out > cur_row) state <= S_EMIT;
          else begin
            for (int r = 0; r < RANK; r++) prod[r] <= el_val;
            k     <= '0;
            state <= S_NEXTK;
          end
        end
        S_EMIT: if (emit) state <= S_CHECK;
        S_NEXTK: begin
          if (int'(k) == NMODES) state <= S_ACC;
          else if (k == mode_q) k <= k + 1'b1;
          else state <= S_REQ;
        end
        S_REQ: if (c_req_ready) state <= S_WAIT;
        S_WAIT: if (c_rsp_valid) begin
          for (int r = 0; r < RANK; r++)
            prod[r] <= prod[r] * $signed(c_rsp_data[r*VAL_W +: VAL_W]);
          k     <= k + 1'b1;
          state <= S_NEXTK;
        end
        S_ACC: begin
          for (int r = 0; r < RANK; r++) acc[r] <= acc[r] + prod[r];
          acc_nz <= 1'b1;
          state  <= S_ADV;
        end
        S_ADV: begin
          el_left <= el_left - 1'b1;
          if (lane == SLANE_W'(SEPW - 1)) begin
            lane    <= '0;
            word_ok <= 1'b0;
          end else lane <= lane + 1'b1;
          state <= S_FETCH;
        end
        S_FLUSH: if (cur_row == out_dim) state <= S_DRAIN;
        S_DRAIN: if (!wr_busy) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_mode_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_IDLE && start |-> int'(mode) < NMODES);
endmodule
