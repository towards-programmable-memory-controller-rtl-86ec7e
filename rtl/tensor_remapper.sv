// tensor_remapper: reorders a COO tensor by the coordinate of a chosen
// output mode, the remapping step that lets every mode be computed
// output-mode first (Approach 1) from a single copy of the tensor.
//
// How it works. Before a run, an address pointer is written for every
// output coordinate value through the ptr_wr port: the element address at
// which the first element with that coordinate is to be stored (element
// address = word address * SEPW + lane, SEPW elements per word). On `start`
// the remapper bulk-reads ceil(nnz / SEPW) words from src_addr into its DMA
// buffer, like the DMA
// Engine does. It then takes the elements one by one, reads the pointer of
// the element's coordinate in mode `mode`, writes the element alone to
// that address (byte enables select its 128-bit lane of the word) and
// advances the pointer by one. Elements are thus stored element-wise, and
// the elements of one coordinate end up consecutive, in input order.
// An element whose coordinate has no pointer (>= MAX_PTRS) is dropped and
// counted in range_err_count.
// Timing: reads are issued while the buffer has room (words buffered plus
// reads in flight <= BUF_DEPTH); an element write is offered whenever an
// element is buffered and has priority over reads, so the remapper stores
// up to one element per cycle. `done` rises once all nnz elements have been
// handled and stays high until the next start.
// The pointer table, the element-wise store and the DMA buffer follow the
// paper; how pointers are initialised (written from outside), the pointer
// unit (elements) and the read/write priority are this design's choices.
module tensor_remapper
  import mc_pkg::*;
#(
  parameter int NMODES    = 3,
  parameter int MAX_PTRS  = 65536,
  parameter int BUF_DEPTH = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  // pointer table programming
  input  logic      ptr_wr_valid,
  input  logic [$clog2(MAX_PTRS)-1:0] ptr_wr_idx,
  input  addr_t     ptr_wr_addr,
  // control
  input  logic      start,
  input  mode_t     mode,
  input  addr_t     src_addr,
  input  logic [31:0] nnz,
  output logic      busy,
  output logic      done,
  // memory side (client of data selection logic)
  output logic      mreq_valid,
  input  logic      mreq_ready,
  output mem_req_t  mreq,
  input  logic      mrsp_valid,
  input  word_t     mrsp_data,
  // statistics
  output logic [31:0] elems_stored,
  output logic [31:0] range_err_count
);
  localparam int PI_W  = $clog2(MAX_PTRS);
  localparam int CNT_W = $clog2(BUF_DEPTH + 1);
  localparam int SLOT_W  = elem_slot_w(NMODES);   // element slot bits
  localparam int SEPW    = MEM_DW / SLOT_W;       // elements per word
  localparam int SLANE_W = $clog2(SEPW);

  addr_t            ptr_mem [MAX_PTRS];

  mode_t            mode_q;
  addr_t            rd_addr;
  logic [31:0]      rd_left, el_left;
  logic [CNT_W-1:0] rd_inflight, buf_count;
  logic [SLANE_W-1:0] lane;
  logic             buf_valid, buf_in_ready;
  word_t            buf_word;

  // current element
  logic [SLOT_W-1:0] el;
  logic [COORD_W-1:0] el_coord;
  logic             in_range;
  addr_t            ptr;
  assign el       = buf_word[int'(lane)*SLOT_W +: SLOT_W];
  assign el_coord = el[int'(mode_q)*COORD_W +: COORD_W];
  assign in_range = (el_coord < COORD_W'(MAX_PTRS));
  assign ptr      = ptr_mem[el_coord[PI_W-1:0]];

  wire el_avail  = busy && buf_valid && (el_left != '0);
  wire want_wr   = el_avail && in_range;
  wire drop      = el_avail && !in_range;
  wire want_rd   = busy && (rd_left != '0) &&
                   ({1'b0, rd_inflight} + {1'b0, buf_count} < (CNT_W+1)'(BUF_DEPTH));

  assign mreq_valid = want_wr || want_rd;
  always_comb begin
    mreq = '0;
    if (want_wr) begin
      mreq.we    = 1'b1;
      mreq.addr  = ptr >> SLANE_W;
      mreq.wdata = {SEPW{el}};
      mreq.wstrb = STRB_W'({(SLOT_W/8){1'b1}}) << (int'(ptr[SLANE_W-1:0]) * (SLOT_W/8));
    end else begin
      mreq.we    = 1'b0;
      mreq.addr  = rd_addr;
    end
  end

  wire wr_go = want_wr && mreq_ready;
  wire rd_go = !want_wr && want_rd && mreq_ready;
  wire el_go = wr_go || drop;
  wire last_in_word = (lane == SLANE_W'(SEPW - 1)) || (el_left == 32'd1);
  wire pop = el_go && last_in_word;

  sync_fifo #(.WIDTH(MEM_DW), .DEPTH(BUF_DEPTH)) u_dma_buffer (
    .clk, .rst_n,
    .in_valid (mrsp_valid),
    .in_ready (buf_in_ready),
    .in_data  (mrsp_data),
    .out_valid(buf_valid),
    .out_ready(pop),
    .out_data (buf_word),
    .count    (buf_count)
  );

  // pointer table: programming port and post-store increment
  always_ff @(posedge clk) begin
    if (wr_go)             ptr_mem[el_coord[PI_W-1:0]] <= ptr + 1'b1;
    else if (ptr_wr_valid) ptr_mem[ptr_wr_idx] <= ptr_wr_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      mode_q <= '0;
      rd_addr <= '0;
      rd_left <= '0;
      el_left <= '0;
      rd_inflight <= '0;
      lane <= '0;
      elems_stored <= '0;
      range_err_count <= '0;
    end else begin
      if (start && !busy) begin
        busy    <= (nnz != '0);
        done    <= (nnz == '0);
        mode_q  <= mode;
        rd_addr <= src_addr;
        rd_left <= (nnz + 32'(SEPW - 1)) >> SLANE_W;
        el_left <= nnz;
        lane    <= '0;
      end else begin
        if (rd_go) begin
          rd_addr <= rd_addr + 1'b1;
          rd_left <= rd_left - 1'b1;
        end
        if (el_go) begin
          el_left <= el_left - 1'b1;
          lane    <= last_in_word ? '0 : lane + 1'b1;
          if (el_left == 32'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
      case ({rd_go, mrsp_valid})
        2'b10:   rd_inflight <= rd_inflight + 1'b1;
        2'b01:   rd_inflight <= rd_inflight - 1'b1;
        default: ;
      endcase
      if (wr_go) elems_stored    <= elems_stored + 1'b1;
      if (drop)  range_err_count <= range_err_count + 1'b1;
    end
  end

  a_mode_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    start && !busy |-> int'(mode) < NMODES);
  a_buf_room: assert property (@(posedge clk) disable iff (!rst_n)
    mrsp_valid |-> buf_in_ready);
endmodule
