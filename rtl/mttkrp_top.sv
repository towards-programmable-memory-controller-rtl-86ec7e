// mttkrp_top: sparse MTTKRP accelerator built from a processing element and
// the programmable memory controller, with the external memory reached
// through the memory-interface request/response port brought out here.
//
// One mode update is two operations, both started by the host:
//  1. remap: program the remapper's address pointers (one per output
//     coordinate) and pulse remap_start; the tensor at remap_src is
//     rewritten, element by element, grouped by the coordinate of
//     remap_mode.
//  2. compute: pulse pe_start with the remapped tensor's address; the
//     processing element streams it through the DMA input buffer, reads
//     input factor rows through the Cache Engine and writes the out_dim
//     rows of the output factor matrix through the DMA output buffer.
// Assert cache_invalidate between modes, because the factor matrix written
// by one mode is read by the next.
// The two-part structure (processing elements, memory controller, external
// memory) follows the paper's overall design; host sequencing is this
// design's choice.
module mttkrp_top
  import mc_pkg::*;
#(
  parameter int NMODES          = 3,
  parameter int CACHE_LINES     = 1024,
  parameter int CACHE_ASSOC     = 4,
  parameter int CACHE_LINE_WORDS = 1,
  parameter int DMA_BUF_DEPTH   = 64,
  parameter int REMAP_BUF_DEPTH = 64,
  parameter int MAX_PTRS        = 65536,
  parameter int MAX_OUTSTANDING = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  // remapper
  input  logic      ptr_wr_valid,
  input  logic [$clog2(MAX_PTRS)-1:0] ptr_wr_idx,
  input  addr_t     ptr_wr_addr,
  input  logic      remap_start,
  input  mode_t     remap_mode,
  input  addr_t     remap_src,
  input  logic [31:0] remap_nnz,
  output logic      remap_busy,
  output logic      remap_done,
  // processing element
  input  logic      cache_invalidate,
  input  logic      pe_start,
  input  mode_t     pe_mode,
  input  addr_t     pe_tensor_addr,
  input  logic [31:0] pe_nnz,
  input  logic [31:0] pe_out_dim,
  input  addr_t     pe_fm_base [NMODES],
  input  addr_t     pe_out_base,
  output logic      pe_busy,
  output logic      pe_done,
  // memory interface (request/response side of the vendor IP)
  output logic      mem_req_valid,
  input  logic      mem_req_ready,
  output mem_req_t  mem_req,
  input  logic      mem_rsp_valid,
  input  word_t     mem_rsp_data,
  // statistics
  output logic [31:0] cache_hits,
  output logic [31:0] cache_misses,
  output logic [31:0] remap_stored,
  output logic [31:0] remap_range_err,
  output logic [31:0] dsl_bypass,
  output logic [31:0] dsl_queued,
  output logic [31:0] rows_written,
  output logic [31:0] zero_rows,
  output logic [31:0] order_err_count
);
  logic  c_req_valid, c_req_ready, c_rsp_valid, c_rsp_ready;
  addr_t c_req_addr;
  word_t c_rsp_data;
  logic  rd_cmd_valid, rd_cmd_ready, rd_data_valid, rd_data_ready, rd_busy;
  addr_t rd_cmd_addr;
  logic [31:0] rd_cmd_len;
  word_t rd_data;
  logic  wr_cmd_valid, wr_cmd_ready, wr_data_valid, wr_data_ready, wr_busy;
  addr_t wr_cmd_addr;
  logic [31:0] wr_cmd_len;
  word_t wr_data;

  processing_element #(.NMODES(NMODES)) u_pe (
    .clk, .rst_n,
    .start (pe_start), .mode (pe_mode), .tensor_addr (pe_tensor_addr),
    .nnz (pe_nnz), .out_dim (pe_out_dim), .fm_base (pe_fm_base),
    .out_base (pe_out_base), .busy (pe_busy), .done (pe_done),
    .c_req_valid, .c_req_ready, .c_req_addr, .c_rsp_valid, .c_rsp_ready, .c_rsp_data,
    .rd_cmd_valid, .rd_cmd_ready, .rd_cmd_addr, .rd_cmd_len,
    .rd_data_valid, .rd_data_ready, .rd_data,
    .wr_cmd_valid, .wr_cmd_ready, .wr_cmd_addr, .wr_cmd_len,
    .wr_data_valid, .wr_data_ready, .wr_data, .wr_busy,
    .rows_written, .zero_rows, .order_err_count
  );

  memory_controller #(
    .NMODES(NMODES),
    .CACHE_LINES(CACHE_LINES), .CACHE_ASSOC(CACHE_ASSOC),
    .CACHE_LINE_WORDS(CACHE_LINE_WORDS),
    .DMA_BUF_DEPTH(DMA_BUF_DEPTH), .REMAP_BUF_DEPTH(REMAP_BUF_DEPTH),
    .MAX_PTRS(MAX_PTRS), .MAX_OUTSTANDING(MAX_OUTSTANDING)
  ) u_mc (
    .clk, .rst_n,
    .cache_invalidate,
    .c_req_valid, .c_req_ready, .c_req_addr, .c_rsp_valid, .c_rsp_ready, .c_rsp_data,
    .rd_cmd_valid, .rd_cmd_ready, .rd_cmd_addr, .rd_cmd_len,
    .rd_data_valid, .rd_data_ready, .rd_data, .rd_busy,
    .wr_cmd_valid, .wr_cmd_ready, .wr_cmd_addr, .wr_cmd_len,
    .wr_data_valid, .wr_data_ready, .wr_data, .wr_busy,
    .ptr_wr_valid, .ptr_wr_idx, .ptr_wr_addr,
    .remap_start, .remap_mode, .remap_src, .remap_nnz, .remap_busy, .remap_done,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_data,
    .cache_hits, .cache_misses, .remap_stored, .remap_range_err,
    .dsl_bypass, .dsl_queued
  );
endmodule
