// memory_controller: the programmable memory controller that sits between
// the processing element and the memory interface. It holds a Cache Engine
// (random factor-row reads), a DMA Engine with an Input Buffer and an Output
// Buffer (tensor stream in, output rows out), a Tensor Remapper (bulk read,
// element-wise store) and the Data Selection Logic that puts all their
// requests on the one memory port first-come first-served and returns read
// data to whoever asked.
// The block structure and the request/data connections follow the
// controller's block diagram; the sizes below are synthesis-time
// parameters, as the paper asks, with defaults of this design's choosing.
// The memory port is the request/response side of the memory interface IP
// (word addressed, 512-bit words, byte enables, reads answered in order).
module memory_controller
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
  // cache engine: processing-unit side
  input  logic      cache_invalidate,
  input  logic      c_req_valid,
  output logic      c_req_ready,
  input  addr_t     c_req_addr,
  output logic      c_rsp_valid,
  input  logic      c_rsp_ready,
  output word_t     c_rsp_data,
  // DMA engine: processing-unit side
  input  logic      rd_cmd_valid,
  output logic      rd_cmd_ready,
  input  addr_t     rd_cmd_addr,
  input  logic [31:0] rd_cmd_len,
  output logic      rd_data_valid,
  input  logic      rd_data_ready,
  output word_t     rd_data,
  output logic      rd_busy,
  input  logic      wr_cmd_valid,
  output logic      wr_cmd_ready,
  input  addr_t     wr_cmd_addr,
  input  logic [31:0] wr_cmd_len,
  input  logic      wr_data_valid,
  output logic      wr_data_ready,
  input  word_t     wr_data,
  output logic      wr_busy,
  // tensor remapper control
  input  logic      ptr_wr_valid,
  input  logic [$clog2(MAX_PTRS)-1:0] ptr_wr_idx,
  input  addr_t     ptr_wr_addr,
  input  logic      remap_start,
  input  mode_t     remap_mode,
  input  addr_t     remap_src,
  input  logic [31:0] remap_nnz,
  output logic      remap_busy,
  output logic      remap_done,
  // memory interface
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
  output logic [31:0] dsl_queued
);
  logic     [NCLIENT-1:0] cl_req_valid, cl_req_ready, cl_rsp_valid;
  mem_req_t [NCLIENT-1:0] cl_req;
  word_t                  cl_rsp_data;

  cache_engine #(.NUM_LINES(CACHE_LINES), .ASSOC(CACHE_ASSOC),
                 .LINE_WORDS(CACHE_LINE_WORDS)) u_cache (
    .clk, .rst_n,
    .invalidate (cache_invalidate),
    .req_valid  (c_req_valid),
    .req_ready  (c_req_ready),
    .req_addr   (c_req_addr),
    .rsp_valid  (c_rsp_valid),
    .rsp_ready  (c_rsp_ready),
    .rsp_data   (c_rsp_data),
    .mreq_valid (cl_req_valid[CL_CACHE]),
    .mreq_ready (cl_req_ready[CL_CACHE]),
    .mreq       (cl_req[CL_CACHE]),
    .mrsp_valid (cl_rsp_valid[CL_CACHE]),
    .mrsp_data  (cl_rsp_data),
    .hit_count  (cache_hits),
    .miss_count (cache_misses)
  );

  dma_engine #(.BUF_DEPTH(DMA_BUF_DEPTH)) u_dma (
    .clk, .rst_n,
    .rd_cmd_valid, .rd_cmd_ready, .rd_cmd_addr, .rd_cmd_len,
    .rd_data_valid, .rd_data_ready, .rd_data, .rd_busy,
    .wr_cmd_valid, .wr_cmd_ready, .wr_cmd_addr, .wr_cmd_len,
    .wr_data_valid, .wr_data_ready, .wr_data, .wr_busy,
    .in_mreq_valid  (cl_req_valid[CL_DMA_IN]),
    .in_mreq_ready  (cl_req_ready[CL_DMA_IN]),
    .in_mreq        (cl_req[CL_DMA_IN]),
    .in_mrsp_valid  (cl_rsp_valid[CL_DMA_IN]),
    .in_mrsp_data   (cl_rsp_data),
    .out_mreq_valid (cl_req_valid[CL_DMA_OUT]),
    .out_mreq_ready (cl_req_ready[CL_DMA_OUT]),
    .out_mreq       (cl_req[CL_DMA_OUT])
  );

  tensor_remapper #(.NMODES(NMODES), .MAX_PTRS(MAX_PTRS), .BUF_DEPTH(REMAP_BUF_DEPTH)) u_remap (
    .clk, .rst_n,
    .ptr_wr_valid, .ptr_wr_idx, .ptr_wr_addr,
    .start      (remap_start),
    .mode       (remap_mode),
    .src_addr   (remap_src),
    .nnz        (remap_nnz),
    .busy       (remap_busy),
    .done       (remap_done),
    .mreq_valid (cl_req_valid[CL_REMAP]),
    .mreq_ready (cl_req_ready[CL_REMAP]),
    .mreq       (cl_req[CL_REMAP]),
    .mrsp_valid (cl_rsp_valid[CL_REMAP]),
    .mrsp_data  (cl_rsp_data),
    .elems_stored    (remap_stored),
    .range_err_count (remap_range_err)
  );

  data_selection_logic #(.MAX_OUTSTANDING(MAX_OUTSTANDING)) u_dsl (
    .clk, .rst_n,
    .cl_req_valid, .cl_req_ready, .cl_req, .cl_rsp_valid, .cl_rsp_data,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_data,
    .bypass_count       (dsl_bypass),
    .queued_grant_count (dsl_queued)
  );
endmodule
