// dma_engine: bulk transfers between the processing unit and external
// memory, with one Input Buffer and one Output Buffer as drawn in the
// memory controller's block diagram.
//
// Input buffer: a command (rd_cmd_addr, rd_cmd_len words) makes the engine
// read rd_cmd_len consecutive words and stream them to the processing unit
// on rd_data (valid/ready). Reads are issued back to back as long as the
// buffer can take their data: buffered words plus reads in flight never
// exceed BUF_DEPTH, so returning data is never refused.
// Output buffer: a command (wr_cmd_addr, wr_cmd_len words) opens a region;
// words pushed on wr_data are buffered and written to consecutive
// addresses with all byte lanes enabled. wr_busy stays high until the last
// word of the region has been handed to memory.
// A new command on a channel is accepted once that channel has issued every
// request of the previous one. The paper gives the engine's purpose and
// its parameters (number of DMAs, buffers per DMA, buffer size); one DMA
// with one buffer each way and the buffer depth are this design's choices.
module dma_engine
  import mc_pkg::*;
#(
  parameter int BUF_DEPTH = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  // input buffer: processing-unit side
  input  logic      rd_cmd_valid,
  output logic      rd_cmd_ready,
  input  addr_t     rd_cmd_addr,
  input  logic [31:0] rd_cmd_len,
  output logic      rd_data_valid,
  input  logic      rd_data_ready,
  output word_t     rd_data,
  output logic      rd_busy,
  // output buffer: processing-unit side
  input  logic      wr_cmd_valid,
  output logic      wr_cmd_ready,
  input  addr_t     wr_cmd_addr,
  input  logic [31:0] wr_cmd_len,
  input  logic      wr_data_valid,
  output logic      wr_data_ready,
  input  word_t     wr_data,
  output logic      wr_busy,
  // memory side: input buffer client
  output logic      in_mreq_valid,
  input  logic      in_mreq_ready,
  output mem_req_t  in_mreq,
  input  logic      in_mrsp_valid,
  input  word_t     in_mrsp_data,
  // memory side: output buffer client
  output logic      out_mreq_valid,
  input  logic      out_mreq_ready,
  output mem_req_t  out_mreq
);
  localparam int CNT_W = $clog2(BUF_DEPTH + 1);

  // ---------------- input buffer ----------------
  addr_t             rd_addr;
  logic [31:0]       rd_left;
  logic [CNT_W-1:0]  rd_inflight, ibuf_count;
  logic              ibuf_in_ready;

  assign rd_cmd_ready  = (rd_left == '0);
  assign in_mreq_valid = (rd_left != '0) &&
                         ({1'b0, rd_inflight} + {1'b0, ibuf_count} < (CNT_W+1)'(BUF_DEPTH));
  always_comb begin
    in_mreq      = '0;
    in_mreq.we   = 1'b0;
    in_mreq.addr = rd_addr;
  end
  assign rd_busy = (rd_left != '0) || (rd_inflight != '0) || rd_data_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr     <= '0;
      rd_left     <= '0;
      rd_inflight <= '0;
    end else begin
      if (rd_cmd_valid && rd_cmd_ready) begin
        rd_addr <= rd_cmd_addr;
        rd_left <= rd_cmd_len;
      end else if (in_mreq_valid && in_mreq_ready) begin
        rd_addr <= rd_addr + 1'b1;
        rd_left <= rd_left - 1'b1;
      end
      case ({in_mreq_valid && in_mreq_ready, in_mrsp_valid})
        2'b10:   rd_inflight <= rd_inflight + 1'b1;
        2'b01:   rd_inflight <= rd_inflight - 1'b1;
        default: ;
      endcase
    end
  end

  sync_fifo #(.WIDTH(MEM_DW), .DEPTH(BUF_DEPTH)) u_input_buffer (
    .clk, .rst_n,
    .in_valid (in_mrsp_valid),
    .in_ready (ibuf_in_ready),
    .in_data  (in_mrsp_data),
    .out_valid(rd_data_valid),
    .out_ready(rd_data_ready),
    .out_data (rd_data),
    .count    (ibuf_count)
  );

  // ---------------- output buffer ----------------
  addr_t             wr_addr;
  logic [31:0]       wr_left;
  logic              obuf_valid;
  word_t             obuf_data;
  logic [CNT_W-1:0]  obuf_count;

  assign wr_cmd_ready   = (wr_left == '0);
  assign out_mreq_valid = (wr_left != '0) && obuf_valid;
  always_comb begin
    out_mreq       = '0;
    out_mreq.we    = 1'b1;
    out_mreq.addr  = wr_addr;
    out_mreq.wdata = obuf_data;
    out_mreq.wstrb = '1;
  end
  assign wr_busy = (wr_left != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_addr <= '0;
      wr_left <= '0;
    end else if (wr_cmd_valid && wr_cmd_ready) begin
      wr_addr <= wr_cmd_addr;
      wr_left <= wr_cmd_len;
    end else if (out_mreq_valid && out_mreq_ready) begin
      wr_addr <= wr_addr + 1'b1;
      wr_left <= wr_left - 1'b1;
    end
  end

  sync_fifo #(.WIDTH(MEM_DW), .DEPTH(BUF_DEPTH)) u_output_buffer (
    .clk, .rst_n,
    .in_valid (wr_data_valid),
    .in_ready (wr_data_ready),
    .in_data  (wr_data),
    .out_valid(obuf_valid),
    .out_ready(out_mreq_valid && out_mreq_ready),
    .out_data (obuf_data),
    .count    (obuf_count)
  );

  a_ibuf_never_full_on_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    in_mrsp_valid |-> ibuf_in_ready);
endmodule
