// data_selection_logic: shares the one memory interface among the memory
// controller's clients (Cache Engine, DMA input buffer, DMA output buffer,
// Tensor Remapper), as the block of that name between them and the memory
// interface in the controller's block diagram.
//
// Requests are served first-come first-served, the ordering rule the
// controller's consistency model asks for. Each client holds a request
// (valid/ready) until it is granted. A client whose request appears is
// appended to an arrival queue; the head of the queue is granted when the
// memory interface is ready. Clients that raise requests in the same cycle
// are queued in client-number order. When the queue is empty, a newly
// arrived request is granted in the cycle it appears (bypass), so a lone
// streaming client issues one request per cycle.
//
// Memory answers reads in request order. The client number of every read
// granted is pushed into a tag queue of MAX_OUTSTANDING entries; each read
// response pops it and is raised on that client's rsp_valid (rsp_data is
// shared). Reads stall when the tag queue is full. Writes get no response.
// Clients must be able to take their read data whenever it returns.
// The queueing scheme, bypass and tag queue are this design's choices.
module data_selection_logic
  import mc_pkg::*;
#(
  parameter int MAX_OUTSTANDING = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // clients
  input  logic     [NCLIENT-1:0]  cl_req_valid,
  output logic     [NCLIENT-1:0]  cl_req_ready,
  input  mem_req_t [NCLIENT-1:0]  cl_req,
  output logic     [NCLIENT-1:0]  cl_rsp_valid,
  output word_t                   cl_rsp_data,
  // memory interface
  output logic                    mem_req_valid,
  input  logic                    mem_req_ready,
  output mem_req_t                mem_req,
  input  logic                    mem_rsp_valid,
  input  word_t                   mem_rsp_data,
  // statistics
  output logic [31:0]             bypass_count,
  output logic [31:0]             queued_grant_count
);
  localparam int CW = $clog2(NCLIENT);
  localparam int QW = $clog2(NCLIENT + 1);

  logic [CW-1:0]       q [NCLIENT];     // arrival queue of client numbers
  logic [QW-1:0]       q_cnt;
  logic [NCLIENT-1:0]  queued;

  // tag queue
  logic          tag_in_ready, tag_out_valid;
  logic [CW-1:0] tag_out;
  logic [$clog2(MAX_OUTSTANDING+1)-1:0] tag_count;

  // --- selection ---
  logic          sel_valid, sel_bypass;
  logic [CW-1:0] sel;
  always_comb begin
    sel_valid  = 1'b0;
    sel_bypass = 1'b0;
    sel        = '0;
    if (q_cnt != '0) begin
      sel_valid = 1'b1;
      sel       = q[0];
    end else begin
      for (int c = NCLIENT - 1; c >= 0; c--) begin
        if (cl_req_valid[c]) begin
          sel_valid  = 1'b1;
          sel_bypass = 1'b1;
          sel        = CW'(c);
        end
      end
    end
  end

  wire sel_is_read = !cl_req[sel].we;
  assign mem_req       = cl_req[sel];
  assign mem_req_valid = sel_valid && (!sel_is_read || tag_in_ready);
  wire grant = mem_req_valid && mem_req_ready;

  always_comb begin
    cl_req_ready = '0;
    if (grant) cl_req_ready[sel] = 1'b1;
  end

  // --- arrival queue update ---
  logic [CW-1:0]      q_n [NCLIENT];
  logic [QW-1:0]      q_cnt_n;
  logic [NCLIENT-1:0] queued_n;
  always_comb begin
    for (int i = 0; i < NCLIENT; i++) q_n[i] = q[i];
    q_cnt_n  = q_cnt;
    queued_n = queued;
    if (grant && !sel_bypass) begin
      for (int i = 0; i < NCLIENT - 1; i++) q_n[i] = q[i+1];
      q_cnt_n = q_cnt - 1'b1;
      queued_n[sel] = 1'b0;
    end
    for (int c = 0; c < NCLIENT; c++) begin
      if (cl_req_valid[c] && !queued[c] && !(grant && sel_bypass && sel == CW'(c))) begin
        q_n[q_cnt_n[CW-1:0]] = CW'(c);
        q_cnt_n     = q_cnt_n + 1'b1;
        queued_n[c] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCLIENT; i++) q[i] <= '0;
      q_cnt  <= '0;
      queued <= '0;
      bypass_count <= '0;
      queued_grant_count <= '0;
    end else begin
      for (int i = 0; i < NCLIENT; i++) q[i] <= q_n[i];
      q_cnt  <= q_cnt_n;
      queued <= queued_n;
      if (grant &&  sel_bypass) bypass_count <= bypass_count + 1'b1;
      if (grant && !sel_bypass) queued_grant_count <= queued_grant_count + 1'b1;
    end
  end

  // --- read tags and response routing ---
  sync_fifo #(.WIDTH(CW), .DEPTH(MAX_OUTSTANDING)) u_tags (
    .clk, .rst_n,
    .in_valid (grant && sel_is_read),
    .in_ready (tag_in_ready),
    .in_data  (sel),
    .out_valid(tag_out_valid),
    .out_ready(mem_rsp_valid),
    .out_data (tag_out),
    .count    (tag_count)
  );

  always_comb begin
    cl_rsp_valid = '0;
    if (mem_rsp_valid) cl_rsp_valid[tag_out] = 1'b1;
  end
  assign cl_rsp_data = mem_rsp_data;

  // A client keeps its request until it is granted.
  generate
    for (genvar c = 0; c < NCLIENT; c++) begin : g_hold
      a_hold: assert property (@(posedge clk) disable iff (!rst_n)
        cl_req_valid[c] && !cl_req_ready[c] |=> cl_req_valid[c]);
    end
  endgenerate
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> tag_out_valid);
endmodule
