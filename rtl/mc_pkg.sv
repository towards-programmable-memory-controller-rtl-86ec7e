// mc_pkg: shared widths, data types and client numbering for the sparse
// MTTKRP memory controller.
//
// External memory is word addressed; one word is MEM_DW = 512 bits, which
// holds one factor-matrix row of RANK = 16 values (the typical rank of the
// FROSTT tensors). A tensor element with N modes is N 32-bit coordinates
// followed by a 32-bit value, stored in a slot of elem_slot_w(N) bits (the
// next power of two: 128 bits for 3 modes, 256 for 4 or 5), so a word holds
// MEM_DW / elem_slot_w(N) elements. Addresses are 32 bits wide, as in the
// pointer-size example of the remapping discussion. Values are treated as
// 32-bit two's-complement integers (fixed point): the number format is this
// design's choice.
package mc_pkg;
  localparam int ADDR_W  = 32;
  localparam int MEM_DW  = 512;
  localparam int STRB_W  = MEM_DW / 8;
  localparam int VAL_W   = 32;
  localparam int COORD_W = 32;
  localparam int RANK    = MEM_DW / VAL_W;        // 16 values per row
  localparam int MAX_MODES = 7;                   // mode_t range

  // Element slot width for a tensor with n modes: (n+1) 32-bit fields,
  // rounded up to a power of two so that slots never straddle words.
  function automatic int elem_slot_w(int n);
    int w = 32;
    while (w < (n + 1) * 32) w = w * 2;
    return w;
  endfunction

  // Three-mode layout, the default configuration.
  localparam int DEF_NMODES = 3;
  localparam int ELEM_W  = 128;
  localparam int EPW     = MEM_DW / ELEM_W;       // 4 elements per word
  localparam int LANE_W  = $clog2(EPW);

  typedef logic [ADDR_W-1:0]  addr_t;
  typedef logic [MEM_DW-1:0]  word_t;
  typedef logic [STRB_W-1:0]  strb_t;
  typedef logic [2:0]         mode_t;

  // Three-mode COO tensor element, coord[0] at bits 31:0. Modules that
  // take an NMODES parameter address the fields of a slot directly.
  typedef struct packed {
    logic signed [VAL_W-1:0]           val;
    logic [DEF_NMODES-1:0][COORD_W-1:0] coord;
  } elem_t;

  // One request to external memory. Reads return one word, in order.
  typedef struct packed {
    logic  we;
    addr_t addr;    // word address
    word_t wdata;
    strb_t wstrb;   // byte enables, writes only
  } mem_req_t;

  // Clients of the data selection logic.
  typedef enum logic [1:0] {
    CL_CACHE   = 2'd0,
    CL_DMA_IN  = 2'd1,
    CL_DMA_OUT = 2'd2,
    CL_REMAP   = 2'd3
  } client_e;
  localparam int NCLIENT = 4;
endpackage
