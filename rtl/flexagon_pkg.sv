// Shared types of the Flexagon sparse-sparse matrix multiplication accelerator.
//
// Every element that moves between the memories, the distribution network,
// the multipliers and the merger-reduction network (MRN) is a (coordinate,
// value) pair packed in one 32-bit word, plus an end-of-fiber flag that
// marks the end of a compressed row or column. The 32-bit word size follows
// the evaluated configuration; the 16/16 split, the integer number format and
// the end-of-fiber flag are this design's own choices.
package flexagon_pkg;

  localparam int VAL_W   = 16;
  localparam int COORD_W = 16;
  localparam int WORD_W  = VAL_W + COORD_W;   // 32-bit value+coordinate word
  localparam int ADDR_W  = 32;                // DRAM word address
  localparam int ROW_W   = 16;

  // One element of a fiber. When eof is set the element carries no data and
  // closes the fiber it follows.
  typedef struct packed {
    logic               eof;
    logic [COORD_W-1:0] coord;
    logic [VAL_W-1:0]   val;
  } elem_t;

  // Dataflows. The M- and N-stationary variants of each use the same
  // hardware with the two operand matrices exchanged.
  typedef enum logic [1:0] {
    DF_IP   = 2'd0,   // inner product
    DF_OP   = 2'd1,   // outer product
    DF_GUST = 2'd2    // Gustavson's (row-wise product)
  } dataflow_e;

  // Multiplier-switch modes.
  typedef enum logic [1:0] {
    MS_IDLE = 2'd0,
    MS_LOAD = 2'd1,   // input element is captured in the stationary register
    MS_MULT = 2'd2,   // multiplier mode: input value times stationary value
    MS_FWD  = 2'd3    // forwarder mode: input passed through unchanged
  } ms_mode_e;

  // Where an MRN node sends a stream.
  typedef enum logic [1:0] {
    DST_NONE = 2'd0,
    DST_UP   = 2'd1,  // to the parent node
    DST_MEM  = 2'd2   // to the node's own memory port
  } dst_e;

  // Configuration of one adder/comparator node.
  typedef struct packed {
    logic combine;    // 1: the two child streams belong to one cluster and are combined
    logic merge;      // 0: adder mode (reduction), 1: comparator mode (merge)
    dst_e comb_dst;   // destination of the combined stream
    dst_e l_dst;      // destination of the left stream when not combining
    dst_e r_dst;      // destination of the right stream when not combining
  } node_cfg_t;

  // DRAM word as stored for compressed matrices: {coordinate, value}.
  function automatic elem_t word_to_elem(input logic [WORD_W-1:0] w);
    word_to_elem = '{eof: 1'b0, coord: w[WORD_W-1:VAL_W], val: w[VAL_W-1:0]};
  endfunction

  function automatic logic [WORD_W-1:0] elem_to_word(input elem_t e);
    elem_to_word = {e.coord, e.val};
  endfunction

endpackage
