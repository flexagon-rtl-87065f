// PSRAM: the memory structure for partial-sum fibers of matrix C.
//
// Outer product and Gustavson's (when a row does not fit the multipliers)
// produce partial output fibers that must be kept until they are merged.
// The PSRAM is organised in sets indexed by the output row; each set is
// split into BLOCKS blocks of BLOCK_ELEMS words. Every block has a valid bit,
// a tag with the k iteration (and here the full row) of the fiber it holds,
// and First/Last pointers, as in the paper. 64 sets x 16 blocks x 64 words x
// 4 bytes = 256 KiB; the split is this design's choice.
//
//   PartialWrite(row,k,E): the tail block of fiber (row,k) is searched in
//     parallel in the set; E is stored at Last and Last is advanced. When the
//     fiber does not exist yet, or its tail block is full, the first free
//     block of the set is taken (so one fiber may occupy several,
//     non-consecutive blocks). Accepted in one cycle; `overflow` pulses when
//     no block is free and the write is dropped.
//   Consume(row,k): the head block of fiber (row,k) is searched, the element
//     at First is returned and First is advanced; when First reaches Last the
//     block is invalidated and the next block of the fiber becomes its head.
//     The answer comes one cycle later; found=0 means the fiber is exhausted
//     (or never existed), which the merging phase uses as end of fiber.
// The chaining of a fiber's blocks (next pointer, head/tail flags) is this
// design's own. A write waits in a cycle in which a consume is issued. The
// paper's multi-bank read of several fibers per cycle is not modelled.
module psram
  import flexagon_pkg::*;
#(
  parameter int ROWS        = 64,
  parameter int BLOCKS      = 16,
  parameter int BLOCK_ELEMS = 64,
  localparam int RB = $clog2(ROWS),
  localparam int BB = $clog2(BLOCKS),
  localparam int EB = $clog2(BLOCK_ELEMS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // PartialWrite
  input  logic               pw_valid,
  input  logic [ROW_W-1:0]   pw_row,
  input  logic [COORD_W-1:0] pw_k,
  input  elem_t              pw_elem,
  output logic               pw_ready,
  output logic               overflow,
  // Consume
  input  logic               cs_valid,
  input  logic [ROW_W-1:0]   cs_row,
  input  logic [COORD_W-1:0] cs_k,
  output logic               cs_rvalid,
  output logic               cs_found,
  output elem_t              cs_elem
);

  typedef struct packed {
    logic               v;
    logic               head;
    logic               tail;
    logic [ROW_W-1:0]   row;
    logic [COORD_W-1:0] k;
    logic [EB:0]        first;
    logic [EB:0]        last;
    logic [BB-1:0]      nxt;
  } meta_t;

  meta_t             meta [ROWS][BLOCKS];
  logic [WORD_W-1:0] data [ROWS*BLOCKS*BLOCK_ELEMS];

  logic [RB-1:0] ws, cset;
  assign ws   = pw_row[RB-1:0];
  assign cset = cs_row[RB-1:0];

  // PartialWrite search
  logic          t_hit, f_hit;
  logic [BB-1:0] t_blk, f_blk;
  always_comb begin
    t_hit = 1'b0; t_blk = '0;
    f_hit = 1'b0; f_blk = '0;
    for (int b = BLOCKS-1; b >= 0; b--) begin
      if (meta[ws][b].v && meta[ws][b].tail && meta[ws][b].row == pw_row && meta[ws][b].k == pw_k) begin
        t_hit = 1'b1; t_blk = BB'(b);
      end
      if (!meta[ws][b].v) begin
        f_hit = 1'b1; f_blk = BB'(b);     // lowest free block wins
      end
    end
  end

  // Consume search
  logic          h_hit;
  logic [BB-1:0] h_blk;
  always_comb begin
    h_hit = 1'b0; h_blk = '0;
    for (int b = 0; b < BLOCKS; b++)
      if (meta[cset][b].v && meta[cset][b].head && meta[cset][b].row == cs_row && meta[cset][b].k == cs_k) begin
        h_hit = 1'b1; h_blk = BB'(b);
      end
  end

  logic tail_room;
  assign tail_room = t_hit && (meta[ws][t_blk].last != (EB+1)'(BLOCK_ELEMS));
  assign pw_ready  = !cs_valid;

  function automatic int didx(input logic [RB-1:0] s, input logic [BB-1:0] b, input logic [EB:0] o);
    return (int'(s) * BLOCKS + int'(b)) * BLOCK_ELEMS + int'(o[EB-1:0]);
  endfunction

  logic do_pw;
  assign do_pw = pw_valid && pw_ready && (tail_room || f_hit);

  always_ff @(posedge clk) begin
    if (do_pw) begin
      if (tail_room) data[didx(ws, t_blk, meta[ws][t_blk].last)] <= elem_to_word(pw_elem);
      else           data[didx(ws, f_blk, '0)]                    <= elem_to_word(pw_elem);
    end
    if (cs_valid && h_hit)
      cs_elem <= word_to_elem(data[didx(cset, h_blk, meta[cset][h_blk].first)]);
    else
      cs_elem <= '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_rvalid <= 1'b0;
      cs_found  <= 1'b0;
      overflow  <= 1'b0;
      for (int r = 0; r < ROWS; r++)
        for (int b = 0; b < BLOCKS; b++) meta[r][b] <= '0;
    end else begin
      cs_rvalid <= cs_valid;
      cs_found  <= cs_valid && h_hit;
      overflow  <= pw_valid && pw_ready && !tail_room && !f_hit;
      if (do_pw) begin
        if (tail_room) begin
          meta[ws][t_blk].last <= meta[ws][t_blk].last + 1'b1;
        end else begin
          meta[ws][f_blk] <= '{v: 1'b1, head: !t_hit, tail: 1'b1, row: pw_row, k: pw_k,
                                first: '0, last: (EB+1)'(1), nxt: '0};
          if (t_hit) begin
            meta[ws][t_blk].tail <= 1'b0;
            meta[ws][t_blk].nxt  <= f_blk;
          end
        end
      end
      if (cs_valid && h_hit) begin
        meta[cset][h_blk].first <= meta[cset][h_blk].first + 1'b1;
        if (meta[cset][h_blk].first + 1'b1 == meta[cset][h_blk].last) begin
          meta[cset][h_blk].v <= 1'b0;
          if (!meta[cset][h_blk].tail) meta[cset][meta[cset][h_blk].nxt].head <= 1'b1;
        end
      end
    end
  end

endmodule
