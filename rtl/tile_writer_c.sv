// Tile writer C: the controller of the output side of the memory hierarchy.
//
// Every element that leaves the MRN (or the psum bypass in the outer-product
// streaming phase) arrives here tagged with its output row, its k iteration
// and whether it is a partial sum:
//   * a partial sum is stored in the PSRAM with PartialWrite(row, k, E);
//   * a final output goes through the non-linearity function and the write
//     buffer (a FIFO that hides DRAM latency) and is written to DRAM in
//     compressed form: d_C/i_C[rcv] = {col, value} at c_data_base + rcv and,
//     when the row changes, p_C[row] = rcv at c_ptr_base + row
//     (the Write(Offset, E) operation and the paper's tile-writer loop).
// End-of-fiber tokens are not stored; they and all other elements are
// reported on seen_eof/seen_elem so that the control unit can tell when a
// phase has drained. Final outputs that are zero after the non-linearity are
// dropped (a compressed matrix holds non-zeros only).
// The paper prints a "non-linearity function" box without saying which; it
// is ReLU here, enabled by relu_en. The DRAM write handshake, WB_DEPTH and
// the {col,value} word packing are this design's choices. The trace port
// out_* shows each final element (row, col, value) as it is written.
module tile_writer_c
  import flexagon_pkg::*;
#(
  parameter int WB_DEPTH = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,        // new output matrix: rcv_elems = 0
  input  logic               relu_en,
  input  logic [ADDR_W-1:0]  c_data_base,
  input  logic [ADDR_W-1:0]  c_ptr_base,
  // element stream
  input  logic               in_valid,
  input  logic [ROW_W-1:0]   in_row,
  input  logic [COORD_W-1:0] in_k,
  input  logic               in_partial,
  input  elem_t              in_elem,
  output logic               in_ready,
  output logic               seen_elem,
  output logic               seen_eof,
  // PSRAM PartialWrite
  output logic               pw_valid,
  output logic [ROW_W-1:0]   pw_row,
  output logic [COORD_W-1:0] pw_k,
  output elem_t              pw_elem,
  input  logic               pw_ready,
  // DRAM write port
  output logic               wr_valid,
  output logic [ADDR_W-1:0]  wr_addr,
  output logic [WORD_W-1:0]  wr_data,
  input  logic               wr_ready,
  // trace of final outputs
  output logic               out_valid,
  output logic [ROW_W-1:0]   out_row,
  output logic [COORD_W-1:0] out_col,
  output logic [VAL_W-1:0]   out_val,
  output logic               idle
);

  localparam int PW = $clog2(WB_DEPTH);

  typedef struct packed {
    logic [ROW_W-1:0]   row;
    logic [COORD_W-1:0] col;
    logic [VAL_W-1:0]   val;
  } wb_t;

  wb_t          wb_q [WB_DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   occ;

  logic [VAL_W-1:0] nl_val;
  logic             wb_full, wb_push, wb_pop, accept;
  logic             drop;
  wb_t              head;

  // non-linearity function (ReLU)
  assign nl_val = (relu_en && in_elem.val[VAL_W-1]) ? '0 : in_elem.val;

  assign wb_full  = (occ == (PW+1)'(WB_DEPTH));
  assign drop     = in_elem.eof || (!in_partial && nl_val == '0);

  // Ready does not look at the element itself (no combinational path from
  // data to ready): it needs room in both places an element may go.
  assign in_ready  = pw_ready && !wb_full;
  assign accept    = in_valid && in_ready;
  assign seen_elem = accept && !in_elem.eof;
  assign seen_eof  = accept && in_elem.eof;

  assign pw_valid = in_valid && in_partial && !in_elem.eof && !wb_full;
  assign pw_row   = in_row;
  assign pw_k     = in_k;
  assign pw_elem  = in_elem;

  assign wb_push = accept && !drop && !in_partial;

  // Drain: optional p_C write, then the {col,value} word.
  typedef enum logic [0:0] {D_PTR, D_DATA} dstate_e;
  dstate_e           dstate;
  logic [ADDR_W-1:0] rcv;
  logic [ROW_W-1:0]  last_row;
  logic              have_row;
  logic              new_row;

  assign head    = wb_q[rd_ptr];
  assign new_row = !have_row || head.row != last_row;

  always_comb begin
    wr_valid = (occ != '0) && (dstate == D_DATA || new_row);
    if (dstate == D_PTR) begin
      wr_addr = c_ptr_base + ADDR_W'(head.row);
      wr_data = WORD_W'(rcv);
    end else begin
      wr_addr = c_data_base + rcv;
      wr_data = {head.col, head.val};
    end
  end
  assign wb_pop    = wr_valid && wr_ready && dstate == D_DATA;
  assign out_valid = wb_pop;
  assign out_row   = head.row;
  assign out_col   = head.col;
  assign out_val   = head.val;
  assign idle      = (occ == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; occ <= '0;
      rcv <= '0; last_row <= '0; have_row <= 1'b0;
      dstate <= D_PTR;
      for (int i = 0; i < WB_DEPTH; i++) wb_q[i] <= '0;
    end else begin
      if (wb_push) begin
        wb_q[wr_ptr] <= '{row: in_row, col: in_elem.coord, val: nl_val};
        wr_ptr <= wr_ptr + 1'b1;
      end
      occ <= occ + (PW+1)'(wb_push) - (PW+1)'(wb_pop);
      if (start) begin
        rcv <= '0;
        have_row <= 1'b0;
      end
      if (occ != '0) begin
        if (dstate == D_PTR) begin
          // skip the pointer write when the row is unchanged
          if (!new_row) dstate <= D_DATA;
          else if (wr_ready) begin
            dstate   <= D_DATA;
            last_row <= head.row;
            have_row <= 1'b1;
          end
        end else if (wr_ready) begin
          rd_ptr <= rd_ptr + 1'b1;
          rcv    <= rcv + 1'b1;
          dstate <= D_PTR;
        end
      end
    end
  end

endmodule
