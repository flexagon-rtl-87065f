// Output collector: funnels the many result streams of the datapath into the
// single input of the tile writer.
//
// Sources are the MRN output ports (one per node plus the root) and, in the
// outer-product streaming phase, the multipliers themselves (the psum bypass
// around the tree). Each source comes with its tags (output row, k iteration,
// partial flag). A fixed-priority arbiter grants the lowest-numbered valid
// source; the element is passed on combinationally (no added latency). This
// is this design's own glue: the paper only says that every node is
// connected to memory.
module out_collector
  import flexagon_pkg::*;
#(
  parameter int N = 128
) (
  input  logic               src_valid  [N],
  input  elem_t              src_data   [N],
  input  logic [ROW_W-1:0]   src_row    [N],
  input  logic [COORD_W-1:0] src_k      [N],
  input  logic               src_partial[N],
  output logic               src_ready  [N],
  output logic               out_valid,
  output elem_t              out_data,
  output logic [ROW_W-1:0]   out_row,
  output logic [COORD_W-1:0] out_k,
  output logic               out_partial,
  input  logic               out_ready
);

  always_comb begin
    out_valid   = 1'b0;
    out_data    = '0;
    out_row     = '0;
    out_k       = '0;
    out_partial = 1'b0;
    for (int i = 0; i < N; i++) src_ready[i] = 1'b0;
    for (int i = N-1; i >= 0; i--) begin
      if (src_valid[i]) begin
        out_valid   = 1'b1;
        out_data    = src_data[i];
        out_row     = src_row[i];
        out_k       = src_k[i];
        out_partial = src_partial[i];
      end
    end
    for (int i = 0; i < N; i++) begin
      if (src_valid[i]) begin
        src_ready[i] = out_ready;
        break;
      end
    end
  end

endmodule
