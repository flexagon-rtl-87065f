// Adder/comparator node of the merger-reduction network (MRN).
//
// Each node has two child inputs (left, right) and two outputs: one to its
// parent (up) and one to its own memory port (mem). Every link carries a
// value, a coordinate and an end-of-fiber flag with a valid/ready handshake.
// The configuration (node_cfg_t) selects:
//   combine=1, merge=0  adder mode: waits for one element on each side and
//                       sends their sum (coordinate of the left element);
//   combine=1, merge=1  comparator mode: compares the head coordinates; equal
//                       coordinates are added and both heads consumed, else the
//                       element with the lower coordinate is sent; when one
//                       side has reached its end of fiber the other side is
//                       drained, and one end-of-fiber token closes the merged
//                       fiber ("node compares and adds" in the paper's
//                       walk-throughs);
//   combine=0           the two children belong to different clusters; each
//                       is routed on its own to l_dst / r_dst (up or mem).
// The adder, the '>' comparator and the output muxes follow the paper's node
// drawing; the two-output structure follows its remark that every node is
// connected to memory. Outputs are registered: one cycle through a node.
module mrn_node
  import flexagon_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  node_cfg_t cfg,
  input  logic      l_valid,
  input  elem_t     l_data,
  output logic      l_ready,
  input  logic      r_valid,
  input  elem_t     r_data,
  output logic      r_ready,
  output logic      up_valid,
  output elem_t     up_data,
  input  logic      up_ready,
  output logic      mem_valid,
  output elem_t     mem_data,
  input  logic      mem_ready
);

  logic  up_free, mem_free;
  logic  comb_fire, l_fire, r_fire;
  logic  pop_l, pop_r;
  elem_t comb_res;

  assign up_free  = !up_valid  || up_ready;
  assign mem_free = !mem_valid || mem_ready;

  function automatic logic dst_free(input dst_e d, input logic uf, input logic mf);
    dst_free = (d == DST_UP) ? uf : (d == DST_MEM) ? mf : 1'b0;
  endfunction

  // Combined (add or compare) result and which heads it consumes.
  always_comb begin
    comb_res = l_data;
    pop_l    = 1'b0;
    pop_r    = 1'b0;
    if (!cfg.merge) begin
      comb_res.val = l_data.val + r_data.val;
      comb_res.eof = l_data.eof && r_data.eof;
      pop_l = 1'b1;
      pop_r = 1'b1;
    end else if (l_data.eof && r_data.eof) begin
      comb_res = l_data;
      pop_l = 1'b1;
      pop_r = 1'b1;
    end else if (l_data.eof) begin
      comb_res = r_data;
      pop_r = 1'b1;
    end else if (r_data.eof) begin
      comb_res = l_data;
      pop_l = 1'b1;
    end else if (l_data.coord == r_data.coord) begin
      comb_res.val = l_data.val + r_data.val;
      pop_l = 1'b1;
      pop_r = 1'b1;
    end else if (l_data.coord > r_data.coord) begin
      comb_res = r_data;
      pop_r = 1'b1;
    end else begin
      comb_res = l_data;
      pop_l = 1'b1;
    end
  end

  assign comb_fire = cfg.combine && l_valid && r_valid && dst_free(cfg.comb_dst, up_free, mem_free);
  assign l_fire    = !cfg.combine && l_valid && dst_free(cfg.l_dst, up_free, mem_free);
  assign r_fire    = !cfg.combine && r_valid && dst_free(cfg.r_dst, up_free, mem_free);

  assign l_ready = cfg.combine ? (comb_fire && pop_l) : l_fire;
  assign r_ready = cfg.combine ? (comb_fire && pop_r) : r_fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_valid  <= 1'b0;
      mem_valid <= 1'b0;
      up_data   <= '0;
      mem_data  <= '0;
    end else begin
      if (up_ready)  up_valid  <= 1'b0;
      if (mem_ready) mem_valid <= 1'b0;
      if (comb_fire) begin
        if (cfg.comb_dst == DST_UP) begin up_valid <= 1'b1; up_data <= comb_res; end
        else                        begin mem_valid <= 1'b1; mem_data <= comb_res; end
      end
      if (l_fire) begin
        if (cfg.l_dst == DST_UP) begin up_valid <= 1'b1; up_data <= l_data; end
        else                     begin mem_valid <= 1'b1; mem_data <= l_data; end
      end
      if (r_fire) begin
        if (cfg.r_dst == DST_UP) begin up_valid <= 1'b1; up_data <= r_data; end
        else                     begin mem_valid <= 1'b1; mem_data <= r_data; end
      end
    end
  end

  // A valid configuration never sends both children to the same output.
  a_split_dst: assert property (@(posedge clk) disable iff (!rst_n)
    !cfg.combine && cfg.l_dst != DST_NONE |-> cfg.l_dst != cfg.r_dst);
  // In adder mode both children deliver the same kind of token.
  a_add_eof: assert property (@(posedge clk) disable iff (!rst_n)
    comb_fire && !cfg.merge |-> l_data.eof == r_data.eof);

endmodule
