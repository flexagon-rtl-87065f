// MRN configuration logic.
//
// Turns a cluster assignment of the leaves (multipliers) into the
// configuration of every adder/comparator node of the MRN. A cluster is a
// group of contiguous leaves whose outputs belong to one output row: the
// leaves of one dot product (inner product) or the psum fibers of one row
// (Gustavson's, outer-product merge). The paper only names this block; the
// bottom-up routing below is this design's own.
//
// Nodes are numbered as a heap: node 1 is the root, node n has children 2n
// and 2n+1, leaf i is heap index LEAVES+i. Each subtree offers at most one
// stream to its parent (its "candidate"). At each node, with left candidate
// cl and right candidate cr:
//   * cl == cr: the node combines them; the result goes up if the cluster
//     has leaves outside this subtree, otherwise to the node's memory port;
//   * otherwise a cluster that continues outside the subtree must go up; a
//     cluster that is complete goes to the memory port, or up when the port
//     is taken (it then leaves through a higher node).
// Two clusters that both need the single up link raise `conflict`; the
// paper's augmented tree resolves such cases with lateral links between
// neighbouring nodes, which this version does not have. The root's up output
// is a second memory port. mem_row/root_row give the cluster (output row)
// that leaves each port. Purely combinational.
module mrn_config
  import flexagon_pkg::*;
#(
  parameter int LEAVES = 64
) (
  input  logic             merge,                  // 0 adder mode, 1 comparator mode
  input  logic             leaf_use [LEAVES],
  input  logic [ROW_W-1:0] leaf_cl  [LEAVES],
  output node_cfg_t        node_cfg [LEAVES],      // index 1..LEAVES-1 used
  output logic [ROW_W-1:0] mem_row  [LEAVES],      // cluster at node n's memory port
  output logic [ROW_W-1:0] root_row,               // cluster at the root's up port
  output logic             conflict
);

  localparam int LG = $clog2(LEAVES);

  logic             cv [2*LEAVES];
  logic [ROW_W-1:0] cc [2*LEAVES];

  function automatic logic ext_out(input logic [ROW_W-1:0] c, input int lo, input int hi,
                                   input logic use_v [LEAVES], input logic [ROW_W-1:0] cl_v [LEAVES]);
    logic e;
    e = 1'b0;
    if (lo > 0)        e |= use_v[lo-1] && (cl_v[lo-1] == c);
    if (hi < LEAVES-1) e |= use_v[hi+1] && (cl_v[hi+1] == c);
    return e;
  endfunction

  always_comb begin
    conflict = 1'b0;
    cv[0] = 1'b0;
    cc[0] = '0;
    for (int n = 0; n < LEAVES; n++) begin
      node_cfg[n] = '0;
      node_cfg[n].merge = merge;
      mem_row[n] = '0;
    end
    for (int i = 0; i < LEAVES; i++) begin
      cv[LEAVES+i] = leaf_use[i];
      cc[LEAVES+i] = leaf_cl[i];
    end
    for (int lvl = LG-1; lvl >= 0; lvl--) begin
      for (int j = 0; j < (1 << lvl); j++) begin
        int n, span, lo, hi;
        logic vl, vr, ul, ur;
        logic [ROW_W-1:0] l, r;
        n    = (1 << lvl) + j;
        span = LEAVES >> lvl;
        lo   = j * span;
        hi   = lo + span - 1;
        vl = cv[2*n];   l = cc[2*n];
        vr = cv[2*n+1]; r = cc[2*n+1];
        cv[n] = 1'b0;
        cc[n] = '0;
        ul = vl && ext_out(l, lo, hi, leaf_use, leaf_cl);
        ur = vr && ext_out(r, lo, hi, leaf_use, leaf_cl);
        if (vl && vr && l == r) begin
          node_cfg[n].combine = 1'b1;
          if (ul) begin
            node_cfg[n].comb_dst = DST_UP;
            cv[n] = 1'b1; cc[n] = l;
          end else begin
            node_cfg[n].comb_dst = DST_MEM;
            mem_row[n] = l;
          end
        end else if (vl && vr) begin
          if (ul && ur) begin
            conflict = 1'b1;
          end else if (ur || !ul) begin
            // right goes up (needed, or as the overflow of two complete clusters)
            node_cfg[n].l_dst = DST_MEM; mem_row[n] = l;
            node_cfg[n].r_dst = DST_UP;  cv[n] = 1'b1; cc[n] = r;
          end else begin
            node_cfg[n].l_dst = DST_UP;  cv[n] = 1'b1; cc[n] = l;
            node_cfg[n].r_dst = DST_MEM; mem_row[n] = r;
          end
        end else if (vl) begin
          if (ul) begin node_cfg[n].l_dst = DST_UP;  cv[n] = 1'b1; cc[n] = l; end
          else    begin node_cfg[n].l_dst = DST_MEM; mem_row[n] = l; end
        end else if (vr) begin
          if (ur) begin node_cfg[n].r_dst = DST_UP;  cv[n] = 1'b1; cc[n] = r; end
          else    begin node_cfg[n].r_dst = DST_MEM; mem_row[n] = r; end
        end
      end
    end
    root_row = cc[1];
  end

endmodule
