// Merger-reduction network (MRN).
//
// A binary tree of LEAVES-1 adder/comparator nodes (mrn_node) above the
// LEAVES multipliers: 64 leaves and 63 nodes in the evaluated configuration.
// The same tree reduces the psums of dot products (adder mode, inner product)
// and merges sorted psum fibers (comparator mode, outer product and
// Gustavson's), so one substrate serves all three dataflows. Each node has
// its own memory port, and the root's up output is one more port; results
// leave the tree at the node where their cluster is complete.
//
// Node n (heap numbering, root = 1) has children 2n and 2n+1; leaf i enters
// at heap index LEAVES+i. Output port p in 1..LEAVES-1 is node p's memory
// port and port 0 is the root's up output. Node configurations come from
// mrn_config. Latency: one cycle per tree level passed. The lateral links of
// the paper's augmented tree are not built (see mrn_config).
module mrn
  import flexagon_pkg::*;
#(
  parameter int LEAVES = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  node_cfg_t node_cfg  [LEAVES],   // index 1..LEAVES-1
  input  logic      leaf_valid[LEAVES],
  input  elem_t     leaf_data [LEAVES],
  output logic      leaf_ready[LEAVES],
  output logic      port_valid[LEAVES],
  output elem_t     port_data [LEAVES],
  input  logic      port_ready[LEAVES]
);

  // link signals indexed by heap position of the producer
  logic  lv [2*LEAVES];
  elem_t ld [2*LEAVES];
  logic  lr [2*LEAVES];

  assign lv[0] = 1'b0;
  assign ld[0] = '0;

  for (genvar i = 0; i < LEAVES; i++) begin : g_leaf
    assign lv[LEAVES+i] = leaf_valid[i];
    assign ld[LEAVES+i] = leaf_data[i];
    assign leaf_ready[i] = lr[LEAVES+i];
  end

  for (genvar n = 1; n < LEAVES; n++) begin : g_node
    mrn_node u_node (
      .clk, .rst_n,
      .cfg      (node_cfg[n]),
      .l_valid  (lv[2*n]),   .l_data (ld[2*n]),   .l_ready (lr[2*n]),
      .r_valid  (lv[2*n+1]), .r_data (ld[2*n+1]), .r_ready (lr[2*n+1]),
      .up_valid (lv[n]),     .up_data(ld[n]),     .up_ready(lr[n]),
      .mem_valid(port_valid[n]), .mem_data(port_data[n]), .mem_ready(port_ready[n])
    );
  end

  // The root's up link is output port 0.
  assign port_valid[0] = lv[1];
  assign port_data[0]  = ld[1];
  assign lr[1]         = port_ready[0];
  assign lr[0]         = 1'b0;

endmodule
