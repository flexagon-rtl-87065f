// Distribution network (DN).
//
// Delivers elements from NUM_IN source ports (16 elements per cycle in the
// evaluated configuration) to the NUM_OUT multipliers with unicast, multicast
// and broadcast. Each output o is enabled by en[o] and picks its source with
// sel[o]; several outputs that pick the same source form a multicast. A
// source element is accepted only when every enabled output that picks it is
// ready, so a multicast is delivered to all its destinations in the same
// cycle.
//
// The paper describes a non-blocking Benes network (and elsewhere a tree);
// this version realises the same delivery function as a per-output source
// select, so no switch-setting algorithm is needed. Combinational: zero
// cycles from input to output.
module dist_network
  import flexagon_pkg::*;
#(
  parameter int NUM_IN  = 16,
  parameter int NUM_OUT = 64,
  localparam int SW     = (NUM_IN > 1) ? $clog2(NUM_IN) : 1
) (
  input  logic          in_valid [NUM_IN],
  input  elem_t         in_data  [NUM_IN],
  output logic          in_ready [NUM_IN],
  input  logic          en       [NUM_OUT],
  input  logic [SW-1:0] sel      [NUM_OUT],
  output logic          out_valid[NUM_OUT],
  output elem_t         out_data [NUM_OUT],
  input  logic          out_ready[NUM_OUT]
);

  always_comb begin
    for (int p = 0; p < NUM_IN; p++) in_ready[p] = 1'b1;
    for (int o = 0; o < NUM_OUT; o++)
      if (en[o] && !out_ready[o]) in_ready[sel[o]] = 1'b0;
    for (int o = 0; o < NUM_OUT; o++) begin
      out_data[o]  = in_data[sel[o]];
      out_valid[o] = en[o] && in_valid[sel[o]] && in_ready[sel[o]];
    end
  end

endmodule
