// Testbench of the distribution network.
// Random cycles of random requests: each output enables itself and selects
// one of the inputs; outputs are ready at random. Checks that an output shows
// the selected input's element exactly when the input is valid, and that an
// input is consumed (in_ready) only when every enabled output that selects it
// is ready (all-or-nothing multicast), and that unselected inputs are ready.
// Uses the paper's sizes: 16 inputs, 64 outputs. Purely combinational, so
// the checks are made in the same cycle.
module tb_dist_network;
  import flexagon_pkg::*;
  localparam int NI = 16, NO = 64;

  logic  in_valid[NI], in_ready[NI];
  elem_t in_data[NI];
  logic  en[NO], out_valid[NO], out_ready[NO];
  logic [3:0] sel[NO];
  elem_t out_data[NO];

  dist_network #(.NUM_IN(NI), .NUM_OUT(NO)) dut (.*);

  int checks = 0, failures = 0;
  int n_multi = 0;

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < NI; i++) begin
        in_valid[i] = $urandom_range(1);
        in_data[i]  = '{eof: 1'($urandom), coord: 16'($urandom), val: 16'($urandom)};
      end
      for (int o = 0; o < NO; o++) begin
        en[o] = ($urandom_range(3) == 0);
        sel[o] = 4'($urandom_range(NI-1));
        out_ready[o] = ($urandom_range(7) != 0);
      end
      #1;
      for (int i = 0; i < NI; i++) begin
        logic exp_ready;
        int fan;
        exp_ready = 1'b1;
        fan = 0;
        for (int o = 0; o < NO; o++)
          if (en[o] && sel[o] == 4'(i)) begin
            fan++;
            if (!out_ready[o]) exp_ready = 1'b0;
          end
        if (fan > 1 && in_valid[i] && exp_ready) n_multi++;
        checks++;
        if (in_ready[i] != exp_ready) begin failures++; $display("t%0d in_ready[%0d]=%0d", t, i, in_ready[i]); end
      end
      for (int o = 0; o < NO; o++) begin
        logic ev;
        ev = en[o] && in_valid[sel[o]] && in_ready[sel[o]];
        checks++;
        if (out_valid[o] != ev || (ev && out_data[o] != in_data[sel[o]])) begin
          failures++;
          $display("t%0d out %0d wrong", t, o);
        end
      end
    end
    checks++;
    if (n_multi == 0) failures++;
    $display("multicasts: %0d", n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
