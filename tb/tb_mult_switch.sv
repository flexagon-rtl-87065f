// Testbench of the multiplier switch.
// Loads a stationary value (LOAD mode), then streams random elements with
// end-of-fiber tokens through MULT mode and through FWD mode while the
// consumer stalls at random. Each output is checked against the product
// (16-bit wrap-around) or the unchanged element, in order, and the LOAD must
// leave the loaded element in the stationary register. Also checks the
// one-element-per-cycle rate without back-pressure.
module tb_mult_switch;
  import flexagon_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  ms_mode_e mode = MS_IDLE;
  logic  in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  elem_t in_data = '0, out_data, sta_q;

  mult_switch dut (.clk, .rst_n, .mode, .coord_sta(1'b0), .in_valid, .in_data, .in_ready,
                   .out_valid, .out_data, .out_ready, .sta_q);

  int checks = 0, failures = 0;
  elem_t expq[$];
  int n_out = 0;
  logic random_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (out_valid && out_ready) begin
      elem_t e;
      checks++;
      n_out++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = expq.pop_front();
        if (out_data != e) begin
          failures++;
          $display("output %p expected %p", out_data, e);
        end
      end
    end
  end
  always @(negedge clk) out_ready <= random_ready ? ($urandom_range(3) != 0) : 1'b1;

  task automatic send(input elem_t e);
    // called at a negative edge; in_ready is a register output, so its value
    // now is the one sampled at the next rising edge
    in_valid = 1'b1;
    in_data  = e;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    elem_t sta, e;
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk);
      mode = MS_LOAD;
      sta = '{eof: 1'b0, coord: 16'($urandom), val: 16'($urandom)};
      send(sta);
      repeat (3) @(posedge clk);
      checks++;
      if (sta_q != sta) begin failures++; $display("stationary register %p expected %p", sta_q, sta); end
      @(negedge clk);
      mode = (pass == 0) ? MS_MULT : MS_FWD;
      for (int i = 0; i < 200; i++) begin
        e.eof = ($urandom_range(9) == 0);
        e.coord = e.eof ? '0 : 16'(i);
        e.val = e.eof ? '0 : 16'($urandom);
        if (mode == MS_MULT && !e.eof) expq.push_back('{eof: 1'b0, coord: e.coord, val: 16'(e.val * sta.val)});
        else expq.push_back(e);
        send(e);
      end
      while (expq.size() != 0) @(posedge clk);
    end
    // rate: one element per cycle when the consumer never stalls
    random_ready = 1'b0;
    @(negedge clk);
    mode = MS_FWD;
    t0 = n_out;
    in_valid = 1'b1;
    for (int i = 0; i < 20; i++) begin
      in_data = '{eof: 1'b0, coord: 16'(i), val: 16'(i)};
      expq.push_back(in_data);
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_out - t0 != 20 || expq.size() != 0) begin failures++; $display("rate: %0d outputs", n_out - t0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
