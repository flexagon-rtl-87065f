// Testbench of one MRN node.
// Two producer processes feed the left and right inputs from arrays (valid
// whenever data remains, advanced on a handshake); both outputs stall at
// random. Three configurations are run on random data:
//   1. comparator mode, combined, result up: two sorted fibers with some equal
//      coordinates, each ended by an end-of-fiber token, must come out as one
//      sorted fiber with equal coordinates added and a single end token;
//   2. adder mode, combined, result to the memory port: element-wise sums;
//   3. not combined, left up and right to the memory port: both streams pass
//      unchanged on their own outputs.
// Expected streams are computed by the testbench.
module tb_mrn_node;
  import flexagon_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  node_cfg_t cfg;
  logic  l_valid, l_ready, r_valid, r_ready, up_valid, up_ready, mem_valid, mem_ready;
  elem_t l_data, r_data, up_data, mem_data;

  mrn_node dut (.*);

  int checks = 0, failures = 0;
  elem_t lq[$], rq[$], exp_up[$], exp_mem[$];
  int li, ri;
  int n_eq;

  assign l_valid = li < lq.size();
  assign r_valid = ri < rq.size();
  assign l_data  = l_valid ? lq[li] : '0;
  assign r_data  = r_valid ? rq[ri] : '0;

  always_ff @(posedge clk) if (rst_n) begin
    if (l_valid && l_ready) li <= li + 1;
    if (r_valid && r_ready) ri <= ri + 1;
    if (up_valid && up_ready) begin
      checks++;
      if (exp_up.size() == 0 || up_data != exp_up[0]) begin
        failures++;
        $display("up %p expected %p", up_data, exp_up.size() ? exp_up[0] : '0);
      end
      if (exp_up.size()) void'(exp_up.pop_front());
    end
    if (mem_valid && mem_ready) begin
      checks++;
      if (exp_mem.size() == 0 || mem_data != exp_mem[0]) begin
        failures++;
        $display("mem %p expected %p", mem_data, exp_mem.size() ? exp_mem[0] : '0);
      end
      if (exp_mem.size()) void'(exp_mem.pop_front());
    end
  end
  always @(negedge clk) begin
    up_ready  <= ($urandom_range(3) != 0);
    mem_ready <= ($urandom_range(3) != 0);
  end

  localparam elem_t EOF = '{eof: 1'b1, coord: '0, val: '0};

  task automatic run_until_empty();
    int t;
    t = 0;
    while ((exp_up.size() != 0 || exp_mem.size() != 0) && t < 5000) begin @(negedge clk); t++; end
    checks++;
    if (t >= 5000) begin failures++; $display("outputs missing"); end
    checks++;
    if (li != lq.size() || ri != rq.size()) begin failures++; $display("inputs not consumed"); end
  endtask

  task automatic restart();
    @(negedge clk);
    lq.delete(); rq.delete(); exp_up.delete(); exp_mem.delete();
    li = 0; ri = 0;
  endtask

  initial begin
    cfg = '0;
    li = 0; ri = 0; n_eq = 0;
    up_ready = 1'b0; mem_ready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 20; rep++) begin
      // 1. comparator merge
      restart();
      cfg = '{combine: 1'b1, merge: 1'b1, comb_dst: DST_UP, l_dst: DST_NONE, r_dst: DST_NONE};
      begin
        logic [15:0] lv[int], rv[int];
        lv.delete(); rv.delete();
        for (int c = 0; c < 40; c++) begin
          if ($urandom_range(2) == 0) begin lv[c] = 16'($urandom_range(1000) + 1); lq.push_back('{eof: 1'b0, coord: 16'(c), val: lv[c]}); end
          if ($urandom_range(2) == 0) begin rv[c] = 16'($urandom_range(1000) + 1); rq.push_back('{eof: 1'b0, coord: 16'(c), val: rv[c]}); end
          if (lv.exists(c) && rv.exists(c)) begin exp_up.push_back('{eof: 1'b0, coord: 16'(c), val: 16'(lv[c] + rv[c])}); n_eq++; end
          else if (lv.exists(c)) exp_up.push_back('{eof: 1'b0, coord: 16'(c), val: lv[c]});
          else if (rv.exists(c)) exp_up.push_back('{eof: 1'b0, coord: 16'(c), val: rv[c]});
        end
        lq.push_back(EOF); rq.push_back(EOF); exp_up.push_back(EOF);
      end
      run_until_empty();
      // 2. adder
      restart();
      cfg = '{combine: 1'b1, merge: 1'b0, comb_dst: DST_MEM, l_dst: DST_NONE, r_dst: DST_NONE};
      for (int i = 0; i < 30; i++) begin
        elem_t a, b;
        a = '{eof: 1'b0, coord: 16'(i), val: 16'($urandom)};
        b = '{eof: 1'b0, coord: 16'(i), val: 16'($urandom)};
        lq.push_back(a); rq.push_back(b);
        exp_mem.push_back('{eof: 1'b0, coord: 16'(i), val: 16'(a.val + b.val)});
      end
      run_until_empty();
      // 3. split
      restart();
      cfg = '{combine: 1'b0, merge: 1'b0, comb_dst: DST_NONE, l_dst: DST_UP, r_dst: DST_MEM};
      for (int i = 0; i < 30; i++) begin
        elem_t a;
        a = '{eof: 1'($urandom_range(1)), coord: 16'($urandom), val: 16'($urandom)};
        lq.push_back(a); exp_up.push_back(a);
        a = '{eof: 1'($urandom_range(1)), coord: 16'($urandom), val: 16'($urandom)};
        if (i < 20) begin rq.push_back(a); exp_mem.push_back(a); end
      end
      run_until_empty();
    end
    checks++;
    if (n_eq == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
