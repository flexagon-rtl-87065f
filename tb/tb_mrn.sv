// Testbench of the merger-reduction network (8 leaves), configured by the
// MRN configuration logic from random routable cluster maps.
//   Adder mode: every leaf sends R values; each cluster must deliver R sums
//   of its leaves' values, in order, on the port its configuration names.
//   Comparator mode: every leaf sends a sorted fiber ended by an end token;
//   each cluster must deliver the merged fiber (equal coordinates added) and
//   one end token.
// Leaf producers advance on their own handshakes and every port stalls at
// random, so the tree's back-pressure is exercised.
module tb_mrn;
  import flexagon_pkg::*;
  localparam int L = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic merge;
  logic leaf_use [L];
  logic [15:0] leaf_cl [L];
  node_cfg_t node_cfg [L];
  logic [15:0] mem_row [L];
  logic [15:0] root_row;
  logic conflict;
  logic  leaf_valid [L], leaf_ready [L], port_valid [L], port_ready [L];
  elem_t leaf_data [L], port_data [L];

  mrn_config #(.LEAVES(L)) u_cfg (.*);
  mrn #(.LEAVES(L)) dut (.*);

  int checks = 0, failures = 0;
  elem_t lq [L][$];
  int    li [L];
  elem_t expq [int][$];    // per cluster
  int    pending;

  for (genvar i = 0; i < L; i++) begin : g_leaf
    assign leaf_valid[i] = li[i] < lq[i].size();
    assign leaf_data[i]  = leaf_valid[i] ? lq[i][li[i]] : '0;
  end

  always @(negedge clk) for (int p = 0; p < L; p++) port_ready[p] <= ($urandom_range(3) != 0);

  always_ff @(posedge clk) if (rst_n) begin
    for (int i = 0; i < L; i++) if (leaf_valid[i] && leaf_ready[i]) li[i] <= li[i] + 1;
    for (int p = 0; p < L; p++) if (port_valid[p] && port_ready[p]) begin
      int c;
      c = (p == 0) ? int'(root_row) : int'(mem_row[p]);
      checks++;
      if (!expq.exists(c) || expq[c].size() == 0 || expq[c][0] != port_data[p]) begin
        failures++;
        $display("port %0d cluster %0d: %p unexpected", p, c, port_data[p]);
      end else void'(expq[c].pop_front());
      pending--;
    end
  end

  initial begin
    int t, nrun;
    for (int i = 0; i < L; i++) begin li[i] = 0; port_ready[i] = 1'b0; end
    merge = 1'b0;
    for (int i = 0; i < L; i++) begin leaf_use[i] = 1'b0; leaf_cl[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    nrun = 0;
    while (nrun < 200) begin
      int i, c, nl;
      @(negedge clk);
      merge = 1'($urandom);
      i = 0; c = 0;
      nl = $urandom_range(L - 1) + 1;      // leaves 0..nl-1 in use, as the mapper fills them
      while (i < L) begin
        int len;
        len = $urandom_range(4) + 1;
        for (int j = 0; j < len && i < L; j++) begin leaf_use[i] = (i < nl); leaf_cl[i] = 16'(c); i++; end
        c++;
      end
      #1;
      if (conflict) continue;
      nrun++;
      expq.delete();
      pending = 0;
      for (int k = 0; k < L; k++) begin lq[k].delete(); end
      if (!merge) begin
        for (int r = 0; r < 6; r++) begin
          logic [15:0] sum [int];
          sum.delete();
          for (int k = 0; k < L; k++) if (leaf_use[k]) begin
            elem_t e;
            e = '{eof: 1'b0, coord: 16'(r), val: 16'($urandom)};
            lq[k].push_back(e);
            sum[leaf_cl[k]] = (sum.exists(leaf_cl[k]) ? sum[leaf_cl[k]] : 16'd0) + e.val;
          end
          foreach (sum[cc]) begin expq[cc].push_back('{eof: 1'b0, coord: 16'(r), val: sum[cc]}); pending++; end
        end
      end else begin
        for (int cc = 0; cc < c; cc++) begin
          logic [15:0] acc [int];
          bit any;
          acc.delete();
          any = 1'b0;
          for (int k = 0; k < L; k++) if (leaf_use[k] && leaf_cl[k] == 16'(cc)) begin
            any = 1'b1;
            for (int x = 0; x < 12; x++) if ($urandom_range(2) == 0) begin
              logic [15:0] v;
              v = 16'($urandom);
              lq[k].push_back('{eof: 1'b0, coord: 16'(x), val: v});
              acc[x] = (acc.exists(x) ? acc[x] : 16'd0) + v;
            end
            lq[k].push_back('{eof: 1'b1, coord: '0, val: '0});
          end
          if (any) begin
            foreach (acc[x]) begin expq[cc].push_back('{eof: 1'b0, coord: 16'(x), val: acc[x]}); pending++; end
            expq[cc].push_back('{eof: 1'b1, coord: '0, val: '0});
            pending++;
          end
        end
      end
      for (int k = 0; k < L; k++) li[k] = 0;
      t = 0;
      while (pending > 0 && t < 2000) begin @(negedge clk); t++; end
      checks++;
      if (pending != 0) begin failures++; $display("run %0d: %0d outputs missing", nrun, pending); end
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
