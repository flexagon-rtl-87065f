// Testbench of the MRN configuration logic (16 leaves).
// Random cluster maps (contiguous runs of leaves, random lengths, unused
// leaves at the end) are applied. The testbench then routes the map through
// the produced configuration itself: starting from the leaves it follows
// every node's combine / destination settings bottom-up, tracking which
// cluster and how many of its leaves each stream carries. It checks that
// every cluster leaves through exactly one port with all of its leaves
// summed, that the port's row label names that cluster, that no stream is
// dropped or joined with another cluster, and that `conflict` is raised
// exactly for maps in which some subtree is crossed on both edges by two
// different clusters (these need the lateral links that are not built).
module tb_mrn_config;
  import flexagon_pkg::*;
  localparam int L = 16;

  logic merge;
  logic leaf_use [L];
  logic [15:0] leaf_cl [L];
  node_cfg_t node_cfg [L];
  logic [15:0] mem_row [L];
  logic [15:0] root_row;
  logic conflict;

  mrn_config #(.LEAVES(L)) dut (.*);

  int checks = 0, failures = 0, n_conf = 0, n_ok = 0;

  function automatic bit straddled(input int n);
    for (int span = 2; span < L; span *= 2)
      for (int lo = 0; lo < L; lo += span) begin
        int hi;
        hi = lo + span - 1;
        if (lo > 0 && hi < L - 1 && leaf_use[lo-1] && leaf_use[hi+1] && leaf_use[lo] && leaf_use[hi]
            && leaf_cl[lo-1] == leaf_cl[lo] && leaf_cl[hi] == leaf_cl[hi+1] && leaf_cl[lo] != leaf_cl[hi])
          return 1'b1;
      end
    return 1'b0;
  endfunction

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int i, c, nl;
      int size [int];
      bit sv [2*L];
      int sc [2*L], sn [2*L];
      int out_cnt [int];
      bit bad;
      size.delete(); out_cnt.delete();
      merge = 1'($urandom);
      nl = $urandom_range(L);
      i = 0; c = 0;
      while (i < L) begin
        int len;
        len = $urandom_range(5) + 1;
        for (int j = 0; j < len && i < L; j++) begin
          leaf_use[i] = (i < nl);
          leaf_cl[i] = 16'(c * 7 + 3);
          i++;
        end
        c++;
      end
      #1;
      checks++;
      if (conflict != straddled(0)) begin
        failures++;
        $display("t%0d conflict %0d, expected %0d", t, conflict, straddled(0));
      end
      if (conflict) begin n_conf++; continue; end
      n_ok++;
      for (int k = 0; k < L; k++)
        if (leaf_use[k]) size[leaf_cl[k]] = size.exists(leaf_cl[k]) ? size[leaf_cl[k]] + 1 : 1;
      for (int k = 0; k < 2*L; k++) begin sv[k] = 1'b0; sc[k] = 0; sn[k] = 0; end
      for (int k = 0; k < L; k++) begin sv[L+k] = leaf_use[k]; sc[L+k] = leaf_cl[k]; sn[L+k] = 1; end
      bad = 1'b0;
      for (int n = L - 1; n >= 1; n--) begin
        node_cfg_t g;
        int l, r;
        g = node_cfg[n];
        l = 2 * n; r = 2 * n + 1;
        if (g.merge != merge) bad = 1'b1;
        if (g.combine) begin
          if (!(sv[l] && sv[r] && sc[l] == sc[r])) bad = 1'b1;
          if (g.comb_dst == DST_UP) begin sv[n] = 1; sc[n] = sc[l]; sn[n] = sn[l] + sn[r]; end
          else begin
            if (mem_row[n] != 16'(sc[l])) bad = 1'b1;
            out_cnt[sc[l]] = (out_cnt.exists(sc[l]) ? 1000 : 0) + sn[l] + sn[r];
          end
        end else begin
          if (sv[l]) begin
            if (g.l_dst == DST_UP) begin sv[n] = 1; sc[n] = sc[l]; sn[n] = sn[l]; end
            else if (g.l_dst == DST_MEM) begin
              if (mem_row[n] != 16'(sc[l])) bad = 1'b1;
              out_cnt[sc[l]] = (out_cnt.exists(sc[l]) ? 1000 : 0) + sn[l];
            end else bad = 1'b1;
          end
          if (sv[r]) begin
            if (g.r_dst == DST_UP) begin
              if (sv[l] && g.l_dst == DST_UP) bad = 1'b1;
              sv[n] = 1; sc[n] = sc[r]; sn[n] = sn[r];
            end else if (g.r_dst == DST_MEM) begin
              if (sv[l] && g.l_dst == DST_MEM) bad = 1'b1;
              if (mem_row[n] != 16'(sc[r])) bad = 1'b1;
              out_cnt[sc[r]] = (out_cnt.exists(sc[r]) ? 1000 : 0) + sn[r];
            end else bad = 1'b1;
          end
        end
      end
      if (sv[1]) begin
        if (root_row != 16'(sc[1])) bad = 1'b1;
        out_cnt[sc[1]] = (out_cnt.exists(sc[1]) ? 1000 : 0) + sn[1];
      end
      foreach (size[k]) if (!out_cnt.exists(k) || out_cnt[k] != size[k]) bad = 1'b1;
      if (out_cnt.num() != size.num()) bad = 1'b1;
      checks++;
      if (bad) begin
        failures++;
        if (failures < 5) begin
          $write("t%0d bad routing for map:", t);
          for (int k = 0; k < L; k++) $write(" %0d", leaf_use[k] ? int'(leaf_cl[k]) : -1);
          $display("");
        end
      end
    end
    checks++;
    if (n_conf == 0 || n_ok == 0) failures++;
    $display("maps routed %0d, maps with conflict %0d", n_ok, n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
