// Control unit: sequences one tile through the runtime phases.
//
// The offline mapper chooses the dataflow and the tile: a range [fib_lo,
// fib_hi) of fibers of the stationary matrix (rows of A for IP(M)/Gust(M),
// columns of A for OP(M); the N-stationary variants use the same sequence
// with the two operands exchanged), holding at most LEAVES elements. The
// stationary matrix is read from DRAM (pointer vector at sta_ptr_addr, element
// vector at sta_elem_addr); the streaming matrix is read through the STR
// cache at word offsets str_ptr_off (pointers) and str_elem_off (elements).
//
//   1. Pointers: p_STA[fib_lo..fib_hi] are read from DRAM, and every leaf
//      (multiplier) is given the fiber of the element it will hold.
//   2. Stationary phase: the tile reader STA pops the elements from the STA
//      FIFO and the DN unicasts element i to multiplier i (LOAD mode).
//   3. Streaming phase (multipliers in multiplier mode):
//      IP   for every streaming fiber n, each element (k,b) is multicast to the
//           multipliers whose stationary coordinate is k (the intersection);
//           multipliers with no match then get a zero, so every cluster's
//           adder tree receives one operand per multiplier and sends C[m][n].
//      Gust every multiplier (holding A[m][k]) receives streaming fiber k
//           followed by an end-of-fiber token; the MRN, in comparator mode
//           with one cluster per row m, merges them into the final row.
//      OP   as Gust, but products bypass the tree and are stored as psum
//           fibers (row m, iteration k) in the PSRAM.
//   4. Merging phase (OP only): row by row, in increasing row order, the psum
//      fibers of the row are consumed from the PSRAM, one multiplier in
//      forwarder mode per fiber, and merged by the MRN in comparator mode.
// A phase ends when the tile writer has seen all the elements (IP) or
// end-of-fiber tokens (Gust, OP) it expects. The loop structure follows the
// paper's tile filler/reader pseudo-code; the zero bubbles, the round-robin
// feeding of one element per cycle and the end-of-fiber tokens are this
// design's own. Gustavson rows longer than LEAVES (partial output rows) are
// not handled: the tile must hold whole rows, else `error` is raised.
module control_unit
  import flexagon_pkg::*;
#(
  parameter int LEAVES = 64,
  parameter int OFF_W  = 24,
  localparam int LB = $clog2(LEAVES)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration from the mapper
  input  logic               start,
  input  dataflow_e          df,
  input  logic [ADDR_W-1:0]  sta_ptr_addr,
  input  logic [ADDR_W-1:0]  sta_elem_addr,
  input  logic [ROW_W-1:0]   fib_lo,
  input  logic [ROW_W-1:0]   fib_hi,
  input  logic [ROW_W-1:0]   str_nfib,
  input  logic [OFF_W-1:0]   str_ptr_off,
  input  logic [OFF_W-1:0]   str_elem_off,
  output logic               busy,
  output logic               done,
  output logic               error,
  // DRAM read port for the stationary pointers
  output logic               dreq_valid,
  output logic [ADDR_W-1:0]  dreq_addr,
  input  logic               dreq_ready,
  input  logic               dresp_valid,
  input  logic [WORD_W-1:0]  dresp_data,
  // STA FIFO
  output logic               sta_start,
  output logic [ADDR_W-1:0]  sta_base,
  output logic [ADDR_W-1:0]  sta_count,
  input  logic               sta_head_valid,
  input  elem_t              sta_head,
  output logic               sta_pop,
  // STR cache
  output logic               c_rd_valid,
  output logic [OFF_W-1:0]   c_rd_off,
  input  logic               c_rd_ready,
  input  logic               c_resp_valid,
  input  logic [WORD_W-1:0]  c_resp_data,
  // PSRAM consume
  output logic               cs_valid,
  output logic [ROW_W-1:0]   cs_row,
  output logic [COORD_W-1:0] cs_k,
  input  logic               cs_rvalid,
  input  logic               cs_found,
  input  elem_t              cs_elem,
  // distribution network: source port 0
  output logic               dn_valid,
  output elem_t              dn_data,
  input  logic               dn_ready,
  output logic               dn_en   [LEAVES],
  // multipliers
  output ms_mode_e           ms_mode,
  input  logic               ms_ready[LEAVES],
  // MRN clusters and psum bypass
  output logic               mrn_merge,
  output logic               leaf_use[LEAVES],
  output logic [ROW_W-1:0]   leaf_cl [LEAVES],
  output logic               bypass,
  output logic [ROW_W-1:0]   leaf_row[LEAVES],
  output logic [COORD_W-1:0] leaf_k  [LEAVES],
  // tile writer
  output logic               wr_start,
  input  logic               seen_elem,
  input  logic               seen_eof,
  input  logic               wr_idle
);

  typedef enum logic [4:0] {
    S_IDLE, S_PTR, S_PTR_W, S_MAP, S_STA, S_STA_DRAIN,
    S_CRD, S_CRD_W,
    S_IP_P0, S_IP_P1, S_IP_EL, S_IP_SEND, S_IP_BUB,
    S_FP0, S_FP1, S_FEED, S_FEED_LD, S_FEED_SEND,
    S_WAIT, S_MRG_PICK, S_MRG_FEED, S_MRG_CS, S_MRG_LD, S_MRG_SEND, S_DONE
  } state_e;

  state_e state, ret_state;

  logic [ADDR_W-1:0]  ptr      [LEAVES+1];
  logic [COORD_W-1:0] leaf_fib [LEAVES];
  logic [COORD_W-1:0] leaf_crd [LEAVES];
  logic               used     [LEAVES];
  logic               merged   [LEAVES];
  logic               eof_sent [LEAVES];
  logic [OFF_W-1:0]   cur      [LEAVES];
  logic [OFF_W-1:0]   fend     [LEAVES];
  logic [COORD_W-1:0] slot_k   [LEAVES];
  logic               got      [LEAVES];
  logic               slot_use [LEAVES];
  logic               act      [LEAVES];
  logic               in_merge;

  logic [LB:0]        idx, nf, f;
  logic [LB:0]        leaf_i;
  logic [ADDR_W-1:0]  nnz;
  logic [ADDR_W-1:0]  ncl, expect_cnt, seen_cnt, eof_cnt;
  logic [COORD_W-1:0] last_fib;
  logic [ROW_W-1:0]   n_q, row_m;
  logic [OFF_W-1:0]   c_off_q;
  logic [WORD_W-1:0]  c_data_q;
  logic [OFF_W-1:0]   ip_cur, ip_end;
  elem_t              send_q;
  logic [LB-1:0]      rr;
  logic [3:0]         wait_cnt;
  dataflow_e          df_q;
  logic               count_eof;

  // ----- combinational helpers --------------------------------------------
  elem_t        c_elem;
  assign c_elem = word_to_elem(c_data_q);

  // IP intersection: leaves whose stationary coordinate equals k
  logic         match [LEAVES];
  logic         any_match, any_bubble;
  always_comb begin
    any_match = 1'b0;
    any_bubble = 1'b0;
    for (int i = 0; i < LEAVES; i++) begin
      match[i] = used[i] && (leaf_crd[i] == c_elem.coord);
      any_match |= match[i];
      any_bubble |= used[i] && !got[i];
    end
  end

  // OP merge: smallest row not merged yet and the fibers that belong to it
  logic               mrg_any;
  logic [COORD_W-1:0] mrg_min;
  always_comb begin
    mrg_any = 1'b0;
    mrg_min = '1;
    for (int i = 0; i < LEAVES; i++)
      if (used[i] && !merged[i] && (!mrg_any || leaf_crd[i] < mrg_min)) begin
        mrg_any = 1'b1;
        mrg_min = leaf_crd[i];
      end
  end

  // leaves taking part in the current feeding loop
  assign in_merge = state inside {S_MRG_PICK, S_MRG_FEED, S_MRG_CS, S_MRG_LD, S_MRG_SEND}
                    || (state == S_WAIT && df_q == DF_OP && !bypass);
  always_comb for (int i = 0; i < LEAVES; i++) act[i] = in_merge ? slot_use[i] : used[i];

  // round-robin pick of the next leaf (or slot) that can take an element
  logic          pick_ok;
  logic [LB-1:0] pick;
  logic          all_eof;
  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    all_eof = 1'b1;
    for (int d = LEAVES-1; d >= 0; d--) begin
      int i;
      i = (int'(rr) + d) % LEAVES;
      if (act[i] && !eof_sent[i]) begin
        all_eof = 1'b0;
        if (ms_ready[i]) begin
          pick_ok = 1'b1;
          pick    = LB'(i);
        end
      end
    end
  end

  // ----- outputs ---------------------------------------------------------
  assign busy = (state != S_IDLE);
  assign dreq_valid = (state == S_PTR);
  assign dreq_addr  = sta_ptr_addr + ADDR_W'(fib_lo) + ADDR_W'(idx);
  assign sta_base   = sta_elem_addr + ptr[0];
  assign sta_count  = nnz;
  assign c_rd_valid = (state == S_CRD);
  assign c_rd_off   = c_off_q;
  assign cs_valid   = (state == S_MRG_CS);
  assign cs_row     = row_m;
  assign cs_k       = slot_k[rr];
  assign sta_pop    = (state == S_STA) && sta_head_valid && dn_ready;

  always_comb begin
    dn_valid = 1'b0;
    dn_data  = send_q;
    for (int i = 0; i < LEAVES; i++) dn_en[i] = 1'b0;
    unique case (state)
      S_STA: begin
        dn_valid = sta_head_valid;
        dn_data  = sta_head;
        dn_en[idx[LB-1:0]] = 1'b1;
      end
      S_IP_SEND: begin
        dn_valid = any_match;
        dn_data  = '{eof: 1'b0, coord: COORD_W'(n_q), val: c_elem.val};
        for (int i = 0; i < LEAVES; i++) dn_en[i] = match[i];
      end
      S_IP_BUB: begin
        dn_valid = any_bubble;
        dn_data  = '{eof: 1'b0, coord: COORD_W'(n_q), val: '0};
        for (int i = 0; i < LEAVES; i++) dn_en[i] = used[i] && !got[i];
      end
      S_FEED_SEND, S_MRG_SEND: begin
        dn_valid = 1'b1;
        dn_en[rr] = 1'b1;
      end
      default: ;
    endcase
  end

  always_comb begin
    for (int i = 0; i < LEAVES; i++) begin
      leaf_row[i] = leaf_crd[i];
      leaf_k[i]   = leaf_fib[i];
      leaf_cl[i]  = in_merge ? row_m : leaf_fib[i];
      leaf_use[i] = act[i];
    end
  end

  // ----- sequencer -------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ret_state <= S_IDLE;
      done <= 1'b0; error <= 1'b0; sta_start <= 1'b0; wr_start <= 1'b0;
      idx <= '0; nf <= '0; f <= '0; leaf_i <= '0;
      nnz <= '0; ncl <= '0; expect_cnt <= '0; seen_cnt <= '0; eof_cnt <= '0;
      last_fib <= '0; n_q <= '0; row_m <= '0; c_off_q <= '0; c_data_q <= '0;
      ip_cur <= '0; ip_end <= '0; send_q <= '0; rr <= '0; wait_cnt <= '0;
      df_q <= DF_IP; count_eof <= 1'b0;
      ms_mode <= MS_IDLE; mrn_merge <= 1'b0; bypass <= 1'b0;
      for (int i = 0; i <= LEAVES; i++) ptr[i] <= '0;
      for (int i = 0; i < LEAVES; i++) begin
        leaf_fib[i] <= '0; leaf_crd[i] <= '0; used[i] <= 1'b0; merged[i] <= 1'b0;
        eof_sent[i] <= 1'b0; cur[i] <= '0; fend[i] <= '0; slot_k[i] <= '0; got[i] <= 1'b0;
        slot_use[i] <= 1'b0;
      end
    end else begin
      done      <= 1'b0;
      sta_start <= 1'b0;
      wr_start  <= 1'b0;
      if (seen_elem) seen_cnt <= seen_cnt + 1'b1;
      if (seen_eof)  eof_cnt  <= eof_cnt + 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          df_q  <= df;
          error <= 1'b0;
          idx   <= '0;
          nf    <= (LB+1)'(fib_hi - fib_lo);
          wr_start <= (fib_lo == '0);   // first tile of a new output matrix
          ms_mode <= MS_IDLE;
          bypass <= 1'b0;
          for (int i = 0; i < LEAVES; i++) begin
            used[i] <= 1'b0; merged[i] <= 1'b0; eof_sent[i] <= 1'b0; got[i] <= 1'b0;
            slot_use[i] <= 1'b0;
          end
          if (fib_hi <= fib_lo || (fib_hi - fib_lo) > ROW_W'(LEAVES)) begin
            error <= 1'b1;
            state <= S_DONE;
          end else state <= S_PTR;
        end

        // p_STA[fib_lo .. fib_hi]
        S_PTR: if (dreq_ready) state <= S_PTR_W;
        S_PTR_W: if (dresp_valid) begin
          ptr[idx] <= dresp_data;
          if (idx == nf) begin
            nnz    <= dresp_data - ptr[0];
            idx    <= '0;
            f      <= '0;
            ncl    <= '0;
            state  <= S_MAP;
          end else begin
            idx   <= idx + 1'b1;
            state <= S_PTR;
          end
        end

        // leaf i holds element i of the tile; find its fiber
        S_MAP: begin
          if (nnz > ADDR_W'(LEAVES)) begin
            error <= 1'b1;
            state <= S_DONE;
          end else if (ADDR_W'(idx) == nnz) begin
            idx       <= '0;
            sta_start <= 1'b1;
            ms_mode   <= MS_LOAD;
            state     <= S_STA;
          end else if (ptr[f+1'b1] - ptr[0] <= ADDR_W'(idx)) begin
            f <= f + 1'b1;
          end else begin
            leaf_fib[idx[LB-1:0]] <= fib_lo + COORD_W'(f);
            used[idx[LB-1:0]]     <= 1'b1;
            if (idx == '0 || last_fib != fib_lo + COORD_W'(f)) ncl <= ncl + 1'b1;
            last_fib <= fib_lo + COORD_W'(f);
            idx <= idx + 1'b1;
          end
        end

        // stationary phase
        S_STA: if (sta_head_valid && dn_ready) begin
          leaf_crd[idx[LB-1:0]] <= sta_head.coord;
          idx <= idx + 1'b1;
          if (ADDR_W'(idx) + 1 == nnz) begin
            wait_cnt <= '0;
            state <= S_STA_DRAIN;
          end
        end
        S_STA_DRAIN: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == 4'd4) begin
            ms_mode  <= MS_MULT;
            seen_cnt <= '0;
            eof_cnt  <= '0;
            n_q      <= '0;
            idx      <= '0;
            rr       <= '0;
            unique case (df_q)
              DF_IP: begin
                mrn_merge  <= 1'b0;
                count_eof  <= 1'b0;
                expect_cnt <= ncl * ADDR_W'(str_nfib);
                state      <= (str_nfib == '0) ? S_DONE : S_IP_P0;
              end
              default: begin
                mrn_merge  <= 1'b1;
                bypass     <= (df_q == DF_OP);
                count_eof  <= 1'b1;
                expect_cnt <= (df_q == DF_OP) ? nnz : ncl;
                state      <= S_FP0;
              end
            endcase
          end
        end

        // generic cache read: c_off_q -> c_data_q, then ret_state
        S_CRD: if (c_rd_ready) state <= S_CRD_W;
        S_CRD_W: if (c_resp_valid) begin
          c_data_q <= c_resp_data;
          state    <= ret_state;
        end

        // ---- inner product: for each streaming fiber n
        S_IP_P0: begin
          c_off_q <= str_ptr_off + OFF_W'(n_q);
          ret_state <= S_IP_P1;
          state <= S_CRD;
          idx <= '0;
        end
        S_IP_P1: begin
          if (idx == '0) begin
            ip_cur  <= OFF_W'(c_data_q);
            c_off_q <= str_ptr_off + OFF_W'(n_q) + 1'b1;
            idx     <= 1;
            ret_state <= S_IP_P1;
            state   <= S_CRD;
          end else begin
            ip_end <= OFF_W'(c_data_q);
            state  <= S_IP_EL;
          end
        end
        S_IP_EL: begin
          if (ip_cur == ip_end) state <= S_IP_BUB;
          else begin
            c_off_q   <= str_elem_off + ip_cur;
            ret_state <= S_IP_SEND;
            state     <= S_CRD;
          end
        end
        S_IP_SEND: begin
          if (!any_match) begin
            ip_cur <= ip_cur + 1'b1;
            state  <= S_IP_EL;
          end else if (dn_ready) begin
            for (int i = 0; i < LEAVES; i++) if (match[i]) got[i] <= 1'b1;
            ip_cur <= ip_cur + 1'b1;
            state  <= S_IP_EL;
          end
        end
        S_IP_BUB: begin
          if (!any_bubble || dn_ready) begin
            for (int i = 0; i < LEAVES; i++) got[i] <= 1'b0;
            n_q <= n_q + 1'b1;
            state <= (n_q + 1'b1 == str_nfib) ? S_WAIT : S_IP_P0;
          end
        end

        // ---- Gust / OP: fetch the streaming-fiber bounds of every leaf
        S_FP0: begin
          if (ADDR_W'(idx) == nnz) begin
            state <= S_FEED;
          end else begin
            c_off_q   <= str_ptr_off + OFF_W'((df_q == DF_GUST) ? leaf_crd[idx[LB-1:0]] : leaf_fib[idx[LB-1:0]]);
            ret_state <= S_FP1;
            state     <= S_CRD;
            leaf_i    <= '0;
          end
        end
        S_FP1: begin
          if (leaf_i == '0) begin
            cur[idx[LB-1:0]] <= OFF_W'(c_data_q);
            c_off_q   <= c_off_q + 1'b1;
            leaf_i    <= 1;
            ret_state <= S_FP1;
            state     <= S_CRD;
          end else begin
            fend[idx[LB-1:0]] <= OFF_W'(c_data_q);
            idx   <= idx + 1'b1;
            state <= S_FP0;
          end
        end
        // round-robin: one element (or the end token) to one leaf at a time
        S_FEED: begin
          if (all_eof) state <= S_WAIT;
          else if (pick_ok) begin
            rr <= pick;
            if (cur[pick] == fend[pick]) begin
              send_q <= '{eof: 1'b1, coord: '0, val: '0};
              state  <= S_FEED_SEND;
            end else begin
              c_off_q   <= str_elem_off + cur[pick];
              ret_state <= S_FEED_LD;
              state     <= S_CRD;
            end
          end
        end
        S_FEED_LD: begin
          send_q <= c_elem;
          state  <= S_FEED_SEND;
        end
        S_FEED_SEND: if (dn_ready) begin
          if (send_q.eof) eof_sent[rr] <= 1'b1;
          else            cur[rr] <= cur[rr] + 1'b1;
          rr <= rr + 1'b1;
          state <= S_FEED;
        end

        // ---- wait for the tile writer
        S_WAIT: begin
          if (((count_eof ? eof_cnt : seen_cnt) >= expect_cnt) && wr_idle) begin
            if (df_q == DF_OP) begin
              bypass <= 1'b0;
              state  <= S_MRG_PICK;
            end else state <= S_DONE;
          end
        end

        // ---- OP merging phase, row by row
        S_MRG_PICK: begin
          if (!mrg_any) state <= S_DONE;
          else begin
            int s;
            s = 0;
            row_m <= mrg_min;
            for (int i = 0; i < LEAVES; i++) begin
              if (used[i] && !merged[i] && leaf_crd[i] == mrg_min) begin
                merged[i] <= 1'b1;
                slot_k[s] <= leaf_fib[i];
                s++;
              end
            end
            for (int i = 0; i < LEAVES; i++) begin
              slot_use[i] <= (i < s);
              eof_sent[i] <= 1'b0;
            end
            ms_mode <= MS_FWD;
            eof_cnt <= '0;
            expect_cnt <= 1;
            rr <= '0;
            state <= S_MRG_FEED;
          end
        end
        S_MRG_FEED: begin
          // slots 0..nslots-1 reuse used[]/eof_sent[] of the leaves
          if (all_eof) state <= S_WAIT;
          else if (pick_ok) begin
            rr    <= pick;
            state <= S_MRG_CS;
          end
        end
        S_MRG_CS: state <= S_MRG_LD;
        S_MRG_LD: if (cs_rvalid) begin
          send_q <= cs_found ? cs_elem : '{eof: 1'b1, coord: '0, val: '0};
          state  <= S_MRG_SEND;
        end
        S_MRG_SEND: begin
          if (dn_ready) begin
            if (send_q.eof) eof_sent[rr] <= 1'b1;
            rr <= rr + 1'b1;
            state <= S_MRG_FEED;
          end
        end

        S_DONE: begin
          done    <= 1'b1;
          ms_mode <= MS_IDLE;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
