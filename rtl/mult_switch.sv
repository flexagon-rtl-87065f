// Multiplier switch (MS): one leaf of the multiplier network.
//
// The switch holds one stationary element (value and coordinate) and works in
// one of three modes set by the control unit:
//   MS_LOAD  the next input element is captured into the stationary register
//            (stationary phase);
//   MS_MULT  multiplier mode: out = {coord_in (or the stationary coordinate
//            when coord_sta is set), val_in * sta.val} (streaming phase);
//   MS_FWD   forwarder mode: the input, normally a psum read back from the
//            PSRAM, is passed on unchanged (merging phase).
// End-of-fiber tokens pass through unchanged in MULT and FWD modes.
//
// As drawn in the paper, the input goes through a small two-entry buffer, then
// a multiplier whose result is selected against the raw input by a mux, and
// the output coordinate is selected between the input coordinate and the
// stationary coordinate. Valid/ready handshakes on both sides, a registered
// output and wrap-around 16-bit integer arithmetic are this design's choices.
// Timing: an element accepted in cycle t is presented at the output in cycle
// t+1 at the earliest (the buffer is bypassed only through its register).
module mult_switch
  import flexagon_pkg::*;
#(
  parameter int IN_DEPTH = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  ms_mode_e mode,
  input  logic     coord_sta,   // 1: output coordinate from the stationary register
  // from the distribution network
  input  logic     in_valid,
  input  elem_t    in_data,
  output logic     in_ready,
  // to the MRN (or the psum bypass)
  output logic     out_valid,
  output elem_t    out_data,
  input  logic     out_ready,
  // stationary register, visible for debug and for the control unit
  output elem_t    sta_q
);

  localparam int PW = (IN_DEPTH > 1) ? $clog2(IN_DEPTH) : 1;

  elem_t          buf_q [IN_DEPTH];
  logic [PW-1:0]  rd_ptr, wr_ptr;
  logic [PW:0]    count;

  logic  head_valid, pop, push;
  elem_t head;
  elem_t result;

  assign head_valid = (count != '0);
  assign head       = buf_q[rd_ptr];
  assign in_ready   = (count != (PW+1)'(IN_DEPTH));
  assign push       = in_valid && in_ready;

  // The head is consumed either by the stationary register or by the output
  // register.
  always_comb begin
    pop = 1'b0;
    if (head_valid) begin
      unique case (mode)
        MS_LOAD:         pop = 1'b1;
        MS_MULT, MS_FWD: pop = !out_valid || out_ready;
        default:         pop = 1'b0;
      endcase
    end
  end

  always_comb begin
    result = head;
    if (mode == MS_MULT && !head.eof) begin
      result.val = VAL_W'(head.val * sta_q.val);
      if (coord_sta) result.coord = sta_q.coord;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr    <= '0;
      wr_ptr    <= '0;
      count     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      sta_q     <= '0;
      for (int i = 0; i < IN_DEPTH; i++) buf_q[i] <= '0;
    end else begin
      if (push) begin
        buf_q[wr_ptr] <= in_data;
        wr_ptr <= (wr_ptr == PW'(IN_DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == PW'(IN_DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);

      if (pop && mode == MS_LOAD) sta_q <= head;

      if (pop && mode != MS_LOAD) begin
        out_valid <= 1'b1;
        out_data  <= result;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
