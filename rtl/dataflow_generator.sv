// dataflow_generator: address and strobe sequencer for one layer.
//
// On start it latches the layer descriptor and the dataflow reported by
// the CMU and runs a cycle counter t. With L the streamed length (M in WS,
// C in IS, K in OS) it produces:
//   * t = 0 .. L-1: memory reads of the streamed operands, one word per
//     cycle from base + t. WS and OS read the input memory for the left
//     edge; IS reads the weight memory for the left edge; OS also reads the
//     weight memory for the top edge.
//   * t = 1 .. L: the matching FIFO push strobes (memory reads return one
//     cycle later), with lane masks for the rows/columns the layer uses.
//   * IS/WS, t = 2N+1 .. 2N+L: output-memory writes of words o_base + 0 ..
//     L-1 (the array and the output de-skew take 2N+1 cycles from the read
//     of a word to its complete result word).
//   * OS, t = L+2N .. L+3N-1: the read-out window (drain), in which the
//     array shifts its rows out of the bottom edge, row N-1 first; row r is
//     written to o_base + r if r < M.
//   * t = L+3N: done for one cycle. By then every PE register is zero again,
//     so the next layer can start in any dataflow.
//
// Memory layouts expected (one word = one operand per array lane):
//   WS: X word m = X[m][0..K-1], W word k = W[k][0..C-1] (register file),
//       O word m = O[m][0..C-1].
//   IS: X word k = X[0..M-1][k] (register file), W word c = W[0..K-1][c],
//       O word c = O[0..M-1][c].
//   OS: X word k = X[0..M-1][k], W word k = W[k][0..C-1],
//       O word m = O[m][0..C-1].
//
// From the paper: a generator that produces memory read/write addresses
// for IFMaps, weights and OFMaps according to the dataflow chosen by the
// CMU. The schedule, layouts and latencies are this design's own.
module dataflow_generator
  import flex_tpu_pkg::*;
#(
  parameter int unsigned N  = 32,
  parameter int unsigned AW = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  dataflow_e     df,
  input  layer_desc_t   desc,
  output logic          x_re,
  output logic [AW-1:0] x_raddr,
  output logic          w_re,
  output logic [AW-1:0] w_raddr,
  output logic          h_push,
  output logic          v_push,
  output logic          h_src_w,
  output logic [N-1:0]  h_mask,
  output logic [N-1:0]  v_mask,
  output logic [N-1:0]  o_mask,
  output logic          drain,
  output logic          o_we,
  output logic [AW-1:0] o_waddr,
  output logic          done
);

  localparam int unsigned TW = DIM_W + 2;   // counter width: L + 3N fits for N < 2^15

  layer_desc_t d_q;          // d_q.df holds the dataflow from the CMU
  dataflow_e   df_q;
  logic        active;
  logic [TW-1:0] t, len;
  logic        stream;

  function automatic logic [N-1:0] lanes_below(logic [DIM_W-1:0] cnt);
    logic [N-1:0] m;
    for (int i = 0; i < N; i++) m[i] = (DIM_W'(i) < cnt);
    return m;
  endfunction

  always_comb begin
    unique case (df_q)
      DF_WS:   len = TW'(d_q.m);
      DF_IS:   len = TW'(d_q.c);
      default: len = TW'(d_q.k);
    endcase
  end

  assign df_q = d_q.df;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      t      <= '0;
      d_q    <= '0;
    end else if (start && !active) begin
      active <= 1'b1;
      t      <= '0;
      d_q    <= desc;
      d_q.df <= df;
    end else if (active) begin
      if (t == len + TW'(3 * N)) active <= 1'b0;
      t <= t + 1'b1;
    end
  end

  assign stream  = active && (t < len);
  assign x_re    = stream && (df_q != DF_IS);
  assign w_re    = stream && (df_q != DF_WS);
  assign x_raddr = AW'(d_q.x_base) + AW'(t);
  assign w_raddr = AW'(d_q.w_base) + AW'(t);
  assign h_src_w = (df_q == DF_IS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_push <= 1'b0;
      v_push <= 1'b0;
    end else begin
      h_push <= stream;
      v_push <= stream && (df_q == DF_OS);
    end
  end

  assign h_mask = lanes_below((df_q == DF_OS) ? d_q.m : d_q.k);
  assign v_mask = (df_q == DF_OS) ? lanes_below(d_q.c) : '0;
  assign o_mask = lanes_below((df_q == DF_IS) ? d_q.m : d_q.c);

  // Output writes.
  logic [AW-1:0] wr_idx;
  logic [TW-1:0] drain_idx, drain_row;
  assign wr_idx    = AW'(t - TW'(2 * N + 1));
  assign drain_idx = t - (len + TW'(2 * N));
  assign drain_row = TW'(N - 1) - drain_idx;
  assign drain     = active && (df_q == DF_OS) && (t >= len + TW'(2 * N)) && (t < len + TW'(3 * N));

  always_comb begin
    if (df_q == DF_OS) begin
      o_we    = drain && (drain_row < TW'(d_q.m));
      o_waddr = AW'(d_q.o_base) + AW'(drain_row);
    end else begin
      o_we    = active && (t >= TW'(2 * N + 1)) && (t < len + TW'(2 * N + 1));
      o_waddr = AW'(d_q.o_base) + AW'(wr_idx);
    end
  end

  assign done = active && (t == len + TW'(3 * N));

  a_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
                               (start && !active) |-> ((df == DF_WS ? desc.m : df == DF_IS ? desc.c : desc.k) != 0));

endmodule
