// switch_net: N x N hit switching network built from two-way sorters.
//
// N = ROWS*COLS outputs, one per engine; output index = row*COLS + col.  The
// network has log2(N) stages of N/2 sorter2 nodes (log2(N)*N/2 nodes, as in
// the paper).  The stage that comes first decides the most significant
// address bit, the last one bit 0, as in the paper's 16 x 16 figure (stages
// labelled "bit 3" to "bit 0").  The node of the stage deciding bit b pairs
// the two streams whose indices differ only in bit b, and sends a word to
// stream "bit b = 0" and/or "bit b = 1".  Before that stage all higher bits of
// a stream index already equal the destination's, so each output of the node
// covers one aligned block of 2^b engine addresses; the node is given that
// block as a row/column box and forwards a hit to every output whose block
// overlaps the hit's destination box.  A hit therefore reaches every engine
// in its box exactly once, copied where the paths split.
//
// The paper's figure pairs adjacent input streams in the first stage; here
// the pairing is by index bit throughout, which is the same network with the
// inputs numbered differently.  EndEvent words reach every output, after all
// hits of their event (see sorter2).
//
// Interface: N valid/ready input streams and N valid/ready output streams of
// sw_word_t.  Latency log2(N) cycles without contention; a stalled output
// holds words back through the tree up to the inputs.  ROWS and COLS must be
// powers of two.
module switch_net
  import retina_pkg::*;
#(
  parameter int ROWS = 32,  // engine rows
  parameter int COLS = 32   // engine columns
) (
  input  logic     clk,
  input  logic     rst_n,
  input  sw_word_t in_word   [ROWS*COLS],
  input  logic     in_valid  [ROWS*COLS],
  output logic     in_ready  [ROWS*COLS],
  output sw_word_t out_word  [ROWS*COLS],
  output logic     out_valid [ROWS*COLS],
  input  logic     out_ready [ROWS*COLS]
);

  localparam int N    = ROWS * COLS;
  localparam int LOGN = $clog2(N);

  // the streams between stages; level 0 is the input, level LOGN the output.
  // One generate block per level keeps the ready chain free of false loops.
  for (genvar s = 0; s <= LOGN; s++) begin : g_lvl
    sw_word_t w [N];
    logic     v [N];
    logic     r [N];
  end

  for (genvar i = 0; i < N; i++) begin : g_io
    assign g_lvl[0].w[i]    = in_word[i];
    assign g_lvl[0].v[i]    = in_valid[i];
    assign in_ready[i]      = g_lvl[0].r[i];
    assign out_word[i]      = g_lvl[LOGN].w[i];
    assign out_valid[i]     = g_lvl[LOGN].v[i];
    assign g_lvl[LOGN].r[i] = out_ready[i];
  end

  for (genvar s = 0; s < LOGN; s++) begin : g_stage
    localparam int B = LOGN - 1 - s;  // address bit decided by this stage
    for (genvar j = 0; j < N / 2; j++) begin : g_node
      localparam int I0  = ((j >> B) << (B + 1)) | (j & ((1 << B) - 1));
      localparam int I1  = I0 | (1 << B);
      localparam int LO0 = (I0 >> (B + 1)) << (B + 1);
      localparam int HI0 = LO0 + (1 << B) - 1;
      localparam int LO1 = LO0 + (1 << B);
      localparam int HI1 = LO1 + (1 << B) - 1;

      sw_word_t   iw [2];
      sw_word_t   ow [2];
      logic [1:0] iv, ir, ov, orr;

      assign iw[0] = g_lvl[s].w[I0];
      assign iw[1] = g_lvl[s].w[I1];
      assign iv    = {g_lvl[s].v[I1], g_lvl[s].v[I0]};
      assign g_lvl[s].r[I0]   = ir[0];
      assign g_lvl[s].r[I1]   = ir[1];
      assign g_lvl[s+1].w[I0] = ow[0];
      assign g_lvl[s+1].w[I1] = ow[1];
      assign g_lvl[s+1].v[I0] = ov[0];
      assign g_lvl[s+1].v[I1] = ov[1];
      assign orr = {g_lvl[s+1].r[I1], g_lvl[s+1].r[I0]};

      sorter2 #(
        .ROW_LO0(LO0 / COLS), .ROW_HI0(HI0 / COLS),
        .COL_LO0(LO0 % COLS), .COL_HI0(HI0 % COLS),
        .ROW_LO1(LO1 / COLS), .ROW_HI1(HI1 / COLS),
        .COL_LO1(LO1 % COLS), .COL_HI1(HI1 % COLS)
      ) u_node (
        .clk, .rst_n,
        .in_word(iw), .in_valid(iv), .in_ready(ir),
        .out_word(ow), .out_valid(ov), .out_ready(orr)
      );
    end
  end

endmodule
