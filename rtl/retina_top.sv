// retina_top: one chip of the artificial-retina track processor.
//
// Hits from the tracking layers arrive on N = ROWS*COLS input links.  Each
// link has a hit_formatter that tags the hit with the 3 x 3 box of engines
// around the cell it points to; the switch_net (log2(N) stages of two-way
// sorters) delivers every hit to exactly the engines of its box, copying it
// where needed.  The ROWS x COLS engines each accumulate the excitation of
// one (u,v) cell and its six lateral cells.  An EndEvent word sent on every
// link closes an event: it passes through the network behind all hits of the
// event, and the engines snapshot their accumulators, compare their central
// value with their eight neighbours and flag local maxima (LookAtMe).  Groups
// of GROUP engines share one cluster_readout and one centroid_unit, which
// turns each maximum into a track (u, v, d, z, k, peak, timestamp); a
// track_merger sends all tracks out on one stream.
//
// Interface: per link a valid/ready link_word_t input; one valid/ready
// track_t output.  Every link must carry one EndEvent per event, after the
// event's hits; events must not be interleaved on a link.  With no
// contention a hit reaches its engines log2(N)+1 cycles after it is
// accepted, an engine takes one hit every seven cycles, and a track leaves
// about 20 cycles after the last EndEvent has reached its engine.
//
// The data flow (switch, cellular engines, local-maximum search by
// neighbour exchange, shared centroid units, output) and the sizes (six
// layers, seven cells per engine, 12 engines per centroid unit, about 10^3
// engines per chip) follow the paper; the 32 x 32 grid, the threshold and
// the hit-to-engine mapping are this design's.
module retina_top
  import retina_pkg::*;
#(
  parameter int ROWS   = 32,   // engine rows (power of two)
  parameter int COLS   = 32,   // engine columns (power of two)
  parameter int GROUP  = 12,   // engines per centroid unit
  parameter int THRESH = 256   // minimum central excitation of a track
) (
  input  logic       clk,
  input  logic       rst_n,
  input  link_word_t link_word  [ROWS*COLS],
  input  logic       link_valid [ROWS*COLS],
  output logic       link_ready [ROWS*COLS],
  output track_t     trk_data,
  output logic       trk_valid,
  input  logic       trk_ready
);

  localparam int N  = ROWS * COLS;
  localparam int NG = (N + GROUP - 1) / GROUP;

  // ---- formatters ------------------------------------------------------------
  sw_word_t fw [N];
  logic     fv [N];
  logic     fr [N];

  for (genvar i = 0; i < N; i++) begin : g_fmt
    hit_formatter #(.ROWS(ROWS), .COLS(COLS)) u_fmt (
      .clk, .rst_n,
      .in_word(link_word[i]), .in_valid(link_valid[i]), .in_ready(link_ready[i]),
      .out_word(fw[i]), .out_valid(fv[i]), .out_ready(fr[i])
    );
  end

  // ---- switching network --------------------------------------------------------
  sw_word_t ew [N];
  logic     ev [N];
  logic     er [N];

  switch_net #(.ROWS(ROWS), .COLS(COLS)) u_switch (
    .clk, .rst_n,
    .in_word(fw), .in_valid(fv), .in_ready(fr),
    .out_word(ew), .out_valid(ev), .out_ready(er)
  );

  // ---- engine grid ----------------------------------------------------------------
  logic            snap_valid  [N];
  logic            snap_par    [N];
  logic [ACCW-1:0] snap_center [N];
  logic            done_par    [N];
  logic            lam         [N];
  logic            grant       [N];
  cluster_t        rd_data     [N];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int E = r * COLS + c;

      localparam logic [NNB-1:0] NBX = nb_exists(r, c, ROWS, COLS);

      logic [NNB-1:0]           nv, np, nd;
      logic [NNB-1:0][ACCW-1:0] nc;

      for (genvar n = 0; n < NNB; n++) begin : g_nb
        // a missing neighbour is wired to the engine itself and ignored
        localparam int NE = NBX[n] ? (r + nb_drow(n)) * COLS + (c + nb_dcol(n)) : E;
        assign nv[n] = snap_valid[NE];
        assign np[n] = snap_par[NE];
        assign nd[n] = done_par[NE];
        assign nc[n] = snap_center[NE];
      end

      engine #(.ROW(r), .COL(c), .NB_EXISTS(NBX), .THRESH(THRESH)) u_engine (
        .clk, .rst_n,
        .in_word(ew[E]), .in_valid(ev[E]), .in_ready(er[E]),
        .snap_valid(snap_valid[E]), .snap_par(snap_par[E]),
        .snap_center(snap_center[E]), .done_par(done_par[E]),
        .nb_valid(nv), .nb_par(np), .nb_center(nc), .nb_done_par(nd),
        .lam(lam[E]), .rd_grant(grant[E]), .rd_data(rd_data[E])
      );
    end
  end

  // ---- readout groups and centroid units ---------------------------------------------
  track_t tw [NG];
  logic   tv [NG];
  logic   tr [NG];

  for (genvar g = 0; g < NG; g++) begin : g_grp
    localparam int BASE = g * GROUP;
    localparam int NE   = (N - BASE < GROUP) ? N - BASE : GROUP;

    logic [NE-1:0] glam, ggrant;
    cluster_t      gdata [NE];
    cluster_t      cw;
    logic          cv, cr;

    for (genvar i = 0; i < NE; i++) begin : g_e
      assign glam[i]         = lam[BASE + i];
      assign grant[BASE + i] = ggrant[i];
      assign gdata[i]        = rd_data[BASE + i];
    end

    cluster_readout #(.NE(NE)) u_readout (
      .clk, .rst_n,
      .lam(glam), .rd_grant(ggrant), .rd_data(gdata),
      .out_data(cw), .out_valid(cv), .out_ready(cr)
    );

    centroid_unit u_centroid (
      .clk, .rst_n,
      .in_data(cw), .in_valid(cv), .in_ready(cr),
      .out_data(tw[g]), .out_valid(tv[g]), .out_ready(tr[g])
    );
  end

  // ---- output ---------------------------------------------------------------------------
  track_merger #(.NU(NG)) u_merger (
    .clk, .rst_n,
    .in_data(tw), .in_valid(tv), .in_ready(tr),
    .out_data(trk_data), .out_valid(trk_valid), .out_ready(trk_ready)
  );

endmodule
