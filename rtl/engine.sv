// engine: one cellular processing engine of the retina, owning one (u,v) cell
// of the grid and its six lateral cells (+/-dd, +/-dz, +/-dk).
//
// Accumulation.  A hit is held for seven cycles and pushed once per cycle
// through a four-stage pipeline, once for each of the seven cells:
//   1. subtract the cell's intersection on the hit's layer, read from a ROM
//      indexed by (cell, layer), from the hit's x and y;
//   2. square and sum, shift right by R_SHIFT and saturate to 8 bits;
//   3. look the weight up in the 8 x 256 weight table;
//   4. add it to the cell's accumulator (saturating, ACCW bits).
// So one hit enters every seven cycles, and the last of its seven weights is
// in its accumulator ten cycles after the hit was taken.
//
// End of event.  An EndEvent word is taken like a hit, but only while the
// snapshot bank is free, and takes one cycle.  It follows the last hit of its
// event down the pipeline as a token; four cycles later, when that hit's
// last weight is in, the seven accumulators are copied into the snapshot
// bank and cleared.  Hits of the next event enter right behind the token, so
// an event with n hits costs 7n + 1 cycles.  The snapshot's central value is offered to the eight neighbours.
// When all existing neighbours offer theirs for the same event (a one-bit
// event parity tells events apart) the engine latches them and raises
// LookAtMe if its central value is at least THRESH, greater than the
// neighbours above and to the left, and not smaller than those below and to
// the right (the tie rule keeps one maximum per plateau).  The bank is freed
// once LookAtMe has been served by the readout and every neighbour has
// latched this engine's value (seen through the neighbours' done parity).
// An EndEvent arriving while the bank is still busy holds the input, so the
// hits behind it stay queued in the switch.
//
// Interface: valid/ready hit input (sw_word_t, box ignored); neighbour
// exchange (snap_valid/snap_par/snap_center/done_par out, the same from each
// neighbour in); readout (lam out, rd_grant in, rd_data out, stable while lam).
// The ROM, LUT, 7 accumulators, 7-cycle hit cadence, EndEvent-triggered
// neighbour exchange and LookAtMe flag follow the paper; the saturation of
// the squared distance (the paper keeps its eight least significant bits),
// the handshake between neighbours and the tie rule are this design's.
module engine
  import retina_pkg::*;
#(
  parameter int              ROW       = 0,        // engine row in the grid
  parameter int              COL       = 0,        // engine column in the grid
  parameter logic [NNB-1:0]  NB_EXISTS = '1,       // which neighbours exist
  parameter int              THRESH    = 256       // minimum central excitation of a track
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // hits
  input  sw_word_t                in_word,
  input  logic                    in_valid,
  output logic                    in_ready,
  // neighbour exchange
  output logic                    snap_valid,
  output logic                    snap_par,
  output logic [ACCW-1:0]         snap_center,
  output logic                    done_par,
  input  logic [NNB-1:0]          nb_valid,
  input  logic [NNB-1:0]          nb_par,
  input  logic [NNB-1:0][ACCW-1:0] nb_center,
  input  logic [NNB-1:0]          nb_done_par,
  // readout
  output logic                    lam,
  input  logic                    rd_grant,
  output cluster_t                rd_data
);

  // ---- intersection ROM ----------------------------------------------------
  typedef logic [NCELLS-1:0][NLAYERS-1:0][CW-1:0] rom_t;

  function automatic rom_t make_rom(input logic want_y);
    rom_t t;
    for (int j = 0; j < NCELLS; j++)
      for (int k = 0; k < NLAYERS; k++)
        t[j][k] = CW'(want_y ? isect_y(ROW, j, k) : isect_x(COL, j, k));
    return t;
  endfunction

  localparam rom_t ROM_X = make_rom(1'b0);
  localparam rom_t ROM_Y = make_rom(1'b1);

  // ---- hit holding register --------------------------------------------------
  hit_t         cur;
  logic         busy;
  logic [2:0]   phase;
  logic [3:0]   ee_sr;      // EndEvent token, one bit per pipeline stage
  logic [TSW-1:0] ee_ts;
  logic         take;
  logic         bank_free;

  // An EndEvent needs the snapshot bank, free and not claimed by a token
  // still in flight; a hit only needs the holding register.
  assign in_ready = (!busy || phase == 3'(NCELLS - 1)) &&
                    !(in_word.ee && !bank_free);
  assign take     = in_valid && in_ready;

  // ---- pipeline ---------------------------------------------------------------
  logic [2:0]   lay;
  logic signed [CW:0] dx1, dy1;
  logic         v1, v2, v3;
  logic [2:0]   j1, j2, j3;
  logic [7:0]   a2;
  logic [WW-1:0] w3;
  logic [2*CW+1:0] sq;

  assign lay = (cur.layer < 3'(NLAYERS)) ? cur.layer : 3'(NLAYERS - 1);
  assign sq  = (2*CW+2)'(dx1 * dx1) + (2*CW+2)'(dy1 * dy1);

  weight_lut u_lut (.clk, .addr(a2), .weight(w3));

  logic [NCELLS-1:0][ACCW-1:0] acc;
  logic [NCELLS-1:0][ACCW-1:0] snap;
  logic [TSW-1:0]             snap_ts;
  logic [NNB-1:0][ACCW-1:0]  nbc;
  logic                       ev_par;

  typedef enum logic [1:0] {S_IDLE, S_SNAP, S_CMP} state_e;
  state_e state;

  assign bank_free = (state == S_IDLE) && (ee_sr == '0);

  // neighbour conditions
  logic [NNB-1:0] nb_ready, nb_done;
  logic           is_max;
  always_comb begin
    for (int n = 0; n < NNB; n++) begin
      nb_ready[n] = !NB_EXISTS[n] || (nb_valid[n] && nb_par[n] == snap_par);
      nb_done[n]  = !NB_EXISTS[n] || (nb_done_par[n] == snap_par);
    end
    is_max = (snap[0] >= ACCW'(THRESH));
    for (int n = 0; n < NNB; n++) begin
      if (NB_EXISTS[n]) begin
        if (n < NNB / 2) is_max = is_max && (snap[0] >  nb_center[n]);
        else             is_max = is_max && (snap[0] >= nb_center[n]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; busy <= 1'b0; phase <= '0; ee_sr <= '0; ee_ts <= '0;
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
      j1 <= '0; j2 <= '0; j3 <= '0; dx1 <= '0; dy1 <= '0; a2 <= '0;
      acc <= '0; snap <= '0; snap_ts <= '0; nbc <= '0;
      ev_par <= 1'b0; snap_par <= 1'b0; done_par <= 1'b1;
      state <= S_IDLE; lam <= 1'b0;
    end else begin
      // hit holding: seven passes per hit
      if (take && !in_word.ee) begin
        cur <= in_word.hit; busy <= 1'b1; phase <= '0;
      end else if (busy) begin
        if (phase == 3'(NCELLS - 1)) busy <= 1'b0;
        else phase <= phase + 3'd1;
      end
      ee_sr <= {ee_sr[2:0], take && in_word.ee};
      if (take && in_word.ee) ee_ts <= in_word.hit.ts;

      // stage 1: subtract the intersection
      v1  <= busy;
      j1  <= phase;
      dx1 <= $signed({2'b00, cur.x}) - $signed({ROM_X[phase][lay][CW-1], ROM_X[phase][lay]});
      dy1 <= $signed({2'b00, cur.y}) - $signed({ROM_Y[phase][lay][CW-1], ROM_Y[phase][lay]});
      // stage 2: square, sum, round
      v2 <= v1;
      j2 <= j1;
      a2 <= ((sq >> R_SHIFT) > 255) ? 8'd255 : 8'(sq >> R_SHIFT);
      // stage 3: weight lookup (inside weight_lut)
      v3 <= v2;
      j3 <= j2;
      // stage 4: accumulate
      if (v3) begin
        if (acc[j3] > ACCW'((1 << ACCW) - 1) - ACCW'(w3)) acc[j3] <= '1;
        else acc[j3] <= acc[j3] + ACCW'(w3);
      end

      // end of event: snapshot and clear
      case (state)
        S_IDLE: if (ee_sr[3]) begin
          snap     <= acc;
          acc      <= '0;
          snap_ts  <= ee_ts;
          snap_par <= ev_par;
          ev_par   <= ~ev_par;
          state    <= S_SNAP;
        end
        S_SNAP: if (&nb_ready) begin
          for (int n = 0; n < NNB; n++) nbc[n] <= NB_EXISTS[n] ? nb_center[n] : '0;
          lam      <= is_max;
          done_par <= snap_par;
          state    <= S_CMP;
        end
        S_CMP: if (!lam && (&nb_done)) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      if (rd_grant) lam <= 1'b0;
    end
  end

  assign snap_valid  = (state != S_IDLE);
  assign snap_center = snap[0];

  assign rd_data.row = AW'(ROW);
  assign rd_data.col = AW'(COL);
  assign rd_data.ts  = snap_ts;
  assign rd_data.acc = snap;
  assign rd_data.nb  = nbc;

  // the readout only grants an engine that asks
  always_ff @(posedge clk) if (rd_grant) assert (lam) else $error("engine: grant without LookAtMe");

endmodule
