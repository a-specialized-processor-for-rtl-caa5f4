// centroid_unit: computes the track parameters of one local maximum.
//
// The excitation cluster of a maximum is factorised in two centres of mass:
//  - (u,v): over the 3 x 3 square of central values around the engine,
//      u = u0(col) + sum(dc * l) / sum(l),   v = v0(row) + sum(dr * l) / sum(l);
//  - lateral parameters: over the engine's seven cells (the 3x3x3 cube of
//    which only the centre and the six face cells are filled), e.g.
//      d = (l(+dd) - l(-dd)) / sum of the seven,
//    and likewise z and k, in units of the lateral step.
// u0 and v0 are the engine's global position, taken from a lookup table
// (retina_pkg::uv_offset) rather than computed.  The two weights sum(l) are
// formed in parallel, and the five quotients by five restoring dividers
// working in parallel, FRAC+1 = 9 quotient bits each.
//
// Timing: the unit takes one record at a time.  Cycle 1 forms the sums,
// cycles 2-10 divide, cycle 11 adds signs and offsets; the track appears on
// the output 11 cycles after the record was taken (the paper's figure for
// this computation) and the unit stays busy until the track is taken.
//
// Interface: valid/ready cluster_t in, valid/ready track_t out.  The formulas
// and the 11-cycle latency follow the paper; the fixed-point formats and the
// divider are this design's.
module centroid_unit
  import retina_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  cluster_t in_data,
  input  logic     in_valid,
  output logic     in_ready,
  output track_t   out_data,
  output logic     out_valid,
  input  logic     out_ready
);

  localparam int DW  = ACCW + 4;  // sums of up to 9 accumulators
  localparam int NIT = FRAC + 1;  // quotient bits, integer bit included

  typedef enum logic [1:0] {C_IDLE, C_SUM, C_DIV, C_OUT} cstate_e;
  cstate_e state;

  cluster_t            cl;
  logic [DW-1:0]       den9, den7;
  logic [4:0][DW:0]    rem;      // u, v, d, z, k
  logic [4:0]          neg;
  logic [4:0][NIT-1:0] q;
  logic [3:0]          it;

  assign in_ready = (state == C_IDLE) && !out_valid;

  // sums from the registered cluster
  logic [DW-1:0] s9, s7, up, un, vp, vn;
  always_comb begin
    s9 = DW'(cl.acc[CELL_C]);
    for (int n = 0; n < NNB; n++) s9 = s9 + DW'(cl.nb[n]);
    s7 = '0;
    for (int j = 0; j < NCELLS; j++) s7 = s7 + DW'(cl.acc[j]);
    up = DW'(cl.nb[2]) + DW'(cl.nb[4]) + DW'(cl.nb[7]);
    un = DW'(cl.nb[0]) + DW'(cl.nb[3]) + DW'(cl.nb[5]);
    vp = DW'(cl.nb[5]) + DW'(cl.nb[6]) + DW'(cl.nb[7]);
    vn = DW'(cl.nb[0]) + DW'(cl.nb[1]) + DW'(cl.nb[2]);
  end

  function automatic logic [DW:0] absdiff(input logic [DW-1:0] a, input logic [DW-1:0] b);
    return (a >= b) ? {1'b0, a - b} : {1'b0, b - a};
  endfunction

  function automatic logic signed [LPW-1:0] lat(input logic n, input logic [NIT-1:0] qq);
    return n ? -LPW'($signed({1'b0, qq})) : LPW'($signed({1'b0, qq}));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; cl <= '0; den9 <= '0; den7 <= '0; rem <= '0; neg <= '0;
      q <= '0; it <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      case (state)
        C_IDLE: if (in_valid && in_ready) begin
          cl    <= in_data;
          state <= C_SUM;
        end
        C_SUM: begin
          den9   <= s9;
          den7   <= s7;
          rem[0] <= absdiff(up, un);
          rem[1] <= absdiff(vp, vn);
          rem[2] <= absdiff(DW'(cl.acc[CELL_DP]), DW'(cl.acc[CELL_DM]));
          rem[3] <= absdiff(DW'(cl.acc[CELL_ZP]), DW'(cl.acc[CELL_ZM]));
          rem[4] <= absdiff(DW'(cl.acc[CELL_KP]), DW'(cl.acc[CELL_KM]));
          neg    <= {cl.acc[CELL_KP] < cl.acc[CELL_KM], cl.acc[CELL_ZP] < cl.acc[CELL_ZM],
                     cl.acc[CELL_DP] < cl.acc[CELL_DM], vp < vn, up < un};
          q      <= '0;
          it     <= '0;
          state  <= C_DIV;
        end
        C_DIV: begin
          for (int p = 0; p < 5; p++) begin
            logic [DW:0] d;
            d = (p < 2) ? {1'b0, den9} : {1'b0, den7};
            if (rem[p] >= d && d != '0) begin
              q[p]   <= {q[p][NIT-2:0], 1'b1};
              rem[p] <= (rem[p] - d) << 1;
            end else begin
              q[p]   <= {q[p][NIT-2:0], 1'b0};
              rem[p] <= rem[p] << 1;
            end
          end
          it <= it + 4'd1;
          if (int'(it) == NIT - 1) state <= C_OUT;
        end
        C_OUT: begin
          out_data.ts   <= cl.ts;
          out_data.peak <= cl.acc[CELL_C];
          out_data.u    <= PW'(uv_offset(int'(cl.col))) +
                           (neg[0] ? -PW'($signed({1'b0, q[0]})) : PW'($signed({1'b0, q[0]})));
          out_data.v    <= PW'(uv_offset(int'(cl.row))) +
                           (neg[1] ? -PW'($signed({1'b0, q[1]})) : PW'($signed({1'b0, q[1]})));
          out_data.d    <= lat(neg[2], q[2]);
          out_data.z    <= lat(neg[3], q[3]);
          out_data.k    <= lat(neg[4], q[4]);
          out_valid     <= 1'b1;
          state         <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
