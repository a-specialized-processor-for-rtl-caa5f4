// cluster_readout: the logic that collects local maxima from a group of
// engines for one centroid unit.
//
// It watches the LookAtMe flags of its NE engines.  When its output register
// is free (the centroid unit is not busy, or takes the current word this
// cycle) and some flag is up, a round-robin arbiter picks one engine, pulses
// its rd_grant for one cycle and copies that engine's cluster record (the
// seven accumulators of the engine and the central values of its eight
// neighbours) into the output register.  The engine drops its flag on the
// grant.  The paper says that such logic reads any engine whose LookAtMe is
// up "if not busy" and that one centroid unit serves 12 engines; the
// round-robin choice and the one-word output register are this design's.
//
// Interface: lam/rd_grant/rd_data per engine; valid/ready cluster_t output.
// A grant is given in the cycle the flag is seen; the record is valid on the
// output the next cycle.
module cluster_readout
  import retina_pkg::*;
#(
  parameter int NE = 12  // engines served (paper: 12 per centroid unit)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic     [NE-1:0] lam,
  output logic     [NE-1:0] rd_grant,
  input  cluster_t          rd_data [NE],
  output cluster_t          out_data,
  output logic              out_valid,
  input  logic              out_ready
);

  localparam int SW = (NE > 1) ? $clog2(NE) : 1;

  logic [SW-1:0] ptr;   // first engine to consider
  logic [SW-1:0] sel;
  logic          found;
  logic          load;

  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int i = 0; i < NE; i++) begin
      logic [SW:0] e;
      e = (SW+1)'(ptr) + (SW+1)'(i);
      if (e >= (SW+1)'(NE)) e = e - (SW+1)'(NE);
      if (!found && lam[e[SW-1:0]]) begin
        found = 1'b1;
        sel   = e[SW-1:0];
      end
    end
    load = found && (!out_valid || out_ready);
    rd_grant = '0;
    if (load) rd_grant[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      ptr       <= '0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (load) begin
        out_valid <= 1'b1;
        out_data  <= rd_data[sel];
        ptr       <= (int'(sel) == NE - 1) ? '0 : sel + SW'(1);
      end
    end
  end

endmodule
