// track_merger: merges the track streams of all centroid units into the one
// output stream that goes to the data acquisition.
//
// A round-robin arbiter looks at the NU input streams and, whenever the
// output register is free or being emptied, moves one track from the first
// valid input at or after its pointer.  The paper only shows a single output
// to DAQ; the arbitration is this design's.
//
// Interface: NU valid/ready track_t inputs, one registered valid/ready
// track_t output.  One track per cycle, one cycle of latency.
module track_merger
  import retina_pkg::*;
#(
  parameter int NU = 86  // input streams (one per centroid unit)
) (
  input  logic   clk,
  input  logic   rst_n,
  input  track_t in_data  [NU],
  input  logic   in_valid [NU],
  output logic   in_ready [NU],
  output track_t out_data,
  output logic   out_valid,
  input  logic   out_ready
);

  localparam int SW = (NU > 1) ? $clog2(NU) : 1;

  logic [SW-1:0] ptr, sel;
  logic          found, load;

  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int i = 0; i < NU; i++) begin
      logic [SW:0] e;
      e = (SW+1)'(ptr) + (SW+1)'(i);
      if (e >= (SW+1)'(NU)) e = e - (SW+1)'(NU);
      if (!found && in_valid[e[SW-1:0]]) begin
        found = 1'b1;
        sel   = e[SW-1:0];
      end
    end
    load = found && (!out_valid || out_ready);
    for (int i = 0; i < NU; i++) in_ready[i] = load && (sel == SW'(i));
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
        out_data  <= in_data[sel];
        ptr       <= (int'(sel) == NU - 1) ? '0 : sel + SW'(1);
      end
    end
  end

endmodule
