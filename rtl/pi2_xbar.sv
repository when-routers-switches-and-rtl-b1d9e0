// pi2_xbar: traffic classification and scheduling.
//
// NS sources (the routing lookups of the input ports) each offer one event
// (s_valid, destination s_dest, payload s_data).  Every destination
// (egress port) takes at most one event per cycle; when several sources want
// the same destination, a per-destination round-robin pointer picks the first
// at or after the source served last.  A source learns that its event was
// taken from s_ready.  Destinations never stall: d_valid/d_data is a one-cycle
// strobe.  Combinational path from s_valid to s_ready and d_valid.
//
// The paper says only that events "are directed to their corresponding
// destination ports by the traffic classification and scheduling logic"; the
// crossbar and round-robin policy are this design's choices.
module pi2_xbar #(
  parameter int unsigned NS = 3,
  parameter int unsigned ND = 3,
  parameter int unsigned DW = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NS-1:0]         s_valid,
  input  logic [$clog2(ND)-1:0] s_dest [NS],
  input  logic [DW-1:0]         s_data [NS],
  output logic [NS-1:0]         s_ready,
  output logic [ND-1:0]         d_valid,
  output logic [DW-1:0]         d_data [ND]
);

  localparam int unsigned SW = (NS > 1) ? $clog2(NS) : 1;

  logic [SW-1:0] ptr  [ND];
  logic [SW-1:0] win  [ND];

  always_comb begin
    s_ready = '0;
    for (int d = 0; d < ND; d++) begin
      d_valid[d] = 1'b0;
      win[d]     = '0;
      for (int o = 0; o < NS; o++) begin
        automatic logic [SW-1:0] s = SW'((int'(ptr[d]) + o) % NS);
        if (!d_valid[d] && s_valid[s] && (int'(s_dest[s]) == d)) begin
          d_valid[d] = 1'b1;
          win[d]     = s;
        end
      end
      d_data[d] = s_data[win[d]];
      if (d_valid[d]) s_ready[win[d]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < ND; d++) ptr[d] <= '0;
    end else begin
      for (int d = 0; d < ND; d++)
        if (d_valid[d]) ptr[d] <= (int'(win[d]) == NS - 1) ? '0 : win[d] + 1'b1;
    end
  end

endmodule
