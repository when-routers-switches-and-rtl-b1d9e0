// pi2_tx_select: transmission selection of one output port.
//
// N neurons share the port; each raises req[i] while it has an output event
// waiting.  A round-robin pointer picks the first requester at or after the
// one served last; the winner's index and polarity go out with out_valid, and
// gnt[i] tells that neuron its event was taken (out_valid && out_ready).
// One event per cycle.  The paper names this stage ("Transmission
// Selection"); the round-robin policy is this design's choice.
module pi2_tx_select #(
  parameter int unsigned N = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic [N-1:0]         req_pol,
  output logic [N-1:0]         gnt,
  output logic                 out_valid,
  output logic [$clog2(N)-1:0] out_idx,
  output logic                 out_pol,
  input  logic                 out_ready
);

  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] ptr;

  always_comb begin
    out_valid = 1'b0;
    out_idx   = '0;
    for (int o = 0; o < N; o++) begin
      automatic logic [IW-1:0] i = IW'((int'(ptr) + o) % N);
      if (!out_valid && req[i]) begin
        out_valid = 1'b1;
        out_idx   = i;
      end
    end
    out_pol = req_pol[out_idx];
    gnt = '0;
    if (out_valid && out_ready) gnt[out_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (out_valid && out_ready)
      ptr <= (out_idx == IW'(N - 1)) ? '0 : out_idx + 1'b1;
  end

endmodule
