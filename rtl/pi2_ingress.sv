// pi2_ingress: ingress processing of one input port.
//
// An address event arrives with the source (Tx) neuron address in_addr and
// its differential polarity in_pol (0: the T+ spike, 1: the T- spike) under a
// valid/ready handshake.  The port stamps it with its arrival time T_i, the
// current system time, and queues {addr, pol, T_i} in a DEPTH-entry packet
// buffer from which the routing lookup takes it (out_valid/out_ready,
// first-word fall-through).  in_ready is low while the buffer is full.
// `start` empties the buffer.
//
// The paper gives the stage's function (parse the Tx address, classify the
// event); the arrival time stamp carried with the event, the polarity bit and
// the buffer depth are this design's choices.
// Lint note: rst_n is the asynchronous reset of the flops and also disables
// the assertions; verilator reports that simulation-only use as
// SYNCASYNCNET.  No flop uses rst_n synchronously.
module pi2_ingress
  import pi2_pkg::*;
#(
  parameter int unsigned AW    = 7,
  parameter int unsigned DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  time_t         now,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [AW-1:0] in_addr,
  input  logic          in_pol,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [AW-1:0] out_addr,
  output logic          out_pol,
  output time_t         out_ts
);

  localparam int unsigned DW = AW + 1 + T_W;

  logic          empty, full;
  logic [DW-1:0] dout;

  pi2_fifo #(.DW(DW), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n,
    .clear(start),
    .push (in_valid && in_ready),
    .din  ({in_addr, in_pol, now}),
    .pop  (out_valid && out_ready),
    .dout,
    .empty,
    .full
  );

  assign in_ready  = !full && !start;
  assign out_valid = !empty && !start;
  assign {out_addr, out_pol, out_ts} = dout;

endmodule
