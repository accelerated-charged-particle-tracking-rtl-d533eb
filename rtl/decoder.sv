// decoder: turns each edge's message into the segment-classifier output,
//     e'''_k = phi_3^e(e''_k)   (8 -> 8 -> 8 -> 8 -> 1)
// with ReLU after the first three layers and a sigmoid (sigmoid_plan) after
// the last, so e'''_k in [0, 1] is the score that edge k is a true track
// segment.  All N_EDGES edges are processed in parallel.
//
// Four dense_layer stages with a valid/ready handshake; PASS_W bits of side
// data travel with the token.  With reuse factor 8 the latency is 4 x (8+1)
// = 36 cycles; a new graph can enter every 8 cycles.
// Weights: layers 8-11 (phi_3^e) of the map in gnn_pkg.
module decoder
  import gnn_pkg::*;
#(
  parameter int N_EDGES = 37,
  parameter int RF      = 8,
  parameter int PASS_W  = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  wload_t                       wload,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  fx_t  [N_EDGES-1:0][HID-1:0]  msg,
  input  logic [PASS_W-1:0]            pass_in,
  output logic                         out_valid,
  input  logic                         out_ready,
  output fx_t  [N_EDGES-1:0]           score,
  output logic [PASS_W-1:0]            pass_out
);
  logic v1, r1, v2, r2, v3, r3;
  fx_t [N_EDGES-1:0][HID-1:0] h1, h2, h3;
  fx_t [N_EDGES-1:0][0:0]     h4;
  logic [PASS_W-1:0] p1, p2, p3;

  dense_layer #(.N_ITEMS(N_EDGES), .N_IN(HID), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(PASS_W), .BASE(layer_base(8))) u_l1 (
    .clk, .rst_n, .wload,
    .in_valid, .in_ready, .in_data(msg), .in_side(pass_in),
    .out_valid(v1), .out_ready(r1), .out_data(h1), .out_side(p1));

  dense_layer #(.N_ITEMS(N_EDGES), .N_IN(HID), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(PASS_W), .BASE(layer_base(9))) u_l2 (
    .clk, .rst_n, .wload,
    .in_valid(v1), .in_ready(r1), .in_data(h1), .in_side(p1),
    .out_valid(v2), .out_ready(r2), .out_data(h2), .out_side(p2));

  dense_layer #(.N_ITEMS(N_EDGES), .N_IN(HID), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(PASS_W), .BASE(layer_base(10))) u_l3 (
    .clk, .rst_n, .wload,
    .in_valid(v2), .in_ready(r2), .in_data(h2), .in_side(p2),
    .out_valid(v3), .out_ready(r3), .out_data(h3), .out_side(p3));

  dense_layer #(.N_ITEMS(N_EDGES), .N_IN(HID), .N_OUT(1), .RF(RF), .ACT(ACT_SIGMOID),
                .SIDE_W(PASS_W), .BASE(layer_base(11))) u_l4 (
    .clk, .rst_n, .wload,
    .in_valid(v3), .in_ready(r3), .in_data(h3), .in_side(p3),
    .out_valid, .out_ready, .out_data(h4), .out_side(pass_out));

  always_comb
    for (int k = 0; k < N_EDGES; k++) score[k] = h4[k][0];
endmodule
