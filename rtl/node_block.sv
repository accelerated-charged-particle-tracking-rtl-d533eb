// node_block: the node block (object model) of the interaction network.
// For every node i it combines the aggregated messages with the node's own
// hidden vector,
//     v''_i = phi_2^v(ebar''_i, v'_i)     (16 -> 8 -> 8, ReLU)
// for all N_NODES nodes in parallel.  The 16 inputs are ordered ebar''_i
// (0-7) then v'_i (8-15).
//
// Two dense_layer stages with a valid/ready handshake; PASS_W bits of side
// data (the edge messages and the masks, which the decoder needs) travel
// with the token.  With reuse factor 8 the latency is (8+1) + (8+1) = 18 cycles; a new
// graph can enter every 8 cycles.
// Weights: layers 6-7 (phi_2^v) of the map in gnn_pkg.
module node_block
  import gnn_pkg::*;
#(
  parameter int N_NODES = 28,
  parameter int RF      = 8,
  parameter int PASS_W  = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  wload_t                       wload,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  fx_t  [N_NODES-1:0][HID-1:0]  agg,
  input  fx_t  [N_NODES-1:0][HID-1:0]  node_h,
  input  logic [PASS_W-1:0]            pass_in,
  output logic                         out_valid,
  input  logic                         out_ready,
  output fx_t  [N_NODES-1:0][HID-1:0]  node_out,   // v''
  output logic [PASS_W-1:0]            pass_out
);
  fx_t [N_NODES-1:0][2*HID-1:0] x;
  always_comb begin
    for (int i = 0; i < N_NODES; i++) begin
      for (int f = 0; f < HID; f++) begin
        x[i][f]       = agg[i][f];
        x[i][HID + f] = node_h[i][f];
      end
    end
  end

  logic mid_valid, mid_ready;
  fx_t [N_NODES-1:0][HID-1:0] h_mid;
  logic [PASS_W-1:0] pass_mid;

  dense_layer #(.N_ITEMS(N_NODES), .N_IN(2*HID), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(PASS_W), .BASE(layer_base(6))) u_l1 (
    .clk, .rst_n, .wload,
    .in_valid, .in_ready, .in_data(x), .in_side(pass_in),
    .out_valid(mid_valid), .out_ready(mid_ready), .out_data(h_mid), .out_side(pass_mid));

  dense_layer #(.N_ITEMS(N_NODES), .N_IN(HID), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(PASS_W), .BASE(layer_base(7))) u_l2 (
    .clk, .rst_n, .wload,
    .in_valid(mid_valid), .in_ready(mid_ready), .in_data(h_mid), .in_side(pass_mid),
    .out_valid, .out_ready, .out_data(node_out), .out_side(pass_out));
endmodule
