// encoder: maps the raw node and edge features of a graph to the hidden
// representations used by the interaction network,
//     v'_i = phi_1^v(v_i)   (3 -> 8 -> 8, ReLU after both layers)
//     e'_k = phi_1^e(e_k)   (4 -> 8 -> 8, ReLU after both layers)
// for all N_NODES nodes and N_EDGES edges of the graph in parallel.
//
// The two networks run side by side: an incoming graph token is forked to a
// node path and an edge path (it is accepted only when both can take it) and
// the results are joined again (offered only when both are done).  Each path
// is two dense_layer stages; the edge path also carries the edge end points
// and the node/edge masks along.  A dense layer with NCYC accumulation steps
// adds NCYC+1 cycles (see dense_layer); with the default reuse factor 8 the node path
// takes (3+1)+(8+1) cycles and the edge path (4+1)+(8+1), so a graph leaves
// 14 cycles after it enters; a new graph can enter every 8 cycles.
// Weights: layers 0-1 (phi_1^v) and 2-3 (phi_1^e) of the map in gnn_pkg.
module encoder
  import gnn_pkg::*;
#(
  parameter int N_NODES = 28,
  parameter int N_EDGES = 37,
  parameter int RF      = 8,
  parameter int NI_W    = $clog2(N_NODES)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  wload_t                          wload,
  input  logic                            in_valid,
  output logic                            in_ready,
  input  fx_t  [N_NODES-1:0][NODE_F-1:0]  node_x,
  input  fx_t  [N_EDGES-1:0][EDGE_F-1:0]  edge_x,
  input  logic [N_EDGES-1:0][NI_W-1:0]    snd_in,
  input  logic [N_EDGES-1:0][NI_W-1:0]    rcv_in,
  input  logic [N_NODES-1:0]              nmask_in,
  input  logic [N_EDGES-1:0]              emask_in,
  output logic                            out_valid,
  input  logic                            out_ready,
  output fx_t  [N_NODES-1:0][HID-1:0]     node_h,
  output fx_t  [N_EDGES-1:0][HID-1:0]     edge_h,
  output logic [N_EDGES-1:0][NI_W-1:0]    snd_out,
  output logic [N_EDGES-1:0][NI_W-1:0]    rcv_out,
  output logic [N_NODES-1:0]              nmask_out,
  output logic [N_EDGES-1:0]              emask_out
);
  typedef struct packed {
    logic [N_EDGES-1:0][NI_W-1:0] snd;
    logic [N_EDGES-1:0][NI_W-1:0] rcv;
    logic [N_NODES-1:0]           nmask;
    logic [N_EDGES-1:0]           emask;
  } side_t;
  localparam int SW = $bits(side_t);

  side_t side_in, side_mid, side_out;
  assign side_in = '{snd: snd_in, rcv: rcv_in, nmask: nmask_in, emask: emask_in};

  // fork
  logic v_in_ready, e_in_ready;
  assign in_ready = v_in_ready && e_in_ready;

  // node path
  logic v_mid_valid, v_mid_ready, v_out_valid, v_out_ready;
  fx_t [N_NODES-1:0][HID-1:0] v_mid;
  logic [0:0] v_side_mid, v_side_out;

  dense_layer #(.N_ITEMS(N_NODES), .N_IN(NODE_F), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(1), .BASE(layer_base(0))) u_v1 (
    .clk, .rst_n, .wload,
    .in_valid(in_valid && e_in_ready), .in_ready(v_in_ready), .in_data(node_x), .in_side(1'b0),
    .out_valid(v_mid_valid), .out_ready(v_mid_ready), .out_data(v_mid), .out_side(v_side_mid));

  dense_layer #(.N_ITEMS(N_NODES), .N_IN(HID), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(1), .BASE(layer_base(1))) u_v2 (
    .clk, .rst_n, .wload,
    .in_valid(v_mid_valid), .in_ready(v_mid_ready), .in_data(v_mid), .in_side(v_side_mid),
    .out_valid(v_out_valid), .out_ready(v_out_ready), .out_data(node_h), .out_side(v_side_out));

  // edge path
  logic e_mid_valid, e_mid_ready, e_out_valid, e_out_ready;
  fx_t [N_EDGES-1:0][HID-1:0] e_mid;

  dense_layer #(.N_ITEMS(N_EDGES), .N_IN(EDGE_F), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(SW), .BASE(layer_base(2))) u_e1 (
    .clk, .rst_n, .wload,
    .in_valid(in_valid && v_in_ready), .in_ready(e_in_ready), .in_data(edge_x), .in_side(side_in),
    .out_valid(e_mid_valid), .out_ready(e_mid_ready), .out_data(e_mid), .out_side(side_mid));

  dense_layer #(.N_ITEMS(N_EDGES), .N_IN(HID), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(SW), .BASE(layer_base(3))) u_e2 (
    .clk, .rst_n, .wload,
    .in_valid(e_mid_valid), .in_ready(e_mid_ready), .in_data(e_mid), .in_side(side_mid),
    .out_valid(e_out_valid), .out_ready(e_out_ready), .out_data(edge_h), .out_side(side_out));

  // join
  assign out_valid   = v_out_valid && e_out_valid;
  assign v_out_ready = out_ready && e_out_valid;
  assign e_out_ready = out_ready && v_out_valid;

  assign snd_out   = side_out.snd;
  assign rcv_out   = side_out.rcv;
  assign nmask_out = side_out.nmask;
  assign emask_out = side_out.emask;

  logic unused_side;
  assign unused_side = v_side_out[0];
endmodule
