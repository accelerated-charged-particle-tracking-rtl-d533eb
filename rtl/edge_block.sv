// edge_block: the edge block (relational model) of the interaction network.
// For every edge k with receiver r_k and sender s_k it computes the message
//     e''_k = phi_2^e(e'_k, v'_{r_k}, v'_{s_k})     (24 -> 8 -> 8, ReLU)
// and then aggregates the messages at the nodes,
//     ebar''_i = rho^{e->v}(E''_i)                  (see aggregate)
// All N_EDGES edges are processed in parallel.
//
// The gather in front of the first layer is a pair of N_NODES-to-1
// multiplexers per edge that pick the receiver's and the sender's hidden
// vectors; the 24 inputs are ordered e'_k (0-7), v'_{r_k} (8-15),
// v'_{s_k} (16-23).  Two dense_layer stages follow, then the aggregate stage.
// The node vectors v' and the masks travel with the token, because the node
// block needs v' and the output needs the masks.  With reuse factor 8 the
// latency is (8+1) + (8+1) + 1 = 19 cycles; a new graph can enter every 8 cycles.
// Weights: layers 4-5 (phi_2^e) of the map in gnn_pkg.
module edge_block
  import gnn_pkg::*;
#(
  parameter int N_NODES = 28,
  parameter int N_EDGES = 37,
  parameter int RF      = 8,
  parameter int NI_W    = $clog2(N_NODES)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  wload_t                         wload,
  input  logic                           in_valid,
  output logic                           in_ready,
  input  fx_t  [N_NODES-1:0][HID-1:0]    node_h,
  input  fx_t  [N_EDGES-1:0][HID-1:0]    edge_h,
  input  logic [N_EDGES-1:0][NI_W-1:0]   snd,
  input  logic [N_EDGES-1:0][NI_W-1:0]   rcv,
  input  logic [N_NODES-1:0]             nmask_in,
  input  logic [N_EDGES-1:0]             emask_in,
  output logic                           out_valid,
  input  logic                           out_ready,
  output fx_t  [N_EDGES-1:0][HID-1:0]    msg_out,    // e''
  output fx_t  [N_NODES-1:0][HID-1:0]    agg_out,    // ebar''
  output fx_t  [N_NODES-1:0][HID-1:0]    node_h_out, // v', passed along
  output logic [N_NODES-1:0]             nmask_out,
  output logic [N_EDGES-1:0]             emask_out
);
  typedef struct packed {
    fx_t  [N_NODES-1:0][HID-1:0]  v;
    logic [N_EDGES-1:0][NI_W-1:0] rcv;
    logic [N_NODES-1:0]           nmask;
    logic [N_EDGES-1:0]           emask;
  } side_t;
  localparam int SW = $bits(side_t);

  typedef struct packed {
    fx_t  [N_EDGES-1:0][HID-1:0]  msg;
    fx_t  [N_NODES-1:0][HID-1:0]  v;
    logic [N_NODES-1:0]           nmask;
    logic [N_EDGES-1:0]           emask;
  } pass_t;
  localparam int PW = $bits(pass_t);

  // gather
  fx_t [N_EDGES-1:0][3*HID-1:0] x;
  always_comb begin
    for (int k = 0; k < N_EDGES; k++) begin
      for (int f = 0; f < HID; f++) begin
        x[k][f]         = edge_h[k][f];
        x[k][HID + f]   = node_h[rcv[k]][f];
        x[k][2*HID + f] = node_h[snd[k]][f];
      end
    end
  end

  side_t side_in, side_mid, side_out;
  assign side_in = '{v: node_h, rcv: rcv, nmask: nmask_in, emask: emask_in};

  logic mid_valid, mid_ready, l2_valid, l2_ready;
  fx_t [N_EDGES-1:0][HID-1:0] h_mid, msg;

  dense_layer #(.N_ITEMS(N_EDGES), .N_IN(3*HID), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(SW), .BASE(layer_base(4))) u_l1 (
    .clk, .rst_n, .wload,
    .in_valid, .in_ready, .in_data(x), .in_side(side_in),
    .out_valid(mid_valid), .out_ready(mid_ready), .out_data(h_mid), .out_side(side_mid));

  dense_layer #(.N_ITEMS(N_EDGES), .N_IN(HID), .N_OUT(HID), .RF(RF), .ACT(ACT_RELU),
                .SIDE_W(SW), .BASE(layer_base(5))) u_l2 (
    .clk, .rst_n, .wload,
    .in_valid(mid_valid), .in_ready(mid_ready), .in_data(h_mid), .in_side(side_mid),
    .out_valid(l2_valid), .out_ready(l2_ready), .out_data(msg), .out_side(side_out));

  pass_t pass_in, pass_out;
  assign pass_in = '{msg: msg, v: side_out.v, nmask: side_out.nmask, emask: side_out.emask};

  aggregate #(.N_NODES(N_NODES), .N_EDGES(N_EDGES), .NI_W(NI_W), .PASS_W(PW)) u_agg (
    .clk, .rst_n,
    .in_valid(l2_valid), .in_ready(l2_ready), .msg(msg), .rcv(side_out.rcv), .emask(side_out.emask),
    .pass_in(pass_in),
    .out_valid, .out_ready, .agg(agg_out), .pass_out(pass_out));

  assign msg_out    = pass_out.msg;
  assign node_h_out = pass_out.v;
  assign nmask_out  = pass_out.nmask;
  assign emask_out  = pass_out.emask;
endmodule
