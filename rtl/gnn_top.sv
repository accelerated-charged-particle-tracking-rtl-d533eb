// gnn_top: interaction-network segment classifier for charged-particle
// tracking.  A detector-sector graph (hits as nodes, hit pairs on adjacent
// layers as edges) streams in; for every edge the design outputs a score in
// [0, 1], the probability that the edge is a true track segment, together
// with the updated node vectors v''.
//
// Data flow, one graph token per stage (each stage holds one graph):
//   node stream -> stream_fifo --\
//                                  graph_loader -> encoder -> edge_block -> node_block -> decoder -> out
//   edge stream -> stream_fifo --/                (phi_1)     (phi_2^e,     (phi_2^v)     (phi_3)
//                                                              rho^{e->v})
// The graph has a fixed size of N_NODES nodes and N_EDGES edges (28 and 37,
// the quarter-sector size at which the design was evaluated; a full sector
// is 112 and 148); smaller graphs are zero-padded, larger ones truncated.
// Every dense layer is a pipeline stage whose initiation interval is set by
// the reuse factor RF, so several graphs are in flight at once.
//
// Interface:
//   wl_*       weight-load bus; one 16-bit word per cycle at the addresses
//              of gnn_pkg.  Load all weights before streaming graphs.
//   node_*     node stream (r, phi, z), valid/ready, node_last on the last.
//   edge_*     edge stream (dr, dphi, dz, dR, sender, receiver), likewise.
//   out_*      result token, valid/ready: out_score[k] for each edge slot
//              (zero for padding), out_emask marking real edges, out_node
//              the node vectors v'' (zero for padding), out_nmask.
//   trunc_event  one-cycle pulse when a graph that had to be truncated
//              enters the network.
// All numbers are <16,6> signed fixed point.
// Timing with the defaults (RF = 8): the result of an isolated graph is
// offered 88 cycles after its last stream element is taken: 1 (FIFO) + 1
// (loader) + 14 (encoder) + 19 (edge block) + 18 (node block) + 35
// (decoder, whose last layer is not followed by a hand-off); loading takes max(#nodes, #edges) beats before that.  The streaming input,
// which loads one node and one edge per cycle, bounds the graph rate to one
// graph every max(N_NODES, N_EDGES)+1 cycles; the network itself could take
// one every RF cycles.
module gnn_top
  import gnn_pkg::*;
#(
  parameter int N_NODES = 28,
  parameter int N_EDGES = 37,
  parameter int RF      = 8,
  parameter int IDX_W   = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // weight load
  input  logic                            wl_en,
  input  logic [WADDR_W-1:0]              wl_addr,
  input  fx_t                             wl_data,
  // node stream
  input  logic                            node_valid,
  output logic                            node_ready,
  input  fx_t  [NODE_F-1:0]               node_feat,
  input  logic                            node_last,
  // edge stream
  input  logic                            edge_valid,
  output logic                            edge_ready,
  input  fx_t  [EDGE_F-1:0]               edge_feat,
  input  logic [IDX_W-1:0]                edge_snd,
  input  logic [IDX_W-1:0]                edge_rcv,
  input  logic                            edge_last,
  // result
  output logic                            out_valid,
  input  logic                            out_ready,
  output fx_t  [N_EDGES-1:0]              out_score,
  output logic [N_EDGES-1:0]              out_emask,
  output fx_t  [N_NODES-1:0][HID-1:0]     out_node,
  output logic [N_NODES-1:0]              out_nmask,
  output logic                            trunc_event
);
  localparam int NI_W = $clog2(N_NODES);

  wload_t wload;
  assign wload = '{en: wl_en, addr: wl_addr, data: wl_data};

  // ---------------- input FIFOs ----------------
  localparam int NFW = NODE_F * FX_W + 1;
  localparam int EFW = EDGE_F * FX_W + 2 * IDX_W + 1;

  logic           nq_valid, nq_ready, eq_valid, eq_ready;
  logic [NFW-1:0] nq_data;
  logic [EFW-1:0] eq_data;

  stream_fifo #(.W(NFW), .DEPTH(N_NODES)) u_nfifo (
    .clk, .rst_n,
    .in_valid(node_valid), .in_ready(node_ready), .in_data({node_last, node_feat}),
    .out_valid(nq_valid), .out_ready(nq_ready), .out_data(nq_data));

  stream_fifo #(.W(EFW), .DEPTH(N_EDGES)) u_efifo (
    .clk, .rst_n,
    .in_valid(edge_valid), .in_ready(edge_ready),
    .in_data({edge_last, edge_rcv, edge_snd, edge_feat}),
    .out_valid(eq_valid), .out_ready(eq_ready), .out_data(eq_data));

  // ---------------- graph loader ----------------
  logic g_valid, g_ready, g_trunc;
  fx_t  [N_NODES-1:0][NODE_F-1:0] g_node;
  fx_t  [N_EDGES-1:0][EDGE_F-1:0] g_edge;
  logic [N_EDGES-1:0][NI_W-1:0]   g_snd, g_rcv;
  logic [N_NODES-1:0]             g_nmask;
  logic [N_EDGES-1:0]             g_emask;

  graph_loader #(.N_NODES(N_NODES), .N_EDGES(N_EDGES), .IDX_W(IDX_W), .NI_W(NI_W)) u_loader (
    .clk, .rst_n,
    .n_valid(nq_valid), .n_ready(nq_ready),
    .n_feat(nq_data[NODE_F*FX_W-1:0]), .n_last(nq_data[NFW-1]),
    .e_valid(eq_valid), .e_ready(eq_ready),
    .e_feat(eq_data[EDGE_F*FX_W-1:0]),
    .e_snd(eq_data[EDGE_F*FX_W +: IDX_W]), .e_rcv(eq_data[EDGE_F*FX_W + IDX_W +: IDX_W]),
    .e_last(eq_data[EFW-1]),
    .out_valid(g_valid), .out_ready(g_ready),
    .node_x(g_node), .edge_x(g_edge), .snd(g_snd), .rcv(g_rcv),
    .nmask(g_nmask), .emask(g_emask), .out_trunc(g_trunc));

  assign trunc_event = g_valid && g_ready && g_trunc;

  // ---------------- encoder ----------------
  logic h_valid, h_ready;
  fx_t  [N_NODES-1:0][HID-1:0]  h_node;
  fx_t  [N_EDGES-1:0][HID-1:0]  h_edge;
  logic [N_EDGES-1:0][NI_W-1:0] h_snd, h_rcv;
  logic [N_NODES-1:0]           h_nmask;
  logic [N_EDGES-1:0]           h_emask;

  encoder #(.N_NODES(N_NODES), .N_EDGES(N_EDGES), .RF(RF), .NI_W(NI_W)) u_enc (
    .clk, .rst_n, .wload,
    .in_valid(g_valid), .in_ready(g_ready),
    .node_x(g_node), .edge_x(g_edge), .snd_in(g_snd), .rcv_in(g_rcv),
    .nmask_in(g_nmask), .emask_in(g_emask),
    .out_valid(h_valid), .out_ready(h_ready),
    .node_h(h_node), .edge_h(h_edge), .snd_out(h_snd), .rcv_out(h_rcv),
    .nmask_out(h_nmask), .emask_out(h_emask));

  // ---------------- edge block ----------------
  logic m_valid, m_ready;
  fx_t  [N_EDGES-1:0][HID-1:0] m_msg;
  fx_t  [N_NODES-1:0][HID-1:0] m_agg, m_node;
  logic [N_NODES-1:0]          m_nmask;
  logic [N_EDGES-1:0]          m_emask;

  edge_block #(.N_NODES(N_NODES), .N_EDGES(N_EDGES), .RF(RF), .NI_W(NI_W)) u_edge (
    .clk, .rst_n, .wload,
    .in_valid(h_valid), .in_ready(h_ready),
    .node_h(h_node), .edge_h(h_edge), .snd(h_snd), .rcv(h_rcv),
    .nmask_in(h_nmask), .emask_in(h_emask),
    .out_valid(m_valid), .out_ready(m_ready),
    .msg_out(m_msg), .agg_out(m_agg), .node_h_out(m_node),
    .nmask_out(m_nmask), .emask_out(m_emask));

  // ---------------- node block ----------------
  typedef struct packed {
    fx_t  [N_EDGES-1:0][HID-1:0] msg;
    logic [N_NODES-1:0]          nmask;
    logic [N_EDGES-1:0]          emask;
  } nb_pass_t;

  typedef struct packed {
    fx_t  [N_NODES-1:0][HID-1:0] node;
    logic [N_NODES-1:0]          nmask;
    logic [N_EDGES-1:0]          emask;
  } dec_pass_t;

  nb_pass_t  nb_in, nb_out;
  dec_pass_t dec_in, dec_out;
  logic      n_valid, n_ready;
  fx_t [N_NODES-1:0][HID-1:0] n_node;

  assign nb_in = '{msg: m_msg, nmask: m_nmask, emask: m_emask};

  node_block #(.N_NODES(N_NODES), .RF(RF), .PASS_W($bits(nb_pass_t))) u_node (
    .clk, .rst_n, .wload,
    .in_valid(m_valid), .in_ready(m_ready),
    .agg(m_agg), .node_h(m_node), .pass_in(nb_in),
    .out_valid(n_valid), .out_ready(n_ready),
    .node_out(n_node), .pass_out(nb_out));

  // ---------------- decoder ----------------
  fx_t [N_EDGES-1:0] d_score;

  assign dec_in = '{node: n_node, nmask: nb_out.nmask, emask: nb_out.emask};

  decoder #(.N_EDGES(N_EDGES), .RF(RF), .PASS_W($bits(dec_pass_t))) u_dec (
    .clk, .rst_n, .wload,
    .in_valid(n_valid), .in_ready(n_ready),
    .msg(nb_out.msg), .pass_in(dec_in),
    .out_valid, .out_ready,
    .score(d_score), .pass_out(dec_out));

  // ---------------- result, padding forced to zero ----------------
  always_comb begin
    out_emask = dec_out.emask;
    out_nmask = dec_out.nmask;
    for (int k = 0; k < N_EDGES; k++) out_score[k] = dec_out.emask[k] ? d_score[k] : '0;
    for (int i = 0; i < N_NODES; i++) out_node[i]  = dec_out.nmask[i] ? dec_out.node[i] : '0;
  end
endmodule
