// graph_loader: turns the node and edge streams of one event sector into a
// fixed-size graph token for the network.
//
// The network has a fixed input size of N_NODES nodes and N_EDGES edges.
// Nodes (r, phi, z) and edges (dr, dphi, dz, dR, sender, receiver) arrive on
// two independent valid/ready streams, one element per beat, the last
// element of a graph flagged by *_last.  The loader stores element k in
// slot k.  Elements beyond the fixed size are dropped until the last flag
// (truncation, reported on out_trunc), and unused slots stay zero
// (zero padding).  The two streams are read in parallel, so a graph takes
// max(#nodes, #edges) beats to load.
//
// Besides the zero padding this design marks which slots are real: nmask[i]
// is set for loaded nodes, emask[k] for loaded edges whose two end points
// are both loaded nodes (an edge to a truncated node is dropped).  Later
// stages use emask so that padding edges send no messages.  End-point
// indices arrive as IDX_W-bit numbers and leave narrowed to NI_W bits;
// those of masked edges are forced to zero.
//
// The graph token is offered on out_valid once both last flags have been
// seen; when it is taken the buffer is cleared and loading of the next graph
// starts in the following cycle.  Each graph needs at least one node and one
// edge (the last flag rides on an element).
module graph_loader
  import gnn_pkg::*;
#(
  parameter int N_NODES = 28,
  parameter int N_EDGES = 37,
  parameter int IDX_W   = 16,
  parameter int NI_W    = $clog2(N_NODES)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // node stream
  input  logic                             n_valid,
  output logic                             n_ready,
  input  fx_t  [NODE_F-1:0]                n_feat,
  input  logic                             n_last,
  // edge stream
  input  logic                             e_valid,
  output logic                             e_ready,
  input  fx_t  [EDGE_F-1:0]                e_feat,
  input  logic [IDX_W-1:0]                 e_snd,
  input  logic [IDX_W-1:0]                 e_rcv,
  input  logic                             e_last,
  // graph token
  output logic                             out_valid,
  input  logic                             out_ready,
  output fx_t  [N_NODES-1:0][NODE_F-1:0]   node_x,
  output fx_t  [N_EDGES-1:0][EDGE_F-1:0]   edge_x,
  output logic [N_EDGES-1:0][NI_W-1:0]     snd,
  output logic [N_EDGES-1:0][NI_W-1:0]     rcv,
  output logic [N_NODES-1:0]               nmask,
  output logic [N_EDGES-1:0]               emask,
  output logic                             out_trunc
);
  logic [IDX_W-1:0] snd_raw [N_EDGES];
  logic [IDX_W-1:0] rcv_raw [N_EDGES];
  logic [$clog2(N_NODES+1)-1:0] n_cnt;
  logic [$clog2(N_EDGES+1)-1:0] e_cnt;
  logic n_done, e_done, n_trunc, e_trunc;
  logic n_acc, e_acc, take;

  assign n_ready   = !n_done;
  assign e_ready   = !e_done;
  assign n_acc     = n_valid && n_ready;
  assign e_acc     = e_valid && e_ready;
  assign out_valid = n_done && e_done;
  assign take      = out_valid && out_ready;
  assign out_trunc = n_trunc || e_trunc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      node_x  <= '0;
      edge_x  <= '0;
      n_cnt   <= '0;
      e_cnt   <= '0;
      n_done  <= 1'b0;
      e_done  <= 1'b0;
      n_trunc <= 1'b0;
      e_trunc <= 1'b0;
      for (int k = 0; k < N_EDGES; k++) begin
        snd_raw[k] <= '0;
        rcv_raw[k] <= '0;
      end
    end else if (take) begin
      node_x  <= '0;
      edge_x  <= '0;
      n_cnt   <= '0;
      e_cnt   <= '0;
      n_done  <= 1'b0;
      e_done  <= 1'b0;
      n_trunc <= 1'b0;
      e_trunc <= 1'b0;
      for (int k = 0; k < N_EDGES; k++) begin
        snd_raw[k] <= '0;
        rcv_raw[k] <= '0;
      end
    end else begin
      if (n_acc) begin
        if (int'(n_cnt) < N_NODES) begin
          node_x[n_cnt] <= n_feat;
          n_cnt         <= n_cnt + 1'b1;
        end else begin
          n_trunc <= 1'b1;
        end
        if (n_last) n_done <= 1'b1;
      end
      if (e_acc) begin
        if (int'(e_cnt) < N_EDGES) begin
          edge_x[e_cnt]  <= e_feat;
          snd_raw[e_cnt] <= e_snd;
          rcv_raw[e_cnt] <= e_rcv;
          e_cnt          <= e_cnt + 1'b1;
        end else begin
          e_trunc <= 1'b1;
        end
        if (e_last) e_done <= 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N_NODES; i++) nmask[i] = (i < int'(n_cnt));
    for (int k = 0; k < N_EDGES; k++) begin
      emask[k] = (k < int'(e_cnt)) && (int'(snd_raw[k]) < int'(n_cnt)) && (int'(rcv_raw[k]) < int'(n_cnt));
      snd[k]   = emask[k] ? snd_raw[k][NI_W-1:0] : '0;
      rcv[k]   = emask[k] ? rcv_raw[k][NI_W-1:0] : '0;
    end
  end
endmodule
