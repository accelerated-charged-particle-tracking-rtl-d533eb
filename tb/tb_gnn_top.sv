// tb_gnn_top: end-to-end test of the segment classifier at its default size
// (28 nodes, 37 edges, reuse factor 8).
//
// Random weights are loaded over the weight bus, then NG random graphs are
// streamed in on the node and edge streams, with random gaps on the inputs
// and random back-pressure on the output.  Every edge score, edge mask,
// node vector and node mask of every result is compared with the reference
// model of gnn_ref_pkg.  The graphs are chosen so that each mechanism of the
// design happens: zero padding (small graphs), truncation (graphs larger
// than 28/37), edges dropped because an end point is missing, several graphs
// in flight in the pipeline at once, and stalls of the pipeline under
// output back-pressure.  Each is counted and must occur.  The latency of an
// isolated graph (last input beat to result) is checked against the sum of
// the stage latencies, and must stay under 200 cycles (1 us at 200 MHz).
module tb_gnn_top;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N  = 28;
  localparam int E  = 37;
  localparam int NG = 10;
  localparam int MAXN = 34;
  localparam int MAXE = 44;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wl_en = 0;
  logic [WADDR_W-1:0] wl_addr = '0;
  fx_t  wl_data = '0;
  logic node_valid = 0, node_ready, node_last = 0;
  fx_t  [NODE_F-1:0] node_feat = '0;
  logic edge_valid = 0, edge_ready, edge_last = 0;
  fx_t  [EDGE_F-1:0] edge_feat = '0;
  logic [15:0] edge_snd = '0, edge_rcv = '0;
  logic out_valid, out_ready = 0;
  fx_t  [E-1:0] out_score;
  logic [E-1:0] out_emask;
  fx_t  [N-1:0][HID-1:0] out_node;
  logic [N-1:0] out_nmask;
  logic trunc_event;

  gnn_top dut (.*);

  int checks = 0, failures = 0;
  int nn [NG], ne [NG];
  int nf [NG][MAXN][NODE_F];
  int ef [NG][MAXE][EDGE_F];
  int es [NG][MAXE], er [NG][MAXE];
  int n_trunc = 0, n_pad = 0, n_drop = 0, n_overlap = 0, n_stall = 0;
  int got = 0;
  bit  bp_on = 0;
  longint cyc = 0;
  longint t_last_in = 0, t_out = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- expected result of one graph ----------------
  task automatic check_graph(int g);
    int ln, le;
    bit emk [E];
    int vh [N][], eh [E][], msg [E][];
    int x[], y[];
    ln = (nn[g] < N) ? nn[g] : N;
    le = (ne[g] < E) ? ne[g] : E;
    for (int i = 0; i < N; i++) begin
      x = new[NODE_F];
      for (int f = 0; f < NODE_F; f++) x[f] = (i < ln) ? nf[g][i][f] : 0;
      mlp2(0, x, vh[i]);
      check(out_nmask[i] == (i < ln), $sformatf("g%0d nmask %0d", g, i));
    end
    for (int k = 0; k < E; k++) begin
      x = new[EDGE_F];
      for (int f = 0; f < EDGE_F; f++) x[f] = (k < le) ? ef[g][k][f] : 0;
      mlp2(2, x, eh[k]);
      emk[k] = (k < le) && es[g][k] < ln && er[g][k] < ln;
      check(out_emask[k] == emk[k], $sformatf("g%0d emask %0d", g, k));
      if (k < le && !emk[k]) n_drop++;
    end
    for (int k = 0; k < E; k++) begin
      int r, s;
      r = emk[k] ? er[g][k] : 0;
      s = emk[k] ? es[g][k] : 0;
      x = new[3*HID];
      for (int f = 0; f < HID; f++) begin
        x[f] = eh[k][f]; x[HID+f] = vh[r][f]; x[2*HID+f] = vh[s][f];
      end
      mlp2(4, x, msg[k]);
    end
    for (int k = 0; k < E; k++) begin
      int sc;
      decode(msg[k], sc);
      if (!emk[k]) sc = 0;
      check(int'($signed(out_score[k])) == sc, $sformatf("g%0d score %0d got %0d exp %0d", g, k, out_score[k], sc));
    end
    for (int i = 0; i < N; i++) begin
      x = new[2*HID];
      for (int f = 0; f < HID; f++) begin
        longint s = 0;
        for (int k = 0; k < E; k++) if (emk[k] && er[g][k] == i) s += msg[k][f];
        x[f] = clamp16(s);
        x[HID+f] = vh[i][f];
      end
      mlp2(6, x, y);
      for (int f = 0; f < HID; f++)
        check(int'($signed(out_node[i][f])) == ((i < ln) ? y[f] : 0), $sformatf("g%0d node %0d.%0d", g, i, f));
    end
  endtask

  // ---------------- stimulus ----------------
  task automatic make_graphs();
    for (int g = 0; g < NG; g++) begin
      case (g)
        0: begin nn[g] = 20; ne[g] = 30; end        // isolated graph, padded
        3: begin nn[g] = MAXN; ne[g] = MAXE; end    // truncated
        6: begin nn[g] = N; ne[g] = E; end          // exactly full
        default: begin nn[g] = 5 + $urandom_range(MAXN-5); ne[g] = 5 + $urandom_range(MAXE-5); end
      endcase
      for (int i = 0; i < nn[g]; i++)
        for (int f = 0; f < NODE_F; f++) nf[g][i][f] = rnd_fx(3000);
      for (int k = 0; k < ne[g]; k++) begin
        for (int f = 0; f < EDGE_F; f++) ef[g][k][f] = rnd_fx(3000);
        es[g][k] = $urandom_range(nn[g] - 1);
        er[g][k] = $urandom_range(nn[g] - 1);
        if (k == 2) er[g][k] = nn[g] + 3;             // end point that does not exist
      end
    end
  endtask

  // Inputs change at the falling edge; ready depends only on registered
  // state, so ready seen at a falling edge with valid high means the beat
  // is taken at the next rising edge.
  task automatic send_nodes(int g, bit gaps);
    for (int i = 0; i < nn[g]; i++) begin
      node_valid = 1;
      for (int f = 0; f < NODE_F; f++) node_feat[f] = fx_t'(nf[g][i][f]);
      node_last = (i == nn[g] - 1);
      while (!node_ready) @(negedge clk);
      @(negedge clk);
      if (gaps && $urandom_range(3) == 0) begin
        node_valid = 0;
        @(negedge clk);
      end
    end
    node_valid = 0;
  endtask

  task automatic send_edges(int g, bit gaps);
    for (int k = 0; k < ne[g]; k++) begin
      edge_valid = 1;
      for (int f = 0; f < EDGE_F; f++) edge_feat[f] = fx_t'(ef[g][k][f]);
      edge_snd = 16'(es[g][k]);
      edge_rcv = 16'(er[g][k]);
      edge_last = (k == ne[g] - 1);
      while (!edge_ready) @(negedge clk);
      @(negedge clk);
      if (gaps && $urandom_range(3) == 0) begin
        edge_valid = 0;
        @(negedge clk);
      end
    end
    edge_valid = 0;
  endtask

  // Monitors sample at the falling edge, where everything is settled.
  // cyc counts rising edges.  Latency probes: the rising edge that takes the
  // last edge beat of the first graph (cyc+1 seen before it), and the rising
  // edge after which its result is offered (cyc seen after it).
  longint e_last_edge = -1, e_first_out = -1;
  always @(negedge clk) begin
    if (edge_valid && edge_ready && edge_last && e_last_edge < 0) e_last_edge = cyc + 1;
    if (out_valid && e_first_out < 0) e_first_out = cyc;
  end

  always @(negedge clk) begin
    if (rst_n) begin
      if (trunc_event) n_trunc++;
      if (out_valid && !out_ready) n_stall++;
      // graphs in flight in two different stages at the same time
      if (dut.u_enc.u_e1.busy && (dut.u_dec.u_l1.busy || dut.u_dec.u_l4.busy || dut.u_node.u_l1.busy)) n_overlap++;
    end
  end

  initial begin
    random_weights(300);
    make_graphs();
    for (int g = 0; g < NG; g++) if (nn[g] < N || ne[g] < E) n_pad++;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int a = 0; a < WORDS_TOTAL; a++) begin
      wl_en = 1; wl_addr = WADDR_W'(a); wl_data = fx_t'(wmem[a]);
      @(negedge clk);
    end
    wl_en = 0;
    @(negedge clk);

    // graph 0 alone, no gaps, no back-pressure: latency
    fork
      send_nodes(0, 0);
      send_edges(0, 0);
    join
    out_ready = 1;
    while (!out_valid) @(negedge clk);
    check_graph(0);
    got++;
    @(negedge clk);
    t_last_in = e_last_edge;
    t_out = e_first_out;
    $display("latency last input beat -> result: %0d cycles", t_out - t_last_in);
    // Counted from the rising edge that writes the last beat into the FIFO to
    // the edge from which the result is offered: FIFO 1 + loader 1 + encoder
    // 14 + edge block 19 + node block 18 + decoder 35.
    check((t_out - t_last_in) == 88, "latency of an isolated graph");
    // a full graph streams in over 37 beats: total under 200 cycles (1 us)
    check((t_out - t_last_in) + E < 200, "latency under 200 cycles");

    // remaining graphs back to back, with gaps and back-pressure
    bp_on = 1;
    fork
      begin
        for (int g = 1; g < NG; g++) begin
          fork
            send_nodes(g, 1);
            send_edges(g, 1);
          join
        end
      end
      begin
        for (int g = 1; g < NG; g++) begin
          forever begin
            out_ready = ($urandom_range(2) == 0);
            if (out_valid && out_ready) break;
            @(negedge clk);
          end
          check_graph(g);
          got++;
          @(negedge clk);
        end
      end
    join

    check(got == NG, "all graphs returned");
    $display("mechanisms: padding=%0d truncation=%0d dropped_edges=%0d overlap_cycles=%0d stall_cycles=%0d",
             n_pad, n_trunc, n_drop, n_overlap, n_stall);
    check(n_pad > 0,     "zero padding exercised");
    check(n_trunc > 0,   "truncation exercised");
    check(n_drop > 0,    "edges to missing nodes dropped");
    check(n_overlap > 0, "several graphs in flight");
    check(n_stall > 0,   "pipeline stalled under back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
