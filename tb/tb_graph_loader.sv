// tb_graph_loader: streams graphs of different sizes into a loader sized
// for 6 nodes and 8 edges and checks each graph token: features in their
// slots, zeros in unused slots (zero padding), the node and edge masks, the
// narrowed end-point indices, and the truncation flag.  Graphs smaller than,
// equal to and larger than the fixed size are sent, including edges whose
// end point is beyond the loaded nodes.  Input gaps and output back-pressure
// are random.  The load time of a gap-free graph (max(#nodes,#edges) beats)
// is checked.
module tb_graph_loader;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N = 6, E = 8, NI_W = 3, NG = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic n_valid = 0, n_ready, n_last = 0;
  fx_t [NODE_F-1:0] n_feat = '0;
  logic e_valid = 0, e_ready, e_last = 0;
  fx_t [EDGE_F-1:0] e_feat = '0;
  logic [15:0] e_snd = '0, e_rcv = '0;
  logic out_valid, out_ready = 0, out_trunc;
  fx_t  [N-1:0][NODE_F-1:0] node_x;
  fx_t  [E-1:0][EDGE_F-1:0] edge_x;
  logic [E-1:0][NI_W-1:0] snd, rcv;
  logic [N-1:0] nmask;
  logic [E-1:0] emask;

  graph_loader #(.N_NODES(N), .N_EDGES(E), .IDX_W(16), .NI_W(NI_W)) dut (.*);

  int checks = 0, failures = 0, n_tr = 0, n_pad = 0;
  int nn [NG], ne [NG];
  int nf [NG][10][NODE_F], ef [NG][12][EDGE_F], es [NG][12], er [NG][12];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic send_nodes(int g, bit gaps);
    for (int i = 0; i < nn[g]; i++) begin
      n_valid = 1; n_last = (i == nn[g]-1);
      for (int f = 0; f < NODE_F; f++) n_feat[f] = fx_t'(nf[g][i][f]);
      #1; while (!n_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      if (gaps && $urandom_range(2) == 0) begin n_valid = 0; @(negedge clk); end
    end
    n_valid = 0;
  endtask

  task automatic send_edges(int g, bit gaps);
    for (int k = 0; k < ne[g]; k++) begin
      e_valid = 1; e_last = (k == ne[g]-1);
      for (int f = 0; f < EDGE_F; f++) e_feat[f] = fx_t'(ef[g][k][f]);
      e_snd = 16'(es[g][k]); e_rcv = 16'(er[g][k]);
      #1; while (!e_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      if (gaps && $urandom_range(2) == 0) begin e_valid = 0; @(negedge clk); end
    end
    e_valid = 0;
  endtask

  task automatic check_token(int g);
    int ln = (nn[g] < N) ? nn[g] : N;
    int le = (ne[g] < E) ? ne[g] : E;
    check(out_trunc == (nn[g] > N || ne[g] > E), $sformatf("g%0d trunc", g));
    if (nn[g] > N || ne[g] > E) n_tr++;
    if (nn[g] < N || ne[g] < E) n_pad++;
    for (int i = 0; i < N; i++) begin
      check(nmask[i] == (i < ln), $sformatf("g%0d nmask %0d", g, i));
      for (int f = 0; f < NODE_F; f++)
        check(int'(node_x[i][f]) == ((i < ln) ? nf[g][i][f] : 0), $sformatf("g%0d node %0d.%0d", g, i, f));
    end
    for (int k = 0; k < E; k++) begin
      bit v = (k < le) && es[g][k] < ln && er[g][k] < ln;
      check(emask[k] == v, $sformatf("g%0d emask %0d", g, k));
      check(int'(snd[k]) == (v ? es[g][k] : 0) && int'(rcv[k]) == (v ? er[g][k] : 0), $sformatf("g%0d idx %0d", g, k));
      for (int f = 0; f < EDGE_F; f++)
        check(int'(edge_x[k][f]) == ((k < le) ? ef[g][k][f] : 0), $sformatf("g%0d edge %0d.%0d", g, k, f));
    end
  endtask

  initial begin
    for (int g = 0; g < NG; g++) begin
      nn[g] = (g == 0) ? 4 : (g == 1) ? N : (g == 2) ? 10 : 1 + $urandom_range(9);
      ne[g] = (g == 0) ? 7 : (g == 1) ? E : (g == 2) ? 12 : 1 + $urandom_range(11);
      for (int i = 0; i < nn[g]; i++) for (int f = 0; f < NODE_F; f++) nf[g][i][f] = rnd_fx(30000);
      for (int k = 0; k < ne[g]; k++) begin
        for (int f = 0; f < EDGE_F; f++) ef[g][k][f] = rnd_fx(30000);
        es[g][k] = $urandom_range(nn[g] + 1);   // sometimes beyond the last node
        er[g][k] = $urandom_range(nn[g] - 1);
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      begin
        for (int g = 0; g < NG; g++) begin
          longint t0;
          t0 = cyc;
          fork send_nodes(g, g >= 2); send_edges(g, g >= 2); join
          if (g == 0) check(cyc - t0 == 7, "gap-free graph loads in max(4,7) = 7 beats");
        end
      end
      begin
        for (int g = 0; g < NG; g++) begin
          forever begin
            out_ready = (g < 2) ? 1'b1 : ($urandom_range(1) == 0);
            if (out_valid && out_ready) break;
            @(negedge clk);
          end
          check_token(g);
          @(negedge clk);
        end
      end
    join
    check(n_tr > 0 && n_pad > 0, "padding and truncation exercised");
    $display("truncated=%0d padded=%0d", n_tr, n_pad);
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
