// tb_encoder: the encoder at 6 nodes, 8 edges and reuse factor 4.  Random
// weights are written over the weight bus; random graphs (features, end
// points, masks) are sent back to back with random output back-pressure.
// The hidden node and edge vectors are compared with phi_1^v and phi_1^e
// of the reference model, and the end points and masks must pass through
// unchanged.  The latency of the first graph (the slower edge path:
// 4 + 1 + 4 cycles) is checked.
module tb_encoder;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N = 6, E = 8, NI_W = 3, RF = 4, NT = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wload_t wload = '0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  fx_t  [N-1:0][NODE_F-1:0] node_x = '0;
  fx_t  [E-1:0][EDGE_F-1:0] edge_x = '0;
  logic [E-1:0][NI_W-1:0] snd_in = '0, rcv_in = '0, snd_out, rcv_out;
  logic [N-1:0] nmask_in = '0, nmask_out;
  logic [E-1:0] emask_in = '0, emask_out;
  fx_t  [N-1:0][HID-1:0] node_h;
  fx_t  [E-1:0][HID-1:0] edge_h;

  encoder #(.N_NODES(N), .N_EDGES(E), .RF(RF), .NI_W(NI_W)) dut (.*);

  int checks = 0, failures = 0;
  int nf [NT][N][NODE_F], ef [NT][E][EDGE_F], s [NT][E], r [NT][E], nm [NT], em [NT];
  longint cyc = 0, t_in0 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic check_out(int t);
    int x[], y[];
    check(snd_out == snd_in_t(t) && rcv_out == rcv_in_t(t), $sformatf("t%0d end points", t));
    check(nmask_out == N'(nm[t]) && emask_out == E'(em[t]), $sformatf("t%0d masks", t));
    for (int i = 0; i < N; i++) begin
      x = new[NODE_F];
      for (int f = 0; f < NODE_F; f++) x[f] = nf[t][i][f];
      mlp2(0, x, y);
      for (int f = 0; f < HID; f++) check(int'(node_h[i][f]) == y[f], $sformatf("t%0d v' %0d.%0d", t, i, f));
    end
    for (int k = 0; k < E; k++) begin
      x = new[EDGE_F];
      for (int f = 0; f < EDGE_F; f++) x[f] = ef[t][k][f];
      mlp2(2, x, y);
      for (int f = 0; f < HID; f++) check(int'(edge_h[k][f]) == y[f], $sformatf("t%0d e' %0d.%0d", t, k, f));
    end
  endtask

  function automatic logic [E-1:0][NI_W-1:0] snd_in_t(int t);
    for (int k = 0; k < E; k++) snd_in_t[k] = NI_W'(s[t][k]);
  endfunction
  function automatic logic [E-1:0][NI_W-1:0] rcv_in_t(int t);
    for (int k = 0; k < E; k++) rcv_in_t[k] = NI_W'(r[t][k]);
  endfunction

  initial begin
    random_weights(300);
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < N; i++) for (int f = 0; f < NODE_F; f++) nf[t][i][f] = rnd_fx(4000);
      for (int k = 0; k < E; k++) begin
        for (int f = 0; f < EDGE_F; f++) ef[t][k][f] = rnd_fx(4000);
        s[t][k] = $urandom_range(N-1); r[t][k] = $urandom_range(N-1);
      end
      nm[t] = $urandom; em[t] = $urandom;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < WORDS_TOTAL; a++) begin
      wload = '{en: 1'b1, addr: WADDR_W'(a), data: fx_t'(wmem[a])};
      @(negedge clk);
    end
    wload = '0;
    @(negedge clk);
    fork
      begin
        for (int t = 0; t < NT; t++) begin
          in_valid = 1;
          for (int i = 0; i < N; i++) for (int f = 0; f < NODE_F; f++) node_x[i][f] = fx_t'(nf[t][i][f]);
          for (int k = 0; k < E; k++) for (int f = 0; f < EDGE_F; f++) edge_x[k][f] = fx_t'(ef[t][k][f]);
          snd_in = snd_in_t(t); rcv_in = rcv_in_t(t); nmask_in = N'(nm[t]); emask_in = E'(em[t]);
          #1; while (!in_ready) begin @(negedge clk); #1; end
          if (t == 0) t_in0 = cyc + 1;
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        for (int t = 0; t < NT; t++) begin
          forever begin
            out_ready = (t == 0) ? 1'b1 : ($urandom_range(1) == 0);
            if (out_valid && out_ready) break;
            @(negedge clk);
          end
          // edge path: layer 1 takes 4 cycles (4 inputs, 1 per cycle), hand-off
          // 1, layer 2 takes 4 (8 inputs, 2 per cycle)
          if (t == 0) check(cyc - t_in0 == 9, $sformatf("latency %0d, expected 9", cyc - t_in0));
          check_out(t);
          @(negedge clk);
        end
      end
    join
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
