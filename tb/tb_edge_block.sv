// tb_edge_block: the edge block at 6 nodes, 8 edges and the default reuse
// factor 8.  Random hidden node and edge vectors, end points and edge masks
// are sent back to back with random output back-pressure.  The messages
// e'' are compared with phi_2^e(e'_k, v'_{r_k}, v'_{s_k}) of the reference
// model, the aggregated messages with the per-receiver sums of the real
// edges, and v' and the masks must pass through.  The latency of the first
// graph, (8+1) + (8+1) + 1 cycles, is checked.
module tb_edge_block;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N = 6, E = 8, NI_W = 3, NT = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wload_t wload = '0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  fx_t  [N-1:0][HID-1:0] node_h = '0, agg_out, node_h_out;
  fx_t  [E-1:0][HID-1:0] edge_h = '0, msg_out;
  logic [E-1:0][NI_W-1:0] snd = '0, rcv = '0;
  logic [N-1:0] nmask_in = '0, nmask_out;
  logic [E-1:0] emask_in = '0, emask_out;

  edge_block #(.N_NODES(N), .N_EDGES(E), .RF(8), .NI_W(NI_W)) dut (.*);

  int checks = 0, failures = 0;
  int vh [NT][N][HID], eh [NT][E][HID], s [NT][E], r [NT][E], nm [NT], em [NT];
  longint cyc = 0, t_in0 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic check_out(int t);
    int x[], msg[E][];
    check(nmask_out == N'(nm[t]) && emask_out == E'(em[t]), $sformatf("t%0d masks", t));
    for (int k = 0; k < E; k++) begin
      x = new[3*HID];
      for (int f = 0; f < HID; f++) begin
        x[f] = eh[t][k][f]; x[HID+f] = vh[t][r[t][k]][f]; x[2*HID+f] = vh[t][s[t][k]][f];
      end
      mlp2(4, x, msg[k]);
      for (int f = 0; f < HID; f++) check(int'(msg_out[k][f]) == msg[k][f], $sformatf("t%0d e'' %0d.%0d", t, k, f));
    end
    for (int i = 0; i < N; i++)
      for (int f = 0; f < HID; f++) begin
        longint a;
        a = 0;
        for (int k = 0; k < E; k++) if (em[t][k] && r[t][k] == i) a += msg[k][f];
        check(int'(agg_out[i][f]) == clamp16(a), $sformatf("t%0d agg %0d.%0d", t, i, f));
        check(int'(node_h_out[i][f]) == vh[t][i][f], $sformatf("t%0d v' pass %0d.%0d", t, i, f));
      end
  endtask

  initial begin
    random_weights(300);
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < N; i++) for (int f = 0; f < HID; f++) vh[t][i][f] = $urandom_range(3000);
      for (int k = 0; k < E; k++) begin
        for (int f = 0; f < HID; f++) eh[t][k][f] = $urandom_range(3000);
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
          for (int i = 0; i < N; i++) for (int f = 0; f < HID; f++) node_h[i][f] = fx_t'(vh[t][i][f]);
          for (int k = 0; k < E; k++) begin
            for (int f = 0; f < HID; f++) edge_h[k][f] = fx_t'(eh[t][k][f]);
            snd[k] = NI_W'(s[t][k]); rcv[k] = NI_W'(r[t][k]);
          end
          nmask_in = N'(nm[t]); emask_in = E'(em[t]);
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
          if (t == 0) check(cyc - t_in0 == 18, $sformatf("latency %0d, expected 18", cyc - t_in0));
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
