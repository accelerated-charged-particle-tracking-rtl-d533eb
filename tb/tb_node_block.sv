// tb_node_block: the node block at 6 nodes and reuse factor 2.  Random
// aggregated messages and hidden node vectors are sent back to back with
// random output back-pressure; v'' is compared with phi_2^v(ebar'', v') of
// the reference model and the side data must pass through.  The latency of
// the first graph is checked: with reuse factor 2 the first layer takes
// 16 inputs 8 at a time (2 cycles), the second 8 inputs 4 at a time
// (2 cycles), plus one hand-off: 5 cycles.
module tb_node_block;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N = 6, RF = 2, NT = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wload_t wload = '0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  fx_t  [N-1:0][HID-1:0] agg = '0, node_h = '0, node_out;
  logic [15:0] pass_in = '0, pass_out;

  node_block #(.N_NODES(N), .RF(RF), .PASS_W(16)) dut (.*);

  int checks = 0, failures = 0;
  int ag [NT][N][HID], vh [NT][N][HID];
  longint cyc = 0, t_in0 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic check_out(int t);
    int x[], y[];
    check(pass_out == 16'(t * 77), $sformatf("t%0d side", t));
    for (int i = 0; i < N; i++) begin
      x = new[2*HID];
      for (int f = 0; f < HID; f++) begin x[f] = ag[t][i][f]; x[HID+f] = vh[t][i][f]; end
      mlp2(6, x, y);
      for (int f = 0; f < HID; f++) check(int'(node_out[i][f]) == y[f], $sformatf("t%0d v'' %0d.%0d", t, i, f));
    end
  endtask

  initial begin
    random_weights(300);
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < N; i++)
        for (int f = 0; f < HID; f++) begin ag[t][i][f] = rnd_fx(6000); vh[t][i][f] = $urandom_range(3000); end
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
          in_valid = 1; pass_in = 16'(t * 77);
          for (int i = 0; i < N; i++) for (int f = 0; f < HID; f++) begin
            agg[i][f] = fx_t'(ag[t][i][f]); node_h[i][f] = fx_t'(vh[t][i][f]);
          end
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
          if (t == 0) check(cyc - t_in0 == 5, $sformatf("latency %0d, expected 5", cyc - t_in0));
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
