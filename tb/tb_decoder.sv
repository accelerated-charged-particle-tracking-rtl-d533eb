// tb_decoder: the decoder at 8 edges and the default reuse factor 8.
// Random messages are sent back to back with random output back-pressure;
// each edge score is compared with phi_3 (three ReLU layers and a sigmoid
// layer) of the reference model, must lie in [0, 1], and the side data must
// pass through.  The latency of the first graph, 4 x 8 + 3 hand-offs = 35
// cycles, and the spacing of back-to-back results without back-pressure
// (8 cycles, the initiation interval set by the reuse factor) are checked.
module tb_decoder;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int E = 8, NT = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wload_t wload = '0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  fx_t  [E-1:0][HID-1:0] msg = '0;
  fx_t  [E-1:0] score;
  logic [15:0] pass_in = '0, pass_out;

  decoder #(.N_EDGES(E), .RF(8), .PASS_W(16)) dut (.*);

  int checks = 0, failures = 0;
  int m [NT][E][HID];
  longint cyc = 0, t_in0 = 0, t_out [NT];
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    random_weights(600);
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < E; k++)
        for (int f = 0; f < HID; f++) m[t][k][f] = $urandom_range(4000);
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
          in_valid = 1; pass_in = 16'(t + 5);
          for (int k = 0; k < E; k++) for (int f = 0; f < HID; f++) msg[k][f] = fx_t'(m[t][k][f]);
          #1; while (!in_ready) begin @(negedge clk); #1; end
          if (t == 0) t_in0 = cyc + 1;
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        for (int t = 0; t < NT; t++) begin
          forever begin
            out_ready = (t < 6) ? 1'b1 : ($urandom_range(1) == 0);
            if (out_valid && out_ready) break;
            @(negedge clk);
          end
          t_out[t] = cyc;
          if (t == 0) check(cyc - t_in0 == 35, $sformatf("latency %0d, expected 35", cyc - t_in0));
          check(pass_out == 16'(t + 5), "side data");
          for (int k = 0; k < E; k++) begin
            int x[], y;
            x = new[HID];
            for (int f = 0; f < HID; f++) x[f] = m[t][k][f];
            decode(x, y);
            check(int'(score[k]) == y, $sformatf("t%0d score %0d got %0d exp %0d", t, k, int'(score[k]), y));
            check(int'(score[k]) >= 0 && int'(score[k]) <= 1024, "score within [0, 1]");
          end
          @(negedge clk);
        end
      end
    join
    for (int t = 1; t < 6; t++) check(t_out[t] - t_out[t-1] == 8, $sformatf("II %0d, expected 8", t_out[t] - t_out[t-1]));
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
