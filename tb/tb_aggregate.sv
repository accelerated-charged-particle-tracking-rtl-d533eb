// tb_aggregate: random messages, receivers and edge masks into an
// aggregation stage of 5 nodes and 9 edges; each node's sums are compared
// with sums formed in the testbench, including sums large enough to
// saturate.  Tokens are sent back to back with random back-pressure; the
// one-cycle latency and the side data are checked.
module tb_aggregate;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int N = 5, E = 9, NI_W = 3, NT = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  fx_t  [E-1:0][HID-1:0] msg = '0;
  logic [E-1:0][NI_W-1:0] rcv = '0;
  logic [E-1:0] emask = '0;
  logic [7:0] pass_in = '0, pass_out;
  fx_t  [N-1:0][HID-1:0] agg;

  aggregate #(.N_NODES(N), .N_EDGES(E), .NI_W(NI_W), .PASS_W(8)) dut (.*);

  int checks = 0, failures = 0, n_sat = 0;
  int m [NT][E][HID], r [NT][E];
  bit v [NT][E];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < E; k++) begin
        r[t][k] = $urandom_range(N - 1);
        v[t][k] = ($urandom_range(4) != 0);
        for (int f = 0; f < HID; f++) m[t][k][f] = (t % 4 == 3) ? 20000 + $urandom_range(12000) : rnd_fx(8000);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      begin
        for (int t = 0; t < NT; t++) begin
          longint t0;
          in_valid = 1; pass_in = 8'(t);
          for (int k = 0; k < E; k++) begin
            rcv[k] = NI_W'(r[t][k]); emask[k] = v[t][k];
            for (int f = 0; f < HID; f++) msg[k][f] = fx_t'(m[t][k][f]);
          end
          #1; while (!in_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        for (int t = 0; t < NT; t++) begin
          forever begin
            out_ready = (t < 5) ? 1'b1 : ($urandom_range(1) == 0);
            if (out_valid && out_ready) break;
            @(negedge clk);
          end
          if (t == 0) check(cyc == 4, "one-cycle latency");
          check(pass_out == 8'(t), "side data");
          for (int i = 0; i < N; i++)
            for (int f = 0; f < HID; f++) begin
              longint s;
              s = 0;
              for (int k = 0; k < E; k++) if (v[t][k] && r[t][k] == i) s += m[t][k][f];
              if (s > 32767) n_sat++;
              check(int'(agg[i][f]) == clamp16(s), $sformatf("t%0d node %0d f%0d got %0d exp %0d", t, i, f, int'(agg[i][f]), clamp16(s)));
            end
          @(negedge clk);
        end
      end
    join
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
