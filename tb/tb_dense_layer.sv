// tb_dense_layer: two dense layers checked against the reference model.
//   u_a: 3 items, 5 inputs, 4 outputs, reuse factor 2 (3 multipliers per
//        output, 2 cycles per token), ReLU.
//   u_b: 2 items, 8 inputs, 1 output, reuse factor 8 (8 cycles), sigmoid.
// Weights are written through the weight bus (u_b at a non-zero base).
// Tokens are sent back to back, with random output back-pressure; every
// output value and the side data are compared with the reference.  The
// isolated-token latency (NCYC cycles to the offering edge) and the
// back-to-back token spacing (NCYC cycles) are checked, and stalls under
// back-pressure must occur.
module tb_dense_layer;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int NA = 3, IA = 5, OA = 4, RA = 2, BA = 0;
  localparam int NB = 2, IB = 8, OB = 1, RB = 8, BB = 100;
  localparam int NT = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wload_t wload = '0;

  logic a_iv = 0, a_ir, a_ov, a_or = 0;
  fx_t [NA-1:0][IA-1:0] a_in = '0;
  fx_t [NA-1:0][OA-1:0] a_out;
  logic [7:0] a_si = '0, a_so;
  logic b_iv = 0, b_ir, b_ov, b_or = 0;
  fx_t [NB-1:0][IB-1:0] b_in = '0;
  fx_t [NB-1:0][OB-1:0] b_out;
  logic [7:0] b_si = '0, b_so;

  dense_layer #(.N_ITEMS(NA), .N_IN(IA), .N_OUT(OA), .RF(RA), .ACT(ACT_RELU), .SIDE_W(8), .BASE(BA)) u_a (
    .clk, .rst_n, .wload, .in_valid(a_iv), .in_ready(a_ir), .in_data(a_in), .in_side(a_si),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_out), .out_side(a_so));
  dense_layer #(.N_ITEMS(NB), .N_IN(IB), .N_OUT(OB), .RF(RB), .ACT(ACT_SIGMOID), .SIDE_W(8), .BASE(BB)) u_b (
    .clk, .rst_n, .wload, .in_valid(b_iv), .in_ready(b_ir), .in_data(b_in), .in_side(b_si),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_out), .out_side(b_so));

  int checks = 0, failures = 0;
  int ax [NT][NA][IA];
  int bx [NT][NB][IB];
  longint cyc = 0;
  int a_take [NT];
  int a_stall = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int sx(fx_t v);
    return int'(v);
  endfunction

  always @(negedge clk) if (a_ov && !a_or) a_stall++;

  initial begin
    random_weights(400);
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < NA; i++) for (int j = 0; j < IA; j++) ax[t][i][j] = rnd_fx(4000);
      for (int i = 0; i < NB; i++) for (int j = 0; j < IB; j++) bx[t][i][j] = rnd_fx(4000);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 200; a++) begin
      wload = '{en: 1'b1, addr: WADDR_W'(a), data: fx_t'(wmem[a])};
      @(negedge clk);
    end
    wload = '0;
    @(negedge clk);
    fork
      // ---- layer A: sender
      begin
        for (int t = 0; t < NT; t++) begin
          a_iv = 1; a_si = 8'(t);
          for (int i = 0; i < NA; i++) for (int j = 0; j < IA; j++) a_in[i][j] = fx_t'(ax[t][i][j]);
          #1;  // ready follows the receiver's out_ready, set at the same edge
          while (!a_ir) begin @(negedge clk); #1; end
          a_take[t] = int'(cyc) + 1;
          @(negedge clk);
        end
        a_iv = 0;
      end
      // ---- layer A: receiver (no back-pressure for the first 10 tokens)
      begin
        for (int t = 0; t < NT; t++) begin
          forever begin
            a_or = (t < 10) ? 1'b1 : ($urandom_range(2) == 0);
            if (a_ov && a_or) break;
            @(negedge clk);
          end
          check(a_so == 8'(t), $sformatf("A side %0d", t));
          for (int i = 0; i < NA; i++) begin
            int x[], y[];
            x = new[IA];
            for (int j = 0; j < IA; j++) x[j] = ax[t][i][j];
            dense(x, IA, OA, BA, 1, y);
            for (int o = 0; o < OA; o++)
              check(sx(a_out[i][o]) == y[o], $sformatf("A t%0d i%0d o%0d got %0d exp %0d", t, i, o, sx(a_out[i][o]), y[o]));
          end
          if (t == 0) check(int'(cyc) == a_take[0] + 2, "A: latency of 2 cycles");
          @(negedge clk);
        end
      end
      // ---- layer B: one token at a time
      begin
        for (int t = 0; t < NT; t++) begin
          int t0;
          b_iv = 1; b_si = 8'(t + 100);
          for (int i = 0; i < NB; i++) for (int j = 0; j < IB; j++) b_in[i][j] = fx_t'(bx[t][i][j]);
          #1;
          while (!b_ir) begin @(negedge clk); #1; end
          t0 = int'(cyc) + 1;
          @(negedge clk);
          b_iv = 0;
          b_or = 1;
          while (!b_ov) @(negedge clk);
          check(int'(cyc) == t0 + 8, "B: latency of 8 cycles");
          check(b_so == 8'(t + 100), "B side");
          for (int i = 0; i < NB; i++) begin
            int x[], y[];
            x = new[IB];
            for (int j = 0; j < IB; j++) x[j] = bx[t][i][j];
            dense(x, IB, OB, BB, 2, y);
            check(sx(b_out[i][0]) == y[0], $sformatf("B t%0d i%0d got %0d exp %0d", t, i, sx(b_out[i][0]), y[0]));
          end
          @(negedge clk);
        end
      end
    join
    // back-to-back tokens 1..9 (no back-pressure) are taken 2 cycles apart
    for (int t = 1; t < 10; t++) check(a_take[t] - a_take[t-1] == 2, $sformatf("A: II of 2 at token %0d", t));
    check(a_stall > 0, "A: stalled under back-pressure");
    $display("A stall cycles=%0d", a_stall);
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
