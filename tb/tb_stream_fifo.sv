// tb_stream_fifo: random push/pop traffic against a queue model.
// A 5-deep FIFO is driven with random valid on the input and random ready
// on the output, so that it runs both full and empty.  Every popped word is
// compared with the model; the flags are checked against the model's fill
// level every cycle, and the FIFO must have been seen full and empty.
module tb_stream_fifo;
  localparam int W = 16, DEPTH = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] q[$];

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      // phases: mostly push, mostly pop, balanced
      int ph;
      ph = (t / 300) % 3;
      in_valid  = (ph == 0) ? ($urandom_range(9) < 8) : (ph == 1) ? ($urandom_range(9) < 2) : $urandom_range(1);
      out_ready = (ph == 0) ? ($urandom_range(9) < 2) : (ph == 1) ? ($urandom_range(9) < 8) : $urandom_range(1);
      in_data   = W'($urandom);
      @(posedge clk);
      #1;
      @(negedge clk);
    end
    check(n_full > 0 && n_empty > 0, "FIFO seen full and empty");
    $display("full cycles=%0d empty cycles=%0d", n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: evaluated at the falling edge, before the rising edge that acts
  always @(negedge clk) if (rst_n) begin
    #2;
    check(in_ready == (q.size() < DEPTH), "in_ready matches fill level");
    check(out_valid == (q.size() > 0), "out_valid matches fill level");
    if (q.size() == DEPTH) n_full++;
    if (q.size() == 0) n_empty++;
    if (out_valid && out_ready) begin
      check(out_data == q[0], $sformatf("pop data %h exp %h", out_data, q[0]));
    end
    if (out_valid && out_ready) void'(q.pop_front());
    if (in_valid && in_ready) q.push_back(in_data);
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
