// stream_fifo: synchronous first-word-fall-through FIFO for one input stream.
//
// Every model input (node features, edge features and edge end points)
// arrives as a stream and is queued in a FIFO before the graph loader
// collects it into the graph buffer.  DEPTH words of W bits are held in a
// register array addressed by read and write pointers with a separate fill
// count.  Valid/ready on both sides; push and pop may happen in the same
// cycle.  in_ready is low when full, out_valid low when empty; the head word
// is on out_data whenever out_valid is high (no read latency).
// The depth default of one graph's worth of edges is this design's choice.
module stream_fifo #(
  parameter int W     = 64,
  parameter int DEPTH = 37
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]      mem [DEPTH];
  logic [PW-1:0]     wr_ptr, rd_ptr;
  logic [PW:0]       count;
  logic              push, pop;

  assign in_ready  = (int'(count) < DEPTH);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) int'(count) <= DEPTH);
endmodule
