// aggregate: the edge-to-node aggregation rho^{e->v} of the interaction
// network.  For every node i it sums the messages e''_k of all real edges
// whose receiver is i:
//     ebar''_i = sum over k with rcv_k == i and emask_k of e''_k
// Summation (rather than mean or max) and aggregation at the receiving node
// are this design's choices.  The sums of N_EDGES terms are formed exactly in
// a wider adder tree and saturated to <16,6>.
//
// One register stage with a valid/ready handshake: a token accepted in cycle
// t is offered in cycle t+1; a token can be accepted every cycle as long as
// the consumer keeps up.  PASS_W bits of side data travel with the token.
// At full size the reset of the wide side-data register is a replication
// of more than 8192 bits, which lint flags as suspect; it is intended.
module aggregate
  import gnn_pkg::*;
#(
  parameter int N_NODES = 28,
  parameter int N_EDGES = 37,
  parameter int NI_W    = $clog2(N_NODES),
  parameter int PASS_W  = 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  fx_t  [N_EDGES-1:0][HID-1:0]   msg,
  input  logic [N_EDGES-1:0][NI_W-1:0]  rcv,
  input  logic [N_EDGES-1:0]            emask,
  input  logic [PASS_W-1:0]             pass_in,
  output logic                          out_valid,
  input  logic                          out_ready,
  output fx_t  [N_NODES-1:0][HID-1:0]   agg,
  output logic [PASS_W-1:0]             pass_out
);
  localparam int SUM_W = FX_W + $clog2(N_EDGES + 1) + 1;

  fx_t [N_NODES-1:0][HID-1:0] agg_next;
  logic signed [SUM_W-1:0]    sum [N_NODES][HID];

  always_comb begin
    for (int i = 0; i < N_NODES; i++) begin
      for (int f = 0; f < HID; f++) begin
        sum[i][f] = '0;
        for (int k = 0; k < N_EDGES; k++)
          if (emask[k] && (int'(rcv[k]) == i)) sum[i][f] = sum[i][f] + SUM_W'($signed(msg[k][f]));
        agg_next[i][f] = sat_fx(64'(sum[i][f]));
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      agg       <= '0;
      pass_out  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        agg      <= agg_next;
        pass_out <= pass_in;
      end
    end
  end
endmodule
