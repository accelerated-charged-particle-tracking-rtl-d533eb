// dense_layer: one fully connected layer, y = act(W x + b), applied to
// N_ITEMS input vectors (all nodes or all edges of a graph) at once.
//
// The same weights are shared by every item, and every item has its own
// multipliers: the loop over items is fully unrolled.  The loop over inputs
// is folded by the reuse factor RF: each multiplier is used up to RF times,
// so a layer needs N_ITEMS * N_OUT * CH multipliers, CH = ceil(N_IN/RF), and
// takes NCYC = ceil(N_IN/CH) <= RF cycles per graph.  This gives the
// layer-level pipelining with initiation interval II = NCYC that the reuse
// factor controls; the exact way inputs are grouped onto multipliers is this
// design's choice.
//
// Arithmetic: full-precision products are summed in an ACC_W-bit
// accumulator, the bias is added, the sum is floored to FX_F fractional bits,
// saturated to <16,6> and passed through the activation (none, ReLU or the
// sigmoid of sigmoid_plan).
//
// Interface: valid/ready handshake on both sides.  A token is the whole set
// of item vectors plus SIDE_W bits of side data that travel unchanged with
// it (graph data that later stages need).  A token taken at clock edge t
// is registered, accumulated over NCYC cycles and offered from edge t+NCYC
// on; the consumer takes it at edge t+NCYC+1 at the earliest, so each layer
// adds NCYC+1 cycles to the path.  A new token can be taken at the edge where
// the previous one finishes, so back-to-back tokens are NCYC cycles apart.  When the output register is still full, the layer holds its last
// step (a stall) until the consumer takes the output.
// Weights and biases are registers written through the weight-load bus at
// addresses BASE.. (see gnn_pkg); they reset to zero.
// Lint notes: at full size the reset of the wide input register is a
// replication of more than 8192 bits, which lint flags as suspect although
// it is intended; rst_n is used both as the asynchronous reset and in the
// handshake assertion's disable condition, which lint also reports.
module dense_layer
  import gnn_pkg::*;
#(
  parameter int   N_ITEMS = 37,
  parameter int   N_IN    = 8,
  parameter int   N_OUT   = 8,
  parameter int   RF      = 8,
  parameter act_e ACT     = ACT_RELU,
  parameter int   SIDE_W  = 1,
  parameter int   BASE    = 0
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  wload_t                            wload,
  input  logic                              in_valid,
  output logic                              in_ready,
  input  fx_t   [N_ITEMS-1:0][N_IN-1:0]     in_data,
  input  logic  [SIDE_W-1:0]                in_side,
  output logic                              out_valid,
  input  logic                              out_ready,
  output fx_t   [N_ITEMS-1:0][N_OUT-1:0]    out_data,
  output logic  [SIDE_W-1:0]                out_side
);
  localparam int CH    = (N_IN + RF - 1) / RF;       // multipliers per output
  localparam int NCYC  = (N_IN + CH - 1) / CH;       // cycles per token
  localparam int NPAD  = NCYC * CH;                  // inputs padded to NCYC*CH
  localparam int CYC_W = (NCYC > 1) ? $clog2(NCYC) : 1;
  localparam int ACC_W = 2 * FX_W + $clog2(NPAD + 1) + 2;
  localparam int NW    = N_OUT * N_IN;

  // ---------------- weight registers ----------------
  fx_t [N_OUT-1:0][NPAD-1:0] w_mem;
  fx_t [N_OUT-1:0]           b_mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_mem <= '0;
      b_mem <= '0;
    end else if (wload.en && (int'(wload.addr) >= BASE) && (int'(wload.addr) < BASE + NW + N_OUT)) begin
      if (int'(wload.addr) - BASE < NW)
        w_mem[(int'(wload.addr) - BASE) / N_IN][(int'(wload.addr) - BASE) % N_IN] <= wload.data;
      else
        b_mem[int'(wload.addr) - BASE - NW] <= wload.data;
    end
  end

  // ---------------- control ----------------
  logic             busy;
  logic [CYC_W-1:0] cyc;
  logic             last, can_out, fire_last, accept;

  assign last      = (int'(cyc) == NCYC - 1);
  assign can_out   = !out_valid || out_ready;
  assign fire_last = busy && last && can_out;
  assign in_ready  = !busy || fire_last;
  assign accept    = in_valid && in_ready;

  // ---------------- datapath ----------------
  fx_t [N_ITEMS-1:0][NPAD-1:0]      in_reg;
  logic [SIDE_W-1:0]                side_reg;
  logic signed [ACC_W-1:0]          acc     [N_ITEMS][N_OUT];
  logic signed [ACC_W-1:0]          partial [N_ITEMS][N_OUT];
  fx_t [N_ITEMS-1:0][N_OUT-1:0]     lin;    // saturated W x + b
  fx_t [N_ITEMS-1:0][N_OUT-1:0]     result; // after activation

  always_comb begin
    for (int it = 0; it < N_ITEMS; it++) begin
      for (int o = 0; o < N_OUT; o++) begin
        logic signed [ACC_W-1:0] tot;
        partial[it][o] = '0;
        for (int j = 0; j < CH; j++) begin
          partial[it][o] += ACC_W'($signed(in_reg[it][int'(cyc) * CH + j]) *
                                   $signed(w_mem[o][int'(cyc) * CH + j]));
        end
        tot = acc[it][o] + partial[it][o] + (ACC_W'($signed(b_mem[o])) <<< FX_F);
        lin[it][o] = sat_fx(64'(tot >>> FX_F));
      end
    end
  end

  for (genvar it = 0; it < N_ITEMS; it++) begin : g_item
    for (genvar o = 0; o < N_OUT; o++) begin : g_out
      if (ACT == ACT_SIGMOID) begin : g_sig
        sigmoid_plan u_sig (.x(lin[it][o]), .y(result[it][o]));
      end else if (ACT == ACT_RELU) begin : g_relu
        assign result[it][o] = relu_fx(lin[it][o]);
      end else begin : g_lin
        assign result[it][o] = lin[it][o];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cyc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_side  <= '0;
      in_reg    <= '0;
      side_reg  <= '0;
      for (int it = 0; it < N_ITEMS; it++)
        for (int o = 0; o < N_OUT; o++) acc[it][o] <= '0;
    end else begin
      if (fire_last) begin
        out_data  <= result;
        out_side  <= side_reg;
        out_valid <= 1'b1;
      end else if (out_valid && out_ready) begin
        out_valid <= 1'b0;
      end

      if (accept) begin
        for (int it = 0; it < N_ITEMS; it++)
          in_reg[it] <= (NPAD*FX_W)'(in_data[it]);  // pad inputs read as zero
        side_reg <= in_side;
        busy     <= 1'b1;
        cyc      <= '0;
        for (int it = 0; it < N_ITEMS; it++)
          for (int o = 0; o < N_OUT; o++) acc[it][o] <= '0;
      end else if (fire_last) begin
        busy <= 1'b0;
      end else if (busy && !last) begin
        cyc <= cyc + 1'b1;
        for (int it = 0; it < N_ITEMS; it++)
          for (int o = 0; o < N_OUT; o++) acc[it][o] <= acc[it][o] + partial[it][o];
      end
    end
  end

  // Handshake rule: an offered output stays offered, unchanged, until taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                  out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_side));

endmodule
