// adder_tree -- pipelined binary adder tree used by the FC module to sum the
// B products of one unrolled chunk.
//
// N signed operands of IW bits are summed in LEVELS = ceil(log2 N) levels of
// pairwise additions, with one register after each level, so the sum appears
// LEVELS cycles after the operands (0 cycles, i.e. a plain wire, when N = 1).
// A new set of operands can enter every cycle. A valid bit travels alongside.
// The result is OW = IW + LEVELS bits wide, so no sum can overflow.
//
// The adder tree and its log B depth follow the paper; a register per level
// is this design's choice.
module adder_tree #(
  parameter int N  = 128,
  parameter int IW = 64,
  localparam int LEVELS = (N > 1) ? $clog2(N) : 0,
  localparam int OW = IW + LEVELS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [N-1:0][IW-1:0]        in_data,
  output logic                        out_valid,
  output logic signed [OW-1:0]        out_sum
);

  localparam int NP = 1 << LEVELS;   // operands padded to a power of two

  // g_lvl[k].s holds the NP >> k partial sums after level k (k = 0: operands)
  for (genvar k = 0; k <= LEVELS; k++) begin : g_lvl
    logic [(NP >> k)-1:0][OW-1:0] s;
    logic                         v;
    if (k == 0) begin : g_in
      always_comb begin
        for (int i = 0; i < NP; i++)
          s[i] = (i < N) ? OW'($signed(in_data[i])) : '0;
      end
      assign v = in_valid;
    end else begin : g_add
      always_ff @(posedge clk) begin
        for (int i = 0; i < (NP >> k); i++)
          s[i] <= $signed(g_lvl[k-1].s[2*i]) + $signed(g_lvl[k-1].s[2*i+1]);
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) v <= 1'b0;
        else        v <= g_lvl[k-1].v;
      end
    end
  end

  assign out_sum   = $signed(g_lvl[LEVELS].s[0]);
  assign out_valid = g_lvl[LEVELS].v;

endmodule
