// bn_relu -- batch normalization followed by ReLU, BN-ReLU(K), B elements
// per cycle.
//
// For every channel i:  y_i = max(0, (x_i - mu_i) * s_i + beta_i), where
// s_i = w_i / sqrt(sigma_i^2 + eps). The paper states the layer with mean,
// standard deviation, epsilon, weight and bias; this design keeps three words
// per channel (mu_i, s_i, beta_i) and leaves the square root and division to
// the host that prepares the parameters, so the datapath is one subtraction,
// one multiplication, one addition and a clamp per lane.
//
// Each cycle one group of B consecutive channels is read from the input
// channel, computed and written (registered) to the output channel, so a
// vector takes K/B cycles plus one (LATENCY = K/B + 1 from start to commit).
// Handshake as in fc_layer: start when in_valid and out_ready, release and
// commit with the last write, `busy` from start to commit.
//
// Parameters arrive on the parameter-write bus with target TGT and kinds
// K_MU, K_S and K_BETA (row = channel). The B-way unrolling follows the paper;
// the parameter folding and the number handling (see pointnet_pkg) are this
// design's choices.
module bn_relu
  import pointnet_pkg::*;
#(
  parameter int W    = DATA_W,
  parameter int FRAC = FRAC_W,
  parameter int K    = 64,
  parameter int B    = 1,
  parameter int TGT  = 1,
  localparam int NG  = K / B,
  localparam int GAW = (NG > 1) ? $clog2(NG) : 1,
  localparam int LATENCY = NG + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  param_wr_t            pw,
  input  logic                 in_valid,
  output logic [GAW-1:0]       in_addr,
  input  logic [B-1:0][W-1:0]  in_data,
  output logic                 in_release,
  input  logic                 out_ready,
  output logic                 out_we,
  output logic [GAW-1:0]       out_addr,
  output logic [B-1:0][W-1:0]  out_data,
  output logic                 out_commit,
  output logic                 busy
);

  logic [W-1:0] mu   [K];
  logic [W-1:0] sc   [K];
  logic [W-1:0] beta [K];

  always_ff @(posedge clk) begin
    if (pw.we && pw.target == target_e'(TGT) && int'(pw.row) < K) begin
      if (pw.kind == K_MU)   mu[int'(pw.row)]   <= pw.data[W-1:0];
      if (pw.kind == K_S)    sc[int'(pw.row)]   <= pw.data[W-1:0];
      if (pw.kind == K_BETA) beta[int'(pw.row)] <= pw.data[W-1:0];
    end
  end

  logic           run;
  logic [GAW-1:0] grp;

  assign in_addr = grp;
  assign busy    = run || out_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      grp <= '0;
    end else if (!run) begin
      if (in_valid && out_ready && !out_we) begin
        run <= 1'b1;
        grp <= '0;
      end
    end else begin
      if (int'(grp) == NG - 1) run <= 1'b0;
      else                     grp <= grp + 1'b1;
    end
  end

  // one lane: (x - mu) * s >>> FRAC + beta, clamp at 0, saturate
  logic [B-1:0][W-1:0] y;
  always_comb begin
    for (int b = 0; b < B; b++) begin
      logic signed [W:0]     d;
      logic signed [2*W+1:0] p;
      logic signed [127:0]   v;
      int                    ch;
      ch = int'(grp) * B + b;
      d  = $signed({in_data[b][W-1], in_data[b]}) - $signed({mu[ch][W-1], mu[ch]});
      p  = $signed({{(W+1){d[W]}}, d}) * $signed({{(W+2){sc[ch][W-1]}}, sc[ch]});
      v  = (128'(p) >>> FRAC) + 128'($signed(beta[ch]));
      if (v < 0) y[b] = '0;
      else       y[b] = W'(sat_to(v, W));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_we   <= 1'b0;
      out_addr <= '0;
      out_data <= '0;
    end else begin
      out_we <= run;
      if (run) begin
        out_addr <= grp;
        out_data <= y;
      end
    end
  end

  assign out_commit = out_we && int'(out_addr) == NG - 1;
  assign in_release = out_commit;

endmodule
