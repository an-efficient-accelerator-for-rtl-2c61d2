// fc_layer -- fully-connected layer FC(K, L): y = W x + b, with the inner
// (K) loop unrolled by B.
//
// Work per input vector: for each output i (L of them) the K inputs are taken
// in NCH = ceil(K/B) chunks of B. Each cycle one chunk is issued: B weights are
// read from the weight memory (one memory word holds the B weights of a chunk,
// which is the array partitioning that gives B reads per cycle) together with
// the B matching inputs from the input buffer, B multipliers form the products,
// an adder tree of log2(B) levels sums them and an accumulator adds the chunk
// sums of a row. After the last chunk of row i the bias is added and y_i is
// written to the output buffer. The loop is fully pipelined, so one vector
// takes L*NCH issue cycles plus a fill of LEVELS+3 cycles
// (LATENCY = L*NCH + LEVELS + 3 from start to commit).
//
// Handshake: a vector is started when the input channel holds a full bank
// (in_valid) and the output channel has a free bank (out_ready). The input
// bank is released and the output bank committed in the cycle of the last
// write. `busy` is high from start to commit.
//
// Parameters are loaded through the shared parameter-write bus `pw`: a word
// whose target equals TGT is stored as weight W[row][col] (kind K_W) or bias
// b[row] (kind K_B). Weight order and the write bus are this design's choice.
//
// Number format: see pointnet_pkg (full-precision products and sums, shift
// by FRAC, saturation). The unrolling by B, the adder tree, the array
// partitioning and the pipelined inner loop follow the paper.
module fc_layer
  import pointnet_pkg::*;
#(
  parameter int W    = DATA_W,
  parameter int FRAC = FRAC_W,
  parameter int K    = 64,
  parameter int L    = 64,
  parameter int B    = 16,
  parameter int TGT  = 2,
  localparam int NCH    = (K + B - 1) / B,
  localparam int LEVELS = (B > 1) ? $clog2(B) : 0,
  localparam int IAW    = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int OAW    = (L > 1) ? $clog2(L) : 1,
  localparam int LATENCY = L * NCH + LEVELS + 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  param_wr_t            pw,
  // input channel (read side)
  input  logic                 in_valid,
  output logic [IAW-1:0]       in_addr,
  input  logic [B-1:0][W-1:0]  in_data,
  output logic                 in_release,
  // output channel (write side)
  input  logic                 out_ready,
  output logic                 out_we,
  output logic [OAW-1:0]       out_addr,
  output logic [0:0][W-1:0]    out_data,
  output logic                 out_commit,
  output logic                 busy
);

  localparam int PW  = 2 * W;                 // product width
  localparam int SW  = PW + LEVELS;           // chunk sum width
  localparam int AW  = SW + $clog2(NCH + 1);  // accumulator width
  localparam int MAW = (L * NCH > 1) ? $clog2(L * NCH) : 1;
  localparam int D   = LEVELS + 2;            // issue -> chunk sum

  // ---------------------------------------------------------------- memories
  logic [B-1:0][W-1:0] wmem [L * NCH];
  logic [W-1:0]        bmem [L];

  always_ff @(posedge clk) begin
    if (pw.we && pw.target == target_e'(TGT)) begin
      if (pw.kind == K_W && int'(pw.row) < L && int'(pw.col) < K)
        wmem[int'(pw.row) * NCH + int'(pw.col) / B][int'(pw.col) % B] <= pw.data[W-1:0];
      if (pw.kind == K_B && int'(pw.row) < L)
        bmem[int'(pw.row)] <= pw.data[W-1:0];
    end
  end

  // ---------------------------------------------------------------- control
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;
  logic [OAW-1:0] row;
  logic [IAW-1:0] chunk;
  logic           issue;

  assign issue   = (state == S_RUN);
  assign in_addr = chunk;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      row   <= '0;
      chunk <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid && out_ready) begin
          state <= S_RUN;
          row   <= '0;
          chunk <= '0;
        end
        S_RUN: begin
          if (int'(chunk) == NCH - 1) begin
            chunk <= '0;
            if (int'(row) == L - 1) state <= S_DRAIN;
            else                    row   <= row + 1'b1;
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
        S_DRAIN: if (out_commit) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- datapath
  // stage 1: weight word and input chunk registered
  logic [B-1:0][W-1:0]  wq, xq;
  logic [MAW-1:0]       raddr;
  assign raddr = MAW'(int'(row) * NCH + int'(chunk));

  always_ff @(posedge clk) begin
    wq <= wmem[raddr];
    xq <= in_data;
  end

  // stage 2: B products
  logic [B-1:0][PW-1:0] pq;
  logic                 pq_valid;
  always_ff @(posedge clk) begin
    for (int b = 0; b < B; b++)
      pq[b] <= PW'($signed({{W{xq[b][W-1]}}, xq[b]}) * $signed({{W{wq[b][W-1]}}, wq[b]}));
  end

  // tag pipeline: valid, first chunk, last chunk, row index
  logic [D-1:0]   t_valid, t_first, t_last;
  logic [D-1:0][OAW-1:0] t_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_valid <= '0;
      t_first <= '0;
      t_last  <= '0;
      t_row   <= '0;
    end else begin
      t_valid <= {t_valid[D-2:0], issue};
      t_first <= {t_first[D-2:0], chunk == '0};
      t_last  <= {t_last[D-2:0], int'(chunk) == NCH - 1};
      t_row   <= {t_row[D-2:0], row};
    end
  end
  assign pq_valid = t_valid[1];

  // stages 3..: adder tree
  logic signed [SW-1:0] csum;
  logic                 csum_valid;
  adder_tree #(.N(B), .IW(PW)) u_tree (
    .clk, .rst_n,
    .in_valid(pq_valid), .in_data(pq),
    .out_valid(csum_valid), .out_sum(csum)
  );

  // accumulate, add bias, shift, saturate, write
  logic signed [AW-1:0]  acc, acc_n;
  logic signed [127:0]   yfull;
  logic                  row_done;
  logic [OAW-1:0]        crow;

  assign crow     = t_row[D-1];
  assign acc_n    = t_first[D-1] ? AW'(csum) : acc + AW'(csum);
  assign row_done = csum_valid && t_last[D-1];
  assign yfull    = (128'($signed(acc_n)) >>> FRAC) + 128'($signed(bmem[crow]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      out_we   <= 1'b0;
      out_addr <= '0;
      out_data <= '0;
    end else begin
      if (csum_valid) acc <= acc_n;
      out_we <= row_done;
      if (row_done) begin
        out_addr    <= crow;
        out_data[0] <= W'(sat_to(yfull, W));
      end
    end
  end

  assign out_commit = out_we && int'(out_addr) == L - 1;
  assign in_release = out_commit;

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 (state == S_IDLE && in_valid && out_ready) |=> busy);

endmodule
