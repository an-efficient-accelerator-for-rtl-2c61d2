// stream_ctrl -- mode controller and stream front end of the PointNet core.
//
// A run is started by `start` with `mode` and `num_points` taken from the
// control registers; `busy` is high during the run and `done` pulses at its end.
//
// Weight initialization (MODE_INIT): every 32-bit beat of the input stream is
// one model parameter. Beats are decoded by counters into the parameter-write
// bus `pw` in this fixed order: FC1 W[64][3] row-major, FC1 b[64], BN1 mu[64],
// s[64], beta[64], then FC2/BN2, FC3/BN3, FC4/BN4, FC5/BN5 the same way
// (153 024 words in all at the default sizes). After the last word the core
// sends one output beat INIT_ACK (nonzero) with TLAST.
//
// Feature extraction (MODE_EXTRACT): phi in the MaxPool module is cleared to
// zero, then num_points points are read as three beats x, y, z each and
// written into the first pipeline channel (the input stream is held off with
// TREADY low while that channel has no free bank). When MaxPool has merged the
// last point, the 1024 words of phi are sent on the output stream, TLAST on
// the last one. The number of points is not limited by the hardware.
//
// The two modes, the acknowledgement and the zero start of phi follow the
// paper. The parameter order, the acknowledgement value, the register-driven
// point count and the beat layout are this design's choices.
module stream_ctrl
  import pointnet_pkg::*;
#(
  parameter int W  = DATA_W,
  parameter int KF = D5,                      // global feature length
  localparam int KAW = $clog2(KF)
) (
  input  logic            clk,
  input  logic            rst_n,
  // control
  input  logic            start,
  input  mode_e           mode,
  input  logic [31:0]     num_points,
  output logic            busy,
  output logic            done,
  // AXI4-Stream in
  input  logic [31:0]     s_axis_tdata,
  input  logic            s_axis_tvalid,
  output logic            s_axis_tready,
  input  logic            s_axis_tlast,
  // AXI4-Stream out
  output logic [31:0]     m_axis_tdata,
  output logic            m_axis_tvalid,
  input  logic            m_axis_tready,
  output logic            m_axis_tlast,
  // parameter-write bus
  output param_wr_t       pw,
  // first pipeline channel (point coordinates)
  input  logic            pt_wr_ready,
  output logic            pt_wr_en,
  output logic [1:0]      pt_wr_addr,
  output logic [W-1:0]    pt_wr_data,
  output logic            pt_wr_commit,
  // MaxPool
  output logic            mp_clear,
  input  logic            mp_point_done,
  output logic [KAW-1:0]  mp_rd_addr,
  input  logic [W-1:0]    mp_rd_data
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ACK, S_CLEAR, S_FEED, S_WAIT, S_SEND, S_FIN} state_e;
  state_e state;

  // ----------------------------------------------------- parameter geometry
  function automatic int t_in(input int t);   // input width of layer t/2
    case (t / 2)
      0: return D0; 1: return D1; 2: return D2; 3: return D3; default: return D4;
    endcase
  endfunction
  function automatic int t_out(input int t);  // output width of layer t/2
    case (t / 2)
      0: return D1; 1: return D2; 2: return D3; 3: return D4; default: return D5;
    endcase
  endfunction
  function automatic int n_kinds(input int t);
    return (t % 2 == 0) ? 2 : 3;
  endfunction
  function automatic int n_cols(input int t, input int k);
    return (t % 2 == 0 && k == 0) ? t_in(t) : 1;
  endfunction

  logic [3:0]  c_tgt;
  logic [1:0]  c_kind;
  logic [10:0] c_row, c_col;
  logic        c_last_col, c_last_row, c_last_kind, c_last_tgt;

  assign c_last_col  = int'(c_col) == n_cols(int'(c_tgt), int'(c_kind)) - 1;
  assign c_last_row  = int'(c_row) == t_out(int'(c_tgt)) - 1;
  assign c_last_kind = int'(c_kind) == n_kinds(int'(c_tgt)) - 1;
  assign c_last_tgt  = int'(c_tgt) == NUM_TARGETS - 1;

  // ----------------------------------------------------- feature extraction
  logic [31:0]    n_pts, fed, merged;
  logic [1:0]     coord;
  logic [KAW-1:0] oidx;

  logic s_fire, m_fire;
  assign s_fire = s_axis_tvalid && s_axis_tready;
  assign m_fire = m_axis_tvalid && m_axis_tready;

  always_comb begin
    s_axis_tready = 1'b0;
    m_axis_tvalid = 1'b0;
    m_axis_tdata  = '0;
    m_axis_tlast  = 1'b0;
    unique case (state)
      S_LOAD: s_axis_tready = 1'b1;
      S_FEED: s_axis_tready = pt_wr_ready;
      S_ACK: begin
        m_axis_tvalid = 1'b1;
        m_axis_tdata  = INIT_ACK;
        m_axis_tlast  = 1'b1;
      end
      S_SEND: begin
        m_axis_tvalid = 1'b1;
        m_axis_tdata  = 32'($signed(mp_rd_data));
        m_axis_tlast  = int'(oidx) == KF - 1;
      end
      default: ;
    endcase
  end

  assign pt_wr_en     = (state == S_FEED) && s_fire;
  assign pt_wr_addr   = coord;
  assign pt_wr_data   = s_axis_tdata[W-1:0];
  assign pt_wr_commit = pt_wr_en && coord == 2'd2;
  assign mp_clear     = (state == S_CLEAR);
  assign mp_rd_addr   = oidx;
  assign busy         = (state != S_IDLE);
  assign done         = (state == S_FIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      c_tgt  <= '0;
      c_kind <= '0;
      c_row  <= '0;
      c_col  <= '0;
      n_pts  <= '0;
      fed    <= '0;
      merged <= '0;
      coord  <= '0;
      oidx   <= '0;
      pw     <= '0;
    end else begin
      pw.we <= 1'b0;
      if (mp_point_done) merged <= merged + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          c_tgt  <= '0;
          c_kind <= '0;
          c_row  <= '0;
          c_col  <= '0;
          n_pts  <= num_points;
          state  <= (mode == MODE_INIT) ? S_LOAD : S_CLEAR;
        end
        S_LOAD: if (s_fire) begin
          pw.we     <= 1'b1;
          pw.target <= target_e'(c_tgt);
          pw.kind   <= c_kind;
          pw.row    <= c_row;
          pw.col    <= c_col;
          pw.data   <= s_axis_tdata;
          if (!c_last_col) c_col <= c_col + 1'b1;
          else begin
            c_col <= '0;
            if (!c_last_row) c_row <= c_row + 1'b1;
            else begin
              c_row <= '0;
              if (!c_last_kind) c_kind <= c_kind + 1'b1;
              else begin
                c_kind <= '0;
                if (!c_last_tgt) c_tgt <= c_tgt + 1'b1;
                else             state <= S_ACK;
              end
            end
          end
        end
        S_ACK: if (m_fire) state <= S_FIN;
        S_CLEAR: begin
          fed    <= '0;
          merged <= '0;
          coord  <= '0;
          state  <= (n_pts == 0) ? S_WAIT : S_FEED;
        end
        S_FEED: if (s_fire) begin
          if (coord == 2'd2) begin
            coord <= '0;
            fed   <= fed + 1'b1;
            if (fed + 1 == n_pts) state <= S_WAIT;
          end else begin
            coord <= coord + 1'b1;
          end
        end
        S_WAIT: if (merged == n_pts) begin
          oidx  <= '0;
          state <= S_SEND;
        end
        S_SEND: if (m_fire) begin
          if (int'(oidx) == KF - 1) state <= S_FIN;
          else                      oidx  <= oidx + 1'b1;
        end
        S_FIN: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI4-Stream rule: data and valid hold until accepted.
  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                (m_axis_tvalid && !m_axis_tready) |=> (m_axis_tvalid && $stable(m_axis_tdata)));

  logic unused_tlast;
  assign unused_tlast = s_axis_tlast;

endmodule
