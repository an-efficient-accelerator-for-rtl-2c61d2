// stream_ctrl_tb -- self-checking test of stream_ctrl at the default sizes.
//
// Weight initialization: streams the full parameter set (153 024 words, with
// random TVALID gaps) and checks every parameter write against an
// independently built list of (target, kind, row, column) in the documented
// order, then the single acknowledgement beat (nonzero, TLAST).
// Feature extraction: runs 3 points with the first channel refusing writes at
// times (TREADY must follow it), stands in for MaxPool with point_done pulses
// and a read-out function, and checks the clear pulse, the three-word point
// writes, and the 1024-word output with TLAST on the last word under random
// output back-pressure.
module stream_ctrl_tb;
  import pointnet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  mode_e mode;
  logic [31:0] num_points;
  logic [31:0] s_axis_tdata, m_axis_tdata;
  logic s_axis_tvalid, s_axis_tready, s_axis_tlast, m_axis_tvalid, m_axis_tready, m_axis_tlast;
  param_wr_t pw;
  logic pt_wr_ready, pt_wr_en, pt_wr_commit;
  logic [1:0] pt_wr_addr;
  logic [31:0] pt_wr_data;
  logic mp_clear, mp_point_done;
  logic [9:0] mp_rd_addr;
  logic [31:0] mp_rd_data;

  stream_ctrl dut (.*);

  int checks = 0, failures = 0;
  int dones = 0;
  always @(posedge clk) if (done) dones++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // expected parameter writes
  typedef struct packed { logic [3:0] t; logic [1:0] k; logic [10:0] r; logic [10:0] c; } pkey_t;
  pkey_t expq [$];
  int dims [6] = '{3, 64, 64, 64, 128, 1024};
  initial begin
    for (int l = 0; l < 5; l++) begin
      for (int r = 0; r < dims[l+1]; r++)
        for (int c = 0; c < dims[l]; c++) expq.push_back({4'(2*l), 2'd0, 11'(r), 11'(c)});
      for (int r = 0; r < dims[l+1]; r++) expq.push_back({4'(2*l), 2'd1, 11'(r), 11'd0});
      for (int k = 0; k < 3; k++)
        for (int r = 0; r < dims[l+1]; r++) expq.push_back({4'(2*l+1), 2'(k), 11'(r), 11'd0});
    end
  end

  int pw_count = 0, pw_bad = 0;
  always @(posedge clk) if (pw.we) begin
    if (pw_count >= expq.size() || {pw.target, pw.kind, pw.row, pw.col} != expq[pw_count]
        || pw.data != 32'(pw_count * 3 + 1))
      pw_bad++;
    pw_count++;
  end

  // point channel stand-in
  int pt_words = 0, pt_commits = 0, pt_bad = 0, clears = 0, hold_seen = 0;
  always @(posedge clk) begin
    if (mp_clear) clears++;
    if (s_axis_tvalid && !s_axis_tready && mode == MODE_EXTRACT && busy) hold_seen++;
    if (pt_wr_en) begin
      if (pt_wr_addr != 2'(pt_words % 3) || pt_wr_data != 32'(100 + pt_words) || !pt_wr_ready) pt_bad++;
      pt_words++;
    end
    if (pt_wr_commit) pt_commits++;
  end
  assign mp_rd_data = 32'(mp_rd_addr) * 32'd17 + 32'd5;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nout;
    start = 0; mode = MODE_INIT; num_points = 0;
    s_axis_tdata = 0; s_axis_tvalid = 0; s_axis_tlast = 0; m_axis_tready = 0;
    pt_wr_ready = 1; mp_point_done = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // ---------------- weight initialization
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < expq.size(); i++) begin
      s_axis_tvalid = ($urandom_range(7) != 0);
      while (!s_axis_tvalid) begin @(negedge clk); s_axis_tvalid = 1; end
      s_axis_tdata = 32'(i * 3 + 1);
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
      @(negedge clk);
    end
    s_axis_tvalid = 0;
    check(expq.size() == 153024, $sformatf("parameter count %0d", expq.size()));
    repeat (3) @(negedge clk);
    check(m_axis_tvalid && m_axis_tdata != 0 && m_axis_tlast, "acknowledgement beat");
    m_axis_tready = 1;
    @(negedge clk);
    m_axis_tready = 0;
    @(negedge clk);
    check(!busy, "idle after initialization");
    check(pw_count == expq.size() && pw_bad == 0, $sformatf("parameter writes %0d bad %0d", pw_count, pw_bad));
    check(!m_axis_tvalid, "single acknowledgement");
    // ---------------- feature extraction, 3 points
    mode = MODE_EXTRACT; num_points = 3;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      begin
        for (int i = 0; i < 9; i++) begin
          s_axis_tvalid = 1; s_axis_tdata = 32'(100 + i);
          @(posedge clk);
          while (!s_axis_tready) @(posedge clk);
          @(negedge clk);
        end
        s_axis_tvalid = 0;
      end
      begin
        repeat (4) begin
          @(negedge clk); pt_wr_ready = 0; repeat (5) @(negedge clk); pt_wr_ready = 1;
        end
      end
    join
    check(pt_words == 9 && pt_commits == 3 && pt_bad == 0, $sformatf("point writes %0d commits %0d bad %0d", pt_words, pt_commits, pt_bad));
    check(clears == 1, "phi cleared once");
    check(hold_seen > 0, "input held off by full channel");
    repeat (10) @(negedge clk);
    check(!m_axis_tvalid, "no output before the last point is merged");
    repeat (3) begin mp_point_done = 1; @(negedge clk); mp_point_done = 0; repeat (3) @(negedge clk); end
    nout = 0;
    while (nout < 1024) begin
      m_axis_tready = ($urandom_range(2) != 0);
      @(posedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        check(m_axis_tdata == 32'(nout) * 32'd17 + 32'd5, $sformatf("phi word %0d", nout));
        check(m_axis_tlast == (nout == 1023), "tlast");
        nout++;
      end
      @(negedge clk);
    end
    m_axis_tready = 0;
    repeat (2) @(negedge clk);
    check(!busy && !m_axis_tvalid, "idle after extraction");
    check(dones == 2, $sformatf("done pulses %0d", dones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
