// pointnet_core_tb -- end-to-end test of the PointNet core at its default
// (full) sizes.
//
// 1. Weight initialization: writes MODE=0 and CTRL.start over AXI4-Lite and
//    streams all 153 024 parameters (random, scaled by 1/sqrt(fan-in) so the
//    activations stay near unit size) with random TVALID gaps; expects one
//    nonzero acknowledgement beat with TLAST and the CTRL done bit.
// 2. Feature extraction of 6 random points with random TVALID gaps and
//    random TREADY back-pressure on the output; the 1024 returned words are
//    compared with a plain-loop model of the five MLP layers and the max
//    (pn_ref_pkg).
// 3. A second extraction with 2 other points, which checks that phi was
//    cleared between runs.
// Mechanisms counted (each must occur): both modes, the acknowledgement,
// the inter-layer overlap (FC4 and FC5 busy at once on different points),
// input hold-off (TREADY low because the pipeline is full), output
// back-pressure, ReLU clamping. The steady-state interval between merged
// points must not exceed the FC5 latency (L*K/B + log2 B + 3 = 1034 cycles)
// plus 2, i.e. FC5 sets the rate.
module pointnet_core_tb;
  import pointnet_pkg::*;
  import pn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0]  s_axi_ctrl_awaddr, s_axi_ctrl_araddr;
  logic        s_axi_ctrl_awvalid, s_axi_ctrl_awready, s_axi_ctrl_wvalid, s_axi_ctrl_wready;
  logic        s_axi_ctrl_bvalid, s_axi_ctrl_bready, s_axi_ctrl_arvalid, s_axi_ctrl_arready;
  logic        s_axi_ctrl_rvalid, s_axi_ctrl_rready;
  logic [31:0] s_axi_ctrl_wdata, s_axi_ctrl_rdata;
  logic [3:0]  s_axi_ctrl_wstrb;
  logic [1:0]  s_axi_ctrl_bresp, s_axi_ctrl_rresp;
  logic [31:0] s_axis_tdata, m_axis_tdata;
  logic        s_axis_tvalid, s_axis_tready, s_axis_tlast, m_axis_tvalid, m_axis_tready, m_axis_tlast;

  pointnet_core dut (.*);
  bind pointnet_core pointnet_core_probe u_probe (
    .fc_busy(fc_busy), .pt_wr_ready(pt_wr_ready), .busy(busy),
    .mp_point_done(mp_point_done), .mp_clear(mp_clear));

  localparam int NL = 5;
  int dims [NL+1] = '{3, 64, 64, 64, 128, 1024};
  localparam int FC5_LAT = 1024 * 1 + 7 + 3;

  int checks = 0, failures = 0;
  vec_t fw [NL], fb [NL], bmu [NL], bsc [NL], bbeta [NL];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- AXI helpers
  task automatic axil_write(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axi_ctrl_awaddr = a; s_axi_ctrl_awvalid = 1; s_axi_ctrl_wdata = d; s_axi_ctrl_wstrb = 4'hf; s_axi_ctrl_wvalid = 1;
    s_axi_ctrl_bready = 1;
    @(posedge clk);
    while (!s_axi_ctrl_awready) @(posedge clk);
    @(negedge clk);
    s_axi_ctrl_awvalid = 0; s_axi_ctrl_wvalid = 0;
    while (!s_axi_ctrl_bvalid) @(negedge clk);
    @(negedge clk);
    s_axi_ctrl_bready = 0;
  endtask

  task automatic axil_read(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axi_ctrl_araddr = a; s_axi_ctrl_arvalid = 1; s_axi_ctrl_rready = 1;
    @(posedge clk);
    while (!s_axi_ctrl_arready) @(posedge clk);
    @(negedge clk);
    s_axi_ctrl_arvalid = 0;
    while (!s_axi_ctrl_rvalid) @(negedge clk);
    d = s_axi_ctrl_rdata;
    @(negedge clk);
    s_axi_ctrl_rready = 0;
  endtask

  int gaps = 1;
  task automatic send(input int d, input bit last);
    @(negedge clk);
    if (gaps != 0) while ($urandom_range(5) == 0) begin s_axis_tvalid = 0; @(negedge clk); end
    s_axis_tvalid = 1; s_axis_tdata = d; s_axis_tlast = last;
    @(posedge clk);
    while (!s_axis_tready) @(posedge clk);
    @(negedge clk);
    s_axis_tvalid = 0; s_axis_tlast = 0;
  endtask

  int out_words [$];
  int out_last_ok;
  int backpressure = 1;
  always @(posedge clk) begin
    if (m_axis_tvalid && m_axis_tready) begin
      out_words.push_back(m_axis_tdata);
      if (m_axis_tlast) out_last_ok++;
    end
  end
  always @(negedge clk) m_axis_tready <= (backpressure != 0) ? ($urandom_range(3) != 0) : 1'b1;

  // ---------------------------------------------------------------- mechanisms
  int n_overlap = 0, n_in_hold = 0, n_out_bp = 0, n_extract = 0, n_init = 0, n_relu0 = 0;
  int last_done = -1, max_interval = 0, n_intervals = 0, cyc = 0, merged_in_run = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_probe.fc_busy[3] && dut.u_probe.fc_busy[4]) n_overlap <= n_overlap + 1;
    if (s_axis_tvalid && !s_axis_tready && !dut.u_probe.pt_wr_ready && dut.u_probe.busy) n_in_hold <= n_in_hold + 1;
    if (m_axis_tvalid && !m_axis_tready) n_out_bp <= n_out_bp + 1;
    if (dut.u_probe.mp_point_done) begin
      // intervals measured from the third merged point of a run on, once the
      // pipeline is full and the input keeps up
      if (merged_in_run >= 2 && cyc - last_done > max_interval) max_interval <= cyc - last_done;
      if (merged_in_run >= 2) n_intervals <= n_intervals + 1;
      merged_in_run <= merged_in_run + 1;
      last_done <= cyc;
    end
    if (dut.u_probe.mp_clear) merged_in_run <= 0;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- runs
  task automatic extract(input int npts);
    vec_t p, h, phi;
    logic [31:0] r;
    int base;
    phi = new[1024];
    foreach (phi[i]) phi[i] = 0;
    axil_write(6'h10, 32'd1);
    axil_write(6'h18, 32'(npts));
    axil_write(6'h00, 32'd1);
    base = out_words.size();
    for (int n = 0; n < npts; n++) begin
      p = new[3];
      foreach (p[i]) p[i] = rnd(32768);
      for (int i = 0; i < 3; i++) send(p[i], i == 2 && n == npts - 1);
      h = p;
      for (int l = 0; l < NL; l++) begin
        h = fc_ref(h, fw[l], fb[l], dims[l], dims[l+1], 32, 15);
        h = bn_ref(h, bmu[l], bsc[l], bbeta[l], dims[l+1], 32, 15);
      end
      foreach (h[i]) begin
        if (h[i] > phi[i]) phi[i] = h[i];
        if (h[i] == 0) n_relu0++;
      end
    end
    $display("[%0d] %0d points sent", cyc, npts);
    do axil_read(6'h00, r); while (!r[1]);
    $display("[%0d] run done", cyc);
    check(out_words.size() == base + 1024, $sformatf("feature length %0d", out_words.size() - base));
    for (int i = 0; i < 1024; i++)
      check(out_words[base + i] == phi[i], $sformatf("phi[%0d] = %0d, expected %0d", i, out_words[base + i], phi[i]));
    n_extract++;
  endtask

  initial begin
    logic [31:0] r;
    int nparams, base;
    s_axi_ctrl_awvalid = 0; s_axi_ctrl_wvalid = 0; s_axi_ctrl_bready = 0; s_axi_ctrl_arvalid = 0;
    s_axi_ctrl_rready = 0; s_axi_ctrl_awaddr = 0; s_axi_ctrl_araddr = 0; s_axi_ctrl_wdata = 0; s_axi_ctrl_wstrb = 0;
    s_axis_tdata = 0; s_axis_tvalid = 0; s_axis_tlast = 0; out_last_ok = 0;
    // model parameters
    for (int l = 0; l < NL; l++) begin
      int k, m, mag;
      k = dims[l];
      m = dims[l+1];
      mag = int'(2.0 * 32768.0 / $sqrt(real'(k)));
      fw[l] = new[k * m]; fb[l] = new[m]; bmu[l] = new[m]; bsc[l] = new[m]; bbeta[l] = new[m];
      foreach (fw[l][i]) fw[l][i] = rnd(mag);
      foreach (fb[l][i]) fb[l][i] = rnd(8192);
      foreach (bmu[l][i]) bmu[l][i] = rnd(4096);
      foreach (bsc[l][i]) bsc[l][i] = 32768 + rnd(16384);
      foreach (bbeta[l][i]) bbeta[l][i] = rnd(8192);
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- weight initialization
    axil_write(6'h10, 32'd0);
    axil_write(6'h00, 32'd1);
    base = out_words.size();
    nparams = 0;
    for (int l = 0; l < NL; l++) begin
      foreach (fw[l][i])    begin send(fw[l][i], 0); nparams++; end
      foreach (fb[l][i])    begin send(fb[l][i], 0); nparams++; end
      foreach (bmu[l][i])   begin send(bmu[l][i], 0); nparams++; end
      foreach (bsc[l][i])   begin send(bsc[l][i], 0); nparams++; end
      foreach (bbeta[l][i]) begin send(bbeta[l][i], l == NL - 1 && i == bbeta[l].size() - 1); nparams++; end
    end
    $display("[%0d] %0d parameter words sent", cyc, nparams);
    do axil_read(6'h00, r); while (!r[1]);
    check(nparams == 153024, $sformatf("parameter words %0d", nparams));
    check(out_words.size() == base + 1 && out_words[base] != 0, "nonzero acknowledgement");
    check(out_last_ok == 1, "acknowledgement carries TLAST");
    n_init++;

    // ---- feature extraction
    gaps = 0;
    extract(6);
    check(out_last_ok == 2, "TLAST on the last feature word");
    gaps = 1;
    extract(2);
    check(out_last_ok == 3, "TLAST on the last feature word, second run");

    // ---- mechanisms
    $display("mechanisms: init=%0d extract=%0d overlap_cycles=%0d input_hold=%0d out_backpressure=%0d relu_zero=%0d max_interval=%0d (%0d intervals)",
             n_init, n_extract, n_overlap, n_in_hold, n_out_bp, n_relu0, max_interval, n_intervals);
    check(n_init == 1, "weight initialization mode ran");
    check(n_extract == 2, "feature extraction mode ran twice");
    check(n_overlap > 0, "inter-layer overlap across points");
    check(n_in_hold > 0, "input held off by a full pipeline");
    check(n_out_bp > 0, "output back-pressure");
    check(n_relu0 > 0, "ReLU clamp");
    check(n_intervals > 0 && max_interval <= FC5_LAT + 2,
          $sformatf("steady-state point interval %0d, FC5 latency %0d", max_interval, FC5_LAT));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
