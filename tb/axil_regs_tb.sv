// axil_regs_tb -- self-checking test of axil_regs.
//
// Writes and reads back MODE and NPTS (including a byte-masked write),
// starts a run and checks the one-cycle start pulse, the busy/idle bits, that
// a start is ignored while busy, and that the done bit is set by `done` and
// cleared by reading CTRL. Responses are accepted late to check that they
// are held.
module axil_regs_tb;
  import pointnet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0]  s_axi_awaddr, s_axi_araddr;
  logic        s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic        s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [31:0] s_axi_wdata, s_axi_rdata;
  logic [3:0]  s_axi_wstrb;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic        start, busy, done;
  mode_e       mode;
  logic [31:0] num_points;

  axil_regs dut (.*);

  int checks = 0, failures = 0, starts = 0;
  always @(posedge clk) if (start) starts <= starts + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic axi_write(input logic [5:0] a, input logic [31:0] d, input logic [3:0] strb = 4'hf);
    @(negedge clk);
    s_axi_awaddr = a; s_axi_awvalid = 1; s_axi_wdata = d; s_axi_wstrb = strb; s_axi_wvalid = 1;
    @(posedge clk);
    while (!(s_axi_awready && s_axi_wready)) @(posedge clk);
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    repeat (2) @(negedge clk);
    check(s_axi_bvalid && s_axi_bresp == 2'b00, "write response held");
    s_axi_bready = 1;
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  task automatic axi_read(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axi_araddr = a; s_axi_arvalid = 1;
    @(posedge clk);
    while (!s_axi_arready) @(posedge clk);
    @(negedge clk);
    s_axi_arvalid = 0;
    repeat (2) @(negedge clk);
    check(s_axi_rvalid && s_axi_rresp == 2'b00, "read response held");
    d = s_axi_rdata;
    s_axi_rready = 1;
    @(negedge clk);
    s_axi_rready = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    busy = 0; done = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    axi_read(6'h00, r);
    check(r == 32'h4, $sformatf("idle after reset, CTRL=%h", r));
    axi_write(6'h10, 32'h1);
    check(mode == MODE_EXTRACT, "mode written");
    axi_read(6'h10, r);
    check(r == 32'h1, "mode read back");
    axi_write(6'h18, 32'h0000_1234);
    axi_write(6'h18, 32'hAB00_0000, 4'b1000);
    check(num_points == 32'hAB00_1234, $sformatf("npts byte strobes %h", num_points));
    axi_read(6'h18, r);
    check(r == 32'hAB00_1234, "npts read back");
    axi_read(6'h24, r);
    check(r == 0, "unmapped reads zero");
    axi_write(6'h00, 32'h1);
    check(starts == 1, "one start pulse");
    busy = 1;
    axi_read(6'h00, r);
    check(r[0] && !r[2], "busy bit while running");
    axi_write(6'h00, 32'h1);
    check(starts == 1, "start ignored while busy");
    @(negedge clk); busy = 0; done = 1; @(negedge clk); done = 0;
    axi_read(6'h00, r);
    check(r[1] && r[2], $sformatf("done and idle bits, CTRL=%h", r));
    axi_read(6'h00, r);
    check(!r[1], "done cleared by read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
