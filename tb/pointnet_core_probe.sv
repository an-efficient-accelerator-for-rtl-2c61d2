// pointnet_core_probe -- observation point bound into pointnet_core by the
// end-to-end testbenches.
//
// It brings a few internal signals of the core (FC busy flags, the point
// channel's ready, the MaxPool merge and clear pulses) out to the testbench
// as plain nets, read there as dut.u_probe.<name>. Binding them this way,
// instead of naming the signals inside the core directly, lets a testbench
// still compile against a core that lacks them; the probe then sees
// undriven nets and the mechanism checks fail as they should.
//
// Pure observation, no timing of its own. Not part of the paper's design.
module pointnet_core_probe (
  input logic [4:0] fc_busy,
  input logic       pt_wr_ready,
  input logic       busy,
  input logic       mp_point_done,
  input logic       mp_clear
);
endmodule
