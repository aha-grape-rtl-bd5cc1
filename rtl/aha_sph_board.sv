// aha_sph_board: SPH part of one FPGA computing board of the hybrid
// host / FPGA-processor / GRAPE machine.
//
// The machine splits an astrophysical particle simulation three ways: the
// host does the O(N) work, a GRAPE cluster the O(N^2) gravity and the FPGA
// processor the O(N*Nn) neighbour sums of SPH. This module is the FPGA side:
// NUM_PIPES copies of sph_density_pipe working side by side, two on one
// board as planned for the larger FPGA generation. Each pipe takes its own
// stream of neighbour pairs, one per clock, and returns finished densities.
//
// The particle memory, PCI link, private bus and I/O board that feed the
// pipes lie outside this module: their streams appear here as plain ports,
// one sph_pair_t in and one density out per pipe. How particles are shared
// between the pipes is left to that feeding logic; the pipes are
// independent. Timing per pipe: a pair entering at clock t contributes at
// t + T_C, and rho_i leaves PIPE_LAT = 19 clocks after its last pair.
module aha_sph_board
  import aha_pkg::*;
#(
  parameter int NUM_PIPES = 2,
  parameter int LUT_BITS  = 10,
  parameter int KER_BITS  = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid  [NUM_PIPES],
  input  sph_pair_t        in_pair   [NUM_PIPES],
  output logic             c_valid   [NUM_PIPES],
  output f28_t             c_value   [NUM_PIPES],
  output logic             c_cutoff  [NUM_PIPES],
  output logic             out_valid [NUM_PIPES],
  output logic [TAG_W-1:0] out_tag   [NUM_PIPES],
  output f28_t             out_rho   [NUM_PIPES]
);

  for (genvar p = 0; p < NUM_PIPES; p++) begin : g_pipe
    sph_density_pipe #(.LUT_BITS(LUT_BITS), .KER_BITS(KER_BITS)) u_pipe (
      .clk, .rst_n,
      .in_valid  (in_valid[p]),
      .in_pair   (in_pair[p]),
      .c_valid   (c_valid[p]),
      .c_value   (c_value[p]),
      .c_cutoff  (c_cutoff[p]),
      .out_valid (out_valid[p]),
      .out_tag   (out_tag[p]),
      .out_rho   (out_rho[p])
    );
  end

endmodule
