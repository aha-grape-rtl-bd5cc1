// rho_accum: density accumulator ("+rho_i") at the end of the pair pipeline.
//
// Implements rho_i = rho_i + m_j W(r_ij, h_ij) / h_ij^3 over the neighbours j
// of particle i. A contribution marked first starts from the initial value
// rho0 (the density held for particle i before the loop, usually zero);
// later ones add to the running sum. On the contribution marked last the
// finished rho_i leaves with its particle tag. first and last may both be
// set (a single neighbour).
//
// The add is the non-negative ("unsigned") add of aha_pkg done in a single
// clock, so a new contribution can be taken every clock even though each
// depends on the previous sum. Latency from the last contribution to out_rho
// is LAT_ACC = 1 clock. The first/last framing, the tag and the reset are
// this design's choices. rho0 and the contributions must be non-negative.
module rho_accum
  import aha_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  logic [TAG_W-1:0] in_tag,
  input  f28_t             rho0,
  input  f28_t             contrib,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output f28_t             out_rho
);

  f28_t acc, sum;

  assign sum = f28_uadd(in_first ? rho0 : acc, contrib);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= F28_ZERO;
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_rho   <= F28_ZERO;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) acc <= sum;
      if (in_valid && in_last) begin
        out_rho <= sum;
        out_tag <= in_tag;
      end
    end
  end

endmodule
