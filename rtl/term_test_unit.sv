// term_test_unit: the early termination test of one 2x2 quad.
//
// The most significant bit of each pixel's stencil value is used as a
// termination flag (the low bits stay available to the ordinary stencil test).
// A fragment is discarded when stencil & (1 << (STENCIL_BITS-1)) is non-zero.
// The quad keeps only its surviving fragments; it is dropped as a whole when
// none survives. When enable is low every fragment passes (baseline pipeline).
// Combinational; stencil[i] belongs to coverage bit i.
//
// Interface: enable, cov_in[3:0] and the quad's four stencil values in;
// cov_out[3:0] and discard out.
// From the paper: the MSB as termination flag and the test before shading.
// Own choice: the test works on a whole quad and has an enable for the
// baseline pipeline.
module term_test_unit #(
  parameter int unsigned STENCIL_BITS = 8
) (
  input  logic                         enable,
  input  logic [3:0]                   cov_in,
  input  logic [3:0][STENCIL_BITS-1:0] stencil,
  output logic [3:0]                   cov_out,
  output logic                         discard   // no fragment of the quad survives
);
  localparam logic [STENCIL_BITS-1:0] TERM_BIT = 1 << (STENCIL_BITS - 1);
  logic [3:0] term;
  always_comb begin
    for (int i = 0; i < 4; i++) term[i] = enable && |(stencil[i] & TERM_BIT);
    cov_out = cov_in & ~term;
    discard = (cov_out == 4'b0000);
  end
endmodule
