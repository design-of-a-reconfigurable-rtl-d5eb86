// rns_fwd_conv: binary-to-RNS (forward) converter, "B to R Conv".
//
// Maps an N-bit unsigned binary operand X onto its residue vector
// (X mod m_0, X mod m_1, ..., X mod m_{NMOD-1}) for the moduli set that
// rns_pkg::find_modulus generates from N and NMOD ({1626, 1627, 1625} by
// default). Each lane is an independent reduction by a constant modulus, so
// the lanes work in parallel. The converter is purely combinational; the
// processor uses two of them, one per operand path.
//
// The paper states only what the converter does; it mentions table look-up
// (PLA) and hybrid adder-plus-table realisations without choosing one. This
// design writes each lane as a reduction by a constant and leaves the
// structure to synthesis.
//
// Ports: bin (N bits) in, res (NMOD lanes of RW bits) out, no clock.
module rns_fwd_conv #(
  parameter int N    = 32,
  parameter int NMOD = 3,
  localparam int RW  = rns_pkg::res_width(N, NMOD)
) (
  input  logic [N-1:0]            bin,
  output logic [NMOD-1:0][RW-1:0] res
);
  for (genvar g = 0; g < NMOD; g++) begin : g_lane
    localparam longint unsigned MI = rns_pkg::find_modulus(N, NMOD, g);
    logic [N-1:0] rem;
    always_comb rem = bin % N'(MI);
    assign res[g] = rem[RW-1:0];
  end
endmodule
