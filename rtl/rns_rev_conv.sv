// rns_rev_conv: RNS-to-binary (reverse) converter, "R to B Conv".
//
// Rebuilds the binary value X in [0, M) from its residues with the Chinese
// Remainder Theorem:
//   X = | sum_i  M_i * | r_i * M_i^-1 |_(m_i) |_M ,   M_i = M / m_i.
// Each lane first forms t_i = (r_i * M_i^-1) mod m_i with a small modular
// multiplication, then the constant product t_i * M_i, which is below M.
// The NMOD terms are added and the sum, below NMOD * M, is brought into
// [0, M) by NMOD-1 conditional subtractions of M. All constants (M, M_i and
// the inverses) are computed while elaborating from the moduli set.
//
// The paper names the converter and cites the CRT; this structure is this
// design's choice. Purely combinational; the processor registers its output.
module rns_rev_conv #(
  parameter int N    = 32,
  parameter int NMOD = 3,
  localparam int RW  = rns_pkg::res_width(N, NMOD),
  localparam int BW  = rns_pkg::bin_width(N, NMOD)
) (
  input  logic [NMOD-1:0][RW-1:0] res,
  output logic [BW-1:0]           bin
);
  localparam int SW = BW + $clog2(NMOD + 1);
  localparam logic [SW-1:0] M = SW'(rns_pkg::dyn_range(N, NMOD));

  logic [NMOD-1:0][SW-1:0] term;

  for (genvar g = 0; g < NMOD; g++) begin : g_lane
    localparam longint unsigned MI   = rns_pkg::find_modulus(N, NMOD, g);
    localparam logic [2*RW-1:0] MIW  = (2*RW)'(MI);
    localparam logic [2*RW-1:0] INV  = (2*RW)'(rns_pkg::crt_inv(N, NMOD, g));
    localparam logic [SW-1:0]   BIGM = SW'(rns_pkg::dyn_range(N, NMOD) / MI);
    logic [2*RW-1:0] p, t;
    always_comb begin
      p       = {{RW{1'b0}}, res[g]} * INV;
      t       = p % MIW;
      term[g] = SW'(t) * BIGM;
    end
  end

  logic [SW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < NMOD; i++) sum = sum + term[i];
    for (int i = 1; i < NMOD; i++)
      if (sum >= M) sum = sum - M;
    bin = sum[BW-1:0];
  end
endmodule
