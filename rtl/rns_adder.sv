// rns_adder: RNS adder, NMOD modular adders working in parallel.
//
// Lane i computes (a_i + b_i) mod m_i with one binary adder and a single
// conditional subtraction of m_i; no carry passes between lanes. Inputs must
// be reduced residues (a_i, b_i < m_i), which every source in the processor
// delivers. The sum is stored in the result register (TEMP1 of the paper's
// example) on a clock edge where we is high, and the register drives q, so a
// result is available one cycle after its operands. The register is cleared
// by the active-low asynchronous reset (reset style is this design's choice).
module rns_adder #(
  parameter int N    = 32,
  parameter int NMOD = 3,
  localparam int RW  = rns_pkg::res_width(N, NMOD)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic [NMOD-1:0][RW-1:0] a,
  input  logic [NMOD-1:0][RW-1:0] b,
  output logic [NMOD-1:0][RW-1:0] q
);
  logic [NMOD-1:0][RW-1:0] d;

  for (genvar g = 0; g < NMOD; g++) begin : g_lane
    localparam logic [RW:0] MI = (RW+1)'(rns_pkg::find_modulus(N, NMOD, g));
    logic [RW:0] s;
    always_comb begin
      s = {1'b0, a[g]} + {1'b0, b[g]};
      if (s >= MI) s = s - MI;
    end
    assign d[g] = s[RW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  q <= '0;
    else if (we) q <= d;
endmodule
