// rns_subtractor: RNS subtractor, NMOD modular subtractors in parallel.
//
// Lane i computes (a_i - b_i) mod m_i: the difference a_i - b_i, plus m_i
// when it is negative. A difference that is negative as a binary number thus
// wraps into the upper part of the dynamic range [0, M). Inputs must be
// reduced residues. The result is stored in the unit's result register on a
// clock edge where we is high (one cycle latency); asynchronous active-low
// reset clears it (this design's choice).
module rns_subtractor #(
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
      if (a[g] >= b[g]) s = {1'b0, a[g]} - {1'b0, b[g]};
      else              s = {1'b0, a[g]} + MI - {1'b0, b[g]};
    end
    assign d[g] = s[RW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  q <= '0;
    else if (we) q <= d;
endmodule
