// rns_multiplier: RNS multiplier, NMOD modular multipliers in parallel.
//
// Lane i computes (a_i * b_i) mod m_i: a RW x RW binary product followed by
// a reduction by the constant m_i. The paper draws a look-up table inside
// the multiplier block (table look-up being one of the two realisations it
// names); here the reduction is written arithmetically, which computes the
// same values and leaves the structure to synthesis. The product is stored
// in the result register (TEMP2 of the paper's example) on a clock edge where
// we is high (one cycle latency); asynchronous active-low reset clears it.
// The POWER function reuses this unit by feeding its register back to its
// own input.
module rns_multiplier #(
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
    localparam logic [2*RW-1:0] MI = (2*RW)'(rns_pkg::find_modulus(N, NMOD, g));
    logic [2*RW-1:0] p, r;
    always_comb begin
      p = {{RW{1'b0}}, a[g]} * {{RW{1'b0}}, b[g]};
      r = p % MI;
    end
    assign d[g] = r[RW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  q <= '0;
    else if (we) q <= d;
endmodule
