// rns_out_mux: output multiplexer (the seventh multiplexer, select SM7).
//
// Chooses which unit's result register is passed to the RNS-to-binary
// converter and, through its enable, whether a result is produced in this
// step. Code 000 selects the multiplier, as in the paper's example; 001
// (adder) and 010 (subtractor) are this design's choice, other codes give
// zero. When en is low the output is forced to zero and valid is low.
// Purely combinational.
module rns_out_mux #(
  parameter int NMOD = 3,
  parameter int RW   = 11
) (
  input  rns_pkg::osel_e          sel,
  input  logic                    en,
  input  logic [NMOD-1:0][RW-1:0] add,
  input  logic [NMOD-1:0][RW-1:0] sub,
  input  logic [NMOD-1:0][RW-1:0] mul,
  output logic [NMOD-1:0][RW-1:0] y,
  output logic                    valid
);
  always_comb begin
    y     = '0;
    valid = 1'b0;
    if (en) begin
      unique case (sel)
        rns_pkg::OUT_MUL: begin y = mul; valid = 1'b1; end
        rns_pkg::OUT_ADD: begin y = add; valid = 1'b1; end
        rns_pkg::OUT_SUB: begin y = sub; valid = 1'b1; end
        default:          ;
      endcase
    end
  end
endmodule
