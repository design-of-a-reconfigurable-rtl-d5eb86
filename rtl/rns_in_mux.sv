// rns_in_mux: 5:1 residue-vector multiplexer in front of an arithmetic unit.
//
// The processor has no fixed path between its units: each of the six unit
// inputs (two per adder, subtractor and multiplier) is fed by one of these
// multiplexers, which chooses between the two binary-to-RNS converters
// (k = 2 external inputs) and the result registers of the adder, subtractor
// and multiplier (x = y = z = 1). Five inputs need three select lines.
//
// Select codes (rns_pkg::src_e): 000 converter 1, 001 converter 2 and 101
// adder are the codes of the paper's worked example; 110 subtractor and
// 111 multiplier are this design's choice. The unused codes 010, 011 and 100
// give an all-zero vector. Purely combinational.
module rns_in_mux #(
  parameter int NMOD = 3,
  parameter int RW   = 11
) (
  input  rns_pkg::src_e           sel,
  input  logic [NMOD-1:0][RW-1:0] conv1,
  input  logic [NMOD-1:0][RW-1:0] conv2,
  input  logic [NMOD-1:0][RW-1:0] add,
  input  logic [NMOD-1:0][RW-1:0] sub,
  input  logic [NMOD-1:0][RW-1:0] mul,
  output logic [NMOD-1:0][RW-1:0] y
);
  always_comb begin
    unique case (sel)
      rns_pkg::SRC_CONV1: y = conv1;
      rns_pkg::SRC_CONV2: y = conv2;
      rns_pkg::SRC_ADD:   y = add;
      rns_pkg::SRC_SUB:   y = sub;
      rns_pkg::SRC_MUL:   y = mul;
      default:            y = '0;
    endcase
  end
endmodule
