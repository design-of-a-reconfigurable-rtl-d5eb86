// rns_prog_mem: programmable function memory (the function look-up table).
//
// Holds the step sequences of the predefined functions "block wise": block f
// (f = 0 .. NFUNC-1) occupies addresses f*STEPS .. f*STEPS+STEPS-1, one
// control word (rns_pkg::ctrl_t) and one N-bit immediate per address.
// Writes are synchronous: on a rising edge with wr high, {wctrl, wimm} is
// stored at addr. Reads are combinational: while rd is high, rctrl/rimm show
// the word at addr; while rd is low they show a no-op word. Reset loads the
// default programs of rns_pkg (block 0: (X+Y)*Z, block 1: X^Y, block 2: an
// empty block for the host to fill).
//
// Three function blocks follow the paper's figure; the depth of a block
// (STEPS = 8), the word layout, the read/write timing and the reset contents
// are this design's choice.
module rns_prog_mem #(
  parameter int N     = 32,
  parameter int NFUNC = rns_pkg::NFUNC,
  parameter int STEPS = rns_pkg::STEPS,
  localparam int DEPTH = NFUNC * STEPS,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr,
  input  logic           rd,
  input  logic [AW-1:0]  addr,
  input  rns_pkg::ctrl_t wctrl,
  input  logic [N-1:0]   wimm,
  output rns_pkg::ctrl_t rctrl,
  output logic [N-1:0]   rimm
);
  import rns_pkg::*;

  ctrl_t        mem_c [DEPTH];
  logic [N-1:0] mem_i [DEPTH];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int a = 0; a < DEPTH; a++) begin
        mem_c[a] <= default_ctrl(a / STEPS, a % STEPS);
        mem_i[a] <= N'(default_imm(a / STEPS, a % STEPS));
      end
    end else if (wr && int'(addr) < DEPTH) begin
      mem_c[addr] <= wctrl;
      mem_i[addr] <= wimm;
    end

  always_comb begin
    rctrl = CTRL_NOP;
    rimm  = '0;
    if (rd && int'(addr) < DEPTH) begin
      rctrl = mem_c[addr];
      rimm  = mem_i[addr];
    end
  end
endmodule
