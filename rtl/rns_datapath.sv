// rns_datapath: the reconfigurable RNS processor datapath.
//
// Two binary-to-RNS converters, six 5:1 input multiplexers (SM1..SM6), an
// RNS adder, subtractor and multiplier, an output multiplexer (SM7) and an
// RNS-to-binary converter. Every unit input can take either converter's
// residues or any unit's result register, so any chain of additions,
// subtractions and multiplications can be built by sequencing select codes.
// This is the structure of the paper's simplified processor with
// x = y = z = 1 arithmetic units and k = 2 external inputs.
//
// Operation. One control word (rns_pkg::ctrl_t plus an N-bit immediate) is
// one step. When cs is high on a rising clock edge the step is executed:
//   - converter 1 and 2 receive operand X, Y, Z or the immediate, as the
//     word's conv1_src / conv2_src fields say;
//   - every unit whose write enable is set stores f(mux A, mux B) in its
//     result register (converters, multiplexers and units are combinational
//     up to that register);
//   - if out_en is set, the unit chosen by SM7 is converted back to binary
//     and loaded into the result register; result_valid is high for one
//     cycle after such a step.
// The operands X, Y, Z are held in registers loaded on opd_load (the host
// operands of the paper's figure). The control word comes from the function
// memory, or directly from the controller when dir_sel is high.
// rep_count is the binary operand named by the active word's rep_src field;
// the controller uses it as the repeat count of a repeated step (POWER).
//
// The operand registers, write enables, repeat count and result register are
// this design's choice; the paper gives the units, converters, multiplexers
// and select codes of its example.
module rns_datapath #(
  parameter int N    = 32,
  parameter int NMOD = 3,
  localparam int RW  = rns_pkg::res_width(N, NMOD),
  localparam int BW  = rns_pkg::bin_width(N, NMOD)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // operands from the host
  input  logic                  opd_load,
  input  logic [N-1:0]          opd_x,
  input  logic [N-1:0]          opd_y,
  input  logic [N-1:0]          opd_z,
  // control
  input  logic                  cs,
  input  logic                  dir_sel,
  input  rns_pkg::ctrl_t        mem_ctrl,
  input  logic [N-1:0]          mem_imm,
  input  rns_pkg::ctrl_t        dir_ctrl,
  input  logic [N-1:0]          dir_imm,
  // results
  output logic [N-1:0]          rep_count,
  output logic [BW-1:0]         result,
  output logic                  result_valid
);
  import rns_pkg::*;

  ctrl_t        w;
  logic [N-1:0] imm;
  logic [N-1:0] rx, ry, rz;

  assign w   = dir_sel ? dir_ctrl : mem_ctrl;
  assign imm = dir_sel ? dir_imm  : mem_imm;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rx <= '0;
      ry <= '0;
      rz <= '0;
    end else if (opd_load) begin
      rx <= opd_x;
      ry <= opd_y;
      rz <= opd_z;
    end

  function automatic logic [N-1:0] pick(opd_e s, logic [N-1:0] x, logic [N-1:0] y,
                                        logic [N-1:0] z, logic [N-1:0] i);
    unique case (s)
      OPD_X:   return x;
      OPD_Y:   return y;
      OPD_Z:   return z;
      default: return i;
    endcase
  endfunction

  logic [N-1:0] c1_bin, c2_bin;
  assign c1_bin    = pick(w.conv1_src, rx, ry, rz, imm);
  assign c2_bin    = pick(w.conv2_src, rx, ry, rz, imm);
  assign rep_count = pick(w.rep_src,   rx, ry, rz, imm);

  logic [NMOD-1:0][RW-1:0] c1, c2, q_add, q_sub, q_mul;
  logic [NMOD-1:0][RW-1:0] a_add, b_add, a_sub, b_sub, a_mul, b_mul, o_res;
  logic [BW-1:0]           o_bin;
  logic                    o_valid;

  rns_fwd_conv #(.N(N), .NMOD(NMOD)) u_btor1 (.bin(c1_bin), .res(c1));
  rns_fwd_conv #(.N(N), .NMOD(NMOD)) u_btor2 (.bin(c2_bin), .res(c2));

  rns_in_mux #(.NMOD(NMOD), .RW(RW)) u_sm1 (.sel(w.sm1), .conv1(c1), .conv2(c2),
    .add(q_add), .sub(q_sub), .mul(q_mul), .y(a_add));
  rns_in_mux #(.NMOD(NMOD), .RW(RW)) u_sm2 (.sel(w.sm2), .conv1(c1), .conv2(c2),
    .add(q_add), .sub(q_sub), .mul(q_mul), .y(b_add));
  rns_in_mux #(.NMOD(NMOD), .RW(RW)) u_sm3 (.sel(w.sm3), .conv1(c1), .conv2(c2),
    .add(q_add), .sub(q_sub), .mul(q_mul), .y(a_sub));
  rns_in_mux #(.NMOD(NMOD), .RW(RW)) u_sm4 (.sel(w.sm4), .conv1(c1), .conv2(c2),
    .add(q_add), .sub(q_sub), .mul(q_mul), .y(b_sub));
  rns_in_mux #(.NMOD(NMOD), .RW(RW)) u_sm5 (.sel(w.sm5), .conv1(c1), .conv2(c2),
    .add(q_add), .sub(q_sub), .mul(q_mul), .y(a_mul));
  rns_in_mux #(.NMOD(NMOD), .RW(RW)) u_sm6 (.sel(w.sm6), .conv1(c1), .conv2(c2),
    .add(q_add), .sub(q_sub), .mul(q_mul), .y(b_mul));

  rns_adder      #(.N(N), .NMOD(NMOD)) u_add (.clk, .rst_n, .we(cs && w.we_add),
    .a(a_add), .b(b_add), .q(q_add));
  rns_subtractor #(.N(N), .NMOD(NMOD)) u_sub (.clk, .rst_n, .we(cs && w.we_sub),
    .a(a_sub), .b(b_sub), .q(q_sub));
  rns_multiplier #(.N(N), .NMOD(NMOD)) u_mul (.clk, .rst_n, .we(cs && w.we_mul),
    .a(a_mul), .b(b_mul), .q(q_mul));

  rns_out_mux #(.NMOD(NMOD), .RW(RW)) u_sm7 (.sel(w.sm7), .en(cs && w.out_en),
    .add(q_add), .sub(q_sub), .mul(q_mul), .y(o_res), .valid(o_valid));

  rns_rev_conv #(.N(N), .NMOD(NMOD)) u_rtob (.res(o_res), .bin(o_bin));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      result       <= '0;
      result_valid <= 1'b0;
    end else begin
      result_valid <= o_valid;
      if (o_valid) result <= o_bin;
    end
endmodule
