// rrns_top: reconfigurable RNS processor, complete.
//
// A host CPU hands N-bit unsigned operands X, Y, Z to the processor and asks
// for one of the functions stored in the programmable memory; the operands
// are converted into residues of the moduli set generated for N and NMOD
// ({1626, 1627, 1625}, dynamic range M = 4 298 940 750 > 2^32 by default),
// the function is executed as a sequence of carry-free residue operations on
// the reconfigurable datapath, and the result is converted back into a
// binary number in [0, M). Results are therefore exact modulo M: sums and
// products that exceed M wrap, and differences below zero wrap to M - d.
//
// Blocks: rns_controller (programmable controller), rns_prog_mem (function
// memory / LUT), rns_datapath (converters, multiplexers, adder, subtractor,
// multiplier). The host-side ports stand in for the general-purpose CPU.
//
// Host interface (all synchronous to clk, active-low asynchronous reset):
//   prog_we/prog_addr/prog_ctrl/prog_imm  write one step of a function block
//                                         (address = block * STEPS + step)
//   start/func_sel + opd_x/y/z            run a block; operands latched at start
//   dir_valid/dir_ctrl/dir_imm + opd_*    execute one step directly
//   busy, done                            done pulses with the end of a run
//   result/result_valid                   binary result, valid for one cycle
// Timing: a run accepted at edge t executes step s at edge t+1+s (plus any
// repetitions), and a result from the final step is valid one cycle after
// it. Function 1, (X+Y)*Z, takes three steps: result_valid four cycles after
// start. Function 2, X^Y, takes Y+2 steps.
module rrns_top #(
  parameter int N     = 32,
  parameter int NMOD  = 3,
  parameter int NFUNC = rns_pkg::NFUNC,
  parameter int STEPS = rns_pkg::STEPS,
  localparam int BW   = rns_pkg::bin_width(N, NMOD),
  localparam int AW   = $clog2(NFUNC * STEPS),
  localparam int FW   = (NFUNC > 1) ? $clog2(NFUNC) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           prog_we,
  input  logic [AW-1:0]  prog_addr,
  input  rns_pkg::ctrl_t prog_ctrl,
  input  logic [N-1:0]   prog_imm,
  input  logic           start,
  input  logic [FW-1:0]  func_sel,
  input  logic           dir_valid,
  input  rns_pkg::ctrl_t dir_ctrl,
  input  logic [N-1:0]   dir_imm,
  input  logic [N-1:0]   opd_x,
  input  logic [N-1:0]   opd_y,
  input  logic [N-1:0]   opd_z,
  output logic           busy,
  output logic           done,
  output logic [BW-1:0]  result,
  output logic           result_valid
);
  import rns_pkg::*;

  logic [AW-1:0] mem_addr;
  logic          mem_rd, mem_wr;
  ctrl_t         mem_ctrl, dp_dir_ctrl;
  logic [N-1:0]  mem_imm, dp_dir_imm, rep_count;
  logic          cs, dir_sel, opd_load;

  rns_controller #(.N(N), .NFUNC(NFUNC), .STEPS(STEPS)) u_ctrl (
    .clk, .rst_n,
    .start, .func_sel, .prog_we, .prog_addr,
    .dir_valid, .dir_ctrl_in(dir_ctrl), .dir_imm_in(dir_imm),
    .busy, .done,
    .mem_addr, .mem_rd, .mem_wr, .mem_ctrl,
    .cs, .dir_sel, .opd_load, .dir_ctrl(dp_dir_ctrl), .dir_imm(dp_dir_imm),
    .rep_count
  );

  rns_prog_mem #(.N(N), .NFUNC(NFUNC), .STEPS(STEPS)) u_mem (
    .clk, .rst_n, .wr(mem_wr), .rd(mem_rd), .addr(mem_addr),
    .wctrl(prog_ctrl), .wimm(prog_imm), .rctrl(mem_ctrl), .rimm(mem_imm)
  );

  rns_datapath #(.N(N), .NMOD(NMOD)) u_dp (
    .clk, .rst_n,
    .opd_load, .opd_x, .opd_y, .opd_z,
    .cs, .dir_sel, .mem_ctrl, .mem_imm, .dir_ctrl(dp_dir_ctrl), .dir_imm(dp_dir_imm),
    .rep_count, .result, .result_valid
  );
endmodule
