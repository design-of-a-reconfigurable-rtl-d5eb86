// rns_controller: programmable controller of the RNS processor.
//
// Sits between the host CPU, the function memory and the datapath, and
// offers the host three services:
//   - program:  while idle, prog_we writes {wctrl, wimm} (wired from the
//               host straight to the memory) at prog_addr, through the
//               memory's ADDR and WR lines;
//   - run:      start with func_sel latches the operands (opd_load) and runs
//               function block func_sel: from the next cycle on, one step
//               per clock, it reads the word at func_sel*STEPS + step (RD)
//               and raises CS so that the datapath executes it, until the
//               word marked last (or the end of the block);
//   - direct:   dir_valid with a control word programs the processor
//               directly: the operands are latched and the word executes in
//               the next cycle without touching the memory.
// A word with its rep flag set is executed rep_count times (rep_count being
// the binary operand the datapath selects by the word's rep_src field); with
// a count of zero the step is skipped with CS low. This is how the POWER
// function repeats a multiplication. busy is high while a function or direct
// step is pending; done pulses for one cycle after the last step executed,
// in the same cycle as the datapath's result_valid for a final output step.
// Requests arriving while busy, and start with a block number >= NFUNC, are
// ignored.
//
// The paper shows the controller's links (CS, ADDR, RD, WR) and says that it
// programs the processor directly or through the memory; the sequencing,
// the repeat mechanism and the host handshake are this design's choice.
module rns_controller #(
  parameter int N     = 32,
  parameter int NFUNC = rns_pkg::NFUNC,
  parameter int STEPS = rns_pkg::STEPS,
  localparam int DEPTH = NFUNC * STEPS,
  localparam int AW    = $clog2(DEPTH),
  localparam int FW    = (NFUNC > 1) ? $clog2(NFUNC) : 1,
  localparam int SW    = (STEPS > 1) ? $clog2(STEPS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // host
  input  logic           start,
  input  logic [FW-1:0]  func_sel,
  input  logic           prog_we,
  input  logic [AW-1:0]  prog_addr,
  input  logic           dir_valid,
  input  rns_pkg::ctrl_t dir_ctrl_in,
  input  logic [N-1:0]   dir_imm_in,
  output logic           busy,
  output logic           done,
  // function memory
  output logic [AW-1:0]  mem_addr,
  output logic           mem_rd,
  output logic           mem_wr,
  input  rns_pkg::ctrl_t mem_ctrl,
  // datapath
  output logic           cs,
  output logic           dir_sel,
  output logic           opd_load,
  output rns_pkg::ctrl_t dir_ctrl,
  output logic [N-1:0]   dir_imm,
  input  logic [N-1:0]   rep_count
);
  import rns_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DIRECT} state_e;

  state_e        state;
  logic [FW-1:0] func_r;
  logic [SW-1:0] step_r;
  logic          rep_active;
  logic [N-1:0]  rep_left;

  logic          advance, finish, start_ok;
  logic [N-1:0]  eff_rem;

  assign busy     = (state != S_IDLE);
  assign start_ok = start && (int'(func_sel) < NFUNC);

  always_comb begin
    mem_addr = prog_addr;
    mem_rd   = 1'b0;
    mem_wr   = 1'b0;
    cs       = 1'b0;
    dir_sel  = 1'b0;
    opd_load = 1'b0;
    advance  = 1'b0;
    finish   = 1'b0;
    eff_rem  = rep_active ? rep_left : rep_count;
    unique case (state)
      S_IDLE: begin
        mem_wr   = prog_we;
        opd_load = start_ok || (!start && dir_valid);
      end
      S_RUN: begin
        mem_addr = AW'(int'(func_r) * STEPS + int'(step_r));
        mem_rd   = 1'b1;
        if (!mem_ctrl.rep) begin
          cs      = 1'b1;
          advance = 1'b1;
        end else if (eff_rem == '0) begin
          advance = 1'b1;
        end else begin
          cs      = 1'b1;
          advance = (eff_rem == N'(1));
        end
        finish = advance && (mem_ctrl.last || int'(step_r) == STEPS - 1);
      end
      S_DIRECT: begin
        cs      = 1'b1;
        dir_sel = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state      <= S_IDLE;
      func_r     <= '0;
      step_r     <= '0;
      rep_active <= 1'b0;
      rep_left   <= '0;
      done       <= 1'b0;
      dir_ctrl   <= CTRL_NOP;
      dir_imm    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start_ok) begin
            func_r     <= func_sel;
            step_r     <= '0;
            rep_active <= 1'b0;
            state      <= S_RUN;
          end else if (!start && dir_valid) begin
            dir_ctrl <= dir_ctrl_in;
            dir_imm  <= dir_imm_in;
            state    <= S_DIRECT;
          end
        end
        S_RUN: begin
          if (mem_ctrl.rep && !advance) begin
            rep_active <= 1'b1;
            rep_left   <= eff_rem - N'(1);
          end else begin
            rep_active <= 1'b0;
          end
          if (finish) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (advance) begin
            step_r <= step_r + SW'(1);
          end
        end
        S_DIRECT: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end

  // The datapath only executes steps that the controller issues.
  a_cs_only_when_busy: assert property (@(posedge clk) disable iff (!rst_n) cs |-> busy);
  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n) mem_wr |-> !busy);
endmodule
