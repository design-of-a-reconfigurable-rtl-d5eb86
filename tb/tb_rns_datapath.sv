// tb_rns_datapath: drives the datapath with hand-built control words and
// checks the binary results against 128-bit arithmetic modulo
// M = 1626 * 1627 * 1625 done here. Covered: the (X+Y)*Z sequence of the
// worked example, X-Y through the subtractor (including negative
// differences that wrap to M - d), X+Y through the adder, a chain
// X*Y - Z with the subtractor fed by the multiplier, an immediate operand,
// a direct (dir_sel) step, a step with CS low that must change nothing, and
// the repeat-count output. result_valid must rise exactly one cycle after
// the output step.
module tb_rns_datapath;
  import rns_pkg::*;
  localparam int N = 32, NMOD = 3, BW = 33;
  localparam logic [127:0] M = 128'd4298940750;

  logic clk = 1'b0, rst_n = 1'b0;
  logic opd_load = 1'b0, cs = 1'b0, dir_sel = 1'b0;
  logic [N-1:0] opd_x, opd_y, opd_z, mem_imm, dir_imm, rep_count;
  ctrl_t mem_ctrl, dir_ctrl;
  logic [BW-1:0] result;
  logic result_valid;
  int checks = 0, failures = 0;

  rns_datapath #(.N(N), .NMOD(NMOD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load(logic [N-1:0] x, logic [N-1:0] y, logic [N-1:0] z);
    @(negedge clk); opd_x = x; opd_y = y; opd_z = z; opd_load = 1'b1;
    @(negedge clk); opd_load = 1'b0;
  endtask

  // execute one step from the memory port
  task automatic step(ctrl_t c, logic [N-1:0] imm = '0);
    mem_ctrl = c; mem_imm = imm; cs = 1'b1;
    @(negedge clk); cs = 1'b0; mem_ctrl = CTRL_NOP;
  endtask

  task automatic out_step(osel_e s, logic [127:0] expv, string what);
    ctrl_t c = CTRL_NOP;
    c.sm7 = s; c.out_en = 1'b1;
    mem_ctrl = c; cs = 1'b1;
    @(negedge clk); cs = 1'b0; mem_ctrl = CTRL_NOP;
    check(result_valid && 128'(result) == expv,
          $sformatf("%s: result %0d valid %0d expected %0d", what, result, result_valid, expv));
    @(negedge clk);
    check(!result_valid, {what, ": valid for one cycle"});
  endtask

  initial begin
    ctrl_t c;
    logic [N-1:0] x, y, z;
    mem_ctrl = CTRL_NOP; dir_ctrl = CTRL_NOP; mem_imm = '0; dir_imm = '0;
    opd_x = '0; opd_y = '0; opd_z = '0;
    #12 rst_n = 1'b1;
    for (int k = 0; k < 40; k++) begin
      x = $urandom; y = $urandom; z = $urandom;
      if (k == 0) begin x = '1; y = '1; z = '1; end
      if (k == 1) begin x = 5; y = 9; z = 3; end
      load(x, y, z);
      // (X + Y) * Z
      c = CTRL_NOP; c.conv1_src = OPD_X; c.conv2_src = OPD_Y; c.sm1 = SRC_CONV1; c.sm2 = SRC_CONV2; c.we_add = 1'b1;
      step(c);
      c = CTRL_NOP; c.conv2_src = OPD_Z; c.sm5 = SRC_ADD; c.sm6 = SRC_CONV2; c.we_mul = 1'b1;
      step(c);
      out_step(OUT_MUL, ((128'(x) + 128'(y)) * 128'(z)) % M, "(X+Y)*Z");
      out_step(OUT_ADD, (128'(x) + 128'(y)) % M, "X+Y");
      // X - Y
      c = CTRL_NOP; c.conv1_src = OPD_X; c.conv2_src = OPD_Y; c.sm3 = SRC_CONV1; c.sm4 = SRC_CONV2; c.we_sub = 1'b1;
      step(c);
      out_step(OUT_SUB, (M + 128'(x) - 128'(y)) % M, "X-Y");
      // X * Y - Z : multiplier, then subtractor fed by the multiplier
      c = CTRL_NOP; c.conv1_src = OPD_X; c.conv2_src = OPD_Y; c.sm5 = SRC_CONV1; c.sm6 = SRC_CONV2; c.we_mul = 1'b1;
      step(c);
      c = CTRL_NOP; c.conv2_src = OPD_Z; c.sm3 = SRC_MUL; c.sm4 = SRC_CONV2; c.we_sub = 1'b1;
      step(c);
      out_step(OUT_SUB, (M + (128'(x) * 128'(y)) % M - 128'(z)) % M, "X*Y-Z");
      // immediate: X + imm, through a direct step
      c = CTRL_NOP; c.conv1_src = OPD_X; c.conv2_src = OPD_IMM; c.sm1 = SRC_CONV1; c.sm2 = SRC_CONV2; c.we_add = 1'b1;
      dir_ctrl = c; dir_imm = 32'd1234567; dir_sel = 1'b1; cs = 1'b1;
      @(negedge clk); cs = 1'b0; dir_sel = 1'b0;
      out_step(OUT_ADD, (128'(x) + 128'd1234567) % M, "X+imm direct");
      // a step with CS low changes nothing
      c = CTRL_NOP; c.conv1_src = OPD_Y; c.sm1 = SRC_CONV1; c.sm2 = SRC_CONV1; c.we_add = 1'b1; c.out_en = 1'b1;
      mem_ctrl = c; cs = 1'b0;
      @(negedge clk);
      check(!result_valid, "no result without CS");
      out_step(OUT_ADD, (128'(x) + 128'd1234567) % M, "CS low kept TEMP1");
      // repeat count follows rep_src
      c = CTRL_NOP; c.rep_src = OPD_Z; mem_ctrl = c; #1;
      check(rep_count == z, "rep_count = Z");
      c.rep_src = OPD_Y; mem_ctrl = c; #1;
      check(rep_count == y, "rep_count = Y");
      mem_ctrl = CTRL_NOP;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
