// tb_rrns_top: end-to-end test of the whole processor at its default size
// (N = 32, moduli 1626/1627/1625, three function blocks of eight steps).
//
// Plays the host CPU: runs the stored (X+Y)*Z and X^Y functions on random
// operands, programs the third function block with X*Y - (Y+Z) through the
// memory write port and runs it, and executes X - Z as two directly
// programmed steps. Results are compared with 128-bit arithmetic modulo
// M = 4 298 940 750 done here, and the latency from start to result_valid is
// checked: 4 cycles for (X+Y)*Z, 3 + max(Y,1) for X^Y, 5 for the programmed
// block, 2 for each direct step. Each mechanism is counted, and one that
// never happened counts as a failure: stored-function run, repeated step,
// repeat count zero (skipped step), host program write, direct step,
// negative difference wrapping modulo M, result exceeding M and wrapping,
// output multiplexer on adder, subtractor and multiplier, start ignored
// while busy.
module tb_rrns_top;
  import rns_pkg::*;
  localparam int N = 32, BW = 33, AW = 5;
  localparam logic [127:0] M = 128'd4298940750;

  logic clk = 1'b0, rst_n = 1'b0;
  logic prog_we = 1'b0, start = 1'b0, dir_valid = 1'b0;
  logic [AW-1:0] prog_addr = '0;
  ctrl_t prog_ctrl, dir_ctrl;
  logic [N-1:0] prog_imm = '0, dir_imm = '0, opd_x = '0, opd_y = '0, opd_z = '0;
  logic [1:0] func_sel = '0;
  logic busy, done;
  logic [BW-1:0] result;
  logic result_valid;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_f1, n_f2, n_rep, n_rep0, n_prog, n_f3, n_direct, n_negwrap, n_ovf;
  int n_out_add, n_out_sub, n_out_mul, n_busy_ignored;

  rrns_top dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [127:0] modpow(logic [127:0] b, int unsigned e);
    logic [127:0] r = 1;
    b = b % M;
    for (int unsigned i = 0; i < e; i++) r = (r * b) % M;
    return r % M;
  endfunction

  // start block f and wait for the result; returns the latency in cycles
  task automatic run(int f, logic [N-1:0] x, logic [N-1:0] y, logic [N-1:0] z,
                     logic [127:0] expv, int exp_lat, string what);
    int lat = 0;
    bit extra_start = 1'b1;
    @(negedge clk);
    opd_x = x; opd_y = y; opd_z = z; start = 1'b1; func_sel = 2'(f);
    do begin
      @(negedge clk);
      lat++;
      // keep start high for one more cycle while busy: must be ignored
      start = extra_start && busy;
      if (start) begin
        n_busy_ignored++;
        opd_x = ~x;  // would corrupt the operands if accepted
      end
      extra_start = 1'b0;
    end while (!result_valid && lat < 10000);
    start = 1'b0;
    check(128'(result) == expv, $sformatf("%s: X=%0d Y=%0d Z=%0d got %0d expected %0d",
                                          what, x, y, z, result, expv));
    check(lat == exp_lat, $sformatf("%s: latency %0d expected %0d", what, lat, exp_lat));
    check(done, {what, ": done with the result"});
    @(negedge clk);
    check(!busy && !result_valid, {what, ": back to idle"});
  endtask

  task automatic direct(ctrl_t c, logic [N-1:0] x, logic [N-1:0] y, logic [N-1:0] z);
    @(negedge clk);
    dir_ctrl = c; dir_valid = 1'b1; opd_x = x; opd_y = y; opd_z = z;
    @(negedge clk);
    dir_valid = 1'b0;
    check(busy, "direct step accepted");
    @(negedge clk);
    check(done && !busy, "direct step done");
    n_direct++;
  endtask

  task automatic prog_write(int a, ctrl_t c);
    @(negedge clk);
    prog_we = 1'b1; prog_addr = AW'(a); prog_ctrl = c; prog_imm = '0;
    @(negedge clk);
    prog_we = 1'b0;
    n_prog++;
  endtask

  initial begin
    ctrl_t c;
    logic [N-1:0] x, y, z;
    logic [127:0] e;
    int unsigned p;
    prog_ctrl = CTRL_NOP; dir_ctrl = CTRL_NOP;
    #12 rst_n = 1'b1;

    // Function 1: (X + Y) * Z
    for (int k = 0; k < 60; k++) begin
      x = $urandom; y = $urandom; z = $urandom;
      if (k == 0) begin x = 2; y = 3; z = 4; end
      e = (128'(x) + 128'(y)) * 128'(z);
      if (e >= M) n_ovf++;
      run(0, x, y, z, e % M, 4, "F1 (X+Y)*Z");
      n_f1++; n_out_mul++;
    end

    // Function 2: X ^ Y
    for (int k = 0; k < 30; k++) begin
      x = $urandom; y = 32'($urandom % 20); z = $urandom;
      if (k == 0) y = 0;
      if (k == 1) begin x = 3; y = 5; end
      p = y;
      run(1, x, y, z, modpow(128'(x), p), 3 + ((p == 0) ? 1 : p), "F2 X^Y");
      n_f2++; n_out_mul++;
      if (p == 0) n_rep0++; else n_rep++;
    end

    // Function 3, written by the host: X*Y - (Y+Z)
    c = CTRL_NOP; c.conv1_src = OPD_X; c.conv2_src = OPD_Y; c.sm5 = SRC_CONV1; c.sm6 = SRC_CONV2; c.we_mul = 1'b1;
    prog_write(16, c);
    c = CTRL_NOP; c.conv1_src = OPD_Y; c.conv2_src = OPD_Z; c.sm1 = SRC_CONV1; c.sm2 = SRC_CONV2; c.we_add = 1'b1;
    prog_write(17, c);
    c = CTRL_NOP; c.sm3 = SRC_MUL; c.sm4 = SRC_ADD; c.we_sub = 1'b1;
    prog_write(18, c);
    c = CTRL_NOP; c.sm7 = OUT_SUB; c.out_en = 1'b1; c.last = 1'b1;
    prog_write(19, c);
    for (int k = 0; k < 40; k++) begin
      x = $urandom; y = $urandom; z = $urandom;
      if (k == 0) begin x = 1; y = 2; z = 3; end   // 2 - 5 = -3: wraps to M - 3
      e = (128'(x) * 128'(y)) % M;
      if (e < (128'(y) + 128'(z)) % M) n_negwrap++;
      run(2, x, y, z, (M + e - (128'(y) + 128'(z)) % M) % M, 5, "F3 X*Y-(Y+Z)");
      n_f3++; n_out_sub++;
    end

    // Direct programming: X - Z and X + Y
    for (int k = 0; k < 20; k++) begin
      x = $urandom; y = $urandom; z = $urandom;
      if (k == 0) begin x = 10; z = 11; end
      c = CTRL_NOP; c.conv1_src = OPD_X; c.conv2_src = OPD_Z; c.sm3 = SRC_CONV1; c.sm4 = SRC_CONV2; c.we_sub = 1'b1;
      c.sm1 = SRC_CONV1; c.we_add = 1'b1;
      c.conv2_src = OPD_Z;
      direct(c, x, y, z);
      c = CTRL_NOP; c.sm7 = OUT_SUB; c.out_en = 1'b1;
      direct(c, x, y, z);
      check(result_valid && 128'(result) == (M + 128'(x) - 128'(z)) % M, "direct X-Z");
      if (x < z) n_negwrap++;
      n_out_sub++;
      c = CTRL_NOP; c.conv1_src = OPD_X; c.conv2_src = OPD_Y; c.sm1 = SRC_CONV1; c.sm2 = SRC_CONV2; c.we_add = 1'b1;
      direct(c, x, y, z);
      c = CTRL_NOP; c.sm7 = OUT_ADD; c.out_en = 1'b1;
      direct(c, x, y, z);
      check(result_valid && 128'(result) == (128'(x) + 128'(y)) % M, "direct X+Y");
      n_out_add++;
    end

    check(n_f1 > 0, "stored function 1 ran");
    check(n_f2 > 0, "stored function 2 (POWER) ran");
    check(n_rep > 0, "repeated step happened");
    check(n_rep0 > 0, "repeat count zero happened");
    check(n_prog > 0, "host program write happened");
    check(n_f3 > 0, "host-programmed block ran");
    check(n_direct > 0, "direct step happened");
    check(n_negwrap > 0, "negative difference wrapped");
    check(n_ovf > 0, "result above M wrapped");
    check(n_out_add > 0 && n_out_sub > 0 && n_out_mul > 0, "all output mux codes used");
    check(n_busy_ignored > 0, "start while busy ignored");
    $display("mechanisms: f1=%0d f2=%0d rep=%0d rep0=%0d prog=%0d f3=%0d direct=%0d negwrap=%0d ovf=%0d out add/sub/mul=%0d/%0d/%0d busy_ignored=%0d",
             n_f1, n_f2, n_rep, n_rep0, n_prog, n_f3, n_direct, n_negwrap, n_ovf,
             n_out_add, n_out_sub, n_out_mul, n_busy_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
