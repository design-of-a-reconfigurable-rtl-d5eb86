// tb_rns_prog_mem: checks the function memory. After reset the three
// default blocks must hold the (X+Y)*Z and X^Y programs with the select codes
// of the worked example (SM1 = 000, SM2 = 001, SM5 = 101, SM6 = 001,
// SM7 = 000 and enabled), written out here as bit patterns. Then random
// words are written to every address and read back, the no-op output while
// rd is low is checked, and out-of-range addresses must read as no-op and
// ignore writes.
module tb_rns_prog_mem;
  import rns_pkg::*;
  localparam int N = 32, DEPTH = 24, AW = 5;

  logic clk = 1'b0, rst_n = 1'b0, wr = 1'b0, rd = 1'b0;
  logic [AW-1:0] addr = '0;
  ctrl_t wctrl, rctrl;
  logic [N-1:0] wimm, rimm;
  ctrl_t shadow_c [DEPTH];
  logic [N-1:0] shadow_i [DEPTH];
  int checks = 0, failures = 0;

  rns_prog_mem #(.N(N)) dut (.clk, .rst_n, .wr, .rd, .addr, .wctrl, .wimm, .rctrl, .rimm);

  always #5 clk = ~clk;

  task automatic expect_word(int a, ctrl_t c, logic [N-1:0] i, string what);
    addr = AW'(a); rd = 1'b1;
    #1;
    checks++;
    if (rctrl !== c || rimm !== i) begin
      failures++;
      $display("FAIL %s addr %0d got %h/%h expected %h/%h", what, a, rctrl, rimm, c, i);
    end
  endtask

  initial begin
    ctrl_t f1s0, f1s1, f1s2, f2s0, f2s1, nop;
    wctrl = '0; wimm = '0;
    // bit layout: last rep rep_src conv1 conv2 sm1 sm2 sm3 sm4 sm5 sm6 sm7 out_en we_add we_sub we_mul
    nop  = {1'b0, 1'b0, 2'd0, 2'd0, 2'd0, 3'b000, 3'b000, 3'b000, 3'b000, 3'b000, 3'b000, 3'b000, 1'b0, 3'b000};
    f1s0 = {1'b0, 1'b0, 2'd0, 2'd0, 2'd1, 3'b000, 3'b001, 3'b000, 3'b000, 3'b000, 3'b000, 3'b000, 1'b0, 3'b100};
    f1s1 = {1'b0, 1'b0, 2'd0, 2'd0, 2'd2, 3'b000, 3'b000, 3'b000, 3'b000, 3'b101, 3'b001, 3'b000, 1'b0, 3'b001};
    f1s2 = {1'b1, 1'b0, 2'd0, 2'd0, 2'd0, 3'b000, 3'b000, 3'b000, 3'b000, 3'b000, 3'b000, 3'b000, 1'b1, 3'b000};
    f2s0 = {1'b0, 1'b0, 2'd0, 2'd0, 2'd3, 3'b000, 3'b000, 3'b000, 3'b000, 3'b001, 3'b001, 3'b000, 1'b0, 3'b001};
    f2s1 = {1'b0, 1'b1, 2'd1, 2'd0, 2'd0, 3'b000, 3'b000, 3'b000, 3'b000, 3'b111, 3'b000, 3'b000, 1'b0, 3'b001};
    #12 rst_n = 1'b1;
    expect_word(0, f1s0, 0, "F1 step 0");
    expect_word(1, f1s1, 0, "F1 step 1");
    expect_word(2, f1s2, 0, "F1 step 2");
    expect_word(3, nop, 0, "F1 step 3");
    expect_word(8, f2s0, 1, "F2 step 0");
    expect_word(9, f2s1, 0, "F2 step 1");
    expect_word(10, f1s2, 0, "F2 step 2");
    expect_word(16, {1'b1, 32'd0}, 0, "F3 step 0");
    rd = 1'b0; #1;
    checks++;
    if (rctrl !== nop || rimm !== '0) begin failures++; $display("FAIL rd low"); end
    // write random contents everywhere, including out-of-range addresses
    for (int a = 0; a < 32; a++) begin
      @(negedge clk);
      addr = AW'(a); wr = 1'b1; rd = 1'b0;
      wctrl = ctrl_t'($urandom); wimm = $urandom;
      if (a < DEPTH) begin shadow_c[a] = wctrl; shadow_i[a] = wimm; end
    end
    @(negedge clk) wr = 1'b0;
    for (int a = 0; a < 32; a++)
      if (a < DEPTH) expect_word(a, shadow_c[a], shadow_i[a], "readback");
      else           expect_word(a, nop, 0, "out of range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
