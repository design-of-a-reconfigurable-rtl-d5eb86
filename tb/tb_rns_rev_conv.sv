// tb_rns_rev_conv: checks the CRT RNS-to-binary converter (moduli 1626,
// 1627, 1625, M = 4 298 940 750). For every test value X in [0, M) the
// residues are formed here with the moduli written out, and the converter
// must return X. Edge values 0, 1, 2^32-1, M-1 and random values are used.
module tb_rns_rev_conv;
  localparam int N = 32, NMOD = 3, RW = 11, BW = 33;
  localparam longint unsigned MODS [3] = '{1626, 1627, 1625};
  localparam longint unsigned M = 64'd4298940750;

  logic [NMOD-1:0][RW-1:0] res;
  logic [BW-1:0]           bin;
  int checks = 0, failures = 0;

  rns_rev_conv #(.N(N), .NMOD(NMOD)) dut (.res, .bin);

  task automatic try(longint unsigned x);
    for (int i = 0; i < NMOD; i++) res[i] = RW'(x % MODS[i]);
    #1;
    checks++;
    if (64'(bin) != x) begin
      failures++;
      $display("FAIL X=%0d got %0d", x, bin);
    end
  endtask

  initial begin
    try(0); try(1); try(64'hFFFF_FFFF); try(M - 1); try(M - 1626); try(1626 * 1627);
    for (int k = 0; k < 500; k++) try(({32'($urandom), 32'($urandom)}) % M);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
