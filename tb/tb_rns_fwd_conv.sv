// tb_rns_fwd_conv: checks the binary-to-RNS converter at its default size
// (N = 32, moduli 1626, 1627, 1625) on edge values and random operands; the
// expected residues are computed here with the moduli written out.
module tb_rns_fwd_conv;
  localparam int N = 32, NMOD = 3, RW = 11;
  localparam longint unsigned MODS [3] = '{1626, 1627, 1625};

  logic [N-1:0]            bin;
  logic [NMOD-1:0][RW-1:0] res;
  int checks = 0, failures = 0;

  rns_fwd_conv #(.N(N), .NMOD(NMOD)) dut (.bin, .res);

  task automatic try(logic [N-1:0] v);
    bin = v;
    #1;
    for (int i = 0; i < NMOD; i++) begin
      checks++;
      if (64'(res[i]) != 64'(v) % MODS[i]) begin
        failures++;
        $display("FAIL X=%0d lane %0d got %0d expected %0d", v, i, res[i], 64'(v) % MODS[i]);
      end
    end
  endtask

  initial begin
    try(0); try(1); try(1625); try(1626); try(1627); try(32'hFFFF_FFFF);
    for (int k = 0; k < 500; k++) try($urandom);
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
