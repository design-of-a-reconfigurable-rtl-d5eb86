// tb_rrns_configs: runs the processor at the other moduli-set configurations
// of the published comparison tables (word widths 12..32 bits, 3 to 6
// moduli). Each configuration is a separate rrns_top instance whose moduli
// are generated while elaborating; the testbench knows only the dynamic
// range M of each set (the product of the published moduli, written out
// here) and checks the stored functions (X+Y)*Z and X^Y on random N-bit
// operands against 128-bit arithmetic modulo M, plus the latency of
// (X+Y)*Z (4 cycles from start to result_valid).
module tb_rrns_configs;
  import rns_pkg::*;
  localparam int NCFG = 9;
  localparam int           CN [NCFG] = '{12, 16, 16, 20, 24, 28, 32, 32, 32};
  localparam int           CM [NCFG] = '{4, 3, 5, 6, 3, 4, 4, 5, 6};
  localparam longint unsigned CR [NCFG] = '{5544, 74046, 90090, 3879876, 17173254,
                                            274710144, 64'd4345232640, 64'd4697910390, 64'd6824597682};

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  bit [NCFG-1:0] finished = '0;

  always #5 clk = ~clk;

  function automatic logic [127:0] modpow(logic [127:0] b, int unsigned e, logic [127:0] m);
    logic [127:0] r;
    r = 1;
    for (int unsigned i = 0; i < e; i++) r = (r * (b % m)) % m;
    return r % m;
  endfunction

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int N  = CN[g];
    localparam int BW = rns_pkg::bin_width(N, CM[g]);
    localparam logic [127:0] M = 128'(CR[g]);

    logic start = 1'b0;
    logic [1:0] func_sel = '0;
    logic [N-1:0] opd_x = '0, opd_y = '0, opd_z = '0;
    logic busy, done, result_valid;
    logic [BW-1:0] result;

    rrns_top #(.N(N), .NMOD(CM[g])) dut (
      .clk, .rst_n, .prog_we(1'b0), .prog_addr('0), .prog_ctrl(CTRL_NOP), .prog_imm('0),
      .start, .func_sel, .dir_valid(1'b0), .dir_ctrl(CTRL_NOP), .dir_imm('0),
      .opd_x, .opd_y, .opd_z, .busy, .done, .result, .result_valid);

    task automatic run(int f, logic [N-1:0] x, logic [N-1:0] y, logic [N-1:0] z,
                       logic [127:0] expv, int exp_lat);
      int lat = 0;
      @(negedge clk);
      opd_x = x; opd_y = y; opd_z = z; start = 1'b1; func_sel = 2'(f);
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!result_valid && lat < 1000) begin @(negedge clk); lat++; end
      checks++;
      if (128'(result) != expv || (exp_lat > 0 && lat != exp_lat)) begin
        failures++;
        $display("FAIL N=%0d NMOD=%0d f=%0d X=%0d Y=%0d Z=%0d got %0d (lat %0d) expected %0d",
                 N, CM[g], f, x, y, z, result, lat, expv);
      end
    endtask

    initial begin
      logic [N-1:0] x, y, z;
      wait (rst_n);
      for (int k = 0; k < 30; k++) begin
        x = N'($urandom); y = N'($urandom); z = N'($urandom);
        if (k == 0) begin x = '1; y = '1; z = '1; end
        run(0, x, y, z, ((128'(x) + 128'(y)) * 128'(z)) % M, 4);
      end
      for (int k = 0; k < 10; k++) begin
        x = N'($urandom); y = N'($urandom % 12);
        run(1, x, y, '0, modpow(128'(x), int'(y), M), 0);
      end
      finished[g] = 1'b1;
    end
  end

  initial begin
    #12 rst_n = 1'b1;
    wait (&finished);
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
