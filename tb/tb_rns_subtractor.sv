// tb_rns_subtractor: checks the RNS subtractor (N = 32, moduli 1626, 1627, 1625) on
// random reduced residues and on the lane extremes 0, 1 and m_i - 1
// (1 + (m_i - 1) hits the modulus exactly). The
// expected lane value is computed here as (a + m - b) % m. Also checks the one-cycle
// latency of the result register (the new value appears after exactly one
// edge with we high) and that the register holds its value while we is low.
module tb_rns_subtractor;
  localparam int N = 32, NMOD = 3, RW = 11;
  localparam longint unsigned MODS [3] = '{1626, 1627, 1625};

  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [NMOD-1:0][RW-1:0] a, b, q, exp_q;
  int checks = 0, failures = 0;

  rns_subtractor #(.N(N), .NMOD(NMOD)) dut (.clk, .rst_n, .we, .a, .b, .q);

  always #5 clk = ~clk;

  function automatic logic [NMOD-1:0][RW-1:0] model(logic [NMOD-1:0][RW-1:0] x,
                                                    logic [NMOD-1:0][RW-1:0] y);
    logic [NMOD-1:0][RW-1:0] r;
    for (int i = 0; i < NMOD; i++) begin
      longint unsigned m = MODS[i], a = 64'(x[i]), b = 64'(y[i]);
      r[i] = RW'((a + m - b) % m);
    end
    return r;
  endfunction

  task automatic apply(logic [NMOD-1:0][RW-1:0] x, logic [NMOD-1:0][RW-1:0] y);
    a = x; b = y; we = 1'b1;
    exp_q = model(x, y);
    @(posedge clk); #1;
    we = 1'b0;
    checks++;
    if (q !== exp_q) begin
      failures++;
      $display("FAIL a=%h b=%h q=%h expected %h", x, y, q, exp_q);
    end
    // hold: new inputs but we low, one more edge
    a = ~x; b = ~y;
    @(posedge clk); #1;
    checks++;
    if (q !== exp_q) begin
      failures++;
      $display("FAIL register did not hold");
    end
  endtask

  function automatic logic [NMOD-1:0][RW-1:0] rnd();
    logic [NMOD-1:0][RW-1:0] r;
    for (int i = 0; i < NMOD; i++) r[i] = RW'(64'($urandom) % MODS[i]);
    return r;
  endfunction

  initial begin
    logic [NMOD-1:0][RW-1:0] top, one;
    for (int i = 0; i < NMOD; i++) begin top[i] = RW'(MODS[i] - 1); one[i] = RW'(1); end
    a = '0; b = '0;
    #12 rst_n = 1'b1;
    @(posedge clk); #1;
    checks++;
    if (q !== '0) begin failures++; $display("FAIL reset value"); end
    apply('0, '0);
    apply(top, top);
    apply(top, '0);
    apply('0, top);
    apply(one, top);  // a + b = m exactly
    apply(top, one);
    for (int k = 0; k < 300; k++) apply(rnd(), rnd());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
