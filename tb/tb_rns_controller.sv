// tb_rns_controller: checks the programmable controller against a
// behavioural function memory held in the testbench. Each cycle the
// testbench records whether CS was high, the address read and the direct
// select, and compares the trace of a run with the expected one:
//   - a three-step block: CS on addresses base+0..2, then done;
//   - a repeated step with counts 0, 1 and 5: skipped with CS low, executed
//     once, executed five times;
//   - a block without a last flag ends after STEPS steps;
//   - direct programming: one CS cycle with dir_sel and the given word;
//   - program writes reach the memory only while idle; a start with an
//     invalid block number and a start while busy are ignored.
module tb_rns_controller;
  import rns_pkg::*;
  localparam int N = 32, STEPS = 8, DEPTH = 24, AW = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, prog_we = 1'b0, dir_valid = 1'b0;
  logic [1:0] func_sel = '0;
  logic [AW-1:0] prog_addr = '0, mem_addr;
  ctrl_t dir_ctrl_in, mem_ctrl, dir_ctrl;
  logic [N-1:0] dir_imm_in, dir_imm, rep_count;
  logic busy, done, mem_rd, mem_wr, cs, dir_sel, opd_load;
  ctrl_t mem [DEPTH];
  int checks = 0, failures = 0;

  rns_controller #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  assign mem_ctrl = (mem_rd && int'(mem_addr) < DEPTH) ? mem[mem_addr] : CTRL_NOP;

  // trace of executed (CS high) and skipped steps
  int tr_addr [$];
  bit tr_cs   [$];
  int n_done;
  always @(posedge clk) if (rst_n) begin
    if (mem_rd) begin tr_addr.push_back(int'(mem_addr)); tr_cs.push_back(cs); end
    if (done) n_done++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(int f, logic [N-1:0] cnt, int exp_addr [$], bit exp_cs [$], string what);
    tr_addr.delete(); tr_cs.delete(); n_done = 0;
    rep_count = cnt;
    @(negedge clk); start = 1'b1; func_sel = 2'(f);
    #1 check(opd_load == 1'b1, {what, ": opd_load at start"});
    @(negedge clk); start = 1'b0;
    // a second start while busy must be ignored
    start = 1'b1; func_sel = 2'(f);
    @(negedge clk); start = 1'b0;
    while (busy) @(negedge clk);
    @(negedge clk);
    check(tr_addr.size() == exp_addr.size(), $sformatf("%s: %0d steps, expected %0d", what, tr_addr.size(), exp_addr.size()));
    for (int i = 0; i < exp_addr.size() && i < tr_addr.size(); i++)
      check(tr_addr[i] == exp_addr[i] && tr_cs[i] == exp_cs[i],
            $sformatf("%s: step %0d addr %0d cs %0d", what, i, tr_addr[i], tr_cs[i]));
    check(n_done == 1, {what, ": one done pulse"});
  endtask

  initial begin
    dir_ctrl_in = CTRL_NOP; dir_imm_in = '0; rep_count = '0;
    for (int a = 0; a < DEPTH; a++) mem[a] = CTRL_NOP;
    // block 0: three plain steps
    mem[2].last = 1'b1;
    // block 1: plain, repeated, last
    mem[9].rep = 1'b1;
    mem[10].last = 1'b1;
    // block 2: no last flag anywhere
    #12 rst_n = 1'b1;
    run(0, 0, '{0, 1, 2}, '{1, 1, 1}, "block 0");
    run(1, 0, '{8, 9, 10}, '{1, 0, 1}, "repeat 0");
    run(1, 1, '{8, 9, 10}, '{1, 1, 1}, "repeat 1");
    run(1, 5, '{8, 9, 9, 9, 9, 9, 10}, '{1, 1, 1, 1, 1, 1, 1}, "repeat 5");
    run(2, 0, '{16, 17, 18, 19, 20, 21, 22, 23}, '{1, 1, 1, 1, 1, 1, 1, 1}, "no last");
    // invalid block number: ignored
    @(negedge clk); start = 1'b1; func_sel = 2'd3;
    @(negedge clk); start = 1'b0;
    check(!busy, "invalid block ignored");
    // direct programming
    @(negedge clk); dir_valid = 1'b1; dir_ctrl_in = ctrl_t'($urandom); dir_imm_in = $urandom;
    #1 check(opd_load, "opd_load on direct");
    @(negedge clk); dir_valid = 1'b0;
    check(cs && dir_sel && !mem_rd && dir_ctrl == dir_ctrl_in && dir_imm == dir_imm_in, "direct step");
    @(negedge clk);
    check(!busy && !cs, "direct returns to idle");
    // program writes: passed while idle
    prog_we = 1'b1; prog_addr = 5'd7; #1;
    check(mem_wr && mem_addr == 5'd7, "program write while idle");
    @(negedge clk); prog_we = 1'b0; start = 1'b1; func_sel = 2'd0;
    @(negedge clk); start = 1'b0; prog_we = 1'b1; #1;
    check(!mem_wr, "program write blocked while busy");
    @(negedge clk); prog_we = 1'b0;
    while (busy) @(negedge clk);
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
