// tb_rns_out_mux: checks the output multiplexer for every select code with
// the enable high and low.
module tb_rns_out_mux;
  import rns_pkg::*;
  localparam int NMOD = 3, RW = 11;

  osel_e                   sel;
  logic                    en, valid, exp_v;
  logic [NMOD-1:0][RW-1:0] ad, sb, ml, y, exp_y;
  int checks = 0, failures = 0;

  rns_out_mux #(.NMOD(NMOD), .RW(RW)) dut (.sel, .en, .add(ad), .sub(sb), .mul(ml), .y, .valid);

  initial begin
    for (int k = 0; k < 50; k++) begin
      ad = {NMOD{RW'($urandom)}}; sb = {NMOD{RW'($urandom)}}; ml = {NMOD{RW'($urandom)}};
      for (int e = 0; e < 2; e++)
        for (int s = 0; s < 8; s++) begin
          sel = osel_e'(s);
          en  = e[0];
          exp_y = '0;
          exp_v = 1'b0;
          if (e == 1) begin
            if (s == 0) begin exp_y = ml; exp_v = 1'b1; end
            if (s == 1) begin exp_y = ad; exp_v = 1'b1; end
            if (s == 2) begin exp_y = sb; exp_v = 1'b1; end
          end
          #1;
          checks++;
          if (y !== exp_y || valid !== exp_v) begin
            failures++;
            $display("FAIL sel=%0d en=%0d", s, e);
          end
        end
    end
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
