// tb_rns_in_mux: drives distinct vectors on the five inputs of the 5:1
// residue multiplexer and checks every select code, including the three
// unused ones that must give zero.
module tb_rns_in_mux;
  import rns_pkg::*;
  localparam int NMOD = 3, RW = 11;

  src_e                    sel;
  logic [NMOD-1:0][RW-1:0] c1, c2, ad, sb, ml, y, exp_y;
  int checks = 0, failures = 0;

  rns_in_mux #(.NMOD(NMOD), .RW(RW)) dut (.sel, .conv1(c1), .conv2(c2), .add(ad),
                                          .sub(sb), .mul(ml), .y);

  initial begin
    for (int k = 0; k < 50; k++) begin
      c1 = {NMOD{RW'($urandom)}}; c2 = {NMOD{RW'($urandom)}};
      ad = {NMOD{RW'($urandom)}}; sb = {NMOD{RW'($urandom)}}; ml = {NMOD{RW'($urandom)}};
      for (int s = 0; s < 8; s++) begin
        sel = src_e'(s);
        case (s)
          0: exp_y = c1;
          1: exp_y = c2;
          5: exp_y = ad;
          6: exp_y = sb;
          7: exp_y = ml;
          default: exp_y = '0;
        endcase
        #1;
        checks++;
        if (y !== exp_y) begin
          failures++;
          $display("FAIL sel=%0d", s);
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
