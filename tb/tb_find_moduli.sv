// tb_find_moduli: checks the moduli-set generator of rns_pkg.
//
// Expected sets are the published ones for the proposed scheme at
// N = 6, 10, 12, 16, 20, 24, 28, 32 and cardinalities 3..6. Two published
// sets disagree with the generation steps themselves and are checked against
// the values the steps give (worked out by hand here):
//   N = 24, 3 moduli: (256,257,255) has product 16 776 960 < 2^24-1, so the
//     "increment until the product covers the range" step moves on to
//     (258,259,257);
//   N = 32, 5 moduli: 83 is co-prime to 86, 87 and 85, so k1 = 83 and then
//     k2 = 89, giving (86,87,85,83,89) instead of (86,87,85,89,77).
// Every generated set is also checked for pairwise co-primality and for a
// product of at least 2^N-1, and the CRT inverses for M_i * inv_i = 1 mod m_i.
module tb_find_moduli;
  import rns_pkg::*;

  int checks = 0, failures = 0;

  task automatic check_set(int n_bits, int card, longint unsigned exp [6]);
    longint unsigned got, prod, mi, bigm;
    prod = 1;
    for (int i = 0; i < card; i++) begin
      got = find_modulus(n_bits, card, i);
      checks++;
      if (got != exp[i]) begin
        failures++;
        $display("FAIL N=%0d card=%0d idx=%0d got %0d expected %0d", n_bits, card, i, got, exp[i]);
      end
      prod = prod * got;
    end
    checks++;
    if (prod < (64'd1 << n_bits) - 1) begin
      failures++;
      $display("FAIL N=%0d card=%0d product %0d below range", n_bits, card, prod);
    end
    checks++;
    if (dyn_range(n_bits, card) != prod) begin
      failures++;
      $display("FAIL N=%0d card=%0d dyn_range", n_bits, card);
    end
    for (int i = 0; i < card; i++)
      for (int j = i + 1; j < card; j++) begin
        longint unsigned a = exp[i], b = exp[j], t;
        while (b != 0) begin t = a % b; a = b; b = t; end
        checks++;
        if (a != 1) begin
          failures++;
          $display("FAIL N=%0d card=%0d moduli %0d %0d not co-prime", n_bits, card, i, j);
        end
      end
    for (int i = 0; i < card; i++) begin
      mi   = exp[i];
      bigm = prod / mi;
      checks++;
      if (((bigm % mi) * crt_inv(n_bits, card, i)) % mi != 1) begin
        failures++;
        $display("FAIL N=%0d card=%0d CRT inverse of lane %0d", n_bits, card, i);
      end
    end
  endtask

  initial begin
    check_set( 6, 3, '{6, 7, 5, 0, 0, 0});
    check_set(10, 3, '{12, 13, 11, 0, 0, 0});
    check_set(12, 3, '{18, 19, 17, 0, 0, 0});
    check_set(12, 4, '{8, 9, 7, 11, 0, 0});
    check_set(12, 5, '{6, 7, 5, 11, 13, 0});
    check_set(12, 6, '{4, 5, 3, 7, 11, 13});
    check_set(16, 3, '{42, 43, 41, 0, 0, 0});
    check_set(16, 4, '{16, 17, 15, 19, 0, 0});
    check_set(16, 5, '{10, 11, 9, 13, 7, 0});
    check_set(16, 6, '{8, 9, 7, 11, 5, 13});
    check_set(20, 3, '{102, 103, 101, 0, 0, 0});
    check_set(20, 4, '{32, 33, 31, 35, 0, 0});
    check_set(20, 5, '{16, 17, 15, 19, 23, 0});
    check_set(20, 6, '{12, 13, 11, 17, 7, 19});
    check_set(24, 3, '{258, 259, 257, 0, 0, 0});
    check_set(24, 4, '{64, 65, 63, 67, 0, 0});
    check_set(24, 5, '{28, 29, 27, 31, 25, 0});
    check_set(24, 6, '{16, 17, 15, 19, 23, 11});
    check_set(28, 3, '{646, 647, 645, 0, 0, 0});
    check_set(28, 4, '{128, 129, 127, 131, 0, 0});
    check_set(28, 5, '{50, 51, 49, 47, 53, 0});
    check_set(28, 6, '{26, 27, 25, 29, 23, 31});
    check_set(32, 3, '{1626, 1627, 1625, 0, 0, 0});
    check_set(32, 4, '{256, 257, 255, 259, 0, 0});
    check_set(32, 5, '{86, 87, 85, 83, 89, 0});
    check_set(32, 6, '{42, 43, 41, 47, 37, 53});
    // Widths of the default processor: 11-bit lanes, 33 bits for [0, M).
    checks++;
    if (res_width(32, 3) != 11 || bin_width(32, 3) != 33 || set_bits(32, 3) != 33) begin
      failures++;
      $display("FAIL widths %0d %0d %0d", res_width(32, 3), bin_width(32, 3), set_bits(32, 3));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
