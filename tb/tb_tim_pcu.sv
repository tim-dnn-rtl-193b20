// tb_tim_pcu: random counts n, k (as SPICE bitline voltages), scale factors,
// I_alpha sign, shift and psum-in; the result must equal
// ((W1*min(n,8) - W2*min(k,8)) * I_alpha << isb) + psum_in, wrapped to 12 bits.
module tb_tim_pcu;
  int checks = 0, failures = 0;
  int st [11] = '{1000, 890, 780, 680, 580, 490, 400, 320, 240, 180, 120};
  logic [9:0] v_bl, v_blb;
  logic [3:0] w1, w2;
  logic signed [4:0] i_alpha;
  logic [1:0] isb;
  logic signed [11:0] psum_in, psum_out;
  logic [3:0] n, k;
  tim_pcu #(.NMAX(8)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int cn, ck, en, ek, ia, exp;
      cn = $urandom_range(0, 10); ck = $urandom_range(0, 10);
      v_bl = 10'(st[cn]); v_blb = 10'(st[ck]);
      w1 = 4'($urandom); w2 = 4'($urandom);
      ia = $urandom_range(0, 1) ? int'($urandom_range(0, 15)) : -int'($urandom_range(0, 15));
      if (t < 50) begin w1 = 1; w2 = 1; ia = 1; end      // unweighted system
      i_alpha = 5'(ia);
      isb = 2'($urandom); psum_in = 12'($urandom);
      #1;
      en = cn > 8 ? 8 : cn; ek = ck > 8 ? 8 : ck;
      exp = (((int'(w1) * en - int'(w2) * ek) * ia) <<< int'(isb)) + int'(psum_in);
      checks++;
      if (psum_out !== 12'(exp) || int'(n) != en || int'(k) != ek) begin
        failures++; $display("FAIL n=%0d k=%0d w1=%0d w2=%0d ia=%0d isb=%0d in=%0d out=%0d exp=%0d",
                             cn, ck, w1, w2, ia, isb, psum_in, psum_out, 12'(exp));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
