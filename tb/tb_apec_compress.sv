// tb_apec_compress: checks the two groups of the printed APEC example
// (14 events become 8) and random words: overlap = s0 AND s1, the parts are
// disjoint from it, and overlap+n0 = s0, overlap+n1 = s1 (so the partial
// sums are unchanged) with (g-1)|O| = |O| events saved.
module tb_apec_compress;
  logic pair; logic [7:0] a0, a1, ao, an0, an1;
  logic [511:0] s0, s1, ov, n0, n1;
  int checks = 0, failures = 0;

  apec_compress #(.N(8))   u8   (.pair, .s0(a0), .s1(a1), .ov(ao), .n0(an0), .n1(an1));
  apec_compress #(.N(512)) u512 (.pair, .s0, .s1, .ov, .n0, .n1);

  initial begin
    int n_before, n_after;
    pair = 1;
    s0 = '0; s1 = '0;
    // group 1 and group 2 of the example
    n_before = 0; n_after = 0;
    a0 = 8'b1010_1010; a1 = 8'b0010_1010; #1;
    n_before += $countones(a0) + $countones(a1); n_after += $countones(ao) + $countones(an0) + $countones(an1);
    checks++; if (ao !== 8'b0010_1010 || an0 !== 8'b1000_0000 || an1 !== 8'b0) failures++;
    a0 = 8'b1000_0111; a1 = 8'b1000_0011; #1;
    n_before += $countones(a0) + $countones(a1); n_after += $countones(ao) + $countones(an0) + $countones(an1);
    checks++; if (ao !== 8'b1000_0011 || an0 !== 8'b0000_0100 || an1 !== 8'b0) failures++;
    checks++; if (n_before != 14 || n_after != 8) begin failures++; $display("example: %0d -> %0d", n_before, n_after); end
    for (int i = 0; i < 500; i++) begin
      pair = (i % 5 != 0);
      for (int k = 0; k < 16; k++) begin s0[k*32 +: 32] = $urandom; s1[k*32 +: 32] = $urandom | $urandom; end
      #1;
      checks++;
      if (pair) begin
        if (ov !== (s0 & s1) || (n0 & ov) != '0 || (n1 & ov) != '0 || (ov | n0) !== s0 || (ov | n1) !== s1 ||
            $countones(ov) + $countones(n0) + $countones(n1) != $countones(s0) + $countones(s1) - $countones(s0 & s1))
          failures++;
      end else if (ov != '0 || n0 !== s0 || n1 != '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
