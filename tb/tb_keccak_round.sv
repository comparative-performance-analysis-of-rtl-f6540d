// tb_keccak_round: self-checking test of one Keccak-f[1600] round.
// Iterates the round 24 times from the all-zero state and compares with the
// published first lanes of Keccak-f[1600](0) and with the reference model;
// then checks single rounds on random states for every round index.
module tb_keccak_round;
  import keccak_ref_pkg::*;

  logic [1599:0] state_in, state_out;
  logic [4:0] round;
  int checks = 0, failures = 0;

  keccak_round dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lanes_t m;
    logic [1599:0] s;
    s = '0;
    for (int r = 0; r < 24; r++) begin
      state_in = s; round = 5'(r); #1; s = state_out;
    end
    checks++;
    if (s[63:0] != 64'hF1258F7940E1DDE7 || s[127:64] != 64'h84D5CCF933C0478A) begin
      failures++; $display("zero-state permutation wrong: %h %h", s[63:0], s[127:64]);
    end
    for (int i = 0; i < 25; i++) m[i] = '0;
    permute(m);
    for (int i = 0; i < 25; i++) begin
      checks++;
      if (s[64*i +: 64] != m[i]) begin failures++; $display("lane %0d %h vs %h", i, s[64*i +: 64], m[i]); end
    end
    for (int t = 0; t < 96; t++) begin
      for (int i = 0; i < 50; i++) s[32*i +: 32] = $urandom;
      for (int i = 0; i < 25; i++) m[i] = s[64*i +: 64];
      // the model applies round 0; swapping its iota constant for that of
      // round r gives the expected result of round r
      state_in = s; round = 5'(t % 24); #1;
      permute(m, 1);
      begin
        logic [63:0] rc0, rcr;
        rc0 = 64'h1;
        rcr = '0;
        for (int j = 0; j <= 6; j++) if (rc_bit(j + 7*(t % 24))) rcr[(1 << j) - 1] = 1'b1;
        m[0] = m[0] ^ rc0 ^ rcr;
      end
      for (int i = 0; i < 25; i++) begin
        checks++;
        if (state_out[64*i +: 64] != m[i]) begin failures++; $display("rnd %0d lane %0d", t % 24, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
