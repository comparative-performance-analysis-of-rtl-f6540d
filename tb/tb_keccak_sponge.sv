// tb_keccak_sponge: self-checking test of the SHA-3 / SHAKE sponge.
// Checks published digests of the empty string and of "abc", then random
// messages of 0..420 bytes (including lengths that fill the rate exactly) in
// all four modes against the byte-wise reference sponge, with random gaps on
// both handshakes and outputs longer than one rate (multi-block squeeze).
// Also checks the cycle count of a one-block SHAKE128 hash.
module tb_keccak_sponge;
  import dil_pkg::*;
  import keccak_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, stop, busy, in_valid, in_ready, in_last, out_valid, out_ready;
  hash_mode_e mode;
  logic [63:0] in_data, out_data;
  logic [3:0] in_bytes;
  int checks = 0, failures = 0;
  int gaps = 1;

  keccak_sponge dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rate_of(hash_mode_e m);
    case (m)
      HM_SHAKE128: return 168;
      HM_SHA3_512: return 72;
      default:     return 136;
    endcase
  endfunction

  // runs one hash through the DUT; returns nwords output words as bytes
  task automatic hash(hash_mode_e m, byte unsigned msg [$], int nwords,
                      output byte unsigned got [$], output int cycles);
    int nw, c0;
    got = {};
    @(negedge clk);
    mode = m; start = 1;
    c0 = $time / 10;
    @(negedge clk) start = 0;
    nw = (msg.size() + 8) / 8;        // always at least one word, last may be partial
    if (msg.size() % 8 == 0 && msg.size() > 0) nw = msg.size() / 8;
    for (int w = 0; w < nw; w++) begin
      logic [63:0] d = {$urandom, $urandom};
      int nb = 0;
      for (int i = 0; i < 8; i++) if (8*w + i < msg.size()) begin d[8*i +: 8] = msg[8*w + i]; nb++; end
      while (gaps != 0 && $urandom_range(0, 3) == 0) @(negedge clk);
      in_valid = 1; in_data = d; in_last = (w == nw - 1); in_bytes = 4'(nb);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    for (int w = 0; w < nwords; w++) begin
      out_ready = (gaps == 0) || ($urandom_range(0, 2) != 0);
      @(posedge clk);
      while (!(out_valid && out_ready)) begin
        @(negedge clk) out_ready = (gaps == 0) || ($urandom_range(0, 2) != 0);
        @(posedge clk);
      end
      for (int i = 0; i < 8; i++) got.push_back(out_data[8*i +: 8]);
      @(negedge clk) out_ready = 0;
    end
    cycles = $time / 10 - c0;
    stop = 1;
    @(negedge clk) stop = 0;
  endtask

  task automatic check_hex(hash_mode_e m, string s, string hex);
    byte unsigned msg [$], got [$];
    int cyc, n;
    for (int i = 0; i < s.len(); i++) msg.push_back(s[i]);
    n = hex.len() / 2;
    hash(m, msg, (n + 7) / 8, got, cyc);
    for (int i = 0; i < n; i++) begin
      logic [7:0] e;
      string h = hex.substr(2*i, 2*i + 1);
      e = 8'(h.atohex());
      checks++;
      if (got[i] != e) begin failures++; $display("mode %0d '%s' byte %0d got %h exp %h", m, s, i, got[i], e); end
    end
  endtask

  initial begin
    byte unsigned msg [$], got [$], expv [$];
    int cyc;
    start = 0; stop = 0; in_valid = 0; in_last = 0; in_data = 0; in_bytes = 0; out_ready = 0;
    mode = HM_SHAKE128;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check_hex(HM_SHAKE128, "", "7f9c2ba4e88f827d616045507605853ed73b8093f6efbc88eb1a6eacfa66ef26");
    check_hex(HM_SHAKE256, "", "46b9dd2b0ba88d13233b3feb743eeb243fcd52ea62b81b82b50c27646ed5762f");
    check_hex(HM_SHA3_256, "", "a7ffc6f8bf1ed76651c14756a061d662f580ff4de43b49fa82d80a4b80f8434a");
    check_hex(HM_SHA3_256, "abc", "3a985da74fe225b2045c172d6bd390bd855f086e3e9d525b46bfe24511431532");
    check_hex(HM_SHA3_512, "", {"a69f73cca23a9ac5c8b567dc185a756e97c982164fe25859e0d1dcc1475c80a6",
                                "15b2123af1f5f94c11e3e9402c3ac558f500199d95b6d3e301758586281dcd26"});
    // timing of a one-block hash without gaps: start, 5 words, pad, 24 rounds, 1 word out
    gaps = 0;
    msg = {};
    for (int i = 0; i < 34; i++) msg.push_back(8'($urandom));
    hash(HM_SHAKE128, msg, 1, got, cyc);
    checks++;
    if (cyc != 1 + 5 + 1 + 24 + 1) begin failures++; $display("one-block hash took %0d cycles", cyc); end
    gaps = 1;
    for (int t = 0; t < 40; t++) begin
      hash_mode_e m = hash_mode_e'(t % 4);
      int len, nwo;
      case (t % 5)
        0: len = rate_of(m);
        1: len = rate_of(m) - 1;
        2: len = 2 * rate_of(m);
        default: len = $urandom_range(0, 420);
      endcase
      nwo = (m == HM_SHAKE128 || m == HM_SHAKE256) ? $urandom_range(1, 50) : (m == HM_SHA3_512 ? 8 : 4);
      msg = {};
      for (int i = 0; i < len; i++) msg.push_back(8'($urandom));
      hash(m, msg, nwo, got, cyc);
      sponge(msg, rate_of(m), (m == HM_SHAKE128 || m == HM_SHAKE256) ? 8'h1F : 8'h06, 8 * nwo, expv);
      for (int i = 0; i < 8 * nwo; i++) begin
        checks++;
        if (got[i] != expv[i]) begin
          failures++;
          if (failures < 10) $display("t %0d mode %0d len %0d byte %0d got %h exp %h", t, m, len, i, got[i], expv[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
