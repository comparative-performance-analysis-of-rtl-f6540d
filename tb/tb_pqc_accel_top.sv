// tb_pqc_accel_top: end-to-end test of the accelerator at its default size,
// driven the way processor software and a DMA engine would drive it.
// An AXI4-Lite master issues commands and polls STATUS; a stream source
// feeds s_axis (with random gaps) and a stream sink drains m_axis (with random
// back-pressure). The flow is one step of a Dilithium matrix-vector product:
//   SAMPLE  matrix entries ExpandA(rho, nonce) into slot 0, each read back
//           and compared with SHAKE128 + rejection sampling of the reference;
//   SAMPLE  secret polynomials ExpandS(rho', nonce) with eta = 2 and 4;
//   LOAD    a short secret polynomial s into slot 1 (one value >= q);
//   NTT     slot 1, compared with the reference NTT; CYCLES checked;
//   PWM     slot 2 = A_00 o NTT(s), compared coefficient by coefficient;
//   INTT    slot 2, checked by NTT(result) == product; CYCLES checked;
//   HASH    SHAKE256 (two-block message, 40 output words = three squeeze
//           blocks), SHA3-512 of a rate-sized message, SHAKE128 of "".
// Every mechanism (each command, stream stalls and gaps, sampler rejections,
// multi-block absorb and squeeze, input reduction) is counted and must occur.
module tb_pqc_accel_top;
  import dil_pkg::*;
  import dil_ref_pkg::*;
  import keccak_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0]  s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;
  logic [63:0] s_axis_tdata, m_axis_tdata;
  logic [7:0]  s_axis_tkeep, m_axis_tkeep;
  logic        s_axis_tlast, s_axis_tvalid, s_axis_tready;
  logic        m_axis_tlast, m_axis_tvalid, m_axis_tready;

  pqc_accel_top dut (.*);

  int checks = 0, failures = 0;
  int n_cmd [8];
  int n_m_stall = 0, n_s_gap = 0, n_rej = 0, n_multi_absorb = 0, n_multi_squeeze = 0;
  int n_reduce = 0, n_eta = 0, n_eta_rej = 0;

  // ------------------------------------------------------------ AXI4-Lite
  task automatic axil_write(logic [5:0] a, logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wstrb = 4'hF; s_axil_wvalid = 1;
    @(posedge clk);
    while (!(s_axil_awready && s_axil_wready)) @(posedge clk);
    @(negedge clk) begin s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 1; end
    @(posedge clk);
    while (!s_axil_bvalid) @(posedge clk);
    @(negedge clk) s_axil_bready = 0;
  endtask

  task automatic axil_read(logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    @(posedge clk);
    while (!s_axil_arready) @(posedge clk);
    @(negedge clk) begin s_axil_arvalid = 0; s_axil_rready = 1; end
    @(posedge clk);
    while (!s_axil_rvalid) @(posedge clk);
    d = s_axil_rdata;
    @(negedge clk) s_axil_rready = 0;
  endtask

  // ------------------------------------------------------------ streams
  logic [63:0] src_data [$];
  logic [7:0]  src_keep [$];
  logic [63:0] sink_q [$];
  logic        sink_last [$];

  // source: sends what is queued, with random gaps
  initial begin
    s_axis_tvalid = 0; s_axis_tdata = 0; s_axis_tkeep = 0; s_axis_tlast = 0;
    forever begin
      @(negedge clk);
      if (src_data.size() > 0 && $urandom_range(0, 4) != 0) begin
        s_axis_tvalid = 1;
        s_axis_tdata  = src_data[0];
        s_axis_tkeep  = src_keep[0];
        s_axis_tlast  = (src_data.size() == 1);
        @(posedge clk);
        while (!s_axis_tready) @(posedge clk);
        void'(src_data.pop_front());
        void'(src_keep.pop_front());
        @(negedge clk);
        s_axis_tvalid = 0;
      end
    end
  end

  // sink: random back-pressure
  always @(negedge clk) m_axis_tready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) begin
    if (m_axis_tvalid && m_axis_tready) begin
      sink_q.push_back(m_axis_tdata);
      sink_last.push_back(m_axis_tlast);
    end
    if (m_axis_tvalid && !m_axis_tready) n_m_stall++;
    if (s_axis_tready && !s_axis_tvalid) n_s_gap++;
  end

  // ------------------------------------------------------------ commands
  int smode = 0;   // sampler mode field used by the next command
  task automatic run_cmd(cmd_e c, int hmode, int sa, int sb, int sd, int len, output int cycles);
    logic [31:0] d;
    axil_write(REG_CMD, {14'd0, 2'(sd), 2'd0, 2'(sb), 2'd0, 2'(sa), 2'(smode), 2'(hmode), 4'(c)});
    axil_write(REG_LEN, 32'(len));
    axil_write(REG_CTRL, 32'h1);
    do axil_read(REG_STATUS, d); while (d[1] != 1'b1);
    axil_read(REG_CYCLES, d);
    cycles = int'(d);
    n_cmd[c]++;
  endtask

  task automatic send_bytes(byte unsigned m [$]);
    int nw = (m.size() + 7) / 8;
    if (nw == 0) nw = 1;
    for (int w = 0; w < nw; w++) begin
      logic [63:0] d;
      logic [7:0] k;
      d = {$urandom, $urandom}; k = 0;
      for (int i = 0; i < 8; i++) if (8*w + i < m.size()) begin d[8*i +: 8] = m[8*w + i]; k[i] = 1; end
      src_data.push_back(d); src_keep.push_back(k);
    end
  endtask

  task automatic store_and_compare(int slot, ref longint e [256], input string what);
    int cyc, bad = 0;
    sink_q = {}; sink_last = {};
    run_cmd(CMD_STORE, 0, slot, 0, 0, 0, cyc);
    checks++;
    if (sink_q.size() != 256) begin failures++; $display("%s: %0d beats", what, sink_q.size()); end
    else begin
      for (int i = 0; i < 256; i++) begin
        checks++;
        if (sink_q[i] != 64'(e[i]) || sink_last[i] != (i == 255)) begin
          failures++;
          if (bad++ < 4) $display("%s: coef %0d got %0d exp %0d", what, i, sink_q[i], e[i]);
        end
      end
    end
  endtask

  task automatic check_hash(int hmode, byte unsigned m [$], int nwords);
    byte unsigned e [$];
    int cyc, rate;
    rate = (hmode == 0) ? 168 : (hmode == 3) ? 72 : 136;
    sink_q = {}; sink_last = {};
    send_bytes(m);
    run_cmd(CMD_HASH, hmode, 0, 0, 0, nwords, cyc);
    sponge(m, rate, (hmode < 2) ? 8'h1F : 8'h06, 8 * nwords, e);
    if (m.size() >= rate) n_multi_absorb++;
    if (8 * nwords > rate) n_multi_squeeze++;
    checks++;
    if (sink_q.size() != nwords) begin failures++; $display("hash: %0d words", sink_q.size()); end
    else for (int w = 0; w < nwords; w++) begin
      logic [63:0] ew;
      for (int i = 0; i < 8; i++) ew[8*i +: 8] = e[8*w + i];
      checks++;
      if (sink_q[w] != ew || sink_last[w] != (w == nwords - 1)) begin
        failures++; $display("hash mode %0d word %0d got %h exp %h", hmode, w, sink_q[w], ew);
      end
    end
  endtask

  task automatic expect_int(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned seed [$], stream [$], m [$];
    longint a_hat [256], s [256], s_hat [256], p_hat [256], p [256];
    int cyc, rej;
    s_axil_awaddr = 0; s_axil_awvalid = 0; s_axil_wdata = 0; s_axil_wstrb = 0; s_axil_wvalid = 0;
    s_axil_bready = 0; s_axil_araddr = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    for (int i = 0; i < 8; i++) n_cmd[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ExpandA entries SHAKE128(rho || j || i): the first four entries of the
    // matrix, and more until a rejected candidate has been seen; the last one
    // stays in slot 0 as A_00 of the product below
    for (int i = 0; i < 32; i++) seed.push_back(8'($urandom));
    rej = 0;
    for (int e = 0; e < 64 && (e < 4 || rej == 0); e++) begin
      byte unsigned sd [$];
      sd = seed;
      sd.push_back(8'(e % 4)); sd.push_back(8'(e / 4));
      send_bytes(sd);
      run_cmd(CMD_SAMPLE, 0, 0, 0, 0, 0, cyc);
      sponge(sd, 168, 8'h1F, 6 * 168, stream);
      rej += sample_uniform(stream, a_hat);
      n_rej = rej;    // rejections the DUT must have made to match
      store_and_compare(0, a_hat, "sample");
    end
    $display("sampling: %0d candidates rejected by the reference", rej);

    // ExpandS: secret polynomials SHAKE256(rho' || nonce) with eta = 2 and 4,
    // sampled into slot 3 and compared
    seed = {};
    for (int i = 0; i < 64; i++) seed.push_back(8'($urandom));
    for (int eta = 2; eta <= 4; eta += 2) begin
      byte unsigned sd [$];
      longint se [256];
      sd = seed;
      sd.push_back(8'(eta)); sd.push_back(8'd0);
      send_bytes(sd);
      smode = eta / 2;
      run_cmd(CMD_SAMPLE, 0, 0, 0, 3, 0, cyc);
      smode = 0;
      sponge(sd, 136, 8'h1F, 4 * 136, stream);
      n_eta_rej += sample_eta(stream, eta, se);
      store_and_compare(3, se, (eta == 2) ? "eta2" : "eta4");
      n_eta++;
    end

    // secret polynomial with coefficients in [-2, 2]; coefficient 7 is sent as q+3
    for (int i = 0; i < 256; i++) s[i] = md(longint'($urandom_range(0, 4)) - 2);
    s[7] = 3;
    for (int i = 0; i < 256; i++) begin
      src_data.push_back((i == 7) ? 64'(QL + 3) : 64'(s[i])); src_keep.push_back(8'hFF);
    end
    n_reduce = 1;   // the beat sent as q+3 must come back as 3
    run_cmd(CMD_LOAD, 0, 0, 0, 1, 0, cyc);
    expect_int("LOAD cycles at least 256", (cyc >= 256) ? 1 : 0, 1);
    store_and_compare(1, s, "load");

    run_cmd(CMD_NTT, 0, 1, 0, 0, 0, cyc);
    expect_int("NTT cycles", cyc, 1049 + 2);
    s_hat = s;
    ntt_fwd(s_hat);
    store_and_compare(1, s_hat, "ntt");

    run_cmd(CMD_PWM, 0, 0, 1, 2, 0, cyc);
    expect_int("PWM cycles", cyc, 260 + 2);
    for (int i = 0; i < 256; i++) p_hat[i] = md(a_hat[i] * s_hat[i]);
    store_and_compare(2, p_hat, "pwm");

    run_cmd(CMD_INTT, 0, 2, 0, 0, 0, cyc);
    expect_int("INTT cycles", cyc, 1308 + 2);
    // read the inverse and check that its forward transform is the product
    sink_q = {};
    run_cmd(CMD_STORE, 0, 2, 0, 0, 0, cyc);
    checks++;
    if (sink_q.size() != 256) begin failures++; $display("intt store %0d beats", sink_q.size()); end
    else begin
      int bad = 0;
      for (int i = 0; i < 256; i++) p[i] = longint'(sink_q[i]);
      ntt_fwd(p);
      for (int i = 0; i < 256; i++) begin
        checks++;
        if (p[i] != p_hat[i]) begin failures++; if (bad++ < 4) $display("intt coef %0d", i); end
      end
    end

    // hashing
    m = {};
    for (int i = 0; i < 150; i++) m.push_back(8'($urandom));
    check_hash(1, m, 40);
    m = {};
    for (int i = 0; i < 72; i++) m.push_back(8'($urandom));
    check_hash(3, m, 8);
    m = {};
    check_hash(0, m, 2);

    // every mechanism must have occurred
    expect_int("LOAD run",   (n_cmd[CMD_LOAD]   > 0) ? 1 : 0, 1);
    expect_int("STORE run",  (n_cmd[CMD_STORE]  > 0) ? 1 : 0, 1);
    expect_int("NTT run",    (n_cmd[CMD_NTT]    > 0) ? 1 : 0, 1);
    expect_int("INTT run",   (n_cmd[CMD_INTT]   > 0) ? 1 : 0, 1);
    expect_int("PWM run",    (n_cmd[CMD_PWM]    > 0) ? 1 : 0, 1);
    expect_int("HASH run",   (n_cmd[CMD_HASH]   > 0) ? 1 : 0, 1);
    expect_int("SAMPLE run", (n_cmd[CMD_SAMPLE] > 0) ? 1 : 0, 1);
    expect_int("m_axis stalls", (n_m_stall > 0) ? 1 : 0, 1);
    expect_int("s_axis gaps", (n_s_gap > 0) ? 1 : 0, 1);
    expect_int("sampler rejections", (n_rej > 0) ? 1 : 0, 1);
    expect_int("eta sampling", n_eta, 2);
    expect_int("eta rejections", (n_eta_rej > 0) ? 1 : 0, 1);
    expect_int("multi-block absorb", (n_multi_absorb > 0) ? 1 : 0, 1);
    expect_int("multi-block squeeze", (n_multi_squeeze > 0) ? 1 : 0, 1);
    expect_int("input reduction", n_reduce, 1);
    $display("mechanisms: cmds load %0d store %0d ntt %0d intt %0d pwm %0d hash %0d sample %0d",
             n_cmd[CMD_LOAD], n_cmd[CMD_STORE], n_cmd[CMD_NTT], n_cmd[CMD_INTT], n_cmd[CMD_PWM],
             n_cmd[CMD_HASH], n_cmd[CMD_SAMPLE]);
    $display("mechanisms: m_axis stall cycles %0d, s_axis gap cycles %0d, rejections %0d (eta %0d), multi-block absorb %0d, squeeze %0d, reduced inputs %0d",
             n_m_stall, n_s_gap, n_rej, n_eta_rej, n_multi_absorb, n_multi_squeeze, n_reduce);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
