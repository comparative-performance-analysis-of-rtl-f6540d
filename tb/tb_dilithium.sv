// tb_dilithium: CRYSTALS-Dilithium key generation, signing and verification
// (version 3.1, deterministic signing) run on the accelerator at all three
// NIST levels, with this testbench playing the processor software and the
// DMA engine. Level sizes (k, l, eta, tau, gamma1, gamma2, omega; d = 13):
//   level 2: 4, 4, 2, 39, 2^17, (q-1)/88, 80
//   level 3: 6, 5, 4, 49, 2^19, (q-1)/32, 55
//   level 5: 8, 7, 2, 60, 2^19, (q-1)/32, 75
// The accelerator does every hash and expansion (HASH, SAMPLE), every
// transform (NTT, INTT) and every product (PWM). The testbench does what the
// processor keeps: sums, Power2Round, Decompose, hints, norm checks, bit
// packing, ExpandMask unpacking and SampleInBall.
// Checks: key generation against the behavioural references (seed expansion,
// every sampled polynomial, t through NTT(t - s2) = A o NTT(s1), tr);
// signing ends with a signature that passes all norm bounds; verification
// accepts it, and rejects it for a changed message. The accelerator's busy
// cycles for each of the three operations are printed and must stay below
// the published SoC times (1.109 ms, 5.94 ms, 1.17 ms) at an assumed 100 MHz
// logic clock. That bound is checked at level 2 only: the published times do
// not name a level, and they also include the software part.
module tb_dilithium;
  import dil_pkg::*;
  import dil_ref_pkg::*;
  import keccak_ref_pkg::*;

  localparam int KMAX = 8, LMAX = 7, D = 13;
  int K, L, ETA, TAU, OMEGA, ZBITS, W1BITS;
  longint GAMMA1, GAMMA2, BETA, M1;

  function automatic void set_level(int lvl);
    case (lvl)
      2:       begin K = 4; L = 4; ETA = 2; TAU = 39; OMEGA = 80; end
      3:       begin K = 6; L = 5; ETA = 4; TAU = 49; OMEGA = 55; end
      default: begin K = 8; L = 7; ETA = 2; TAU = 60; OMEGA = 75; end
    endcase
    GAMMA1 = (lvl == 2) ? 131072 : 524288;
    ZBITS  = (lvl == 2) ? 18 : 20;
    GAMMA2 = (lvl == 2) ? 95232 : 261888;
    M1     = (lvl == 2) ? 44 : 16;      // (q-1) / (2 gamma2)
    W1BITS = (lvl == 2) ? 6 : 4;
    BETA   = TAU * ETA;
  endfunction

  typedef longint poly_t [256];
  typedef byte unsigned bytes_t [$];

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
  int n_m_stall = 0, n_s_gap = 0;
  longint acc_cycles = 0;   // sum of CYCLES over all commands

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
    acc_cycles += cycles;
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



  task automatic expect_int(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic cmp_poly(string what, input poly_t got, input poly_t exp);
    int bad = 0;
    for (int i = 0; i < 256; i++) begin
      checks++;
      if (got[i] != exp[i]) begin failures++; if (bad++ < 3) $display("%s coef %0d: %0d vs %0d", what, i, got[i], exp[i]); end
    end
  endtask

  // ------------------------------------------------ accelerator calls
  task automatic hw_store(int slot, output poly_t a);
    int cyc;
    sink_q = {}; sink_last = {};
    run_cmd(CMD_STORE, 0, slot, 0, 0, 0, cyc);
    checks++;
    if (sink_q.size() != 256) begin failures++; $display("store: %0d beats", sink_q.size()); end
    for (int i = 0; i < 256; i++) a[i] = (i < sink_q.size()) ? longint'(sink_q[i]) : 0;
  endtask

  task automatic hw_load(int slot, input poly_t a);
    int cyc;
    for (int i = 0; i < 256; i++) begin src_data.push_back(64'(a[i])); src_keep.push_back(8'hFF); end
    run_cmd(CMD_LOAD, 0, 0, 0, slot, 0, cyc);
  endtask

  task automatic hw_hash(int hmode, input bytes_t m, input int nbytes, output bytes_t h);
    int cyc;
    sink_q = {}; sink_last = {};
    send_bytes(m);
    run_cmd(CMD_HASH, hmode, 0, 0, 0, (nbytes + 7) / 8, cyc);
    h = {};
    for (int i = 0; i < nbytes; i++) h.push_back(sink_q[i / 8][8 * (i % 8) +: 8]);
  endtask

  task automatic hw_sample(int sm, input bytes_t seed, int slot);
    int cyc;
    send_bytes(seed);
    smode = sm;
    run_cmd(CMD_SAMPLE, 0, 0, 0, slot, 0, cyc);
    smode = 0;
  endtask

  // NTT or INTT of a polynomial through slot 1
  task automatic hw_xform(cmd_e c, input poly_t a, output poly_t r);
    int cyc;
    hw_load(1, a);
    run_cmd(c, 0, 1, 0, 0, 0, cyc);
    hw_store(1, r);
  endtask

  // slot2 = slot0 o b, read back
  task automatic hw_pwm_slot0(input poly_t b, output poly_t r);
    int cyc;
    hw_load(1, b);
    run_cmd(CMD_PWM, 0, 0, 1, 2, 0, cyc);
    hw_store(2, r);
  endtask

  task automatic hw_pwm(input poly_t a, input poly_t b, output poly_t r);
    hw_load(0, a);
    hw_pwm_slot0(b, r);
  endtask

  // r_i = INTT(sum_j A_ij o v_j), A expanded from rho entry by entry
  task automatic hw_matvec(input bytes_t rho, input poly_t v [LMAX], output poly_t r [KMAX]);
    poly_t acc, p;
    for (int i = 0; i < K; i++) begin
      for (int c = 0; c < 256; c++) acc[c] = 0;
      for (int j = 0; j < L; j++) begin
        bytes_t sd;
        sd = rho; sd.push_back(8'(j)); sd.push_back(8'(i));
        hw_sample(0, sd, 0);
        hw_pwm_slot0(v[j], p);
        for (int c = 0; c < 256; c++) acc[c] = md(acc[c] + p[c]);
      end
      hw_xform(CMD_INTT, acc, r[i]);
    end
  endtask

  // ------------------------------------------------ software side
  function automatic longint centered(longint a);
    return (a > (QL - 1) / 2) ? a - QL : a;
  endfunction

  function automatic void decompose(longint a, output longint r1, output longint r0);
    r0 = a % (2 * GAMMA2);
    if (r0 > GAMMA2) r0 -= 2 * GAMMA2;
    if (a - r0 == QL - 1) begin r1 = 0; r0 = r0 - 1; end
    else r1 = (a - r0) / (2 * GAMMA2);
  endfunction

  function automatic longint highbits(longint a);
    longint r1, r0;
    decompose(a, r1, r0);
    return r1;
  endfunction

  function automatic longint use_hint(bit h, longint a);
    longint r1, r0;
    decompose(a, r1, r0);
    if (!h) return r1;
    if (r0 > 0) return (r1 + 1) % M1;
    return (r1 + M1 - 1) % M1;
  endfunction

  function automatic longint inf_norm(input poly_t a);
    longint m = 0, v;
    for (int i = 0; i < 256; i++) begin
      v = centered(a[i]); if (v < 0) v = -v;
      if (v > m) m = v;
    end
    return m;
  endfunction

  // pack w1 (6 or 4 bits per coefficient, LSB first) after mu
  function automatic bytes_t w1_msg(input bytes_t mu, input poly_t w1 [KMAX]);
    bytes_t m;
    m = mu;
    for (int i = 0; i < K; i++)
      for (int c = 0; c < 256; c += 4) begin
        logic [23:0] w;
        if (W1BITS == 6) begin
          w = {6'(w1[i][c+3]), 6'(w1[i][c+2]), 6'(w1[i][c+1]), 6'(w1[i][c])};
          for (int b = 0; b < 3; b++) m.push_back(w[8*b +: 8]);
        end else begin
          w = {8'd0, 4'(w1[i][c+3]), 4'(w1[i][c+2]), 4'(w1[i][c+1]), 4'(w1[i][c])};
          for (int b = 0; b < 2; b++) m.push_back(w[8*b +: 8]);
        end
      end
    return m;
  endfunction

  // challenge polynomial from c~ (SHAKE256 stream from the accelerator)
  task automatic sample_in_ball(input bytes_t ct, output poly_t c);
    bytes_t s;
    logic [63:0] signs;
    int pos = 8;
    hw_hash(1, ct, 272, s);
    for (int i = 0; i < 8; i++) signs[8*i +: 8] = s[i];
    for (int i = 0; i < 256; i++) c[i] = 0;
    for (int i = 256 - TAU; i < 256; i++) begin
      int b;
      do begin b = s[pos]; pos++; end while (b > i);
      c[i] = c[b];
      c[b] = signs[0] ? QL - 1 : 1;
      signs = signs >> 1;
    end
  endtask

  // ExpandMask: y_i from SHAKE256(rho' || nonce), 18- or 20-bit fields, gamma1 - r
  task automatic expand_mask(input bytes_t rhop, int kappa, output poly_t y [LMAX]);
    for (int i = 0; i < L; i++) begin
      bytes_t sd, s;
      int nonce = L * kappa + i;
      sd = rhop; sd.push_back(8'(nonce)); sd.push_back(8'(nonce >> 8));
      hw_hash(1, sd, 32 * ZBITS, s);
      for (int c = 0; c < 256; c++) begin
        longint r = 0;
        for (int b = 0; b < ZBITS; b++) begin
          int bit_i = ZBITS * c + b;
          if (s[bit_i / 8][bit_i % 8]) r |= longint'(1) << b;
        end
        y[i][c] = md(GAMMA1 - r);
      end
    end
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one key pair, one signature, two verifications at level lvl
  task automatic run_level(int lvl);
    bytes_t zeta, seedbuf, e, rho, rhop, key, pk, tr, msg, mu, rhoprime, ctilde;
    poly_t s1 [LMAX], s1h [LMAX], s2 [KMAX], s2h [KMAX], t [KMAX], t1 [KMAX], t0 [KMAX], t0h [KMAX];
    poly_t a, tmp, chk;
    poly_t y [LMAX], yh [LMAX], w [KMAX], w1 [KMAX], z [LMAX], cs1 [LMAX], cs2 [KMAX], ct0 [KMAX];
    poly_t c, ch, zh [LMAX], t1h [KMAX], wp [KMAX];
    bit hint [KMAX][256];
    longint cyc_kg, cyc_sign, cyc_ver, lvl_start;
    int cyc, kappa, nh;
    bit ok;
    set_level(lvl);
    lvl_start = acc_cycles;

    // ================================================= key generation
    for (int i = 0; i < 32; i++) zeta.push_back(8'($urandom));
    hw_hash(1, zeta, 128, seedbuf);
    sponge(zeta, 136, 8'h1F, 128, e);
    for (int i = 0; i < 128; i++) expect_int("H(zeta)", seedbuf[i], e[i]);
    for (int i = 0; i < 32; i++) rho.push_back(seedbuf[i]);
    for (int i = 32; i < 96; i++) rhop.push_back(seedbuf[i]);
    for (int i = 96; i < 128; i++) key.push_back(seedbuf[i]);

    for (int n = 0; n < L + K; n++) begin
      bytes_t sd, st;
      sd = rhop; sd.push_back(8'(n)); sd.push_back(8'(n >> 8));
      hw_sample((ETA == 2) ? 1 : 2, sd, 1);
      sponge(sd, 136, 8'h1F, 4 * 136, st);
      void'(sample_eta(st, ETA, chk));
      if (n < L) begin
        hw_store(1, a); cmp_poly("s1", a, chk); s1[n] = a;
        run_cmd(CMD_NTT, 0, 1, 0, 0, 0, cyc);
        hw_store(1, a); s1h[n] = a;
        tmp = chk; ntt_fwd(tmp); cmp_poly("ntt(s1)", a, tmp);
      end else begin
        hw_store(1, a); cmp_poly("s2", a, chk); s2[n - L] = a;
      end
    end
    hw_matvec(rho, s1h, t);
    for (int i = 0; i < K; i++) begin
      poly_t ref_acc;
      for (int c2 = 0; c2 < 256; c2++) ref_acc[c2] = 0;
      for (int j = 0; j < L; j++) begin
        bytes_t sd, st;
        poly_t ah;
        sd = rho; sd.push_back(8'(j)); sd.push_back(8'(i));
        sponge(sd, 168, 8'h1F, 6 * 168, st);
        void'(sample_uniform(st, ah));
        for (int c2 = 0; c2 < 256; c2++) ref_acc[c2] = md(ref_acc[c2] + md(ah[c2] * s1h[j][c2]));
      end
      tmp = t[i]; ntt_fwd(tmp);
      cmp_poly("A*s1", tmp, ref_acc);
      for (int c2 = 0; c2 < 256; c2++) begin
        t[i][c2] = md(t[i][c2] + s2[i][c2]);
        t1[i][c2] = (t[i][c2] + (1 << (D - 1)) - 1) >> D;
        t0[i][c2] = md(t[i][c2] - (t1[i][c2] << D));
      end
    end
    pk = rho;
    for (int i = 0; i < K; i++)
      for (int c2 = 0; c2 < 256; c2 += 4) begin
        logic [39:0] pw;
        pw = {10'(t1[i][c2+3]), 10'(t1[i][c2+2]), 10'(t1[i][c2+1]), 10'(t1[i][c2])};
        for (int b = 0; b < 5; b++) pk.push_back(pw[8*b +: 8]);
      end
    hw_hash(1, pk, 32, tr);
    sponge(pk, 136, 8'h1F, 32, e);
    for (int i = 0; i < 32; i++) expect_int("tr", tr[i], e[i]);
    cyc_kg = acc_cycles - lvl_start;

    // ================================================= signing
    for (int i = 0; i < 59; i++) msg.push_back(8'($urandom));
    begin
      bytes_t m2;
      m2 = tr; foreach (msg[i]) m2.push_back(msg[i]);
      hw_hash(1, m2, 64, mu);
      m2 = key; foreach (mu[i]) m2.push_back(mu[i]);
      hw_hash(1, m2, 64, rhoprime);
    end
    for (int i = 0; i < L; i++) hw_xform(CMD_NTT, s1[i], s1h[i]);
    for (int i = 0; i < K; i++) begin
      hw_xform(CMD_NTT, s2[i], s2h[i]);
      hw_xform(CMD_NTT, t0[i], t0h[i]);
    end
    ok = 0;
    for (kappa = 0; kappa < 40 && !ok; kappa++) begin
      expand_mask(rhoprime, kappa, y);
      for (int i = 0; i < L; i++) hw_xform(CMD_NTT, y[i], yh[i]);
      hw_matvec(rho, yh, w);
      for (int i = 0; i < K; i++) for (int c2 = 0; c2 < 256; c2++) w1[i][c2] = highbits(w[i][c2]);
      hw_hash(1, w1_msg(mu, w1), 32, ctilde);
      sample_in_ball(ctilde, c);
      hw_xform(CMD_NTT, c, ch);
      ok = 1;
      for (int i = 0; i < L; i++) begin
        hw_pwm(ch, s1h[i], tmp);
        hw_xform(CMD_INTT, tmp, cs1[i]);
        for (int c2 = 0; c2 < 256; c2++) z[i][c2] = md(y[i][c2] + cs1[i][c2]);
        if (inf_norm(z[i]) >= GAMMA1 - BETA) ok = 0;
      end
      if (!ok) continue;
      for (int i = 0; i < K; i++) begin
        poly_t r0;
        hw_pwm(ch, s2h[i], tmp);
        hw_xform(CMD_INTT, tmp, cs2[i]);
        for (int c2 = 0; c2 < 256; c2++) begin
          longint h1, l0;
          decompose(md(w[i][c2] - cs2[i][c2]), h1, l0);
          r0[c2] = md(l0);
        end
        if (inf_norm(r0) >= GAMMA2 - BETA) ok = 0;
      end
      if (!ok) continue;
      nh = 0;
      for (int i = 0; i < K; i++) begin
        hw_pwm(ch, t0h[i], tmp);
        hw_xform(CMD_INTT, tmp, ct0[i]);
        if (inf_norm(ct0[i]) >= GAMMA2) ok = 0;
        for (int c2 = 0; c2 < 256; c2++) begin
          longint r, v;
          r = md(w[i][c2] - cs2[i][c2] + ct0[i][c2]);
          v = md(r - ct0[i][c2]);
          hint[i][c2] = (highbits(r) != highbits(v));
          nh += hint[i][c2];
        end
      end
      if (nh > OMEGA) ok = 0;
    end
    expect_int("signature found", ok, 1);
    cyc_sign = acc_cycles - lvl_start - cyc_kg;
    $display("level %0d signing: %0d iterations, %0d hints", lvl, kappa, nh);

    // ================================================= verification
    for (int pass = 0; pass < 2; pass++) begin
      bytes_t m2, pk2, tr2, mu2, ctv;
      poly_t cv, cvh;
      longint t_start;
      bit okv;
      t_start = acc_cycles;
      okv = 1;
      for (int i = 0; i < L; i++) if (inf_norm(z[i]) >= GAMMA1 - BETA) okv = 0;
      hw_hash(1, pk, 32, tr2);
      m2 = tr2; foreach (msg[i]) m2.push_back(msg[i]);
      if (pass == 1) m2[40] = m2[40] ^ 8'h01;          // tampered message
      hw_hash(1, m2, 64, mu2);
      sample_in_ball(ctilde, cv);
      hw_xform(CMD_NTT, cv, cvh);
      for (int i = 0; i < L; i++) hw_xform(CMD_NTT, z[i], zh[i]);
      hw_matvec(rho, zh, wp);                          // INTT(A o NTT(z))
      for (int i = 0; i < K; i++) begin
        poly_t t1s, ctt;
        for (int c2 = 0; c2 < 256; c2++) t1s[c2] = md(t1[i][c2] << D);
        hw_xform(CMD_NTT, t1s, t1h[i]);
        hw_pwm(cvh, t1h[i], tmp);
        hw_xform(CMD_INTT, tmp, ctt);
        for (int c2 = 0; c2 < 256; c2++) w1[i][c2] = use_hint(hint[i][c2], md(wp[i][c2] - ctt[c2]));
      end
      hw_hash(1, w1_msg(mu2, w1), 32, ctv);
      for (int i = 0; i < 32; i++) if (ctv[i] != ctilde[i]) okv = 0;
      expect_int((pass == 0) ? "verify accepts" : "verify rejects changed message", okv, (pass == 0) ? 1 : 0);
      if (pass == 0) cyc_ver = acc_cycles - t_start;
    end

    if (lvl == 2) begin
      checks++;
      if (cyc_kg >= 110900 || cyc_sign >= 594000 || cyc_ver >= 117000) begin
        failures++; $display("accelerator time above the published totals");
      end
    end
    $display("level %0d accelerator busy cycles: keygen %0d (%0.3f ms), sign %0d (%0.3f ms), verify %0d (%0.3f ms) at 100 MHz",
             lvl, cyc_kg, real'(cyc_kg) / 1.0e5, cyc_sign, real'(cyc_sign) / 1.0e5, cyc_ver, real'(cyc_ver) / 1.0e5);
  endtask

  initial begin
    s_axil_awaddr = 0; s_axil_awvalid = 0; s_axil_wdata = 0; s_axil_wstrb = 0; s_axil_wvalid = 0;
    s_axil_bready = 0; s_axil_araddr = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    for (int i = 0; i < 8; i++) n_cmd[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_level(2);
    run_level(3);
    run_level(5);
    $display("commands: load %0d store %0d ntt %0d intt %0d pwm %0d hash %0d sample %0d; stream stall cycles %0d",
             n_cmd[CMD_LOAD], n_cmd[CMD_STORE], n_cmd[CMD_NTT], n_cmd[CMD_INTT], n_cmd[CMD_PWM],
             n_cmd[CMD_HASH], n_cmd[CMD_SAMPLE], n_m_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
