// tb_ntt_core: self-checking test of the NTT engine.
// A behavioural model (loops over longint arrays with '%' arithmetic, its own
// twiddle table from repeated multiplication by 1753) computes the expected
// forward NTT; the test also checks INTT(NTT(a)) = a, and that
// NTT -> pointwise multiply -> INTT equals the schoolbook product modulo
// X^256 + 1. Cycle counts of each command are checked against the schedule.
module tb_ntt_core;
  import dil_pkg::*;

  localparam longint QL = 8380417;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, ext_we;
  ntt_op_e op;
  logic [1:0] slot_a, slot_b, slot_dst;
  logic [9:0] ext_addr;
  coef_t ext_wdata, ext_rdata;
  int checks = 0, failures = 0;

  ntt_core #(.SLOTS(4)) dut (.*);

  longint zt [256];
  longint pa [256], pb [256], ref_ntt [256], prod [256];

  function automatic longint md(longint x);
    md = ((x % QL) + QL) % QL;
  endfunction

  function automatic int rev8(int k);
    int r = 0;
    for (int i = 0; i < 8; i++) if (k & (1 << i)) r |= 1 << (7 - i);
    return r;
  endfunction

  task automatic ref_forward(ref longint a [256]);
    int k = 0;
    longint t;
    for (int len = 128; len > 0; len >>= 1)
      for (int st = 0; st < 256; st += 2 * len) begin
        longint z;
        k++;
        z = zt[k];
        for (int jj = st; jj < st + len; jj++) begin
          t = md(z * a[jj + len]);
          a[jj + len] = md(a[jj] - t);
          a[jj] = md(a[jj] + t);
        end
      end
  endtask

  task automatic load(int slot, ref longint a [256]);
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      ext_we = 1; ext_addr = 10'(slot * 256 + i); ext_wdata = coef_t'(a[i]);
    end
    @(negedge clk) ext_we = 0;
  endtask

  task automatic compare(int slot, ref longint e [256], input string what);
    int bad = 0;
    @(negedge clk);
    for (int i = 0; i < 256; i++) begin
      ext_addr = 10'(slot * 256 + i);
      #1;
      checks++;
      if (64'(ext_rdata) != e[i]) begin
        failures++;
        if (bad++ < 4) $display("%s: coef %0d got %0d exp %0d", what, i, ext_rdata, e[i]);
      end
    end
  endtask

  task automatic run(ntt_op_e o, int sa, int sb, int sd, int exp_cycles);
    int c = 0;
    @(negedge clk);
    op = o; slot_a = 2'(sa); slot_b = 2'(sb); slot_dst = 2'(sd); start = 1;
    @(negedge clk) start = 0;
    c = 1;
    while (!done) begin @(negedge clk); c++; end
    checks++;
    if (c != exp_cycles) begin
      failures++;
      $display("op %0d took %0d cycles, expected %0d", o, c, exp_cycles);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint pw;
    longint na [256];
    start = 0; ext_we = 0; ext_addr = 0; ext_wdata = 0; op = NOP_NTT;
    slot_a = 0; slot_b = 0; slot_dst = 0;
    pw = 1;
    begin
      longint p [256];
      for (int i = 0; i < 256; i++) begin p[i] = pw; pw = md(pw * 1753); end
      for (int k = 0; k < 256; k++) zt[k] = p[rev8(k)];
    end
    for (int i = 0; i < 256; i++) begin
      pa[i] = (i < 2) ? QL - 1 : $urandom_range(0, 8380416);
      pb[i] = $urandom_range(0, 8380416);
    end
    // schoolbook negacyclic product
    for (int i = 0; i < 256; i++) prod[i] = 0;
    for (int i = 0; i < 256; i++)
      for (int jj = 0; jj < 256; jj++)
        if (i + jj < 256) prod[i + jj] = md(prod[i + jj] + md(pa[i] * pb[jj]));
        else              prod[i + jj - 256] = md(prod[i + jj - 256] - md(pa[i] * pb[jj]));
    repeat (3) @(posedge clk);
    rst_n = 1;
    load(0, pa);
    load(1, pb);
    // forward NTT of slot 0 against the model
    ref_ntt = pa;
    ref_forward(ref_ntt);
    run(NOP_NTT, 0, 0, 0, 8 * 131 + 1);
    compare(0, ref_ntt, "ntt");
    // inverse returns the input
    run(NOP_INTT, 0, 0, 0, 8 * 131 + 259 + 1);
    compare(0, pa, "intt");
    // full polynomial multiplication through slots 0,1 -> 2
    run(NOP_NTT, 0, 0, 0, 8 * 131 + 1);
    run(NOP_NTT, 1, 0, 0, 8 * 131 + 1);
    run(NOP_PWM, 0, 1, 2, 259 + 1);
    begin
      longint nb [256];
      na = pa; nb = pb;
      ref_forward(na); ref_forward(nb);
      for (int i = 0; i < 256; i++) na[i] = md(na[i] * nb[i]);
      compare(2, na, "pwm");
    end
    run(NOP_INTT, 2, 0, 0, 8 * 131 + 259 + 1);
    compare(2, prod, "polymul");
    // slot 1 still holds NTT(b): untouched by operations on other slots
    begin
      longint nb [256];
      nb = pb; ref_forward(nb);
      compare(1, nb, "slot1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
