// tb_rej_sampler: self-checking test of the rejection sampler in its three
// modes (uniform mod q, eta = 2, eta = 4). Random words (with a share of
// bytes forced to 0xFF so that uniform rejections happen often) are fed with
// random valid gaps and random out_ready; every emitted coefficient is
// compared with a queue-based model of the byte stream written from the
// Dilithium specification. Also checks that clear empties the buffer.
module tb_rej_sampler;
  import dil_pkg::*;

  localparam int QI = 8380417;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid, in_ready, out_valid, out_ready, rej;
  smp_mode_e mode;
  logic [63:0] in_data;
  coef_t out_coef;
  int checks = 0, failures = 0, nrej = 0, nout = 0;

  rej_sampler dut (.*);

  int exp_q [$];

  initial begin
    #4000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (rej) nrej++;
    if (out_valid && out_ready) begin
      checks++; nout++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        int e;
        e = exp_q.pop_front();
        if (int'(out_coef) != e) begin failures++; $display("mode %0d got %0d exp %0d", mode, out_coef, e); end
      end
    end
  end

  logic rand_ready = 1;
  always @(negedge clk) if (rand_ready) out_ready = ($urandom_range(0, 3) != 0);

  task automatic phase(smp_mode_e m, int nwords);
    byte unsigned bytes_q [$];
    int rej0;
    rej0 = nrej;
    mode = m;
    rand_ready = 1;
    for (int w = 0; w < nwords; w++) begin
      logic [63:0] d;
      d = {$urandom, $urandom};
      if (m == SM_UNIFORM)
        for (int i = 0; i < 8; i++) if ($urandom_range(0, 1) == 0) d[8*i +: 8] = 8'hFF;
      for (int i = 0; i < 8; i++) bytes_q.push_back(d[8*i +: 8]);
      if (m == SM_UNIFORM) begin
        while (bytes_q.size() >= 3) begin
          int t;
          t = {bytes_q[2], bytes_q[1], bytes_q[0]} & 32'h7FFFFF;
          void'(bytes_q.pop_front()); void'(bytes_q.pop_front()); void'(bytes_q.pop_front());
          if (t < QI) exp_q.push_back(t);
        end
      end else begin
        while (bytes_q.size() > 0) begin
          int b, t0, t1;
          b = bytes_q.pop_front();
          t0 = b & 15; t1 = b >> 4;
          if (m == SM_ETA2) begin
            if (t0 < 15) exp_q.push_back((2 - t0 % 5 + QI) % QI);
            if (t1 < 15) exp_q.push_back((2 - t1 % 5 + QI) % QI);
          end else begin
            if (t0 < 9) exp_q.push_back((4 - t0 + QI) % QI);
            if (t1 < 9) exp_q.push_back((4 - t1 + QI) % QI);
          end
        end
      end
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      in_valid = 1; in_data = d;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    rand_ready = 0;
    out_ready = 1;
    repeat (40) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("mode %0d: %0d coefficients missing", m, exp_q.size()); end
    checks++;
    if (nrej == rej0) begin failures++; $display("mode %0d: no rejection exercised", m); end
    // partial leftovers (uniform: bytes that do not form a candidate) are dropped
    clear = 1;
    @(negedge clk) clear = 0;
  endtask

  initial begin
    clear = 0; in_valid = 0; in_data = 0; out_ready = 0; mode = SM_UNIFORM;
    repeat (3) @(posedge clk);
    rst_n = 1;
    phase(SM_UNIFORM, 600);
    phase(SM_ETA2, 100);
    phase(SM_ETA4, 100);
    phase(SM_UNIFORM, 30);
    // clear drops buffered bytes
    @(negedge clk); in_valid = 1; in_data = '1; out_ready = 0;
    @(negedge clk); in_valid = 0; clear = 1;
    @(negedge clk); clear = 0;
    @(negedge clk);
    checks++;
    if (out_valid || rej) begin failures++; $display("clear did not empty the buffer"); end
    $display("outputs %0d rejections %0d", nout, nrej);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
