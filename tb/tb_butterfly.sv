// tb_butterfly: self-checking test of the modular butterfly.
// Drives random operands in all three modes, one per cycle, and compares each
// result (two cycles later) with a reference computed with 64-bit '%'
// arithmetic. Also checks the fixed two-cycle latency and edge values
// (0, q-1).
module tb_butterfly;
  import dil_pkg::*;

  localparam longint QL = 8380417;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, pending;
  bf_mode_e mode;
  coef_t a, b, w, a_out, b_out;
  logic [17:0] in_tag, out_tag;
  int checks = 0, failures = 0;

  butterfly dut (.*);

  longint exp_a [0:1023], exp_b [0:1023];
  int issued = 0, seen = 0;
  int issue_cyc [0:1023];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint md(longint x);
    md = ((x % QL) + QL) % QL;
  endfunction

  // scoreboard
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (64'(a_out) != exp_a[out_tag[9:0]] || 64'(b_out) != exp_b[out_tag[9:0]]) begin
      failures++;
      $display("mismatch tag %0d: got %0d %0d exp %0d %0d", out_tag, a_out, b_out,
               exp_a[out_tag[9:0]], exp_b[out_tag[9:0]]);
    end
    checks++;
    if (cyc - issue_cyc[out_tag[9:0]] != 2) begin
      failures++;
      $display("latency %0d", cyc - issue_cyc[out_tag[9:0]]);
    end
    seen++;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint la, lb, lw, t;
    in_valid = 0; mode = BF_CT; a = 0; b = 0; w = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      mode = bf_mode_e'($urandom_range(0, 2));
      if (i < 6) begin : edge_vals
        la = (i % 2 != 0) ? QL - 1 : 0; lb = (i % 3 != 0) ? QL - 1 : 0; lw = QL - 1;
      end else begin
        la = $urandom_range(0, 8380416); lb = $urandom_range(0, 8380416);
        lw = $urandom_range(0, 8380416);
      end
      a = coef_t'(la); b = coef_t'(lb); w = coef_t'(lw);
      in_tag = 18'(issued);
      if (in_valid) begin
        case (mode)
          BF_CT: begin t = md(lb * lw); exp_a[issued] = md(la + t); exp_b[issued] = md(la - t); end
          BF_GS: begin exp_a[issued] = md(la + lb); exp_b[issued] = md(md(la - lb) * lw); end
          default: begin exp_a[issued] = la; exp_b[issued] = md(lb * lw); end
        endcase
        issue_cyc[issued] = cyc;
        issued++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (seen != issued) begin failures++; $display("seen %0d issued %0d", seen, issued); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
