// butterfly: two-stage pipelined modular butterfly for the Dilithium NTT.
//
// One unit serves all polynomial arithmetic of the accelerator. Mode BF_CT is
// the Cooley-Tukey butterfly of the forward NTT (a' = a + w*b, b' = a - w*b),
// BF_GS the Gentleman-Sande butterfly of the inverse NTT (a' = a + b,
// b' = (a - b)*w) and BF_MUL a single modular product (a' = a, b' = b*w) used
// for pointwise multiplication and for the final 1/256 scaling of the INTT.
// All values are in [0, q), q = 8380417. The single 23x23 multiplier sits in
// stage 1 (its input is b or a-b, chosen by the mode); stage 2 reduces the
// 46-bit product with the shift-and-add reduction of dil_pkg and forms the
// sums. A tag travels with each operation so a controller can carry write
// addresses along the pipe.
//
// Timing: an operation presented with in_valid in cycle t appears on the
// outputs with out_valid in cycle t+2; one operation is accepted every cycle.
// pending is high while stage 1 holds an operation.
// The paper names a "highly optimized butterfly unit for NTT/INTT"; its
// internal structure (stages, reduction method, tag) is this design's choice.
module butterfly
  import dil_pkg::*;
#(
  parameter int unsigned TAGW = 18
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  bf_mode_e        mode,
  input  coef_t           a,
  input  coef_t           b,
  input  coef_t           w,
  input  logic [TAGW-1:0] in_tag,
  output logic            out_valid,
  output coef_t           a_out,
  output coef_t           b_out,
  output logic [TAGW-1:0] out_tag,
  output logic            pending
);

  // stage 1: multiply
  logic            v1;
  bf_mode_e        mode1;
  coef_t           a1, s1;
  logic [45:0]     p1;
  logic [TAGW-1:0] tag1;
  coef_t           mul_in;

  always_comb begin
    mul_in = (mode == BF_GS) ? mod_sub(a, b) : b;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
    end else begin
      v1 <= in_valid;
    end
    mode1 <= mode;
    a1    <= a;
    s1    <= mod_add(a, b);
    p1    <= 46'(mul_in) * 46'(w);
    tag1  <= in_tag;
  end

  // stage 2: reduce and combine
  coef_t r2;
  always_comb r2 = mod_reduce46(p1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= v1;
    end
    out_tag <= tag1;
    unique case (mode1)
      BF_CT: begin
        a_out <= mod_add(a1, r2);
        b_out <= mod_sub(a1, r2);
      end
      BF_GS: begin
        a_out <= s1;
        b_out <= r2;
      end
      default: begin
        a_out <= a1;
        b_out <= r2;
      end
    endcase
  end

  assign pending = v1;

endmodule
