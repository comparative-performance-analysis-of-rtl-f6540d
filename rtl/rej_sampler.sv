// rej_sampler: rejection sampler of Dilithium polynomial coefficients.
//
// Consumes a SHAKE output stream as 64-bit little-endian words and turns it
// into coefficients in [0, q), q = 8380417, following the Dilithium
// specification:
//   SM_UNIFORM (ExpandA): three bytes at a time,
//              t = (b0 | b1<<8 | b2<<16) & 0x7FFFFF, kept if t < q.
//   SM_ETA2    (ExpandS, eta = 2): one nibble at a time (low nibble of a byte
//              first), kept if t < 15, coefficient 2 - (t mod 5).
//   SM_ETA4    (ExpandS, eta = 4): one nibble at a time, kept if t < 9,
//              coefficient 4 - t.
// Negative coefficients are returned as q - |c|. A rejected candidate pulses
// rej for one cycle. A buffer of up to 21 nibbles bridges the 64-bit words and
// the candidates, so the byte stream is used without gaps across words and
// Keccak blocks. Handshakes: in_valid/in_ready for words (a word is taken
// only when less than one candidate is buffered), out_valid/out_ready for
// coefficients. clear empties the buffer (between polynomials); mode must be
// held while a polynomial is sampled.
// Timing: one candidate examined per cycle; a word costs one cycle to load.
// The paper names a PRNG module with a Keccak core "for sampling
// coefficients"; the buffer structure and handshakes are this design's choice.
module rej_sampler
  import dil_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  smp_mode_e   mode,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output coef_t       out_coef,
  output logic        rej
);

  logic [87:0] buf_q;
  logic [4:0]  nib;          // buffered nibbles, 0..21
  logic [4:0]  need;         // nibbles per candidate
  logic        have, accept, consume;
  coef_t       cand, coef;
  logic [3:0]  t;

  always_comb begin
    need = (mode == SM_UNIFORM) ? 5'd6 : 5'd1;
    have = (nib >= need);
    cand = buf_q[22:0];             // bit 23 of the third byte is masked off
    t    = buf_q[3:0];
    unique case (mode)
      SM_ETA2: begin
        accept = (t < 4'd15);
        coef   = mod_sub(23'd2, 23'(t % 4'd5));
      end
      SM_ETA4: begin
        accept = (t < 4'd9);
        coef   = mod_sub(23'd4, 23'(t));
      end
      default: begin
        accept = (cand < Q);
        coef   = cand;
      end
    endcase
    out_valid = have && accept;
    out_coef  = coef;
    consume   = have && (!accept || out_ready);
    rej       = have && !accept;
    in_ready  = !have && !clear;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      buf_q <= '0;
      nib   <= '0;
    end else if (consume) begin
      buf_q <= (mode == SM_UNIFORM) ? {24'd0, buf_q[87:24]} : {4'd0, buf_q[87:4]};
      nib   <= nib - need;
    end else if (in_valid && in_ready) begin
      buf_q <= buf_q | (88'(in_data) << {nib[2:0], 2'b00});
      nib   <= nib + 5'd16;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) nib <= 5'd21);

endmodule
