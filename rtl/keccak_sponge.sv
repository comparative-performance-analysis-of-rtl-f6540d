// keccak_sponge: SHA-3 / SHAKE sponge around the Keccak-f[1600] round.
//
// Supports SHAKE128 (rate 168 bytes), SHAKE256 (136), SHA3-256 (136) and
// SHA3-512 (72), selected by mode when start is pulsed. The message arrives as
// 64-bit little-endian words (byte i of the word at bits [8i +: 8]) with a
// valid/ready handshake; in_last marks the final word and in_bytes (0..8)
// gives how many of its low bytes are message bytes (0 allowed, so the empty
// message is one word with in_last and in_bytes = 0). Each word is XORed into
// the next lane of the rate; a full rate starts a permutation. After the last
// word the padding (domain byte 0x1F for SHAKE, 0x06 for SHA-3, and 0x80 in
// the last rate byte) is XORed in and the state permuted. The sponge then
// squeezes: out_data shows the next 64-bit output word with out_valid; a full
// rate of output words triggers another permutation. Squeezing continues until
// stop is pulsed, so SHAKE outputs of any length are available; a SHA-3 digest
// is simply the first 4 (SHA3-256) or 8 (SHA3-512) words.
//
// Timing: one word absorbed or squeezed per cycle; each permutation takes 24
// cycles, one round per cycle (keccak_round); padding costs one cycle. busy is
// high from start until stop. The paper names a Keccak/SHAKE core for hashing
// and sampling; the word interface, the one-round-per-cycle structure and the
// stop handshake are this design's choices.
module keccak_sponge
  import dil_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  hash_mode_e  mode,
  input  logic        stop,
  output logic        busy,
  // absorb
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_data,
  input  logic [3:0]  in_bytes,
  input  logic        in_last,
  // squeeze
  output logic        out_valid,
  input  logic        out_ready,
  output logic [63:0] out_data
);

  typedef enum logic [2:0] {S_IDLE, S_ABSORB, S_PAD, S_PERM, S_SQUEEZE} state_e;

  state_e        state, after;
  logic [1599:0] st, st_round;
  logic [4:0]    lane, rnd, rate_lanes;
  logic [7:0]    pad_pos, dom;
  hash_mode_e    mode_q;

  always_comb begin
    unique case (mode_q)
      HM_SHAKE128: rate_lanes = 5'd21;
      HM_SHA3_512: rate_lanes = 5'd9;
      default:     rate_lanes = 5'd17;
    endcase
    dom = (mode_q == HM_SHAKE128 || mode_q == HM_SHAKE256) ? 8'h1F : 8'h06;
  end

  keccak_round u_round (.state_in(st), .round(rnd), .state_out(st_round));

  logic [63:0] in_mask;
  logic [3:0]  nbytes;
  logic [7:0]  end_pos;
  always_comb begin
    nbytes = in_last ? ((in_bytes > 4'd8) ? 4'd8 : in_bytes) : 4'd8;
    for (int i = 0; i < 8; i++) in_mask[8*i +: 8] = (4'(i) < nbytes) ? 8'hFF : 8'h00;
    end_pos = 8'({lane, 3'b000}) + 8'(nbytes);
  end

  assign in_ready  = (state == S_ABSORB);
  assign out_valid = (state == S_SQUEEZE);
  assign out_data  = st[64*lane +: 64];
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      after   <= S_IDLE;
      st      <= '0;
      lane    <= '0;
      rnd     <= '0;
      pad_pos <= '0;
      mode_q  <= HM_SHAKE128;
    end else if (stop) begin
      state <= S_IDLE;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          st     <= '0;
          lane   <= '0;
          rnd    <= '0;
          mode_q <= mode;
          state  <= S_ABSORB;
        end
        S_ABSORB: if (in_valid) begin
          st[64*lane +: 64] <= st[64*lane +: 64] ^ (in_data & in_mask);
          if (in_last) begin
            lane <= '0;
            if (end_pos == {rate_lanes, 3'b000}) begin
              // the message filled the rate exactly: padding goes in a new block
              pad_pos <= '0;
              after   <= S_PAD;
              state   <= S_PERM;
            end else begin
              pad_pos <= end_pos;
              state   <= S_PAD;
            end
          end else if (lane == rate_lanes - 5'd1) begin
            lane  <= '0;
            after <= S_ABSORB;
            state <= S_PERM;
          end else begin
            lane <= lane + 5'd1;
          end
        end
        S_PAD: begin
          st <= st ^ (1600'(dom) << {pad_pos, 3'b000})
                   ^ (1600'(8'h80) << {8'({rate_lanes, 3'b000}) - 8'd1, 3'b000});
          after <= S_SQUEEZE;
          state <= S_PERM;
        end
        S_PERM: begin
          st <= st_round;
          if (rnd == 5'd23) begin
            rnd   <= '0;
            state <= after;
          end else begin
            rnd <= rnd + 5'd1;
          end
        end
        S_SQUEEZE: if (out_ready) begin
          if (lane == rate_lanes - 5'd1) begin
            lane  <= '0;
            after <= S_SQUEEZE;
            state <= S_PERM;
          end else begin
            lane <= lane + 5'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // an offered output word stays put until taken (or the hash is stopped)
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready && !stop |=> out_valid && $stable(out_data));

endmodule
