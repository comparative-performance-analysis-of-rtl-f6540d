// ntt_core: in-place NTT / INTT / pointwise-multiply engine for Dilithium
// polynomials (n = 256, q = 8380417), built around one butterfly unit.
//
// The core owns a bank of SLOTS polynomial slots (SLOTS*256 coefficients of
// 23 bits, two read and two write ports, held in a register array). A command
// (start with op, slot_a, slot_b, slot_dst) runs as a sequence of passes:
//   NOP_NTT : 8 Cooley-Tukey passes of 128 butterflies on slot_a (in place),
//             len = 128, 64, ..., 1, twiddle zetas[2^s + group].
//   NOP_INTT: 8 Gentleman-Sande passes on slot_a, len = 1, 2, ..., 128,
//             twiddle -zetas[(256>>s) - 1 - group], then a scaling pass that
//             multiplies all 256 coefficients by 256^-1.
//   NOP_PWM : one pass of 256 products, slot_dst[i] = slot_a[i]*slot_b[i].
// The loop order and twiddle indexing follow the Dilithium reference code; the
// transform is kept in the plain domain (no Montgomery factor), so
// INTT(NTT(a)) = a and INTT(NTT(a) o NTT(b)) = a*b mod (X^256 + 1).
// One butterfly is issued per cycle; between passes the core waits until the
// butterfly pipe has written back, which avoids read-after-write hazards.
// Latency, from the cycle start is sampled to the cycle done is high:
// NTT 8*131+1 = 1049 cycles, INTT 8*131+259+1 = 1308, PWM 260.
//
// External port: ext_* reads (combinational, same cycle) and writes
// (clocked) any coefficient while the core is idle; the top uses it to load,
// store and fill polynomials. done pulses for one cycle when a command ends.
// The paper says only that NTT/INTT use a butterfly unit; the slot bank, pass
// schedule and the port set are this design's choice.
module ntt_core
  import dil_pkg::*;
#(
  parameter int unsigned SLOTS = 4,
  localparam int unsigned SW   = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned AW   = SW + 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  ntt_op_e       op,
  input  logic [SW-1:0] slot_a,
  input  logic [SW-1:0] slot_b,
  input  logic [SW-1:0] slot_dst,
  output logic          busy,
  output logic          done,
  // external coefficient port (use only while !busy)
  input  logic          ext_we,
  input  logic [AW-1:0] ext_addr,
  input  coef_t         ext_wdata,
  output coef_t         ext_rdata
);

  localparam logic [N*QW-1:0] ZETAS = gen_zetas();

  function automatic coef_t zeta_at(logic [7:0] k);
    return ZETAS[k*QW +: QW];
  endfunction

  coef_t mem [SLOTS*N];

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_e;
  state_e        state;
  ntt_op_e       op_q;
  logic [SW-1:0] sa_q, sb_q, sd_q;
  logic [3:0]    pass;      // 0..7 butterfly passes, 8 = scaling pass (INTT)
  logic [8:0]    cnt;       // item index within a pass
  logic          last_pass;
  logic [8:0]    n_items;
  logic          is_mul_pass;

  always_comb begin
    is_mul_pass = (op_q == NOP_PWM) || (pass == 4'd8);
    n_items     = is_mul_pass ? 9'd256 : 9'd128;
    last_pass   = (op_q == NOP_PWM) || (op_q == NOP_INTT && pass == 4'd8) ||
                  (op_q == NOP_NTT && pass == 4'd7);
  end

  // address and twiddle generation
  logic [7:0]  grp, off, j, jl, k;
  logic [2:0]  lg;          // log2(len)
  bf_mode_e    bmode;
  coef_t       bw;
  logic [AW-1:0] ra, rb;    // read addresses (a operand, b operand)
  logic [AW-1:0] wa, wb;    // write-back addresses
  logic          wr_a;

  always_comb begin
    lg  = (op_q == NOP_NTT) ? 3'(7 - pass[2:0]) : pass[2:0];
    grp = 8'(cnt[6:0] >> lg);
    off = 8'(cnt[6:0]) & ((8'd1 << lg) - 8'd1);
    j   = 8'((grp << (lg + 3'd1)) | off);
    jl  = 8'(j + (8'd1 << lg));
    if (op_q == NOP_NTT) k = 8'((8'd1 << pass[2:0]) + grp);
    else                 k = 8'((9'd256 >> pass[2:0]) - 9'd1 - 9'(grp));
    ra = {sa_q, j};
    rb = {sa_q, jl};
    wa = {sa_q, j};
    wb = {sa_q, jl};
    wr_a = 1'b1;
    if (op_q == NOP_NTT) begin
      bmode = BF_CT;
      bw    = zeta_at(k);
    end else begin
      bmode = BF_GS;
      bw    = mod_sub(23'd0, zeta_at(k));
    end
    if (is_mul_pass) begin
      bmode = BF_MUL;
      wr_a  = 1'b0;
      if (op_q == NOP_PWM) begin
        rb = {sa_q, cnt[7:0]};
        ra = {sb_q, cnt[7:0]};
        wb = {sd_q, cnt[7:0]};
      end else begin
        rb = {sa_q, cnt[7:0]};
        ra = {sa_q, cnt[7:0]};
        wb = {sa_q, cnt[7:0]};
      end
    end
  end

  // butterfly
  localparam int unsigned TAGW = 2*AW + 1;
  logic            bf_in_valid, bf_out_valid, bf_pending;
  coef_t           bf_a_in, bf_b_in, bf_w_in, bf_a_out, bf_b_out;
  logic [TAGW-1:0] bf_tag_in, bf_tag_out;

  always_comb begin
    bf_in_valid = (state == S_ISSUE);
    bf_b_in     = mem[rb];
    if (is_mul_pass) begin
      bf_a_in = 23'd0;
      bf_w_in = (op_q == NOP_PWM) ? mem[ra] : NINV;
    end else begin
      bf_a_in = mem[ra];
      bf_w_in = bw;
    end
    bf_tag_in = {wr_a, wa, wb};
  end

  butterfly #(.TAGW(TAGW)) u_bf (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (bf_in_valid),
    .mode     (bmode),
    .a        (bf_a_in),
    .b        (bf_b_in),
    .w        (bf_w_in),
    .in_tag   (bf_tag_in),
    .out_valid(bf_out_valid),
    .a_out    (bf_a_out),
    .b_out    (bf_b_out),
    .out_tag  (bf_tag_out),
    .pending  (bf_pending)
  );

  logic          wb_wr_a;
  logic [AW-1:0] wb_wa, wb_wb;
  assign {wb_wr_a, wb_wa, wb_wb} = bf_tag_out;

  // memory write ports
  always_ff @(posedge clk) begin
    if (bf_out_valid) begin
      if (wb_wr_a) mem[wb_wa] <= bf_a_out;
      mem[wb_wb] <= bf_b_out;
    end else if (ext_we && state == S_IDLE) begin
      mem[ext_addr] <= ext_wdata;
    end
  end

  assign ext_rdata = mem[ext_addr];

  // sequencer
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      pass  <= '0;
      cnt   <= '0;
      op_q  <= NOP_NTT;
      sa_q  <= '0;
      sb_q  <= '0;
      sd_q  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          op_q  <= op;
          sa_q  <= slot_a;
          sb_q  <= slot_b;
          sd_q  <= slot_dst;
          pass  <= '0;
          cnt   <= '0;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          if (cnt == n_items - 9'd1) begin
            cnt   <= '0;
            state <= S_DRAIN;
          end else begin
            cnt <= cnt + 9'd1;
          end
        end
        S_DRAIN: if (!bf_pending && !bf_out_valid) begin
          if (last_pass) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            pass  <= pass + 4'd1;
            state <= S_ISSUE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // the external port must not write while a command runs
  a_ext_idle: assert property (@(posedge clk) disable iff (!rst_n) ext_we |-> !busy);

endmodule
