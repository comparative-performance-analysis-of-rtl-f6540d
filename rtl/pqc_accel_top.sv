// pqc_accel_top: programmable-logic half of a hardware/software co-design for
// CRYSTALS-Dilithium on a Zynq-class SoC.
//
// The processor keeps the Dilithium protocol (and every polynomial addition,
// packing and rejection test) in software and calls this accelerator for the
// two heavy primitives: polynomial arithmetic in the NTT domain (ntt_core with
// its butterfly) and Keccak hashing / sampling (keccak_sponge, rej_sampler).
// Control travels over AXI4-Lite (axil_regs): the processor writes CMD/LEN,
// writes CTRL.start and polls STATUS. Bulk data travels over a pair of 64-bit
// AXI4-Stream ports that a DMA engine would drive: s_axis into the
// accelerator, m_axis out of it.
//
// Commands (CMD[3:0]); a polynomial travels as 256 beats with one coefficient
// in bits [22:0] of each beat (tlast on the 256th outgoing beat):
//   LOAD   : 256 beats from s_axis -> slot_dst (values >= q are reduced once).
//   STORE  : slot_a -> 256 beats on m_axis.
//   NTT    : slot_a <- NTT(slot_a);   INTT: slot_a <- NTT^-1(slot_a).
//   PWM    : slot_dst <- slot_a o slot_b (coefficient-wise product).
//   HASH   : message words from s_axis (tkeep gives the valid bytes of the
//            tlast beat) hashed in mode CMD[5:4]; LEN (1..65535, 0 acts as 1)
//            64-bit words of output
//            on m_axis, tlast on the last one.
//   SAMPLE : seed words from s_axis absorbed by SHAKE128 (sampler mode
//            CMD[7:6] = uniform) or SHAKE256 (eta = 2 or 4); the output
//            stream is rejection-sampled into 256 coefficients in slot_dst.
//            With seed rho || nonce this is Dilithium's ExpandA for one
//            matrix entry; with rho' || nonce and an eta mode, ExpandS for
//            one secret polynomial.
// Commands run one at a time: the NTT engine and the Keccak engine are separate
// modules, but the sequencer does not overlap them (own choice).
// STATUS.done is set when the command ends; CYCLES reports its length.
// Timing: LOAD/STORE move one beat per cycle; NTT, INTT and PWM take 1049,
// 1308 and 260 cycles in the core plus 2 cycles of command overhead.
//
// Reset is synchronous and active low (aresetn style). The partition (hashing
// and NTT in logic, protocol in software; AXI4-Lite for control, DMA-fed
// AXI4-Stream for data) follows the paper; the command set, register map,
// slot count and beat formats are this design's choices.
module pqc_accel_top
  import dil_pkg::*;
#(
  parameter int unsigned SLOTS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite control slave
  input  logic [5:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [5:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4-Stream data in (from DMA, memory-to-stream)
  input  logic [63:0] s_axis_tdata,
  input  logic [7:0]  s_axis_tkeep,
  input  logic        s_axis_tlast,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  // AXI4-Stream data out (to DMA, stream-to-memory)
  output logic [63:0] m_axis_tdata,
  output logic [7:0]  m_axis_tkeep,
  output logic        m_axis_tlast,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready
);

  localparam int unsigned SW = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  localparam int unsigned AW = SW + 8;

  // ---------------------------------------------------------------- control
  logic     start, busy, done_pulse;
  cmd_cfg_t cfg, cfg_q;

  axil_regs u_regs (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid),
    .s_wready(s_axil_wready), .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid),
    .s_bready(s_axil_bready), .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid),
    .s_arready(s_axil_arready), .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .start, .cfg, .busy, .done_pulse
  );

  // -------------------------------------------------------------- NTT core
  logic          ntt_start, ntt_busy, ntt_done, ext_we;
  ntt_op_e       ntt_op;
  logic [AW-1:0] ext_addr;
  coef_t         ext_wdata, ext_rdata;

  ntt_core #(.SLOTS(SLOTS)) u_ntt (
    .clk, .rst_n,
    .start(ntt_start), .op(ntt_op),
    .slot_a(SW'(cfg_q.slot_a)), .slot_b(SW'(cfg_q.slot_b)), .slot_dst(SW'(cfg_q.slot_dst)),
    .busy(ntt_busy), .done(ntt_done),
    .ext_we, .ext_addr, .ext_wdata, .ext_rdata
  );

  // ------------------------------------------------- Keccak sponge, sampler
  logic        sp_start, sp_stop, sp_busy, sp_in_valid, sp_in_ready, sp_out_valid, sp_out_ready;
  hash_mode_e  sp_mode;
  logic [63:0] sp_out_data;
  logic [3:0]  sp_in_bytes;

  keccak_sponge u_sponge (
    .clk, .rst_n,
    .start(sp_start), .mode(sp_mode), .stop(sp_stop), .busy(sp_busy),
    .in_valid(sp_in_valid), .in_ready(sp_in_ready), .in_data(s_axis_tdata),
    .in_bytes(sp_in_bytes), .in_last(s_axis_tlast),
    .out_valid(sp_out_valid), .out_ready(sp_out_ready), .out_data(sp_out_data)
  );

  logic  smp_clear, smp_in_valid, smp_in_ready, smp_out_valid, smp_out_ready, smp_rej;
  coef_t smp_coef;

  rej_sampler u_smp (
    .clk, .rst_n, .clear(smp_clear), .mode(cfg_q.smode),
    .in_valid(smp_in_valid), .in_ready(smp_in_ready), .in_data(sp_out_data),
    .out_valid(smp_out_valid), .out_ready(smp_out_ready), .out_coef(smp_coef),
    .rej(smp_rej)
  );

  // ------------------------------------------------------------ sequencer
  typedef enum logic [3:0] {
    T_IDLE, T_LOAD, T_STORE, T_ARITH, T_HASH_ABS, T_HASH_SQZ, T_SMP_ABS, T_SMP_RUN, T_FIN
  } tstate_e;

  tstate_e    state;
  logic [15:0] cnt;       // coefficient / word counter
  logic       entering;   // first cycle of T_ARITH: start the core

  always_comb begin
    sp_in_bytes = '0;
    for (int i = 0; i < 8; i++) sp_in_bytes = sp_in_bytes + 4'(s_axis_tkeep[i]);
  end

  logic [AW-1:0] slot_base_dst, slot_base_a;
  always_comb begin
    slot_base_dst = AW'(cfg_q.slot_dst) << 8;
    slot_base_a   = AW'(cfg_q.slot_a) << 8;
  end

  always_comb begin
    // defaults
    s_axis_tready = 1'b0;
    m_axis_tvalid = 1'b0;
    m_axis_tdata  = '0;
    m_axis_tkeep  = 8'hFF;
    m_axis_tlast  = 1'b0;
    ext_we        = 1'b0;
    ext_addr      = slot_base_a | AW'(cnt[7:0]);
    ext_wdata     = '0;
    sp_in_valid   = 1'b0;
    sp_out_ready  = 1'b0;
    smp_in_valid  = 1'b0;
    smp_out_ready = 1'b0;
    ntt_start     = 1'b0;
    unique case (cfg_q.cmd)
      CMD_INTT: ntt_op = NOP_INTT;
      CMD_PWM:  ntt_op = NOP_PWM;
      default:  ntt_op = NOP_NTT;
    endcase
    if (cfg.cmd == CMD_SAMPLE) sp_mode = (cfg.smode == SM_UNIFORM) ? HM_SHAKE128 : HM_SHAKE256;
    else                       sp_mode = cfg.hmode;
    sp_start  = start && !busy && (cfg.cmd == CMD_HASH || cfg.cmd == CMD_SAMPLE);
    sp_stop   = (state == T_FIN);
    smp_clear = (state == T_FIN);
    unique case (state)
      T_LOAD: begin
        s_axis_tready = 1'b1;
        ext_we        = s_axis_tvalid;
        ext_addr      = slot_base_dst | AW'(cnt[7:0]);
        ext_wdata     = (s_axis_tdata[22:0] >= Q) ? s_axis_tdata[22:0] - Q : s_axis_tdata[22:0];
      end
      T_STORE: begin
        m_axis_tvalid = 1'b1;
        m_axis_tdata  = 64'(ext_rdata);
        m_axis_tlast  = (cnt == 16'd255);
      end
      T_ARITH: ntt_start = entering;
      T_HASH_ABS, T_SMP_ABS: begin
        s_axis_tready = sp_in_ready;
        sp_in_valid   = s_axis_tvalid;
      end
      T_HASH_SQZ: begin
        m_axis_tvalid = sp_out_valid;
        m_axis_tdata  = sp_out_data;
        sp_out_ready  = m_axis_tready;
        m_axis_tlast  = (cnt == ((cfg_q.len == 16'd0) ? 16'd0 : cfg_q.len - 16'd1));
      end
      T_SMP_RUN: begin
        smp_in_valid  = sp_out_valid;
        sp_out_ready  = smp_in_ready;
        smp_out_ready = 1'b1;
        ext_we        = smp_out_valid;
        ext_addr      = slot_base_dst | AW'(cnt[7:0]);
        ext_wdata     = smp_coef;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= T_IDLE;
      cnt      <= '0;
      cfg_q    <= '0;
      entering <= 1'b0;
    end else begin
      entering <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          cfg_q <= cfg;
          cnt   <= '0;
          unique case (cfg.cmd)
            CMD_LOAD:   state <= T_LOAD;
            CMD_STORE:  state <= T_STORE;
            CMD_NTT, CMD_INTT, CMD_PWM: begin
              state    <= T_ARITH;
              entering <= 1'b1;
            end
            CMD_HASH:   state <= T_HASH_ABS;
            CMD_SAMPLE: state <= T_SMP_ABS;
            default:    state <= T_FIN;
          endcase
        end
        T_LOAD: if (s_axis_tvalid) begin
          cnt <= cnt + 16'd1;
          if (cnt == 16'd255) state <= T_FIN;
        end
        T_STORE: if (m_axis_tready) begin
          cnt <= cnt + 16'd1;
          if (cnt == 16'd255) state <= T_FIN;
        end
        T_ARITH: if (ntt_done) state <= T_FIN;
        T_HASH_ABS: if (s_axis_tvalid && sp_in_ready && s_axis_tlast) state <= T_HASH_SQZ;
        T_HASH_SQZ: if (sp_out_valid && m_axis_tready) begin
          cnt <= cnt + 16'd1;
          if (m_axis_tlast) state <= T_FIN;
        end
        T_SMP_ABS: if (s_axis_tvalid && sp_in_ready && s_axis_tlast) state <= T_SMP_RUN;
        T_SMP_RUN: if (smp_out_valid) begin
          cnt <= cnt + 16'd1;
          if (cnt == 16'd255) state <= T_FIN;
        end
        T_FIN: state <= T_IDLE;
        default: state <= T_IDLE;
      endcase
    end
  end

  assign busy       = (state != T_IDLE);
  assign done_pulse = (state == T_FIN);

  // AXI4-Stream rule: an offered beat stays unchanged until it is taken
  a_m_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast));
  // the sequencer never touches the coefficient port while the core runs
  a_ext_idle: assert property (@(posedge clk) disable iff (!rst_n) ntt_busy |-> !ext_we);
  a_sponge_idle_on_start: assert property (@(posedge clk) disable iff (!rst_n) sp_start |-> !sp_busy);

endmodule
