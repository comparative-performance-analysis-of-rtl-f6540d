// axil_regs: AXI4-Lite slave register file of the accelerator (control path).
//
// The processor configures a command through this port and polls for its end:
//   0x00 CTRL   (W)  bit 0 = 1 starts the command held in CMD/LEN (one-cycle
//                    start pulse; ignored while busy).
//   0x04 CMD    (RW) [3:0] command, [5:4] hash mode, [7:6] sampler mode, [9:8] slot_a,
//                    [13:12] slot_b, [17:16] slot_dst.
//   0x08 LEN    (RW) [15:0] number of 64-bit output words of a hash command.
//   0x0C STATUS (R)  [0] busy, [1] done (set when a command ends, cleared by
//                    the next start).
//   0x10 CYCLES (R)  clock cycles from start to end of the last command (a
//                    performance counter; it counts while the command runs).
// Other addresses answer SLVERR (reads return 0). Write strobes are honoured.
// Write address and write data are taken together in one cycle when both are
// valid and no response is pending; the response follows one cycle later.
// Reads are answered one cycle after the address is accepted.
// The paper states that AXI4-Lite carries control signals and register
// configuration; the register map and timing are this design's choice.
module axil_regs
  import dil_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [5:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [5:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // to / from the command sequencer
  output logic        start,
  output cmd_cfg_t    cfg,
  input  logic        busy,
  input  logic        done_pulse
);

  localparam logic [1:0] OKAY = 2'b00, SLVERR = 2'b10;

  logic [31:0] cmd_reg, len_reg, cycles;
  logic        done_flag;
  logic        wr_en;
  logic [31:0] wmask;

  always_comb begin
    for (int i = 0; i < 4; i++) wmask[8*i +: 8] = {8{s_wstrb[i]}};
    wr_en     = s_awvalid && s_wvalid && !s_bvalid;
    s_awready = wr_en;
    s_wready  = wr_en;
    s_arready = !s_rvalid;
    cfg.cmd      = cmd_e'(cmd_reg[3:0]);
    cfg.hmode    = hash_mode_e'(cmd_reg[5:4]);
    cfg.smode    = smp_mode_e'(cmd_reg[7:6]);
    cfg.slot_a   = cmd_reg[9:8];
    cfg.slot_b   = cmd_reg[13:12];
    cfg.slot_dst = cmd_reg[17:16];
    cfg.len      = len_reg[15:0];
  end

  function automatic logic mapped(logic [5:0] a);
    return a == REG_CTRL || a == REG_CMD || a == REG_LEN || a == REG_STATUS || a == REG_CYCLES;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cmd_reg   <= '0;
      len_reg   <= 32'd1;
      s_bvalid  <= 1'b0;
      s_bresp   <= OKAY;
      s_rvalid  <= 1'b0;
      s_rresp   <= OKAY;
      s_rdata   <= '0;
      start     <= 1'b0;
      done_flag <= 1'b0;
      cycles    <= '0;
    end else begin
      start <= 1'b0;
      // write channel
      if (wr_en) begin
        s_bvalid <= 1'b1;
        s_bresp  <= mapped(s_awaddr) ? OKAY : SLVERR;
        unique case (s_awaddr)
          REG_CTRL: if (s_wstrb[0] && s_wdata[0] && !busy) begin
            start     <= 1'b1;
            done_flag <= 1'b0;
            cycles    <= '0;
          end
          REG_CMD: cmd_reg <= (cmd_reg & ~wmask) | (s_wdata & wmask);
          REG_LEN: len_reg <= (len_reg & ~wmask) | (s_wdata & wmask);
          default: ;
        endcase
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
      // read channel
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rresp  <= mapped(s_araddr) ? OKAY : SLVERR;
        unique case (s_araddr)
          REG_CMD:    s_rdata <= cmd_reg;
          REG_LEN:    s_rdata <= len_reg;
          REG_STATUS: s_rdata <= {30'd0, done_flag, busy};
          REG_CYCLES: s_rdata <= cycles;
          default:    s_rdata <= '0;
        endcase
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
      // status
      if (done_pulse) done_flag <= 1'b1;
      if (busy) cycles <= cycles + 32'd1;
    end
  end

  // AXI rule: a response stays valid and unchanged until it is accepted
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata) && $stable(s_rresp));

endmodule
