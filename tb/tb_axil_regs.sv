// tb_axil_regs: self-checking test of the AXI4-Lite register file.
// Uses simple AXI4-Lite master tasks (with random response back-pressure) to
// check read-back of CMD and LEN, byte strobes, the decoded command fields,
// SLVERR for unmapped addresses, the start pulse, the done flag and the
// cycle counter against a modelled 37-cycle command.
module tb_axil_regs;
  import dil_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0]  s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  logic        start, busy, done_pulse;
  cmd_cfg_t    cfg;
  int checks = 0, failures = 0, starts = 0;

  axil_regs dut (.*);

  task automatic axi_write(logic [5:0] a, logic [31:0] d, logic [3:0] strb, output logic [1:0] resp);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = strb; s_wvalid = 1;
    @(posedge clk);
    while (!(s_awready && s_wready)) @(posedge clk);
    @(negedge clk) begin s_awvalid = 0; s_wvalid = 0; end
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_bready = 1;
    @(posedge clk);
    while (!s_bvalid) @(posedge clk);
    resp = s_bresp;
    @(negedge clk) s_bready = 0;
  endtask

  task automatic axi_read(logic [5:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    @(posedge clk);
    while (!s_arready) @(posedge clk);
    @(negedge clk) s_arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_rready = 1;
    @(posedge clk);
    while (!s_rvalid) @(posedge clk);
    d = s_rdata; resp = s_rresp;
    @(negedge clk) s_rready = 0;
  endtask

  task automatic expect32(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  // modelled command: busy for 37 cycles after each start
  int busy_left = 0;
  always @(posedge clk) begin
    if (!rst_n) busy_left <= 0;
    else if (start) begin starts++; busy_left <= 37; end
    else if (busy_left > 0) busy_left <= busy_left - 1;
  end
  assign busy = (busy_left > 0);
  assign done_pulse = (busy_left == 1);

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [1:0] r;
    s_awaddr = 0; s_awvalid = 0; s_wdata = 0; s_wstrb = 0; s_wvalid = 0; s_bready = 0;
    s_araddr = 0; s_arvalid = 0; s_rready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_read(REG_LEN, d, r);       expect32("LEN reset", d, 1);
    axi_write(REG_CMD, 32'h0002_3165, 4'hF, r); expect32("CMD bresp", 32'(r), 0);
    axi_read(REG_CMD, d, r);       expect32("CMD readback", d, 32'h0002_3165);
    expect32("cfg.cmd", 32'(cfg.cmd), 5);
    expect32("cfg.hmode", 32'(cfg.hmode), 2);
    expect32("cfg.slot_a", 32'(cfg.slot_a), 1);
    expect32("cfg.slot_b", 32'(cfg.slot_b), 3);
    expect32("cfg.slot_dst", 32'(cfg.slot_dst), 2);
    axi_write(REG_LEN, 32'hAAAA_1234, 4'h1, r);
    axi_read(REG_LEN, d, r);       expect32("LEN strobe", d, 32'h0000_0034);
    axi_write(REG_LEN, 32'h0000_5600, 4'h2, r);
    axi_read(REG_LEN, d, r);       expect32("LEN strobe 2", d, 32'h0000_5634);
    expect32("cfg.len", 32'(cfg.len), 32'h5634);
    axi_read(6'h3C, d, r);         expect32("unmapped read resp", 32'(r), 2);
    axi_write(6'h20, 32'h1, 4'hF, r); expect32("unmapped write resp", 32'(r), 2);
    axi_read(REG_STATUS, d, r);    expect32("idle status", d, 0);
    axi_write(REG_CTRL, 32'h1, 4'hF, r);
    axi_read(REG_STATUS, d, r);    expect32("busy status", d, 1);
    axi_write(REG_CTRL, 32'h1, 4'hF, r);      // ignored: still busy
    repeat (50) @(negedge clk);
    axi_read(REG_STATUS, d, r);    expect32("done status", d, 2);
    axi_read(REG_CYCLES, d, r);    expect32("cycles", d, 37);
    expect32("start pulses", 32'(starts), 1);
    axi_write(REG_CTRL, 32'h1, 4'hF, r);
    axi_read(REG_STATUS, d, r);    expect32("done cleared by start", d, 1);
    expect32("start pulses", 32'(starts), 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
