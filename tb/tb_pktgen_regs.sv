// tb_pktgen_regs: self-checking test of the packet generator's AXI4-Lite
// register file.
//
// Checks the reset value of PKT_LEN (61,440 samples = 1 ms at 61.44 MHz),
// read-back of written lengths, byte-strobe writes, both arrival orders of
// write address and data, a late response accept, the one-cycle START and
// CLEAR pulses, the STATUS and PKT_COUNT read paths and that read-only
// registers ignore writes. Expected values come from the register map, not
// from the design.
`timescale 1ns/1ps
module tb_pktgen_regs;
  import navic_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        start_pulse, clear_pulse;
  logic [LEN_W-1:0] pkt_len;
  pg_status_t  status;

  int checks = 0, failures = 0;
  int start_cnt = 0, clear_cnt = 0;

  pktgen_regs dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .start_pulse, .clear_pulse, .pkt_len, .status
  );

  axil_master_bfm bfm (
    .clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready
  );

  always @(posedge clk) if (rst_n) begin
    if (start_pulse) start_cnt++;
    if (clear_pulse) clear_cnt++;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d (0x%0h) expected %0d (0x%0h)", what, got, got, exp, exp);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  logic [1:0]  resp;

  initial begin
    status = '0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // Reset value of PKT_LEN: one 1 ms packet at 61.44 MHz.
    bfm.read(REG_PKT_LEN, 0, d, resp);
    check("PKT_LEN reset", d, 61440);
    check("PKT_LEN reset resp", resp, 0);
    check("pkt_len port reset", pkt_len, 61440);

    // Plain write and read-back.
    bfm.write(REG_PKT_LEN, 32'd1234, 4'hF, 0, 0, 0, resp);
    check("write resp", resp, 0);
    bfm.read(REG_PKT_LEN, 0, d, resp);
    check("PKT_LEN readback", d, 1234);
    check("pkt_len port", pkt_len, 1234);

    // Data before address, late response accept.
    bfm.write(REG_PKT_LEN, 32'h00ABCDEF, 4'hF, 3, 0, 4, resp);
    bfm.read(REG_PKT_LEN, 2, d, resp);
    check("PKT_LEN W-first", d, 32'hABCDEF);

    // Address before data.
    bfm.write(REG_PKT_LEN, 32'h00000100, 4'hF, 0, 3, 0, resp);
    bfm.read(REG_PKT_LEN, 0, d, resp);
    check("PKT_LEN AW-first", d, 32'h100);

    // Byte strobes: only byte 0 changes.
    bfm.write(REG_PKT_LEN, 32'h00FFFF55, 4'h1, 0, 0, 0, resp);
    bfm.read(REG_PKT_LEN, 0, d, resp);
    check("PKT_LEN strobe byte0", d, 32'h155);
    // Upper byte beyond LEN_W is dropped.
    bfm.write(REG_PKT_LEN, 32'h7FF00000, 4'hC, 0, 0, 0, resp);
    bfm.read(REG_PKT_LEN, 0, d, resp);
    check("PKT_LEN strobe bytes 3:2", d, 32'h00F00155);

    // START gives exactly one one-cycle pulse; CLEAR likewise.
    check("no start yet", start_cnt, 0);
    bfm.write(REG_CTRL, 32'h1, 4'hF, 0, 0, 0, resp);
    repeat (3) @(posedge clk);
    check("one start pulse", start_cnt, 1);
    check("no clear with START", clear_cnt, 0);
    bfm.write(REG_CTRL, 32'h2, 4'hF, 0, 0, 0, resp);
    repeat (3) @(posedge clk);
    check("one clear pulse", clear_cnt, 1);
    check("start count unchanged", start_cnt, 1);
    bfm.write(REG_CTRL, 32'h3, 4'hF, 0, 0, 0, resp);
    repeat (3) @(posedge clk);
    check("start+clear", start_cnt * 10 + clear_cnt, 22);
    // CTRL without byte-0 strobe does nothing.
    bfm.write(REG_CTRL, 32'h3, 4'h2, 0, 0, 0, resp);
    repeat (3) @(posedge clk);
    check("CTRL strobe gated", start_cnt * 10 + clear_cnt, 22);
    bfm.read(REG_CTRL, 0, d, resp);
    check("CTRL reads 0", d, 0);

    // STATUS bit positions and PKT_COUNT.
    status = '{busy: 1'b1, done: 1'b0, ovf_ds: 1'b1, ovf_grs: 1'b0, pkt_count: 16'd0};
    bfm.read(REG_STATUS, 0, d, resp);
    check("STATUS busy+ovf_ds", d, 32'h5);
    status = '{busy: 1'b0, done: 1'b1, ovf_ds: 1'b0, ovf_grs: 1'b1, pkt_count: 16'hBEEF};
    bfm.read(REG_STATUS, 1, d, resp);
    check("STATUS done+ovf_grs", d, 32'hA);
    bfm.read(REG_PKT_COUNT, 0, d, resp);
    check("PKT_COUNT", d, 32'hBEEF);

    // Read-only registers ignore writes and do not disturb PKT_LEN.
    bfm.write(REG_STATUS, 32'hFFFF_FFFF, 4'hF, 0, 0, 0, resp);
    check("RO write resp", resp, 0);
    bfm.write(REG_PKT_COUNT, 32'h1, 4'hF, 0, 0, 0, resp);
    bfm.read(REG_PKT_LEN, 0, d, resp);
    check("PKT_LEN after RO writes", d, 32'h00F00155);
    check("no pulses from RO writes", start_cnt * 10 + clear_cnt, 22);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
