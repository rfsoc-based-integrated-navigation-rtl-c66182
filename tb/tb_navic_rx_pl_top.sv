// tb_navic_rx_pl_top: end-to-end test of the receiver's programmable logic at
// its default size (1 ms packets of 61,440 samples, 1024-word buffers).
//
// A converter model stands in for ADC 0 (DS) and ADC 1 (GRS): it emits one
// baseband I/Q sample per clock whose values encode a running sample number
// n (DS: I = n, Q = ~n; GRS: I = n ^ 0x5A5A, Q = n + 0x1234). Two DMA models
// accept the packet streams. The processor side is an AXI4-Lite master model.
//
// Sequence: read the reset packet length; capture one 1 ms packet pair with
// everything running freely and check every beat, the alignment of DS and
// GRS, tlast, the one-sample-per-clock rate (61,440 cycles = 1 ms at
// 61.44 MHz) and the start latency; capture a second 1 ms pair with gaps in
// the converter stream, random DMA back-pressure, a START while busy and a
// long DS DMA stall that overflows the DS buffer; capture a short packet
// (length set over AXI4-Lite) while the DS DMA is stalled throughout, so its
// final sample has to be held back; clear the sticky flags. Each mechanism is
// counted and a mechanism that never occurred counts as a failure.
`timescale 1ns/1ps
module tb_navic_rx_pl_top;
  import navic_pkg::*;

  localparam int unsigned LEN1MS = 61440;
  localparam int unsigned DEPTH  = 1024;   // the top's default buffer depth

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic [15:0] ds_i, ds_q, grs_i, grs_q;
  logic        adc_valid = 0;
  logic [31:0] ds_tdata, grs_tdata;
  logic        ds_tvalid, grs_tvalid, ds_tlast, grs_tlast;
  logic        ds_tready = 1, grs_tready = 1;

  navic_rx_pl_top dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .adc_ds_i_tdata(ds_i),   .adc_ds_i_tvalid(adc_valid),
    .adc_ds_q_tdata(ds_q),   .adc_ds_q_tvalid(adc_valid),
    .adc_grs_i_tdata(grs_i), .adc_grs_i_tvalid(adc_valid),
    .adc_grs_q_tdata(grs_q), .adc_grs_q_tvalid(adc_valid),
    .m_axis_ds_tdata(ds_tdata),   .m_axis_ds_tvalid(ds_tvalid),
    .m_axis_ds_tready(ds_tready), .m_axis_ds_tlast(ds_tlast),
    .m_axis_grs_tdata(grs_tdata),   .m_axis_grs_tvalid(grs_tvalid),
    .m_axis_grs_tready(grs_tready), .m_axis_grs_tlast(grs_tlast)
  );

  axil_master_bfm bfm (
    .clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready
  );

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d (0x%0h) expected %0d (0x%0h)", what, got, got, exp, exp);
    end
  endtask

  initial begin : watchdog
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- converter and DMA models ----------------
  int unsigned cycle = 0, next_n = 0, cur_n = 0;
  bit adc_gaps = 0, dma_random = 0, ds_hold = 0;
  always @(negedge clk) begin
    cycle++;
    adc_valid = rst_n && !(adc_gaps && ($urandom_range(0, 9) < 2));
    if (adc_valid) begin
      cur_n  = next_n;
      next_n = next_n + 1;
    end
    ds_i  = cur_n[15:0];
    ds_q  = ~cur_n[15:0];
    grs_i = cur_n[15:0] ^ 16'h5A5A;
    grs_q = cur_n[15:0] + 16'h1234;
    ds_tready  = !ds_hold && !(dma_random && ($urandom_range(0, 9) == 0));
    grs_tready = !(dma_random && ($urandom_range(0, 9) == 0));
  end

  typedef struct { int unsigned n; bit last; int unsigned cyc; bit ok; } beat_t;
  beat_t ds_b[$], grs_b[$];
  // mechanism counters
  int n_packets = 0, n_stall = 0, n_gap = 0;
  always @(posedge clk) if (rst_n) begin
    if (ds_tvalid && ds_tready)
      ds_b.push_back('{n: ds_tdata[15:0], last: ds_tlast, cyc: cycle,
                       ok: (ds_tdata[31:16] == ~ds_tdata[15:0])});
    if (grs_tvalid && grs_tready)
      grs_b.push_back('{n: grs_tdata[15:0] ^ 16'h5A5A, last: grs_tlast, cyc: cycle,
                        ok: (grs_tdata[31:16] == ((grs_tdata[15:0] ^ 16'h5A5A) + 16'h1234))});
    if ((ds_tvalid && !ds_tready) || (grs_tvalid && !grs_tready)) n_stall++;
    if (rst_n && !adc_valid) n_gap++;
    if (ds_tvalid && ds_tready && ds_tlast) n_packets++;
    if (grs_tvalid && grs_tready && grs_tlast) n_packets++;
  end

  logic [31:0] d;
  logic [1:0]  resp;
  int unsigned start_cyc;
  int n_overflow = 0, n_held_last = 0, n_ignored_start = 0, n_len_write = 0, n_clear = 0;

  task automatic start_capture();
    bfm.write(REG_CTRL, 32'h1, 4'hF, 0, 0, 0, resp);
    start_cyc = cycle;
  endtask

  task automatic wait_done(input int limit);
    int k = 0;
    do begin
      repeat (64) @(posedge clk);
      bfm.read(REG_STATUS, 0, d, resp);
      k += 70;
    end while (!d[1] && k < limit);
    check("capture finished in time", d[1], 1);
  endtask

  // A loss-free packet: contiguous sample numbers from first, tlast at the end.
  task automatic check_full(input string ch, ref beat_t q[$], input int unsigned len,
                            input int unsigned first);
    int bad = -1;
    check({ch, " beat count"}, q.size(), len);
    foreach (q[k])
      if (bad < 0 && (q[k].n != ((first + k) & 16'hFFFF) || q[k].last != (k == len - 1) || !q[k].ok))
        bad = k;
    check({ch, " first bad beat"}, bad, -1);
  endtask

  int unsigned first;
  int bad;
  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;

    bfm.read(REG_PKT_LEN, 0, d, resp);
    check("default packet = 1 ms at 61.44 MHz", d, LEN1MS);

    // ---- 1 ms packet pair, everything free-running ----
    start_capture();
    wait_done(2 * LEN1MS);
    first = ds_b[0].n;
    check_full("P1 DS", ds_b, LEN1MS, first);
    check_full("P1 GRS", grs_b, LEN1MS, first);
    check("P1 DS/GRS start on same sample", grs_b[0].n, ds_b[0].n);
    check("P1 start latency within 4 cycles of the write", (ds_b[0].cyc - start_cyc) <= 4, 1);
    check("P1 1 ms = 61440 clocks", ds_b[LEN1MS-1].cyc - ds_b[0].cyc, LEN1MS - 1);
    check("P1 GRS in step with DS", grs_b[LEN1MS-1].cyc, ds_b[LEN1MS-1].cyc);
    bfm.read(REG_STATUS, 0, d, resp);
    check("P1 status done, no overflow", d, 32'h2);
    bfm.read(REG_PKT_COUNT, 0, d, resp);
    check("P1 packet count", d, 1);
    ds_b.delete(); grs_b.delete();

    // ---- 1 ms pair with gaps, back-pressure, START while busy, DS overflow ----
    adc_gaps = 1; dma_random = 1;
    start_capture();
    repeat (100) @(posedge clk);
    bfm.read(REG_STATUS, 0, d, resp);
    check("P2 busy", d[0], 1);
    start_capture();                       // ignored: a capture is running
    repeat (20000) @(posedge clk);
    @(negedge clk) ds_hold = 1;            // DS DMA stalls for 3000 cycles
    repeat (3000) @(posedge clk);
    @(negedge clk) ds_hold = 0;
    wait_done(4 * LEN1MS);
    adc_gaps = 0; dma_random = 0;
    repeat (10) @(posedge clk);
    first = grs_b[0].n;
    check_full("P2 GRS", grs_b, LEN1MS, first);
    check("P2 DS starts on the GRS sample", ds_b[0].n, first);
    check("P2 DS lost samples", ds_b.size() < LEN1MS, 1);
    bad = -1;
    foreach (ds_b[k]) begin
      if (k > 0 && ds_b[k].n - ds_b[k-1].n == 0) bad = k;     // no repeats
      if (!ds_b[k].ok || ds_b[k].last != (k == ds_b.size() - 1)) bad = k;
    end
    check("P2 DS beats ordered, tlast at end", bad, -1);
    check("P2 DS last beat is the final sample", ds_b[ds_b.size()-1].n, (first + LEN1MS - 1) & 16'hFFFF);
    bfm.read(REG_STATUS, 0, d, resp);
    check("P2 status: done, DS overflow only", d, 32'h6);
    if (d[2]) n_overflow++;
    bfm.read(REG_PKT_COUNT, 0, d, resp);
    check("P2 packet count (second START ignored)", d, 2);
    if (d == 2) n_ignored_start++;
    ds_b.delete(); grs_b.delete();

    // ---- CLEAR ----
    bfm.write(REG_CTRL, 32'h2, 4'hF, 0, 0, 0, resp);
    bfm.read(REG_STATUS, 0, d, resp);
    check("cleared", d, 0);
    if (d == 0) n_clear++;

    // ---- short packet, DS DMA stalled throughout: final sample held ----
    bfm.write(REG_PKT_LEN, 32'd4096, 4'hF, 0, 0, 0, resp);
    n_len_write++;
    @(negedge clk) ds_hold = 1;
    start_capture();
    repeat (4200) @(posedge clk);
    bfm.read(REG_STATUS, 0, d, resp);
    check("P3 busy while DS stalled", d[0], 1);
    @(negedge clk) ds_hold = 0;
    wait_done(8000);
    first = grs_b[0].n;
    check_full("P3 GRS", grs_b, 4096, first);
    check("P3 DS = buffer + held final sample", ds_b.size(), DEPTH + 1);
    bad = -1;
    for (int k = 0; k < DEPTH; k++)
      if (ds_b[k].n != ((first + k) & 16'hFFFF) || ds_b[k].last) bad = k;
    check("P3 DS buffered beats", bad, -1);
    check("P3 DS final sample", ds_b[DEPTH].n, (first + 4095) & 16'hFFFF);
    check("P3 DS final tlast", ds_b[DEPTH].last, 1);
    if (ds_b.size() == DEPTH + 1 && ds_b[DEPTH].last) n_held_last++;
    bfm.read(REG_STATUS, 0, d, resp);
    check("P3 status", d, 32'h6);

    // ---- mechanism coverage ----
    $display("mechanisms: packets=%0d stalls=%0d gaps=%0d overflow=%0d held_last=%0d ignored_start=%0d len_write=%0d clear=%0d",
             n_packets, n_stall, n_gap, n_overflow, n_held_last, n_ignored_start, n_len_write, n_clear);
    check("packets delivered (tlast on both channels)", n_packets, 6);
    check("DMA back-pressure occurred", n_stall > 0, 1);
    check("converter gaps occurred", n_gap > 0, 1);
    check("overflow occurred", n_overflow > 0, 1);
    check("held final sample occurred", n_held_last > 0, 1);
    check("START while busy occurred", n_ignored_start > 0, 1);
    check("length reprogrammed", n_len_write > 0, 1);
    check("CLEAR occurred", n_clear > 0, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
