// tb_packet_generator: self-checking test of the two-channel packet generator.
//
// A converter model drives DS and GRS I/Q streams whose values encode a
// running sample number n (DS: I = n, Q = ~n; GRS: I = n ^ 0x5A5A,
// Q = n + 0x1234), so every beat on either DMA stream tells which converter
// sample it carries. The testbench notes independently which sample should
// open each packet (the first valid one after the start pulse) and then checks
// every beat of both packets: sample order, alignment of DS and GRS, the
// position of tlast, the one-sample-per-cycle rate and the start latency. It
// also checks: gaps in the converter stream, DMA back-pressure without loss,
// overflow with a held final sample, start while busy, zero length, and the
// CLEAR of the sticky flags. FIFO_DEPTH is reduced to 16 to make overflow
// quick to provoke.
`timescale 1ns/1ps
module tb_packet_generator;
  import navic_pkg::*;

  localparam int unsigned DEPTH = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, clear = 0;
  logic [LEN_W-1:0] pkt_len = '0;
  pg_status_t status;
  logic [15:0] ds_i, ds_q, grs_i, grs_q;
  logic        adc_valid = 0;
  logic [31:0] ds_tdata, grs_tdata;
  logic        ds_tvalid, grs_tvalid, ds_tlast, grs_tlast;
  logic        ds_tready = 1, grs_tready = 1;

  packet_generator #(.FIFO_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .start, .clear, .pkt_len, .status,
    .adc_ds_i_tdata(ds_i),   .adc_ds_i_tvalid(adc_valid),
    .adc_ds_q_tdata(ds_q),   .adc_ds_q_tvalid(adc_valid),
    .adc_grs_i_tdata(grs_i), .adc_grs_i_tvalid(adc_valid),
    .adc_grs_q_tdata(grs_q), .adc_grs_q_tvalid(adc_valid),
    .m_axis_ds_tdata(ds_tdata),   .m_axis_ds_tvalid(ds_tvalid),
    .m_axis_ds_tready(ds_tready), .m_axis_ds_tlast(ds_tlast),
    .m_axis_grs_tdata(grs_tdata),   .m_axis_grs_tvalid(grs_tvalid),
    .m_axis_grs_tready(grs_tready), .m_axis_grs_tlast(grs_tlast)
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- converter model ----------------
  int unsigned cycle = 0;
  int unsigned next_n = 0, cur_n = 0;
  bit          adc_gaps = 0;        // drop valid one cycle in three
  bit          ready_gaps = 0;      // drop both treadys one cycle in four
  bit          ds_hold = 0;         // keep DS tready low
  always @(negedge clk) begin
    cycle++;
    adc_valid = rst_n && !(adc_gaps && (cycle % 3 == 2));
    if (adc_valid) begin
      cur_n  = next_n;
      next_n = next_n + 1;
    end
    ds_i  = cur_n[15:0];
    ds_q  = ~cur_n[15:0];
    grs_i = cur_n[15:0] ^ 16'h5A5A;
    grs_q = cur_n[15:0] + 16'h1234;
    ds_tready  = !ds_hold && !(ready_gaps && (cycle % 4 == 3));
    grs_tready = !(ready_gaps && (cycle % 4 == 1));
  end

  // ---------------- reference: first sample of the packet ----------------
  bit          expect_first = 0;
  int unsigned first_n, start_cycle;
  always @(posedge clk) begin
    if (expect_first && adc_valid) begin
      first_n      = cur_n;
      expect_first = 0;
    end
    if (start && status.busy == 1'b0 && pkt_len != 0) begin
      expect_first = 1;
      start_cycle  = cycle;
    end
  end

  // ---------------- DMA sinks ----------------
  typedef struct { int unsigned n; bit last; int unsigned cyc; bit ok; } beat_t;
  beat_t ds_q_beats[$], grs_q_beats[$];
  always @(posedge clk) begin
    if (rst_n && ds_tvalid && ds_tready)
      ds_q_beats.push_back('{n: ds_tdata[15:0], last: ds_tlast, cyc: cycle,
                             ok: (ds_tdata[31:16] == ~ds_tdata[15:0])});
    if (rst_n && grs_tvalid && grs_tready)
      grs_q_beats.push_back('{n: grs_tdata[15:0] ^ 16'h5A5A, last: grs_tlast, cyc: cycle,
                              ok: (grs_tdata[31:16] == ((grs_tdata[15:0] ^ 16'h5A5A) + 16'h1234))});
  end

  task automatic pulse(ref logic sig);
    @(negedge clk) sig = 1;
    @(negedge clk) sig = 0;
  endtask

  task automatic wait_done(input int limit);
    int k = 0;
    while (!status.done && k < limit) begin @(posedge clk); k++; end
    check("packet finished in time", k < limit, 1);
  endtask

  // Check one complete, loss-free packet on a channel.
  task automatic check_full(input string ch, ref beat_t q[$], input int unsigned len);
    check({ch, " beat count"}, q.size(), len);
    for (int k = 0; k < q.size(); k++) begin
      if (q[k].n != ((first_n + k) & 16'hFFFF) || q[k].last != (k == len - 1) || !q[k].ok) begin
        check({ch, " beat content"}, k, -1);
        break;
      end
    end
    checks++;
  endtask

  int unsigned cnt0;
  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (3) @(posedge clk);
    check("idle after reset", {status.busy, status.done, status.ovf_ds, status.ovf_grs}, 0);

    // A: free-running converter and DMAs.
    pkt_len = 100;
    pulse(start);
    wait_done(1000);
    check_full("A ds", ds_q_beats, 100);
    check_full("A grs", grs_q_beats, 100);
    check("A latency start->first beat", ds_q_beats[0].cyc - start_cycle, 2);
    check("A one sample per cycle", ds_q_beats[99].cyc - ds_q_beats[0].cyc, 99);
    check("A channels aligned in time", grs_q_beats[99].cyc, ds_q_beats[99].cyc);
    check("A pkt_count", status.pkt_count, 1);
    check("A no overflow", {status.ovf_ds, status.ovf_grs}, 0);
    check("A not busy", status.busy, 0);
    ds_q_beats.delete(); grs_q_beats.delete();

    // B: gaps in the converter stream, back-pressure from both DMAs;
    // C: a second START during the capture is ignored.
    pkt_len = 200;
    adc_gaps = 1; ready_gaps = 1;
    pulse(start);
    @(posedge clk);
    check("B busy during capture", status.busy, 1);
    check("B done cleared by start", status.done, 0);
    repeat (20) @(posedge clk);
    pulse(start);
    wait_done(2000);
    check_full("B ds", ds_q_beats, 200);
    check_full("B grs", grs_q_beats, 200);
    check("B no overflow", {status.ovf_ds, status.ovf_grs}, 0);
    repeat (50) @(posedge clk);
    check("C no second packet", ds_q_beats.size() + grs_q_beats.size(), 400);
    check("C pkt_count", status.pkt_count, 2);
    ds_q_beats.delete(); grs_q_beats.delete();
    adc_gaps = 0; ready_gaps = 0;

    // D: zero length is ignored.
    pkt_len = 0;
    pulse(start);
    repeat (3) @(posedge clk);
    check("D zero length ignored", status.busy, 0);

    // E: DS DMA stalls past the buffer: samples are lost, the last one is held.
    pkt_len = 48;
    ds_hold = 1;
    pulse(start);
    repeat (70) @(posedge clk);
    check("E still busy while DS stalled", status.busy, 1);
    check("E ds overflow", status.ovf_ds, 1);
    check("E grs no overflow", status.ovf_grs, 0);
    check_full("E grs", grs_q_beats, 48);
    @(negedge clk) ds_hold = 0;
    wait_done(500);
    check("E ds beats = buffer + held last", ds_q_beats.size(), DEPTH + 1);
    for (int k = 0; k < DEPTH; k++)
      if (ds_q_beats[k].n != ((first_n + k) & 16'hFFFF) || ds_q_beats[k].last) begin
        check("E ds kept beat", k, -1);
        break;
      end
    checks++;
    check("E ds final beat is last sample", ds_q_beats[DEPTH].n, (first_n + 47) & 16'hFFFF);
    check("E ds final beat has tlast", ds_q_beats[DEPTH].last, 1);
    check("E pkt_count", status.pkt_count, 3);
    ds_q_beats.delete(); grs_q_beats.delete();

    // F: CLEAR resets the sticky flags.
    pulse(clear);
    @(posedge clk);
    check("F flags cleared", {status.done, status.ovf_ds, status.ovf_grs}, 0);

    // G: normal packet again after the overflow.
    pkt_len = 37;
    cnt0 = status.pkt_count;
    pulse(start);
    wait_done(500);
    check_full("G ds", ds_q_beats, 37);
    check_full("G grs", grs_q_beats, 37);
    check("G pkt_count", status.pkt_count, cnt0 + 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
