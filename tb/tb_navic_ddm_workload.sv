// tb_navic_ddm_workload: runs the receiver logic on the three target
// scenarios of the evaluation (range offset 4/6/8 km, DS and GRS Dopplers,
// SNR -5/-10/-12 dB) and checks that the captured 1 ms packets still yield the
// expected delay-Doppler peaks.
//
// Signal model, per converter sample n at 61.44 MHz (Ts = 1/61.44 MHz):
//   y[n] = A * c[n - k] * exp(j*2*pi*f*n*Ts) + complex Gaussian noise,
// with c a 1023-chip +/-1 Gold code at 1.023 Mchip/s repeating every 1 ms,
// k the delay (DS: k_d; GRS: k_d + range offset / (c*Ts)) and f the Doppler.
// The Gold code comes from the G1 = 1 + x^3 + x^10 and
// G2 = 1 + x^2 + x^3 + x^6 + x^8 + x^9 + x^10 registers; the G2 start states
// used for "PRN-2" and "PRN-5" are arbitrary stand-ins, not the values of the
// NavIC interface specification. Noise is the sum of twelve uniform draws.
//
// The converter model starts streaming at n = 0 right after START, so packet
// sample k is converter sample k on both channels. After capture the
// testbench does in software what the processor does: decimate by 8 to
// 7.68 MHz (here a plain 8-sample average rather than three stages of
// low-pass FIR filtering and decimation by 2), correlate with the PRN replica over 41 Doppler bins
// (-10 kHz to +10 kHz in 500 Hz steps) and over delays 0..299 at 7.68 MHz
// (0 to 11.7 km, enough for targets within 10 km), and take the peak. Checks:
// DS and GRS Doppler bins equal the true Dopplers, the bistatic range
// (k_gr - k_d) * 39.0625 m is within one delay bin (40 m) of the truth, the
// PRN-2 map passes a 15 dB peak-to-mean detection threshold and the PRN-5
// map does not, and the capture takes 61,440 clocks (1 ms).
`timescale 1ns/1ps
module tb_navic_ddm_workload;
  import navic_pkg::*;

  localparam int    N61    = 61440;          // 1 ms at 61.44 MHz
  localparam int    D      = 8;              // decimation to 7.68 MHz
  localparam int    N7     = N61 / D;        // 7680 samples per ms
  localparam int    NLAG   = 300;            // delay bins searched
  localparam int    NBIN   = 41;             // Doppler bins
  localparam real   FS7    = 7.68e6;
  localparam real   C0     = 3.0e8;
  localparam real   PI     = 3.14159265358979;
  localparam real   BIN_M  = C0 / FS7;        // 39.0625 m per delay bin
  localparam real   STEP_M = C0 / 61.44e6;    // 4.8828 m per converter sample
  localparam int    K_D    = 320;            // DS delay, converter samples
  localparam real   AMP    = 800.0;

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
    .m_axis_ds_tready(1'b1),      .m_axis_ds_tlast(ds_tlast),
    .m_axis_grs_tdata(grs_tdata),   .m_axis_grs_tvalid(grs_tvalid),
    .m_axis_grs_tready(1'b1),       .m_axis_grs_tlast(grs_tlast)
  );

  axil_master_bfm bfm (
    .clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready
  );

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- PRN codes ----------------
  bit code2[1023], code5[1023];
  function automatic void gold(input bit [9:0] g2_init, output bit c[1023]);
    bit [9:0] g1 = '1, g2 = g2_init;   // g[0] is stage 1, g[9] stage 10
    for (int i = 0; i < 1023; i++) begin
      bit f1, f2;
      c[i] = g1[9] ^ g2[9];
      f1 = g1[2] ^ g1[9];
      f2 = g2[1] ^ g2[2] ^ g2[5] ^ g2[7] ^ g2[8] ^ g2[9];
      g1 = {g1[8:0], f1};
      g2 = {g2[8:0], f2};
    end
  endfunction

  function automatic int chip_at(input longint n);   // chip index of converter sample n
    longint m = n % N61;
    if (m < 0) m += N61;
    return int'((m * 1023) / N61);
  endfunction

  function automatic real gauss();
    real s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom) / 4294967296.0;
    return s - 6.0;
  endfunction

  function automatic logic [15:0] q16(input real x);
    int v = int'(x);
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return 16'(v);
  endfunction

  // ---------------- scenario (one row of the evaluation table) ----------------
  real snr_db, f_ds, f_grs, range_m;
  int  k_gr;
  bit  streaming = 0;
  int  n = 0;
  always @(negedge clk) begin
    adc_valid = streaming;
    if (streaming) begin
      real sigma, ph_d, ph_g, cd, cg;
      sigma = AMP * (10.0 ** (-snr_db / 20.0)) / $sqrt(2.0);
      cd    = code2[chip_at(n - K_D)]  ? -1.0 : 1.0;
      cg    = code2[chip_at(n - k_gr)] ? -1.0 : 1.0;
      ph_d  = 2.0 * PI * f_ds  * real'(n) / 61.44e6;
      ph_g  = 2.0 * PI * f_grs * real'(n) / 61.44e6;
      ds_i  = q16(AMP * cd * $cos(ph_d) + sigma * gauss());
      ds_q  = q16(AMP * cd * $sin(ph_d) + sigma * gauss());
      grs_i = q16(AMP * cg * $cos(ph_g) + sigma * gauss());
      grs_q = q16(AMP * cg * $sin(ph_g) + sigma * gauss());
      n++;
    end
  end

  // ---------------- capture ----------------
  real ds_i7[N7], ds_q7[N7], grs_i7[N7], grs_q7[N7];
  int  nds = 0, ngrs = 0, first_cyc = 0, last_cyc = 0, cyc = 0;
  bit  ds_last_ok = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && ds_tvalid) begin
      if (nds == 0) first_cyc = cyc;
      if (nds < N61) begin
        ds_i7[nds / D] += real'($signed(ds_tdata[15:0]))  / D;
        ds_q7[nds / D] += real'($signed(ds_tdata[31:16])) / D;
      end
      if (ds_tlast) begin
        last_cyc   = cyc;
        ds_last_ok = (nds == N61 - 1);
      end
      nds++;
    end
    if (rst_n && grs_tvalid) begin
      if (ngrs < N61) begin
        grs_i7[ngrs / D] += real'($signed(grs_tdata[15:0]))  / D;
        grs_q7[ngrs / D] += real'($signed(grs_tdata[31:16])) / D;
      end
      ngrs++;
    end
  end

  // ---------------- software delay-Doppler search ----------------
  real ref7[N7];
  real ddm_peak, ddm_mean;
  int  pk_lag, pk_bin;

  task automatic make_ref(input bit c[1023]);
    for (int k = 0; k < N7; k++) ref7[k] = c[chip_at(longint'(k) * D + D / 2)] ? -1.0 : 1.0;
  endtask

  task automatic ddm(ref real yi[N7], ref real yq[N7]);
    real zi[N7], zq[N7];
    real sum = 0.0;
    ddm_peak = -1.0;
    for (int b = 0; b < NBIN; b++) begin
      real f = -10000.0 + 500.0 * b;
      for (int k = 0; k < N7; k++) begin
        real ph = -2.0 * PI * f * real'(k) / FS7;
        zi[k] = yi[k] * $cos(ph) - yq[k] * $sin(ph);
        zq[k] = yi[k] * $sin(ph) + yq[k] * $cos(ph);
      end
      for (int lag = 0; lag < NLAG; lag++) begin
        real ai = 0.0, aq = 0.0, p;
        for (int k = 0; k < N7; k++) begin
          int r = k - lag;
          if (r < 0) r += N7;
          ai += zi[k] * ref7[r];
          aq += zq[k] * ref7[r];
        end
        p = ai * ai + aq * aq;
        sum += p;
        if (p > ddm_peak) begin
          ddm_peak = p; pk_lag = lag; pk_bin = b;
        end
      end
    end
    ddm_mean = sum / (NBIN * NLAG);
  endtask

  function automatic real db(input real x);
    return 10.0 * $log10(x);
  endfunction

  logic [31:0] d;
  logic [1:0]  resp;
  real  snr_tab[3]   = '{-5.0, -10.0, -12.0};
  real  rng_tab[3]   = '{4000.0, 6000.0, 8000.0};
  real  fds_tab[3]   = '{1500.0, 1000.0, 500.0};
  real  fgrs_tab[3]  = '{500.0, -500.0, -500.0};

  initial begin
    int lag_d, bin_d, lag_g, bin_g;
    real est_m, p2_db, p5_db;
    gold(10'b1110100111, code2);
    gold(10'b0001011100, code5);
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;

    for (int row = 0; row < 3; row++) begin
      snr_db = snr_tab[row]; f_ds = fds_tab[row]; f_grs = fgrs_tab[row]; range_m = rng_tab[row];
      k_gr   = K_D + int'(range_m / STEP_M);
      foreach (ds_i7[k]) begin ds_i7[k] = 0; ds_q7[k] = 0; grs_i7[k] = 0; grs_q7[k] = 0; end
      nds = 0; ngrs = 0; n = 0;
      bfm.write(REG_CTRL, 32'h3, 4'hF, 0, 0, 0, resp);   // clear flags and start
      @(negedge clk) streaming = 1;
      do begin
        repeat (1000) @(posedge clk);
        bfm.read(REG_STATUS, 0, d, resp);
      end while (!d[1]);
      @(negedge clk) streaming = 0;
      check($sformatf("row %0d: packets complete (%0d/%0d beats)", row, nds, ngrs), nds == N61 && ngrs == N61 && ds_last_ok);
      check($sformatf("row %0d: capture of 1 ms took %0d clocks", row, last_cyc - first_cyc + 1), last_cyc - first_cyc + 1 == N61);
      check($sformatf("row %0d: no overflow", row), d[3:2] == 2'b00);

      make_ref(code2);
      ddm(ds_i7, ds_q7);
      lag_d = pk_lag; bin_d = pk_bin; p2_db = db(ddm_peak / ddm_mean);
      ddm(grs_i7, grs_q7);
      lag_g = pk_lag; bin_g = pk_bin;
      est_m = real'(lag_g - lag_d) * BIN_M;
      $display("row %0d SNR %0.0f dB: DS peak lag %0d Doppler %0.0f Hz, GRS peak lag %0d Doppler %0.0f Hz, range offset %0.1f m (truth %0.0f m), PRN-2 peak/mean %0.1f dB",
               row, snr_db, lag_d, -10000.0 + 500.0 * bin_d, lag_g, -10000.0 + 500.0 * bin_g, est_m, range_m, p2_db);
      check($sformatf("row %0d: DS Doppler", row), -10000.0 + 500.0 * bin_d == f_ds);
      check($sformatf("row %0d: GRS Doppler", row), -10000.0 + 500.0 * bin_g == f_grs);
      check($sformatf("row %0d: range within 40 m", row), (est_m - range_m) <= 40.0 && (range_m - est_m) <= 40.0);
      check($sformatf("row %0d: PRN-2 detected", row), p2_db > 15.0);
      if (row == 1) begin
        make_ref(code5);
        ddm(ds_i7, ds_q7);
        p5_db = db(ddm_peak / ddm_mean);
        $display("row %0d: PRN-5 peak/mean %0.1f dB, PRN-2 peak %0.1f dB above PRN-5 peak", row, p5_db,
                 p2_db - p5_db);
        check("PRN-5 not detected", p5_db < 15.0);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
