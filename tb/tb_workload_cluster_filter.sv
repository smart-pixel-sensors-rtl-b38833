// tb_workload_cluster_filter -- the filtering task on track-like clusters, run
// through the full-size super-pixel with region-specific weights.
//
// Clusters: a pion of transverse momentum pT and charge q crosses a flat sensor
// 100 um thick at distance y0 along the module from its centre; the module sits
// at radius R = 30 mm in a 3.8 T field. The bending angle follows
//   sin(dphi) = 0.3 * q * B[T] * R[m] / (2 * pT[GeV]),
//   beta = pi/2 - dphi - atan(y0 / R),
// and the charge drifts sideways by the Lorentz angle, taken here as
// tan(theta_L) = 0.3 (an assumed typical value for electrons in silicon at
// 3.8 T). The track then spreads its charge along y over 8 * |cot(beta) -
// tan(theta_L)| pixel rows (thickness / 12.5 um pitch = 8), about 7500
// electrons in total, shared between one or two columns in x. The crossing
// point is uniform over the central 3 x 3 pixels. Every pixel is digitized with
// the 2-bit ADC thresholds, so faint rows can drop out as they do in a real
// cluster.
//
// Weights: the trained weights of the study are not available, so this test
// loads a hand-built set that implements a cluster-size window, the simplest
// region-specific filter the network can express. Hidden neurons 2r and 2r+1
// compute relu(p_r) and relu(p_r - 1/8) for y-profile bin p_r, whose
// difference is 1/8 when row r is hit. A further Kp neurons and Kn neurons
// output the constant 1/8. The output layer then gives
//   score(+low) ~ Kp - size,  score(-low) ~ size - Kn,  score(high) = 0,
// so a cluster of size <= Kp or >= Kn is rejected and one in between is kept.
// Kp and Kn are set per y0 region from the expected size of a straight
// track, which is the region-specific tuning of the published design: the
// weights are reloaded through the serial chain for each of three regions.
//
// Checks: every result is compared bit for bit (class and scores) with the
// integer reference model, one clock after its sampling edge. The acceptance
// for pT > 2 GeV must exceed the acceptance for pT < 200 MeV, the shape the
// filter is meant to have. An acceptance table per pT bin is printed.
`timescale 1ns/1ps
module tb_workload_cluster_filter;
  import tb_nn_ref_pkg::*;

  localparam int NR = 16, NX = 16, NB = 4652;
  localparam int N_PER_REGION = 1500;
  localparam real PI = 3.14159265358979;
  localparam real R_M = 0.030, B_T = 3.8, TAN_LA = 0.3, Q_TOT = 7500.0;

  logic clk = 0, rst_n = 0;
  logic [15:0] roic_charge [8][32];
  logic cfg_shift = 0, cfg_in = 0, cfg_out;
  logic [1:0] cls;
  logic accept, valid;
  logic signed [18:0] score [3];

  smart_pixel_top dut (
    .clk(clk), .rst_n(rst_n), .roic_charge(roic_charge),
    .cfg_shift(cfg_shift), .cfg_in(cfg_in), .cfg_out(cfg_out),
    .cls(cls), .accept(accept), .valid(valid), .score(score)
  );

  always #12.5 clk = ~clk;

  int checks = 0, failures = 0;
  int rw1 [58][16], rb1 [58], rw2 [3][58], rb2 [3];
  logic cfg_word [NB];
  // acceptance bins: 0: pT<0.2, 1: 0.2-0.5, 2: 0.5-2, 3: >2 GeV
  int n_bin [4] = '{0, 0, 0, 0};
  int n_acc [4] = '{0, 0, 0, 0};
  int n_cls [3] = '{0, 0, 0};
  int n_loads = 0;

  function automatic real urand();
    return real'($urandom_range(1000000)) / 1000000.0;
  endfunction

  // size-window weights: reject size <= kp (+low) or size >= kn (-low)
  task automatic window_weights(input int kp, input int kn);
    for (int o = 0; o < 58; o++) begin
      for (int i = 0; i < 16; i++) rw1[o][i] = 0;
      rb1[o] = 0;
      for (int c = 0; c < 3; c++) rw2[c][o] = 0;
    end
    for (int c = 0; c < 3; c++) rb2[c] = 0;
    for (int r = 0; r < 16; r++) begin
      rw1[2*r][r] = 1;                 // relu(p_r)         (weight 1/8)
      rw1[2*r+1][r] = 1; rb1[2*r+1] = -1;  // relu(p_r - 1/8)
      rw2[0][2*r] = -7; rw2[0][2*r+1] = 7;   // +low: minus size
      rw2[1][2*r] = 7;  rw2[1][2*r+1] = -7;  // -low: plus size
    end
    for (int k = 0; k < kp; k++) begin rb1[32 + k] = 1; rw2[0][32 + k] = 7; end
    for (int k = 0; k < kn; k++) begin rb1[32 + kp + k] = 1; rw2[1][32 + kp + k] = -7; end
  endtask

  task automatic make_word();
    for (int o = 0; o < 58; o++) begin
      for (int i = 0; i < 16; i++)
        for (int k = 0; k < 4; k++) cfg_word[4*(o*16 + i) + k] = 1'((rw1[o][i] >> k) & 1);
      for (int k = 0; k < 4; k++) cfg_word[3712 + 4*o + k] = 1'((rb1[o] >> k) & 1);
    end
    for (int c = 0; c < 3; c++) begin
      for (int h = 0; h < 58; h++)
        for (int k = 0; k < 4; k++) cfg_word[3944 + 4*(c*58 + h) + k] = 1'((rw2[c][h] >> k) & 1);
      for (int k = 0; k < 4; k++) cfg_word[4640 + 4*c + k] = 1'((rb2[c] >> k) & 1);
    end
  endtask

  task automatic load_config();
    @(negedge clk);
    cfg_shift = 1;
    for (int k = NB - 1; k >= 0; k--) begin
      cfg_in = cfg_word[k];
      @(negedge clk);
    end
    cfg_shift = 0;
    n_loads++;
    repeat (2) @(negedge clk);
  endtask

  // rows crossed along y by a straight track at y0 (mm), in pixel rows
  function automatic real track_len(real pt, int q, real y0);
    real s, dphi, beta, cotb;
    s = 0.3 * real'(q) * B_T * R_M / (2.0 * pt);
    if (s > 0.99) s = 0.99;
    if (s < -0.99) s = -0.99;
    dphi = $asin(s);
    beta = PI / 2.0 - dphi - $atan(y0 / (R_M * 1000.0));
    cotb = $cos(beta) / $sin(beta);
    return 8.0 * ((cotb - TAN_LA) < 0.0 ? TAN_LA - cotb : cotb - TAN_LA);
  endfunction

  task automatic make_cluster(input real pt, input int q, input real y0, output int qp [NR][NX]);
    real len, yc, ya, yb, xfrac;
    int xc;
    for (int y = 0; y < NR; y++) for (int x = 0; x < NX; x++) qp[y][x] = 0;
    len = track_len(pt, q, y0);
    if (len > 14.0) len = 14.0;
    yc = 7.0 + 3.0 * urand();               // crossing point in the central 3 pixels
    xc = 6 + int'($urandom_range(2));
    xfrac = (urand() < 0.5) ? 1.0 : 0.5 + 0.5 * urand();
    ya = yc - len / 2.0; yb = yc + len / 2.0;
    for (int y = 0; y < NR; y++) begin
      real lo, hi, frac, qrow;
      if (len < 0.05) frac = (y == int'($floor(yc))) ? 1.0 : 0.0;
      else begin
        lo = (real'(y) > ya) ? real'(y) : ya;
        hi = (real'(y + 1) < yb) ? real'(y + 1) : yb;
        frac = (hi > lo) ? (hi - lo) / len : 0.0;
      end
      qrow = Q_TOT * frac;
      qp[y][xc] = int'(qrow * xfrac);
      qp[y][xc + 1] = int'(qrow * (1.0 - xfrac));
    end
  endtask

  task automatic drive(input int qp [NR][NX]);
    for (int y = 0; y < NR; y++)
      for (int x = 0; x < NX; x++) begin
        int iy, k, r, c;
        iy = y / 4; k = y % 4;
        r = 2*iy + ((k >= 2) ? 1 : 0);      // A, D in the first ROIC row; B, C in the second
        c = 2*x + ((k == 1 || k == 3) ? 1 : 0);  // D and C in the second column
        roic_charge[r][c] = 16'(qp[y][x] > 65535 ? 65535 : qp[y][x]);
      end
  endtask

  function automatic int expect_cls(input int qp [NR][NX], output int sc [3]);
    int yp [16];
    int nneg, nsat;
    for (int y = 0; y < NR; y++) begin
      yp[y] = 0;
      for (int x = 0; x < NX; x++) yp[y] += adc_code(qp[y][x]);
    end
    return classify(yp, rw1, rb1, rw2, rb2, sc, nneg, nsat);
  endfunction

  task automatic run_region(input real y0_lo, input real y0_hi);
    int qp [NR][NX];
    int sc [3], psc [3];
    int e, pe, bin, pbin, sh, kp, kn;
    bit have_prev = 0;
    real yc0;
    yc0 = (y0_lo + y0_hi) / 2.0;
    sh = int'($floor(track_len(1000.0, 1, yc0) + 1.0));   // straight-track size
    kp = (sh > 1) ? sh - 1 : 0;
    kn = sh + 2;
    window_weights(kp, kn);
    make_word();
    load_config();
    $display("region y0 %0.1f..%0.1f mm: straight-track size %0d rows, keep %0d < size < %0d",
             y0_lo, y0_hi, sh, kp, kn);
    for (int t = 0; t <= N_PER_REGION; t++) begin
      @(negedge clk);
      if (t < N_PER_REGION) begin
        real pt, y0;
        int q;
        pt = 0.1 * $pow(100.0, urand());           // 0.1 .. 10 GeV, log-uniform
        q = (urand() < 0.5) ? 1 : -1;
        y0 = y0_lo + (y0_hi - y0_lo) * urand();
        make_cluster(pt, q, y0, qp);
        drive(qp);
        e = expect_cls(qp, sc);
        bin = (pt < 0.2) ? 0 : (pt < 0.5) ? 1 : (pt < 2.0) ? 2 : 3;
      end
      @(posedge clk);
      #1;
      if (have_prev) begin
        checks += 2;
        if (int'(cls) != pe) begin failures++; $display("FAIL cls=%0d exp=%0d", cls, pe); end
        if (!valid) failures++;
        for (int c = 0; c < 3; c++) begin checks++; if (int'(score[c]) != psc[c]) failures++; end
        n_bin[pbin]++;
        if (accept) n_acc[pbin]++;
        n_cls[pe]++;
      end
      pe = e; psc = sc; pbin = bin; have_prev = 1;
    end
  endtask

  initial begin
    repeat (3 * (NB + N_PER_REGION + 10) + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a_lo, a_hi;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 32; c++) roic_charge[r][c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_region(-8.0, -6.0);
    run_region(-1.0, 1.0);
    run_region(6.0, 8.0);
    $display("acceptance  pT<0.2: %0d/%0d  0.2-0.5: %0d/%0d  0.5-2: %0d/%0d  >2 GeV: %0d/%0d",
             n_acc[0], n_bin[0], n_acc[1], n_bin[1], n_acc[2], n_bin[2], n_acc[3], n_bin[3]);
    $display("classes +low %0d -low %0d high %0d, weight loads %0d", n_cls[0], n_cls[1], n_cls[2], n_loads);
    a_lo = real'(n_acc[0]) / real'(n_bin[0] > 0 ? n_bin[0] : 1);
    a_hi = real'(n_acc[3]) / real'(n_bin[3] > 0 ? n_bin[3] : 1);
    checks += 3;
    if (!(a_hi > a_lo)) begin failures++; $display("FAIL acceptance does not rise with pT"); end
    if (n_loads != 3) failures++;
    if (n_cls[0] == 0 || n_cls[1] == 0 || n_cls[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
