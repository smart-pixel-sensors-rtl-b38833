// tb_smart_pixel_top -- end-to-end test of one super-pixel at full size.
//
// Sequence: reset; load weight set A through the serial chain; stream track-like
// clusters, one per 25 ns bunch crossing; reload with weight set B (the region
// retuning case) while reading set A back from cfg_out; stream more clusters.
// Clusters are drawn in sensor coordinates (16 rows in y by 16 columns in x)
// and placed onto the 8 x 32 ROIC pixels with the island mapping recomputed
// here. For every crossing the expected ADC codes, y-profile, network scores
// and class are computed by the integer reference model, and the registered
// class, accept flag and scores are checked exactly one clock after the
// sampling edge. Counted mechanisms, each of which must occur: every class,
// accept and reject, ReLU clipping and saturation, every ADC code, a full
// y-profile bin (48), a configuration load, a readback, and valid held low
// during reconfiguration.
`timescale 1ns/1ps
module tb_smart_pixel_top;
  import tb_nn_ref_pkg::*;

  localparam int NR = 16, NX = 16, NB = 4652;
  localparam int N_CLUSTERS = 600;

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
  int n_cls [3] = '{0, 0, 0};
  int n_accept = 0, n_reject = 0, n_relu_neg = 0, n_relu_sat = 0;
  int n_code [4] = '{0, 0, 0, 0};
  int n_full_bin = 0, n_loads = 0, n_readback = 0, n_valid_low = 0;

  // reference weights, as integers
  int rw1 [58][16], rb1 [58], rw2 [3][58], rb2 [3];
  logic cfg_word [NB];

  // pack the reference weights into the serial word (layout of the storage)
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

  // random weights; the first-layer biases lean positive so some neurons saturate
  task automatic random_weights();
    for (int o = 0; o < 58; o++) begin
      for (int i = 0; i < 16; i++) rw1[o][i] = rnd4();
      rb1[o] = rnd4();
    end
    for (int c = 0; c < 3; c++) begin
      for (int h = 0; h < 58; h++) rw2[c][h] = rnd4();
      rb2[c] = rnd4();
    end
    // a few hidden neurons that see only positive weights reach saturation
    for (int o = 0; o < 4; o++) for (int i = 0; i < 16; i++) rw1[o][i] = 7;
  endtask

  // load cfg_word; if expect_rb, compare cfg_out with the previously loaded word
  task automatic load_config(input bit expect_rb, ref logic old_word [NB]);
    int rb_err = 0, cyc = 0;
    @(negedge clk);
    cfg_shift = 1;
    for (int k = NB - 1; k >= 0; k--) begin
      cfg_in = cfg_word[k];
      if (expect_rb && cfg_out !== old_word[k]) rb_err++;
      @(negedge clk);
      cyc++;
      if (!valid) n_valid_low++;
      else if (cyc > 2) begin failures++; checks++; end
    end
    cfg_shift = 0;
    n_loads++;
    checks++;
    if (cyc != NB) failures++;
    if (expect_rb) begin
      checks++;
      if (rb_err != 0) begin failures++; $display("FAIL readback errors=%0d", rb_err); end
      else n_readback++;
    end
  endtask

  // one track-like cluster in sensor coordinates: q[y][x] electrons
  task automatic make_cluster(input int kind, output int q [NR][NX]);
    int y0, len, x0, wid;
    for (int y = 0; y < NR; y++) for (int x = 0; x < NX; x++) q[y][x] = 0;
    if (kind == 0) begin                    // very wide cluster: every pixel hit hard
      for (int y = 0; y < NR; y++) for (int x = 0; x < NX; x++) q[y][x] = 3000;
      return;
    end
    len = 1 + int'($urandom_range(12));     // rows crossed (y-size)
    y0  = int'($urandom_range(NR - len));
    wid = 1 + int'($urandom_range(2));
    x0  = int'($urandom_range(NX - wid));
    for (int y = y0; y < y0 + len; y++)
      for (int x = x0; x < x0 + wid; x++)
        q[y][x] = int'($urandom_range(kind == 1 ? 4000 : 9000));
    // an occasional noise hit elsewhere
    if ($urandom_range(3) == 0) q[$urandom_range(NR-1)][$urandom_range(NX-1)] = int'($urandom_range(1000));
  endtask

  // place sensor charges on the ROIC pixels: island (iy, ix) = rows 4iy..4iy+3
  // of column ix; sensor pixels 1..4 come from ROIC pixels A, D, B, C
  task automatic drive(input int q [NR][NX]);
    for (int y = 0; y < NR; y++)
      for (int x = 0; x < NX; x++) begin
        int iy, k, r, c;
        iy = y / 4; k = y % 4;
        case (k)
          0: begin r = 2*iy;     c = 2*x;     end  // A
          1: begin r = 2*iy;     c = 2*x + 1; end  // D
          2: begin r = 2*iy + 1; c = 2*x;     end  // B
          default: begin r = 2*iy + 1; c = 2*x + 1; end  // C
        endcase
        roic_charge[r][c] = 16'(q[y][x]);
      end
  endtask

  // expected class and scores of a cluster
  function automatic int expect_cls(input int q [NR][NX], output int sc [3]);
    int yp [16];
    int nneg, nsat, e;
    for (int y = 0; y < NR; y++) begin
      yp[y] = 0;
      for (int x = 0; x < NX; x++) begin
        int a;
        a = adc_code(q[y][x]);
        n_code[a]++;
        yp[y] += a;
      end
      if (yp[y] == 48) n_full_bin++;
    end
    e = classify(yp, rw1, rb1, rw2, rb2, sc, nneg, nsat);
    n_relu_neg += nneg; n_relu_sat += nsat;
    return e;
  endfunction

  task automatic stream(input int n);
    int q [NR][NX];
    int sc [3], psc [3];
    int e, pe;
    bit have_prev = 0;
    for (int t = 0; t <= n; t++) begin
      @(negedge clk);
      if (t < n) begin
        make_cluster(t % 50 == 7 ? 0 : 1 + (t % 2), q);
        drive(q);
        e = expect_cls(q, sc);
      end
      @(posedge clk);   // samples cluster t; output now holds cluster t-1
      #1;
      if (have_prev) begin
        checks += 3;
        if (int'(cls) != pe) begin failures++; $display("FAIL t=%0d cls=%0d exp=%0d", t, cls, pe); end
        if (accept != (pe == 2)) failures++;
        if (!valid) failures++;
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (int'(score[c]) != psc[c]) failures++;
        end
        n_cls[pe]++;
        if (accept) n_accept++; else n_reject++;
      end
      pe = e; psc = sc; have_prev = 1;
    end
  endtask

  initial begin
    repeat (2 * NB + 4 * N_CLUSTERS + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic word_a [NB];
    for (int r = 0; r < 8; r++) for (int c = 0; c < 32; c++) roic_charge[r][c] = '0;
    repeat (3) @(posedge clk);
    #1;
    checks += 2;
    if (valid !== 1'b0) failures++;
    if (cls !== 2'd0) failures++;
    rst_n = 1;

    random_weights();
    make_word();
    word_a = cfg_word;
    load_config(0, word_a);
    repeat (2) @(posedge clk);
    stream(N_CLUSTERS / 2);

    random_weights();
    make_word();
    load_config(1, word_a);
    repeat (2) @(posedge clk);
    stream(N_CLUSTERS / 2);

    $display("classes +low %0d -low %0d high %0d; accept %0d reject %0d", n_cls[0], n_cls[1], n_cls[2], n_accept, n_reject);
    $display("relu clipped %0d saturated %0d; adc codes %0d %0d %0d %0d; full bins %0d",
             n_relu_neg, n_relu_sat, n_code[0], n_code[1], n_code[2], n_code[3], n_full_bin);
    $display("config loads %0d readbacks %0d valid-low clocks %0d", n_loads, n_readback, n_valid_low);
    for (int c = 0; c < 3; c++) begin checks++; if (n_cls[c] == 0) failures++; end
    for (int a = 0; a < 4; a++) begin checks++; if (n_code[a] == 0) failures++; end
    checks += 8;
    if (n_accept == 0) failures++;
    if (n_reject == 0) failures++;
    if (n_relu_neg == 0) failures++;
    if (n_relu_sat == 0) failures++;
    if (n_full_bin == 0) failures++;
    if (n_loads < 2) failures++;
    if (n_readback == 0) failures++;
    if (n_valid_low == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
