// cnn_layers_tb: layer slices of ResNet-18, MobileNetV2 and EfficientNet-Lite
// run through three TMR partitions while configuration upsets are injected.
//
// Three recon_partition instances are loaded with CE-TMR, BAU-TMR and
// PU-TMR frames and used as one layer pipeline: convolution beats go to
// the CE, the finished accumulator goes to the BAU (folded batch norm,
// ReLU, int8 saturation), and the BAU's int8 map can then be max-pooled
// by the PU. The layer shapes follow the published networks, cut down in
// channel count and spatial size so that each layer is a slice of the
// real one:
//   * ResNet-18 stem: 7x7 stride-2 conv on 3 channels, 49 taps per
//     channel in 6 beats, then a 3x3 stride-2 max-pool;
//   * ResNet-18 basic block: 3x3 conv over 16 channels, one beat per
//     channel;
//   * MobileNetV2 inverted residual: 3x3 depthwise conv, then a 1x1
//     pointwise conv packing 9 channels per beat. ReLU6 is the int8
//     saturation point of the quantised activation, so it is plain ReLU
//     plus saturation here;
//   * EfficientNet-Lite: 5x5 depthwise conv, 25 taps in 3 beats;
//   * classifier head: global average pool over 7x7 (CE sum of 49 values
//     with unit weights, BAU scale ~1/49 as 84>>12) and a 512-input FC
//     layer in 57 beats.
// Every result is compared with a golden model computed here in 64-bit
// integers. Each beat's result must appear exactly one cycle after it.
// During each layer one random frame bit of a random replica of a random
// partition is flipped. The output must stay exact (TMR masks it) and the
// parity check must report it until the next reload scrubs it.
module cnn_layers_tb;
  import prowaft_pkg::*;

  localparam int TAPS = 9;
  localparam int P_CE = 0, P_BAU = 1, P_PU = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               pr_active [3];
  logic               load_en [3];
  frame_t             load_frame [3];
  logic               seu_en [3];
  logic [1:0]         seu_replica [3];
  logic [5:0]         seu_bit [3];
  logic               in_valid [3];
  logic               in_first [3];
  logic signed [7:0]  act [3][TAPS];
  logic signed [7:0]  wgt [3][TAPS];
  logic signed [31:0] acc_in [3];
  logic               out_valid [3];
  logic signed [31:0] out_data [3];
  variant_t           variant [3];
  logic               parity_err [3];
  logic               tmr_mismatch [3];

  for (genvar p = 0; p < 3; p++) begin : g_part
    recon_partition #(.TAPS(TAPS)) u_part (
      .clk, .rst_n,
      .pr_active   (pr_active[p]),
      .load_en     (load_en[p]),
      .load_frame  (load_frame[p]),
      .seu_en      (seu_en[p]),
      .seu_replica (seu_replica[p]),
      .seu_bit     (seu_bit[p]),
      .in_valid    (in_valid[p]),
      .in_first    (in_first[p]),
      .act         (act[p]),
      .wgt         (wgt[p]),
      .acc_in      (acc_in[p]),
      .out_valid   (out_valid[p]),
      .out_data    (out_data[p]),
      .variant     (variant[p]),
      .parity_err  (parity_err[p]),
      .tmr_mismatch(tmr_mismatch[p])
    );
  end

  int checks = 0, failures = 0;
  int n_beats = 0, n_upsets = 0, n_flagged = 0, n_mismatch = 0, n_layers = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) for (int p = 0; p < 3; p++) if (tmr_mismatch[p]) n_mismatch++;

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  // ---------------------------------------------------------------- golden
  function automatic longint bau_ref(input longint x, input int scale, input int shift,
                                     input int bias, input bit relu);
    longint e;
    e = (x * scale) >>> shift;
    e += bias;
    if (relu && e < 0) e = 0;
    if (e > 127) e = 127;
    if (e < -128) e = -128;
    return e;
  endfunction

  // ---------------------------------------------------------------- drivers
  task automatic load(input int p, input kernel_e ker, input int scale, input int shift,
                      input int bias, input bit relu);
    frame_t f;
    f.variant.tmr    = 1'b1;
    f.variant.kernel = ker;
    f.kp.shift       = 5'(shift);
    f.kp.relu        = relu;
    f.kp.scale       = 8'(scale);
    f.kp.bias        = 16'(bias);
    @(negedge clk);
    load_en[p] = 1; load_frame[p] = f;
    @(negedge clk);
    load_en[p] = 0;
    check(!parity_err[p] && variant[p] == f.variant, "frame load");
  endtask

  task automatic upset(input int p);
    @(negedge clk);
    seu_en[p] = 1;
    seu_replica[p] = 2'($urandom % 3);
    seu_bit[p] = 6'($urandom % FRAME_W);
    @(negedge clk);
    seu_en[p] = 0;
    n_upsets++;
    checks++;
    if (parity_err[p]) n_flagged++;
    else begin
      failures++;
      $display("FAIL upset of partition %0d replica %0d bit %0d not flagged",
               p, seu_replica[p], seu_bit[p]);
    end
  endtask

  // One CE dot product of n taps, cut into ceil(n/9) beats with zero weights
  // in the unused taps of the last beat. Returns the final accumulator.
  task automatic ce_dot(input int n, input int a [], input int w [], output longint acc);
    int nb;
    nb = (n + TAPS - 1) / TAPS;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      in_valid[P_CE] = 1; in_first[P_CE] = (b == 0);
      for (int i = 0; i < TAPS; i++) begin
        int t = b * TAPS + i;
        act[P_CE][i] = (t < n) ? 8'(a[t]) : 8'($urandom);
        wgt[P_CE][i] = (t < n) ? 8'(w[t]) : 8'd0;
      end
      @(negedge clk);
      in_valid[P_CE] = 0;
      n_beats++;
      if (!out_valid[P_CE]) begin
        checks++; failures++;
        $display("FAIL CE result not one cycle after the beat");
      end
    end
    acc = longint'(out_data[P_CE]);
  endtask

  task automatic bau_run(input longint x, output int y);
    @(negedge clk);
    in_valid[P_BAU] = 1; in_first[P_BAU] = 1; acc_in[P_BAU] = 32'(x);
    @(negedge clk);
    in_valid[P_BAU] = 0;
    n_beats++;
    check(out_valid[P_BAU], "BAU result one cycle after the beat");
    y = int'(out_data[P_BAU]);
  endtask

  task automatic pu_run(input int win [TAPS], output int y);
    @(negedge clk);
    in_valid[P_PU] = 1; in_first[P_PU] = 1;
    for (int i = 0; i < TAPS; i++) act[P_PU][i] = 8'(win[i]);
    @(negedge clk);
    in_valid[P_PU] = 0;
    n_beats++;
    check(out_valid[P_PU], "PU result one cycle after the beat");
    y = int'(out_data[P_PU]);
  endtask

  // ---------------------------------------------------------------- layers
  // Convolution (or depthwise convolution when dw is set) of a CIN x HxW int8
  // map with COUT kernels of KxK, stride S, no padding; CE bias, then BAU.
  // Result in y[c][oy][ox] (flattened). An upset is injected after the first
  // output pixel.
  task automatic conv_layer(input string name, input int cin, input int h, input int cout,
                            input int k, input int s, input bit dw, input int x [],
                            input int ce_bias, input int scale, input int shift,
                            input int bias, input bit relu, output int y [], output int oh);
    int w [];
    int nt, nin;
    longint acc, e;
    int yo, bad;
    oh = (h - k) / s + 1;
    nin = dw ? 1 : cin;
    nt = nin * k * k;
    w = new[cout * nt];
    foreach (w[i]) w[i] = int'($urandom % 256) - 128;
    y = new[cout * oh * oh];
    load(P_CE, KER_CE, 0, 0, ce_bias, 0);
    load(P_BAU, KER_BAU, scale, shift, bias, relu);
    bad = 0;
    for (int c = 0; c < cout; c++) begin
      for (int oy = 0; oy < oh; oy++) begin
        for (int ox = 0; ox < oh; ox++) begin
          int a [];
          int ww [];
          a = new[nt]; ww = new[nt];
          // tap order: input channel, then kernel row, then kernel column;
          // the 7x7 and 5x5 kernels therefore straddle beat boundaries
          for (int ci = 0; ci < nin; ci++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int t = (ci * k + ky) * k + kx;
                int ch = dw ? c : ci;
                a[t]  = x[(ch * h + oy * s + ky) * h + ox * s + kx];
                ww[t] = w[c * nt + t];
              end
          e = ce_bias;
          for (int t = 0; t < nt; t++) e += longint'(a[t]) * longint'(ww[t]);
          ce_dot(nt, a, ww, acc);
          if (acc != e) bad++;
          bau_run(acc, yo);
          if (longint'(yo) != bau_ref(e, scale, shift, bias, relu)) bad++;
          y[(c * oh + oy) * oh + ox] = yo;
          if (c == 0 && oy == 0 && ox == 0) upset($urandom % 2);
        end
      end
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d wrong outputs", name, bad);
    end
    n_layers++;
  endtask

  // Max-pool of a C x HxH int8 map with a KxK window, stride S (K <= 3).
  task automatic pool_layer(input string name, input int c_n, input int h, input int k,
                            input int s, input int x [], output int y [], output int oh);
    int win [TAPS];
    int e, yo, bad;
    oh = (h - k) / s + 1;
    y = new[c_n * oh * oh];
    load(P_PU, KER_PU, 0, 0, 0, 0);
    bad = 0;
    for (int c = 0; c < c_n; c++)
      for (int oy = 0; oy < oh; oy++)
        for (int ox = 0; ox < oh; ox++) begin
          e = -128;
          for (int i = 0; i < TAPS; i++) win[i] = -128;
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++) begin
              win[ky * k + kx] = x[(c * h + oy * s + ky) * h + ox * s + kx];
              if (win[ky * k + kx] > e) e = win[ky * k + kx];
            end
          pu_run(win, yo);
          if (yo != e) bad++;
          y[(c * oh + oy) * oh + ox] = yo;
          if (c == 0 && oy == 0 && ox == 0) upset(P_PU);
        end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d wrong outputs", name, bad);
    end
    n_layers++;
  endtask

  function automatic void rand_map(ref int x [], input int n);
    x = new[n];
    foreach (x[i]) x[i] = int'($urandom % 256) - 128;
  endfunction

  // ---------------------------------------------------------------- main
  initial begin
    int x [], y [], z [], oh, oh2;
    for (int p = 0; p < 3; p++) begin
      pr_active[p] = 0; load_en[p] = 0; load_frame[p] = '0;
      seu_en[p] = 0; seu_replica[p] = 0; seu_bit[p] = 0;
      in_valid[p] = 0; in_first[p] = 0; acc_in[p] = 0;
      for (int i = 0; i < TAPS; i++) begin act[p][i] = 0; wgt[p][i] = 0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ResNet-18 stem: 3 x 21x21 -> 7x7/2 conv, 2 channels -> 8x8 -> 3x3/2 max-pool -> 3x3
    rand_map(x, 3 * 21 * 21);
    conv_layer("resnet18 conv1 7x7/2", 3, 21, 2, 7, 2, 0, x, 100, 5, 14, 3, 1, y, oh);
    check(oh == 8, "stem output size");
    pool_layer("resnet18 maxpool 3x3/2", 2, oh, 3, 2, y, z, oh2);
    check(oh2 == 3, "pool output size");

    // ResNet-18 basic block conv: 16 x 6x6 -> 3x3/1 conv, 2 channels -> 4x4
    rand_map(x, 16 * 6 * 6);
    conv_layer("resnet18 layer1 3x3", 16, 6, 2, 3, 1, 0, x, -50, 3, 13, 0, 1, y, oh);

    // MobileNetV2: 18 x 5x5 -> 3x3 depthwise -> 3x3, then 1x1 pointwise 18 -> 4
    rand_map(x, 18 * 5 * 5);
    conv_layer("mobilenetv2 dw 3x3", 18, 5, 18, 3, 1, 1, x, 0, 1, 9, 0, 1, y, oh);
    conv_layer("mobilenetv2 pw 1x1", 18, oh, 4, 1, 1, 0, y, 0, 9, 10, -4, 0, z, oh2);

    // EfficientNet-Lite: 2 x 7x7 -> 5x5 depthwise -> 3x3
    rand_map(x, 2 * 7 * 7);
    conv_layer("efficientnet-lite dw 5x5", 2, 7, 2, 5, 1, 1, x, 10, 3, 12, 0, 1, y, oh);

    // classifier head: global average pool of a 7x7 map (unit-weight 7x7
    // "convolution" over one channel, scaled by 84/4096 ~ 1/49), then FC
    // 512 -> 4 as a 1x1 convolution of a 512-channel 1x1 map
    rand_map(x, 4 * 7 * 7);
    begin
      int ones [];
      longint acc, e;
      int yo, bad;
      ones = new[49];
      foreach (ones[i]) ones[i] = 1;
      load(P_CE, KER_CE, 0, 0, 0, 0);
      load(P_BAU, KER_BAU, 84, 12, 0, 0);
      bad = 0;
      for (int c = 0; c < 4; c++) begin
        int a [];
        a = new[49];
        e = 0;
        foreach (a[i]) begin a[i] = x[c * 49 + i]; e += a[i]; end
        ce_dot(49, a, ones, acc);
        if (acc != e) bad++;
        bau_run(acc, yo);
        if (longint'(yo) != bau_ref(e, 84, 12, 0, 0)) bad++;
        // the scaled mean must be within one LSB of the true mean
        if (real'(yo) - $floor(real'(e) / 49.0) > 1.0 ||
            $floor(real'(e) / 49.0) - real'(yo) > 1.0) bad++;
        if (c == 1) upset(P_BAU);
      end
      check(bad == 0, "global average pool");
      n_layers++;
    end
    rand_map(x, 512);
    conv_layer("fc 512 -> 4", 512, 1, 4, 1, 1, 0, x, 0, 1, 12, 0, 0, y, oh);

    $display("layers=%0d beats=%0d upsets=%0d flagged=%0d mismatch_cycles=%0d",
             n_layers, n_beats, n_upsets, n_flagged, n_mismatch);
    check(n_upsets == n_flagged && n_upsets >= 7, "every upset flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
