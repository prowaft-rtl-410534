// recon_partition_tb: self-checking test of one reconfigurable partition.
// Loads each variant (CE, PU, BAU; baseline and TMR) with random kernel
// parameters and checks every output against a reference computed here,
// with one-cycle latency. Then injects configuration upsets:
//   - TMR variant, upset in replica 1 or 2: output stays correct, parity
//     error and replica mismatch are reported (fault masked);
//   - baseline variant, upset in a parameter bit of replica 0: parity error
//     is reported and the output goes wrong (fault propagates);
//   - reloading the frame clears the upset.
// Also checks that no output is produced while the partition is being
// reconfigured.
module recon_partition_tb;
  import prowaft_pkg::*;
  localparam int TAPS = 9;
  logic clk = 0, rst_n = 0;
  logic pr_active = 0, load_en = 0;
  frame_t load_frame;
  logic seu_en = 0;
  logic [1:0] seu_replica = 0;
  logic [5:0] seu_bit = 0;
  logic in_valid = 0, in_first = 0;
  logic signed [7:0] act [TAPS], wgt [TAPS];
  logic signed [31:0] acc_in;
  logic out_valid;
  logic signed [31:0] out_data;
  variant_t variant;
  logic parity_err, tmr_mismatch;
  int checks = 0, failures = 0;
  int n_masked = 0, n_propagated = 0, n_mismatch = 0;

  recon_partition #(.TAPS(TAPS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  frame_t cur;
  longint acc_model;

  function automatic longint ref_out(input frame_t f, input logic first);
    longint e;
    case (f.variant.kernel)
      KER_CE: begin
        e = first ? longint'(f.kp.bias) : acc_model;
        for (int i = 0; i < TAPS; i++) e += longint'(act[i]) * longint'(wgt[i]);
        e = longint'(int'(e));
      end
      KER_PU: begin
        e = -1000;
        for (int i = 0; i < TAPS; i++) if (longint'(act[i]) > e) e = longint'(act[i]);
      end
      KER_BAU: begin
        e = (longint'(acc_in) * longint'(f.kp.scale)) >>> f.kp.shift;
        e += longint'(f.kp.bias);
        if (f.kp.relu && e < 0) e = 0;
        if (e > 127) e = 127;
        if (e < -128) e = -128;
      end
      default: e = 0;
    endcase
    return e;
  endfunction

  task automatic load(input frame_t f);
    @(negedge clk);
    pr_active = 1;
    in_valid = 1;                 // must be ignored while reconfiguring
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL output during PR"); end
    in_valid = 0;
    load_en = 1; load_frame = f;
    @(negedge clk);
    load_en = 0; pr_active = 0;
    cur = f;
    checks++;
    if (variant != f.variant || parity_err) begin failures++; $display("FAIL after load"); end
  endtask

  // one beat; returns whether output matched the reference
  task automatic beat(input logic first, output logic ok);
    longint e;
    @(negedge clk);
    in_valid = 1; in_first = first;
    for (int i = 0; i < TAPS; i++) begin act[i] = 8'($urandom); wgt[i] = 8'($urandom); end
    acc_in = 32'($urandom % 20000) - 32'sd10000;
    e = ref_out(cur, first);
    if (cur.variant.kernel == KER_CE) acc_model = e;
    @(negedge clk);
    in_valid = 0;
    ok = out_valid && (out_data == 32'(e));
    if (cur.variant.kernel == KER_NONE) ok = !out_valid;
    if (tmr_mismatch) n_mismatch++;
  endtask

  initial begin
    frame_t f;
    logic ok, any_bad;
    for (int i = 0; i < TAPS; i++) begin act[i] = 0; wgt[i] = 0; end
    acc_in = 0; load_frame = '0; cur = '0; acc_model = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // functional: every variant
    for (int v = 0; v < 8; v++) begin
      f = frame_t'({$urandom, $urandom});
      f.variant = variant_t'(v);
      f.kp.shift = 5'($urandom % 12);
      load(f);
      for (int b = 0; b < 40; b++) begin
        beat((b % 3) == 0, ok);
        checks++;
        if (!ok) begin failures++; $display("FAIL v=%0d b=%0d got=%0d", v, b, out_data); end
      end
    end
    // TMR masking: upset replica 1 or 2 of each kernel
    for (int t = 0; t < 30; t++) begin
      f = frame_t'({$urandom, $urandom});
      f.variant.tmr = 1;
      f.variant.kernel = kernel_e'(1 + t % 3);
      f.kp.shift = 5'($urandom % 12);
      load(f);
      @(negedge clk);
      seu_en = 1; seu_replica = 2'(1 + t % 2);
      seu_bit = (t % 2) ? 6'd31 : 6'($urandom % FRAME_W);   // bit 31: kernel field
      @(negedge clk);
      seu_en = 0;
      checks++;
      if (!parity_err) begin failures++; $display("FAIL parity t=%0d", t); end
      any_bad = 0;
      for (int b = 0; b < 10; b++) begin
        beat(b == 0, ok);
        if (!ok) any_bad = 1;
      end
      checks++;
      if (any_bad) begin failures++; $display("FAIL TMR did not mask t=%0d", t); end
      else n_masked++;
    end
    checks++;
    if (n_mismatch == 0) begin failures++; $display("FAIL no replica mismatch seen"); end
    // baseline: upset in replica 0's scale field of a BAU
    for (int t = 0; t < 20; t++) begin
      f = frame_t'({$urandom, $urandom});
      f.variant = '{tmr: 1'b0, kernel: KER_BAU};
      f.kp.shift = 5'd7; f.kp.relu = 0; f.kp.bias = 0; f.kp.scale = 8'sd1;
      load(f);
      @(negedge clk);
      seu_en = 1; seu_replica = 0; seu_bit = 6'(16 + 1);   // scale bit 1
      @(negedge clk);
      seu_en = 0;
      checks++;
      if (!parity_err) begin failures++; $display("FAIL baseline parity t=%0d", t); end
      any_bad = 0;
      for (int b = 0; b < 10; b++) begin
        beat(0, ok);
        if (!ok) any_bad = 1;
      end
      if (any_bad) n_propagated++;
      load(f);       // reconfiguration scrubs the upset
      checks++;
      if (parity_err) begin failures++; $display("FAIL reload did not clear"); end
      beat(0, ok);
      checks++;
      if (!ok) begin failures++; $display("FAIL after reload"); end
    end
    checks++;
    if (n_propagated < 15) begin failures++; $display("FAIL baseline errors seen only %0d times", n_propagated); end
    $display("masked=%0d propagated=%0d mismatch_cycles=%0d", n_masked, n_propagated, n_mismatch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
