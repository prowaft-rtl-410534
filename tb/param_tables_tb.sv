// param_tables_tb: self-checking test of the host register file. Checks
// the reset values (the paper's 0.4/0.3/0.3 weights, 4.20 ms and 1.10 mJ per
// partition, the 420000-cycle PR time) and then writes every global, every
// per-partition constant, the whole look-up table and the whole candidate
// table with random data through the write port, keeping a copy here, and
// compares all outputs with that copy. Out-of-range addresses must not
// change anything.
module param_tables_tb;
  import prowaft_pkg::*;
  localparam int K = 6, NCAND = 16;
  logic clk = 0, rst_n = 0;
  logic we = 0;
  logic [11:0] addr;
  logic [31:0] wdata;
  glob_t glob;
  q16_t rho [K], t_pr [K], e_pr [K];
  kparam_t kparam [K];
  q16_t lut_sdata [64], lut_perr [64];
  cand_part_t cand_part [NCAND][K];
  cand_hdr_t cand_hdr [NCAND];
  int checks = 0, failures = 0;

  param_tables #(.K(K), .NCAND(NCAND)) dut (.*);
  always #5 clk = ~clk;

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got=%h exp=%h", what, got, exp); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] g [16];
    logic [31:0] ge;
    logic [31:0] pk [4][K];
    logic [31:0] lut [128];
    logic [31:0] cp [NCAND][K][5];
    logic [31:0] ch [NCAND][3];
    addr = 0; wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(glob.eta_t, 26214, "eta_t reset");
    chk(glob.eta_e, 19661, "eta_e reset");
    chk(glob.eta_r, 19661, "eta_r reset");
    chk(glob.pr_cycles, 420000, "pr_cycles reset");
    chk(t_pr[3], 275251, "t_pr reset");
    chk(e_pr[5], 72090, "e_pr reset");
    chk(glob.budget_e_init, 32'hFFFF_FFFF, "energy budget reset");
    for (int i = 0; i < 16; i++) begin
      g[i] = $urandom;
      if (i == 13) g[i] = g[i] & 32'hFFFF;
      if (i == 14) g[i] = g[i] & 32'hFF;
      wr(12'(i), g[i]);
    end
    for (int f = 0; f < 4; f++) for (int k = 0; k < K; k++) begin
      pk[f][k] = (f == 3) ? ($urandom & 32'h3FFF_FFFF) : $urandom;
      wr(12'h020 + 12'(f * 16 + k), pk[f][k]);
    end
    for (int i = 0; i < 128; i++) begin lut[i] = $urandom; wr(12'h100 + 12'(i), lut[i]); end
    for (int j = 0; j < NCAND; j++) begin
      for (int k = 0; k < K; k++) for (int f = 0; f < 5; f++) begin
        cp[j][k][f] = $urandom;
        if (f == 0) cp[j][k][f] &= 7;
        if (f == 2) cp[j][k][f] &= 7;
        wr(12'h800 | 12'(j << 6) | 12'(k << 3) | 12'(f), cp[j][k][f]);
      end
      for (int f = 0; f < 3; f++) begin
        ch[j][f] = $urandom;
        if (f == 2) ch[j][f] &= 15;
        wr(12'h800 | 12'(j << 6) | 12'(7 << 3) | 12'(f), ch[j][f]);
      end
    end
    ge = $urandom;
    wr(12'h010, ge);
    // out-of-range writes
    wr(12'h026, 32'hDEAD_BEEF);                 // rho[6] does not exist
    wr(12'h800 | 12'(6 << 3), 32'h7);           // partition 6 of candidate 0
    wr(12'h800 | 12'(20 << 6), 32'h5);          // candidate 20
    @(negedge clk);
    chk(glob.alpha, g[0], "alpha");   chk(glob.beta, g[1], "beta");
    chk(glob.gamma, g[2], "gamma");   chk(glob.eta_t, g[3], "eta_t");
    chk(glob.eta_e, g[4], "eta_e");   chk(glob.eta_r, g[5], "eta_r");
    chk(glob.eps_t, g[6], "eps_t");   chk(glob.eps_e, g[7], "eps_e");
    chk(glob.omega_t, g[8], "omega_t"); chk(glob.omega_e, g[9], "omega_e");
    chk(glob.inv_z, g[10], "inv_z");  chk(glob.tmr_residual, g[11], "resid");
    chk(glob.budget_init, g[12], "budget"); chk(32'(glob.window), g[13], "window");
    chk(glob.budget_e_init, ge, "budget_e");
    chk(32'(glob.ref_idx), g[14], "ref"); chk(glob.pr_cycles, g[15], "prc");
    for (int k = 0; k < K; k++) begin
      chk(rho[k], pk[0][k], "rho"); chk(t_pr[k], pk[1][k], "t_pr");
      chk(e_pr[k], pk[2][k], "e_pr"); chk(32'(kparam[k]), pk[3][k], "kparam");
    end
    for (int i = 0; i < 64; i++) begin
      chk(lut_sdata[i], lut[2*i], "sdata"); chk(lut_perr[i], lut[2*i+1], "perr");
    end
    for (int j = 0; j < NCAND; j++) begin
      for (int k = 0; k < K; k++) begin
        chk(32'(cand_part[j][k].variant), cp[j][k][0], "variant");
        chk(cand_part[j][k].lambda, cp[j][k][1], "lambda");
        chk(32'(cand_part[j][k].fanout), cp[j][k][2], "fanout");
        chk(cand_part[j][k].inv_rate, cp[j][k][3], "inv_rate");
        chk(cand_part[j][k].pdyn, cp[j][k][4], "pdyn");
      end
      chk(cand_hdr[j].tcomm, ch[j][0], "tcomm");
      chk(cand_hdr[j].pstatic, ch[j][1], "pstatic");
      chk(32'(cand_hdr[j].opmask), ch[j][2], "opmask");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
