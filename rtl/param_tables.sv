// param_tables: host-written constants and tables of the ProWAFT controller.
//
// Everything the cost model takes from offline characterisation lives here:
// the global weights (glob_t), per-partition constants (severity rho_k,
// reconfiguration time and energy of partition k, kernel parameters), the
// workload-criticality look-up table (S_data and P_error per operator type,
// size class and precision) and the candidate configuration table. The host
// writes 32-bit words through a simple synchronous write port; all contents
// are visible at once on the outputs.
//
// Address map (word addresses, 12 bits):
//   0x000-0x00F  globals, in the order alpha, beta, gamma, eta_t, eta_e,
//                eta_r, eps_t, eps_e, omega_t, omega_e, inv_z, tmr_residual,
//                budget_init, window, ref_idx, pr_cycles
//   0x010        budget_e_init (energy side of the PR budget)
//   0x020+k      rho_k         0x030+k  t_pr_k      0x040+k  e_pr_k
//   0x050+k      kernel parameters of partition k (kparam_t, low bits)
//   0x100+2i     S_data of look-up entry i    0x101+2i  P_error of entry i
//   0x800 | j<<6 | k<<3 | f   candidate j, partition k (k < 7), field f:
//                0 variant, 1 lambda, 2 fanout, 3 inv_rate, 4 pdyn
//   0x800 | j<<6 | 7<<3 | f   candidate j, f: 0 tcomm, 1 pstatic, 2 opmask
//
// Reset values of the globals: the composite-cost weights are the paper's
// balanced profile (0.4, 0.3, 0.3); one partition's PR time and energy are
// the paper's 4.20 ms and 1.10 mJ (time unit ms, energy unit mJ). The other
// reset values (WCS weights 0.4/0.2/0.4, eps 0.5, omega 0.01 per ms or mJ,
// 1/Z = 1, TMR residual 0, budget 42 ms per 40 workloads, no energy limit)
// are this design's own defaults. Tables reset to zero.
module param_tables
  import prowaft_pkg::*;
#(
  parameter int unsigned K         = 6,
  parameter int unsigned NCAND     = 16,
  parameter int unsigned PR_CYCLES = 420_000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [11:0] addr,
  input  logic [31:0] wdata,
  output glob_t       glob,
  output q16_t        rho      [K],
  output q16_t        t_pr     [K],
  output q16_t        e_pr     [K],
  output kparam_t     kparam   [K],
  output q16_t        lut_sdata[64],
  output q16_t        lut_perr [64],
  output cand_part_t  cand_part[NCAND][K],
  output cand_hdr_t   cand_hdr [NCAND]
);

  localparam int unsigned JW = (NCAND > 1) ? $clog2(NCAND) : 1;
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;

  logic [JW-1:0] cj;   // candidate index
  logic [KW-1:0] ck;   // partition index
  logic [KW-1:0] pk;   // partition index of a per-partition global
  logic [2:0]    cf;
  logic          cj_ok, ck_hdr, ck_ok, pk_ok;

  assign cj     = addr[6 +: JW];
  assign ck     = addr[3 +: KW];
  assign pk     = addr[0 +: KW];
  assign cf     = addr[2:0];
  assign cj_ok  = 32'(addr[10:6]) < NCAND;
  assign ck_hdr = addr[5:3] == 3'd7;
  assign ck_ok  = 32'(addr[5:3]) < K;
  assign pk_ok  = 32'(addr[3:0]) < K;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      glob.alpha        <= 32'd26214;   // 0.4
      glob.beta         <= 32'd13108;   // 0.2
      glob.gamma        <= 32'd26214;   // 0.4
      glob.eta_t        <= 32'd26214;   // 0.4
      glob.eta_e        <= 32'd19661;   // 0.3
      glob.eta_r        <= 32'd19661;   // 0.3
      glob.eps_t        <= 32'd32768;   // 0.5
      glob.eps_e        <= 32'd32768;   // 0.5
      glob.omega_t      <= 32'd655;     // 0.01 per ms
      glob.omega_e      <= 32'd655;     // 0.01 per mJ
      glob.inv_z        <= Q_ONE;
      glob.tmr_residual <= '0;
      glob.budget_init  <= 32'd42 << 16;
      glob.budget_e_init <= Q_MAX;        // no energy limit
      glob.window       <= 16'd40;
      glob.ref_idx      <= '0;
      glob.pr_cycles    <= 32'(PR_CYCLES);
      for (int k = 0; k < K; k++) begin
        rho[k]    <= Q_ONE;
        t_pr[k]   <= 32'd275251;        // 4.20 ms
        e_pr[k]   <= 32'd72090;         // 1.10 mJ
        kparam[k] <= '0;
      end
      for (int i = 0; i < 64; i++) begin
        lut_sdata[i] <= '0;
        lut_perr[i]  <= '0;
      end
      for (int j = 0; j < NCAND; j++) begin
        cand_hdr[j] <= '0;
        for (int k = 0; k < K; k++) cand_part[j][k] <= '0;
      end
    end else if (we) begin
      if (addr[11]) begin
        if (cj_ok) begin
          if (ck_hdr) begin
            case (cf)
              3'd0:    cand_hdr[cj].tcomm   <= wdata;
              3'd1:    cand_hdr[cj].pstatic <= wdata;
              3'd2:    cand_hdr[cj].opmask  <= wdata[3:0];
              default: ;
            endcase
          end else if (ck_ok) begin
            case (cf)
              3'd0:    cand_part[cj][ck].variant  <= variant_t'(wdata[2:0]);
              3'd1:    cand_part[cj][ck].lambda   <= wdata;
              3'd2:    cand_part[cj][ck].fanout   <= wdata[2:0];
              3'd3:    cand_part[cj][ck].inv_rate <= wdata;
              3'd4:    cand_part[cj][ck].pdyn     <= wdata;
              default: ;
            endcase
          end
        end
      end else if (addr[8]) begin
        if (addr[0]) lut_perr [addr[6:1]] <= wdata;
        else         lut_sdata[addr[6:1]] <= wdata;
      end else begin
        case (addr[7:4])
          4'h0: begin
            case (addr[3:0])
              4'd0:  glob.alpha        <= wdata;
              4'd1:  glob.beta         <= wdata;
              4'd2:  glob.gamma        <= wdata;
              4'd3:  glob.eta_t        <= wdata;
              4'd4:  glob.eta_e        <= wdata;
              4'd5:  glob.eta_r        <= wdata;
              4'd6:  glob.eps_t        <= wdata;
              4'd7:  glob.eps_e        <= wdata;
              4'd8:  glob.omega_t      <= wdata;
              4'd9:  glob.omega_e      <= wdata;
              4'd10: glob.inv_z        <= wdata;
              4'd11: glob.tmr_residual <= wdata;
              4'd12: glob.budget_init  <= wdata;
              4'd13: glob.window       <= wdata[15:0];
              4'd14: glob.ref_idx      <= wdata[7:0];
              default: glob.pr_cycles  <= wdata;
            endcase
          end
          4'h1: if (addr[3:0] == 4'd0) glob.budget_e_init <= wdata;
          4'h2: if (pk_ok) rho [pk]   <= wdata;
          4'h3: if (pk_ok) t_pr[pk]   <= wdata;
          4'h4: if (pk_ok) e_pr[pk]   <= wdata;
          4'h5: if (pk_ok) kparam[pk] <= kparam_t'(wdata[29:0]);
          default: ;
        endcase
      end
    end
  end

endmodule
