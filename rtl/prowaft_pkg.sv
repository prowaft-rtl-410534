// prowaft_pkg: types, constants and fixed-point helpers shared by the
// ProWAFT controller and the reconfigurable partitions.
//
// Number format. Every real-valued quantity of the cost model (weights,
// scores, probabilities, times, energies, powers) is an unsigned Q16.16
// fixed-point number held in 32 bits (q16_t). 1.0 is 32'h0001_0000. Products
// are formed at full width and shifted back once; results that do not fit
// saturate at 32'hFFFF_FFFF. The choice of Q16.16 is this design's own; the
// cost model itself does not fix a number format.
//
// Partition variants. A partition hosts one accelerator kernel: the 8-bit
// convolution engine (CE), the max-pooling unit (PU) or the batch-norm and
// activation unit (BAU), each as a baseline or a triplicated (TMR) variant.
// KER_NONE is a blank partition (nothing loaded).
package prowaft_pkg;

  typedef logic [31:0] q16_t;
  localparam q16_t Q_ONE = 32'h0001_0000;
  localparam q16_t Q_MAX = 32'hFFFF_FFFF;

  typedef enum logic [1:0] {
    KER_NONE = 2'd0,
    KER_CE   = 2'd1,
    KER_PU   = 2'd2,
    KER_BAU  = 2'd3
  } kernel_e;

  typedef struct packed {
    logic    tmr;     // 1: triplicated variant
    kernel_e kernel;
  } variant_t;

  // Per-partition kernel parameters (the non-structural part of a frame).
  typedef struct packed {
    logic [4:0]         shift;  // BAU right shift after scaling
    logic               relu;   // BAU: apply ReLU
    logic signed [7:0]  scale;  // BAU multiplier
    logic signed [15:0] bias;   // CE bias / BAU bias
  } kparam_t;

  // Configuration frame of one replica: what partial reconfiguration writes
  // and what an SEU can corrupt. Parity is kept beside it.
  typedef struct packed {
    variant_t variant;
    kparam_t  kp;
  } frame_t;

  localparam int unsigned FRAME_W = $bits(frame_t);

  // CNN layer types of the workload trace.
  typedef enum logic [1:0] {
    OP_CONV2D = 2'd0,
    OP_DWCONV = 2'd1,
    OP_POOL   = 2'd2,
    OP_FC     = 2'd3
  } op_e;

  // Workload features used for the criticality look-up.
  typedef struct packed {
    op_e        op;
    logic [2:0] size_cls;  // input-dimension class
    logic       prec;      // precision class
    logic       ctrl;      // S_control flag: workload lies on a conditional path
  } feat_t;

  localparam int unsigned WCS_IDX_W = 6;  // {op, size_cls, prec}

  // Candidate table entry for one partition of one candidate configuration.
  typedef struct packed {
    variant_t   variant;
    q16_t       lambda;    // utilisation ratio lambda_k(C_j), [0,1]
    logic [2:0] fanout;    // downstream consumer partitions
    q16_t       inv_rate;  // 1/(f_k * PE_k(C_j)): time per unit of Ops
    q16_t       pdyn;      // dynamic power P_k^dyn(C_j)
  } cand_part_t;

  // Candidate-wide entries.
  typedef struct packed {
    q16_t       tcomm;     // T_comm(C_j)
    q16_t       pstatic;   // P_static(C_j)
    logic [3:0] opmask;    // bit op_e: candidate implements that layer type
  } cand_hdr_t;

  // Global weights and constants written by the host.
  typedef struct packed {
    q16_t        alpha, beta, gamma;      // WCS weights
    q16_t        eta_t, eta_e, eta_r;     // composite-cost weights
    q16_t        eps_t, eps_e;            // fault-aware inflation factors
    q16_t        omega_t, omega_e;        // PR overhead weights
    q16_t        inv_z;                   // 1/Z of the risk score
    q16_t        tmr_residual;            // risk left in a TMR partition
    q16_t        budget_init;             // B_PR per window (time units)
    q16_t        budget_e_init;           // B_PR per window (energy units)
    logic [15:0] window;                  // workloads per budget window
    logic [7:0]  ref_idx;                 // candidate used as static-base reference
    logic [31:0] pr_cycles;               // clock cycles of one partition's PR
  } glob_t;

  // Saturating Q16.16 multiply.
  function automatic q16_t qmul(input q16_t a, input q16_t b);
    logic [63:0] p;
    p = 64'(a) * 64'(b);
    return (p[63:48] != 16'd0) ? Q_MAX : p[47:16];
  endfunction

  // Saturating add.
  function automatic q16_t qadd(input q16_t a, input q16_t b);
    logic [32:0] s;
    s = 33'(a) + 33'(b);
    return s[32] ? Q_MAX : s[31:0];
  endfunction

  // Saturate a wide unsigned value to 32 bits.
  function automatic q16_t qsat64(input logic [63:0] v);
    return (v[63:32] != 32'd0) ? Q_MAX : v[31:0];
  endfunction

endpackage
