// recon_partition: one reconfigurable partition P_k.
//
// The partition holds three replica configuration frames, each with a stored
// parity bit, and three kernel_slot replicas driven by them. A load (issued
// by the PR controller at the end of a reconfiguration) writes the same frame
// and parity into all three copies. Replica 0's frame decides the variant:
// in a baseline variant replica 0 alone drives the output; in a TMR variant
// the three replica outputs (valid and data) go through a bitwise 2-of-3
// majority voter, so a fault in any one replica is masked.
//
// Faults. seu_en flips bit seu_bit of replica seu_replica's frame, the way a
// single-event upset flips a configuration memory bit. The parity checkers
// then report it: parity_err is high while a frame in use (replica 0, and
// replicas 1 and 2 in a TMR variant) fails its check. tmr_mismatch is high
// in a cycle where the three replicas' outputs disagree. Reloading the frame
// by reconfiguration clears the upset.
//
// While pr_active is high the partition is being rewritten and its output
// valid is held low. Data timing: one cycle from an input beat to the output.
//
// The paper gives the library (CE, PU, BAU, each also as a triplicated TMR
// variant), SEU injection into configuration bits and parity detection. The
// frame layout, the replica-0 variant decode and the voter are this design's
// choices.
module recon_partition
  import prowaft_pkg::*;
#(
  parameter int unsigned TAPS = 9
) (
  input  logic               clk,
  input  logic               rst_n,
  // reconfiguration
  input  logic               pr_active,
  input  logic               load_en,
  input  frame_t             load_frame,
  // fault injection
  input  logic               seu_en,
  input  logic [1:0]         seu_replica,
  input  logic [5:0]         seu_bit,
  // datapath
  input  logic               in_valid,
  input  logic               in_first,
  input  logic signed [7:0]  act [TAPS],
  input  logic signed [7:0]  wgt [TAPS],
  input  logic signed [31:0] acc_in,
  output logic               out_valid,
  output logic signed [31:0] out_data,
  // status
  output variant_t           variant,
  output logic               parity_err,
  output logic               tmr_mismatch
);

  frame_t             frame  [3];
  logic   [2:0]       par;
  logic   [2:0]       perr;
  logic   [2:0]       r_valid;
  logic signed [31:0] r_data [3];
  logic   [32:0]      voted;
  logic               vote_mm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < 3; r++) frame[r] <= '0;
      par <= '0;
    end else if (load_en) begin
      for (int r = 0; r < 3; r++) frame[r] <= load_frame;
      par <= {3{^load_frame}};
    end else if (seu_en && seu_replica < 2'd3 && seu_bit < 6'(FRAME_W)) begin
      frame[seu_replica][seu_bit] <= ~frame[seu_replica][seu_bit];
    end
  end

  for (genvar r = 0; r < 3; r++) begin : g_rep
    kernel_slot #(.TAPS(TAPS)) u_slot (
      .clk, .rst_n,
      .frame    (frame[r]),
      .in_valid (in_valid && !pr_active),
      .in_first, .act, .wgt, .acc_in,
      .out_valid(r_valid[r]),
      .out_data (r_data[r])
    );
    parity_checker #(.W(FRAME_W)) u_par (
      .data(frame[r]), .stored_parity(par[r]), .error(perr[r])
    );
  end

  tmr_voter #(.W(33)) u_vote (
    .a({r_valid[0], r_data[0]}),
    .b({r_valid[1], r_data[1]}),
    .c({r_valid[2], r_data[2]}),
    .y(voted), .mismatch(vote_mm)
  );

  assign variant = frame[0].variant;

  always_comb begin
    if (variant.tmr) begin
      out_valid    = voted[32] && !pr_active;
      out_data     = voted[31:0];
      tmr_mismatch = vote_mm;
      parity_err   = |perr;
    end else begin
      out_valid    = r_valid[0] && !pr_active;
      out_data     = r_data[0];
      tmr_mismatch = 1'b0;
      parity_err   = perr[0];
    end
  end

endmodule
