// kernel_slot: one replica of a partition's logic, as its configuration
// frame defines it.
//
// The frame's kernel field says which accelerator the replica implements
// (CE, PU, BAU or none). The three kernels are all present in RTL and the
// frame selects which one drives the output: this stands in for partial
// reconfiguration, which on the FPGA would load only the selected one. An SEU
// that changes the kernel field therefore makes the replica compute the
// wrong function, and one that hits a parameter field makes it compute with
// the wrong constant. Output timing is that of the kernels: one cycle after
// the beat. A replica with KER_NONE never raises out_valid.
module kernel_slot
  import prowaft_pkg::*;
#(
  parameter int unsigned TAPS = 9
) (
  input  logic               clk,
  input  logic               rst_n,
  input  frame_t             frame,
  input  logic               in_valid,
  input  logic               in_first,
  input  logic signed [7:0]  act [TAPS],
  input  logic signed [7:0]  wgt [TAPS],
  input  logic signed [31:0] acc_in,
  output logic               out_valid,
  output logic signed [31:0] out_data
);

  logic               ce_v, pu_v, bau_v;
  logic signed [31:0] ce_d, pu_d, bau_d;
  conv_engine #(.TAPS(TAPS)) u_ce (
    .clk, .rst_n,
    .in_valid (in_valid && frame.variant.kernel == KER_CE),
    .in_first, .act, .wgt,
    .bias     (frame.kp.bias),
    .out_valid(ce_v), .acc_out(ce_d)
  );

  maxpool_unit #(.WIN(TAPS)) u_pu (
    .clk, .rst_n,
    .in_valid (in_valid && frame.variant.kernel == KER_PU),
    .win      (act),
    .out_valid(pu_v), .max_out(pu_d)
  );

  bn_act_unit u_bau (
    .clk, .rst_n,
    .in_valid (in_valid && frame.variant.kernel == KER_BAU),
    .x        (acc_in),
    .scale    (frame.kp.scale),
    .shift    (frame.kp.shift),
    .bias     (frame.kp.bias),
    .relu     (frame.kp.relu),
    .out_valid(bau_v), .y_out(bau_d)
  );

  always_comb begin
    unique case (frame.variant.kernel)
      KER_CE:  begin out_valid = ce_v;  out_data = ce_d;  end
      KER_PU:  begin out_valid = pu_v;  out_data = pu_d;  end
      KER_BAU: begin out_valid = bau_v; out_data = bau_d; end
      default: begin out_valid = 1'b0;  out_data = '0;    end
    endcase
  end

endmodule
