// pe -- weight-stationary processing element of the ELP_BSD processing array.
//
// Registers, as in the paper's processing-element figure:
//   * a pass-through weight register that takes the weight from above every
//     cycle and hands it to the PE below (w_out), so a column of weights is
//     shifted in from the top;
//   * a stationary weight register, loaded from the pass-through register when
//     load is high, which feeds the MAC. Because of the two registers, the next
//     weights can be shifted in while the current ones compute;
//   * an activation register that captures the activation from the left; its
//     output feeds the MAC and the PE to the right (act_out);
//   * a partial-sum register that captures psum_in + w * act and feeds the PE
//     below (psum_out).
// The MAC is elp_mac: one-digit units (XOR inverter, barrel shifter) and a
// compressor tree plus adder. The register set and the dataflow follow the
// paper. The reset values (zero, asynchronous active-low) and the single
// broadcast load strobe are this design's choices; the paper is silent on both.
//
// Timing: act_out(t+1) = act_in(t); w_out(t+1) = w_in(t);
// psum_out(t+1) = psum_in(t) + W * act_out(t), where W is the stationary weight.
module pe
  import elp_bsd_pkg::*;
#(
  parameter elp_bsd_fmt_t FMT   = FMT_DEFAULT,
  parameter int unsigned  ACT_W = 8,
  parameter int unsigned  ACC_W = 24,
  localparam int unsigned WW    = weight_width(FMT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,      // copy the pass-through weight into the stationary one
  input  logic [WW-1:0]           w_in,      // weight from the PE above
  output logic [WW-1:0]           w_out,     // weight to the PE below
  input  logic signed [ACT_W-1:0] act_in,    // activation from the left
  output logic signed [ACT_W-1:0] act_out,   // activation to the right
  input  logic signed [ACC_W-1:0] psum_in,   // partial sum from above
  output logic signed [ACC_W-1:0] psum_out   // partial sum to below
);

  logic [WW-1:0]           w_pass_q, w_stat_q;
  logic signed [ACT_W-1:0] act_q;
  logic signed [ACC_W-1:0] psum_q, mac_out;

  elp_mac #(.FMT(FMT), .ACT_W(ACT_W), .ACC_W(ACC_W)) u_mac (
    .w       (w_stat_q),
    .act     (act_q),
    .psum_in (psum_in),
    .psum_out(mac_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_pass_q <= '0;
      w_stat_q <= '0;
      act_q    <= '0;
      psum_q   <= '0;
    end else begin
      w_pass_q <= w_in;
      if (load) w_stat_q <= w_pass_q;
      act_q    <= act_in;
      psum_q   <= mac_out;
    end
  end

  assign w_out    = w_pass_q;
  assign act_out  = act_q;
  assign psum_out = psum_q;

endmodule
