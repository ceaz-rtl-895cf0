// update_policy: decides, once per chunk, how the codewords are updated.
//
// With sigma0 the STD of the previous chunk's frequencies and sigma1 that of
// the current chunk, chi = |sigma0 - sigma1| selects
//   chi <= tau0         keep the codewords in use          (ACT_KEEP)
//   tau0 < chi < tau1   build new codewords from this chunk (ACT_BUILD)
//   chi >= tau1         return to the offline codewords    (ACT_OFFLINE)
// with tau0 = 3.05 and tau1 = 4.88 (Q16.16), as the paper sets them. The
// paper writes the middle case as tau0 < chi <= tau1 and the last as
// chi >= tau1; at chi = tau1 this design follows the last rule. The first
// chunk after reset (or after restart) has no sigma0 and always builds, a
// choice of this design.
//
// Timing: act_valid/act one cycle after sigma_valid; sigma1 becomes the
// next sigma0 at the same edge.
module update_policy
  import ceaz_pkg::*;
#(
  parameter logic [31:0] TAU0 = TAU0_Q16,
  parameter logic [31:0] TAU1 = TAU1_Q16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        restart,      // forget sigma0 (new stream)
  input  logic        sigma_valid,
  input  logic [31:0] sigma_q16,
  output logic        act_valid,
  output action_e     act,
  output logic [31:0] chi_q16
);
  logic [31:0] sigma0;
  logic        have_prev;
  logic [31:0] chi;

  assign chi = (sigma_q16 >= sigma0) ? sigma_q16 - sigma0 : sigma0 - sigma_q16;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sigma0    <= '0;
      have_prev <= 1'b0;
      act_valid <= 1'b0;
      act       <= ACT_KEEP;
      chi_q16   <= '0;
    end else begin
      act_valid <= 1'b0;
      if (restart) begin
        have_prev <= 1'b0;
      end else if (sigma_valid) begin
        act_valid <= 1'b1;
        chi_q16   <= chi;
        sigma0    <= sigma_q16;
        have_prev <= 1'b1;
        if (!have_prev)    act <= ACT_BUILD;
        else if (chi <= TAU0) act <= ACT_KEEP;
        else if (chi < TAU1)  act <= ACT_BUILD;
        else                  act <= ACT_OFFLINE;
      end
    end
  end
endmodule
