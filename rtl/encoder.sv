// encoder: per-lane codeword lookup of the middle dataflow path.
//
// Each of the N lanes sends its symbol to the codebook (rd_sym) and receives
// {length, codeword} in the same cycle (rd_cw); the result is registered.
// esc_cw is the codeword of the outlier symbol 0 in the same bank. A symbol
// whose entry has length 0 (it did not occur in the chunk the online codebook
// was built from) is sent as the outlier code instead and its lane is
// flagged in out_outlier, so the value travels on the outlier side channel
// like any unpredictable value. The paper says only that the encoder finds
// and outputs each symbol's codeword; the escape rule is this design's.
//
// Timing: one register stage advanced by adv. out_escape flags lanes that
// were escaped (for statistics).
// rd_sym is in_sym itself: the codebook is read combinationally in the
// cycle the symbols arrive, so synthesis reports those outputs as wired
// straight to inputs.
module encoder
  import ceaz_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned Q_W = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  adv,
  input  logic                  in_valid,
  input  logic                  in_first,
  input  sym_t  [N-1:0]         in_sym,
  input  logic  [N-1:0]         in_outlier,
  input  logic  [N-1:0][Q_W-1:0] in_q,
  output sym_t  [N-1:0]         rd_sym,
  input  cw_t   [N-1:0]         rd_cw,
  input  cw_t                   esc_cw,
  output logic                  out_valid,
  output logic                  out_first,
  output cw_t   [N-1:0]         out_cw,
  output logic  [N-1:0]         out_outlier,
  output logic  [N-1:0]         out_escape,
  output logic  [N-1:0][Q_W-1:0] out_q
);
  assign rd_sym = in_sym;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_first   <= 1'b0;
      out_cw      <= '0;
      out_outlier <= '0;
      out_escape  <= '0;
      out_q       <= '0;
    end else if (adv) begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_q     <= in_q;
      for (int l = 0; l < int'(N); l++) begin
        if (rd_cw[l].len == '0) begin
          out_cw[l]      <= esc_cw;
          out_outlier[l] <= 1'b1;
          out_escape[l]  <= in_valid;
        end else begin
          out_cw[l]      <= rd_cw[l];
          out_outlier[l] <= in_outlier[l];
          out_escape[l]  <= 1'b0;
        end
      end
    end
  end
endmodule
