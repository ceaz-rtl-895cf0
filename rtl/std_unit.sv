// std_unit: standard deviation of the symbol frequencies of one chunk
// ("get STD" of the top dataflow path).
//
// The unit accumulates T = sum f and S2 = sum f^2 while the histogram is
// drained (one bin per cycle), then forms
//   sigma = FREQ_SCALE * sqrt(NSYM*S2 - T^2) / (NSYM * T),
// the population STD of the NSYM frequencies expressed in 1/FREQ_SCALE of
// the chunk (per mille by default). The integer square root is taken
// bit-serially (one result bit per cycle) and the division by a restoring
// divider, both exact up to truncation. The result is unsigned Q16.16.
// The paper specifies the STD and the thresholds 3.05 / 4.88 but not the
// unit of the frequencies; the per-mille normalisation, which makes sigma
// independent of the chunk size, is this design's choice.
//
// Interface: clear before a chunk's bins, bin_valid/bin_freq per bin,
// bin_last on the final one. Timing: sigma_valid pulses about
// RW + NUM_W + 3 cycles (~110) after bin_last.
module std_unit
  import ceaz_pkg::*;
#(
  parameter int unsigned CNT = FREQ_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           bin_valid,
  input  logic           bin_last,
  input  logic [CNT-1:0] bin_freq,
  output logic           sigma_valid,
  output logic [31:0]    sigma_q16
);
  localparam int unsigned SW    = 2*CNT + SYM_W;      // S2 width
  localparam int unsigned VW    = SW + SYM_W + 2;     // NSYM*S2 width (even)
  localparam int unsigned RW    = VW / 2;             // sqrt width
  localparam int unsigned NUM_W = RW + 10 + 16;       // FREQ_SCALE*sqrt << 16
  localparam int unsigned DEN_W = CNT + SYM_W + 1;

  logic [CNT+SYM_W-1:0] tsum;
  logic [SW-1:0]        s2;
  logic [VW-1:0]        v;        // radicand, consumed two bits per step
  logic [RW+1:0]        rem;
  logic [RW-1:0]        root;
  logic [$clog2(RW+1)-1:0] k;

  typedef enum logic [2:0] {S_ACC, S_VAR, S_SQRT, S_DIV, S_WAIT} sstate_e;
  sstate_e st;

  logic             div_start, div_done, div_busy;
  logic [NUM_W-1:0] div_num, div_quo;
  logic [DEN_W-1:0] div_den;

  seq_div #(.NW(NUM_W), .DW(DEN_W)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo)
  );

  logic [RW+3:0] trial;
  assign trial = {rem, v[VW-1 -: 2]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_ACC;
      tsum        <= '0;
      s2          <= '0;
      v           <= '0;
      rem         <= '0;
      root        <= '0;
      k           <= '0;
      div_start   <= 1'b0;
      div_num     <= '0;
      div_den     <= '0;
      sigma_valid <= 1'b0;
      sigma_q16   <= '0;
    end else begin
      div_start   <= 1'b0;
      sigma_valid <= 1'b0;
      unique case (st)
        S_ACC: begin
          if (clear) begin
            tsum <= '0;
            s2   <= '0;
          end else if (bin_valid) begin
            tsum <= tsum + (CNT+SYM_W)'(bin_freq);
            s2   <= s2 + SW'(bin_freq) * SW'(bin_freq);
            if (bin_last) st <= S_VAR;
          end
        end
        S_VAR: begin
          // NSYM*S2 - T^2 >= 0 by Cauchy-Schwarz
          v    <= (VW'(s2) << SYM_W) - VW'(tsum) * VW'(tsum);
          rem  <= '0;
          root <= '0;
          k    <= '0;
          st   <= S_SQRT;
        end
        S_SQRT: begin
          v <= v << 2;
          if (trial >= (RW+4)'({root, 2'b01})) begin
            rem  <= (RW+2)'(trial - (RW+4)'({root, 2'b01}));
            root <= {root[RW-2:0], 1'b1};
          end else begin
            rem  <= (RW+2)'(trial);
            root <= {root[RW-2:0], 1'b0};
          end
          k <= k + 1'b1;
          if (k == $bits(k)'(RW - 1)) st <= S_DIV;
        end
        S_DIV: begin
          div_num   <= (NUM_W'(root) * NUM_W'(FREQ_SCALE)) << 16;
          div_den   <= (tsum == '0) ? DEN_W'(1) : DEN_W'(tsum) << SYM_W;
          div_start <= 1'b1;
          st        <= S_WAIT;
        end
        S_WAIT: begin
          if (div_done) begin
            sigma_q16   <= (div_quo > NUM_W'(32'hFFFF_FFFF)) ? 32'hFFFF_FFFF : div_quo[31:0];
            sigma_valid <= 1'b1;
            tsum        <= '0;
            s2          <= '0;
            st          <= S_ACC;
          end
        end
        default: st <= S_ACC;
      endcase
    end
  end

  // one division at a time
  assert property (@(posedge clk) !(div_start && div_busy))
    else $error("std_unit: divider restarted while busy");
endmodule
