// dual_quant: N parallel dual-quantization lanes (prequant, Lorenzo
// prediction, postquant).
//
// Each lane first prequantizes its floating-point value d into an integer
// d' = round(d * scale), where scale = 1/(2*eb) is supplied in the same
// floating-point format as the data; this is the paper's d' = d/(2*eb)
// written as a multiply so that the error-bound feedback only has to change
// the exponent of scale. The prediction p is the 1-D Lorenzo predictor, the
// previous value in stream order: lane i uses lane i-1 of the same beat and
// lane 0 uses lane N-1 of the previous beat. Postquant forms delta = d' - p
// and maps it to the symbol delta + 512. |delta| > 511 is an outlier: the
// symbol is 0 and the lane raises out_outlier, with d' on out_q so that a
// decoder can restore the value. Because prediction works on the already
// quantized d', the lanes carry no dependency on reconstructed data.
//
// Choices of this design (the paper gives only the three formulas): 1-D
// Lorenzo prediction, round-half-away-from-zero, zero and subnormal inputs
// give d' = 0, large values, infinities and NaN saturate, and the predictor
// restarts from 0 at the first beat of every chunk (in_first) so that chunks
// decode independently.
//
// Interface: one beat of N values per cycle when adv and in_valid are high.
// Timing: two register stages, both advanced by adv; the outputs of a beat
// appear two adv cycles after it was taken.
module dual_quant
  import ceaz_pkg::*;
#(
  parameter int unsigned N      = 32,   // pipelines (32 for single precision)
  parameter int unsigned DATA_W = 32,   // 32: IEEE single, 64: IEEE double
  parameter int unsigned Q_W    = 32    // width of the prequantized integer
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     adv,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic [N-1:0][DATA_W-1:0] in_data,
  input  logic [DATA_W-1:0]        scale,
  output logic                     out_valid,
  output logic                     out_first,
  output sym_t [N-1:0]             out_sym,
  output logic [N-1:0]             out_outlier,
  output logic [N-1:0][Q_W-1:0]    out_q
);

  localparam int unsigned E_W  = (DATA_W == 64) ? 11 : 8;
  localparam int unsigned M_W  = DATA_W - 1 - E_W;
  localparam int signed   BIAS = (1 << (E_W - 1)) - 1;
  localparam int unsigned PW   = 2 * (M_W + 1);
  localparam int unsigned WW   = PW + Q_W;

  localparam logic [WW-1:0] QMAX = (WW'(1) << (Q_W - 1)) - WW'(1);

  // round(d * s) as a Q_W-bit two's complement integer
  function automatic logic [Q_W-1:0] fmul_round(input logic [DATA_W-1:0] d,
                                                input logic [DATA_W-1:0] s);
    logic              sg;
    logic [E_W-1:0]    ed, es;
    logic [PW-1:0]     p;
    logic [WW-1:0]     mag;
    int signed         sh;
    int unsigned       rs;
    logic              sat;
    sg  = d[DATA_W-1] ^ s[DATA_W-1];
    ed  = d[DATA_W-2 -: E_W];
    es  = s[DATA_W-2 -: E_W];
    p   = PW'({1'b1, d[M_W-1:0]}) * PW'({1'b1, s[M_W-1:0]});
    sh  = int'(ed) + int'(es) - 2*BIAS - 2*int'(M_W);
    sat = 1'b0;
    mag = '0;
    if (ed == '0 || es == '0) begin
      mag = '0;
    end else if (ed == '1 || es == '1) begin
      sat = 1'b1;
    end else if (sh >= 0) begin
      if (sh >= int'(Q_W) - 1) sat = 1'b1;
      else                     mag = WW'(p) << sh;
    end else begin
      rs = unsigned'(-sh);
      if (rs > PW) mag = '0;
      else         mag = (WW'(p) + (WW'(1) << (rs - 1))) >> rs;
    end
    if (sat || mag > QMAX) mag = QMAX;
    return sg ? Q_W'(-mag) : Q_W'(mag);
  endfunction

  // stage 1: prequant
  logic                  s1_valid, s1_first;
  logic [N-1:0][Q_W-1:0] s1_q;
  logic        [Q_W-1:0] last_q;   // lane N-1 of the previous beat

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_q     <= '0;
    end else if (adv) begin
      s1_valid <= in_valid;
      s1_first <= in_first;
      for (int i = 0; i < int'(N); i++) s1_q[i] <= fmul_round(in_data[i], scale);
    end
  end

  // stage 2: Lorenzo prediction and postquant
  logic [N-1:0][Q_W:0] delta;
  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      logic [Q_W-1:0] pred;
      if (i == 0) pred = s1_first ? '0 : last_q;
      else        pred = s1_q[i-1];
      delta[i] = {s1_q[i][Q_W-1], s1_q[i]} - {pred[Q_W-1], pred};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_first   <= 1'b0;
      out_sym     <= '0;
      out_outlier <= '0;
      out_q       <= '0;
      last_q      <= '0;
    end else if (adv) begin
      out_valid <= s1_valid;
      out_first <= s1_first;
      out_q     <= s1_q;
      if (s1_valid) last_q <= s1_q[N-1];
      for (int i = 0; i < int'(N); i++) begin
        if ($signed(delta[i]) > 511 || $signed(delta[i]) < -511) begin
          out_sym[i]     <= sym_t'(OUTLIER);
          out_outlier[i] <= 1'b1;
        end else begin
          out_sym[i]     <= sym_t'(delta[i][SYM_W-1:0] + SYM_W'(CENTER));
          out_outlier[i] <= 1'b0;
        end
      end
    end
  end

endmodule
