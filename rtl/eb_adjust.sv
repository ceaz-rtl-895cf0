// eb_adjust: error-bound feedback of the bottom dataflow path (fixed-ratio
// mode).
//
// Following the paper: the compression ratio of the finished chunk is
// C = W*N / bits, so its bit-rate is B = W/C = bits/N; the target bit-rate is
// B_target = W / C_target; and since doubling the error bound lowers the
// bit-rate by one bit, the new error bound is eb' = 2^(B - B_target) * eb.
// The engine quantizes with scale = 1/(2*eb), so the update is a change of
// the exponent field of scale by -round(B - B_target). B and B_target are
// formed in Q8.8 with one sequential divider used twice. In fixed-accuracy
// mode scale never changes.
//
// Choices of this design: B is measured per chunk (the paper counts "the
// data points that have been compressed" without saying over which span);
// the step is rounded to a whole power of two, half up; the exponent is
// kept inside the normal range.
//
// Interface: load_scale sets scale from the host (1/(2*eb) in the data
// format). A chunk_done pulse with chunk_bits/chunk_values starts an update;
// done pulses when scale holds the new value. Timing: about 2*(NW+2)
// cycles (~120) from chunk_done to done.
module eb_adjust #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned CW     = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fixed_ratio,     // 0: fixed accuracy, 1: fixed ratio
  input  logic [15:0]       c_target_q8,     // target compression ratio, Q8.8
  input  logic              load_scale,
  input  logic [DATA_W-1:0] scale_in,
  input  logic              chunk_done,
  input  logic [CW-1:0]     chunk_bits,
  input  logic [CW-1:0]     chunk_values,
  output logic [DATA_W-1:0] scale,
  output logic              busy,
  output logic              done,
  output logic signed [15:0] last_step       // log2 of the last eb change
);
  localparam int unsigned E_W = (DATA_W == 64) ? 11 : 8;
  localparam int unsigned NW  = CW + 8;

  typedef enum logic [2:0] {E_IDLE, E_DIV_B, E_WAIT_B, E_DIV_T, E_WAIT_T, E_APPLY} estate_e;
  estate_e st;

  logic          div_start, div_busy, div_done;
  logic [NW-1:0] div_num, div_quo;
  logic [CW-1:0] div_den;
  logic [NW-1:0] b_q8;

  seq_div #(.NW(NW), .DW(CW)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo)
  );

  assign busy = (st != E_IDLE);

  // step = round(B - B_target), from Q8.8 values
  logic signed [NW+1:0] diff, stepw;
  logic signed [E_W+1:0] new_exp;
  always_comb begin
    diff    = $signed({2'b00, b_q8}) - $signed({2'b00, div_quo});
    stepw   = (diff + 128) >>> 8;
    if (stepw > 255)       stepw = 255;
    else if (stepw < -255) stepw = -255;
    new_exp = $signed({2'b00, scale[DATA_W-2 -: E_W]}) - (E_W+2)'(stepw);
    if (new_exp < 1)                            new_exp = 1;
    else if (new_exp > (1 << E_W) - 2)          new_exp = (1 << E_W) - 2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= E_IDLE;
      scale     <= '0;
      div_start <= 1'b0;
      div_num   <= '0;
      div_den   <= '0;
      b_q8      <= '0;
      done      <= 1'b0;
      last_step <= '0;
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      unique case (st)
        E_IDLE: begin
          if (load_scale) scale <= scale_in;
          else if (chunk_done) begin
            if (fixed_ratio && chunk_values != '0 && c_target_q8 != '0) st <= E_DIV_B;
            else begin
              done      <= 1'b1;
              last_step <= '0;
            end
          end
        end
        E_DIV_B: begin                      // B = bits / N in Q8.8
          div_num   <= NW'(chunk_bits) << 8;
          div_den   <= chunk_values;
          div_start <= 1'b1;
          st        <= E_WAIT_B;
        end
        E_WAIT_B: if (div_done) begin
          b_q8 <= div_quo;
          st   <= E_DIV_T;
        end
        E_DIV_T: begin                      // B_target = W / C_target in Q8.8
          div_num   <= NW'(DATA_W) << 16;
          div_den   <= CW'(c_target_q8);
          div_start <= 1'b1;
          st        <= E_WAIT_T;
        end
        E_WAIT_T: if (div_done) st <= E_APPLY;
        E_APPLY: begin
          scale[DATA_W-2 -: E_W] <= new_exp[E_W-1:0];
          last_step <= 16'(stepw);
          done      <= 1'b1;
          st        <= E_IDLE;
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  // one division at a time
  assert property (@(posedge clk) !(div_start && div_busy))
    else $error("eb_adjust: divider restarted while busy");
endmodule
