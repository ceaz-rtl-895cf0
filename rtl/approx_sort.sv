// approx_sort: the paper's fast approximate sort (Algorithm 1).
//
// Quantization codes of a Lorenzo predictor have a frequency distribution
// that is roughly symmetric around the zero-error symbol and falls off to
// both sides. The sort exploits this: starting from the centre symbol at
// index p of the filtered array A, it walks outward with two indexes l and h,
// compares A[l] and A[h] and writes the pair to the output array O in the
// right order, two entries per cycle, filling O from the top
// (O[len-1] = A[p]). When one side runs out, the rest of the other side is
// copied. O is therefore approximately in ascending frequency order, which
// is what the tree builder needs; it takes about len/2 cycles instead of a
// full sort.
//
// From Algorithm 1: l = p-1, h = p+1, j = len-2, O[len-1] = A[p],
// t = p if p <= m else len-p-1, the compare-and-store loop of t rounds, and
// CopyRemaining. Choices here: m = floor((len-1)/2); the loop runs t rounds
// (the listing writes "rows"); CopyRemaining continues outward on the side
// that is left (h upward or l downward) and stores downward from j.
//
// Interface: A is read through two combinational read ports (rd_addr_l/h ->
// rd_data_l/h in the same cycle), O is written through two write ports.
// Timing: start, then 1 cycle for A[p], t cycles of pairs and one cycle per
// remaining entry; done pulses in the cycle after the last write.
module approx_sort
  import ceaz_pkg::*;
#(
  parameter int unsigned AW = SYM_W + 1     // holds lengths up to NSYM
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] len,            // entries in A, >= 1
  input  logic [AW-1:0] p,              // index of the centre symbol in A
  output logic [AW-1:0] rd_addr_l,
  output logic [AW-1:0] rd_addr_h,
  input  symfreq_t      rd_data_l,
  input  symfreq_t      rd_data_h,
  output logic          wr0_en,
  output logic [AW-1:0] wr0_addr,
  output symfreq_t      wr0_data,
  output logic          wr1_en,
  output logic [AW-1:0] wr1_addr,
  output symfreq_t      wr1_data,
  output logic          busy,
  output logic          done
);
  typedef enum logic [2:0] {Q_IDLE, Q_FIRST, Q_PAIR, Q_REM, Q_DONE} qstate_e;
  qstate_e st;

  logic signed [AW+1:0] l, h, j;
  logic [AW-1:0]        t, len_r, p_r;
  logic                 left_done;     // p <= m: left side runs out first

  assign busy = (st != Q_IDLE);
  assign rd_addr_l = (st == Q_FIRST) ? p_r : l[AW-1:0];
  assign rd_addr_h = h[AW-1:0];

  always_comb begin
    wr0_en   = 1'b0;
    wr1_en   = 1'b0;
    wr0_addr = j[AW-1:0];
    wr1_addr = AW'(j - 1);
    wr0_data = rd_data_h;
    wr1_data = rd_data_l;
    unique case (st)
      Q_FIRST: begin
        wr0_en   = 1'b1;
        wr0_addr = len_r - 1'b1;
        wr0_data = rd_data_l;
      end
      Q_PAIR: begin
        wr0_en = 1'b1;
        wr1_en = 1'b1;
        if (rd_data_l.freq <= rd_data_h.freq) begin
          wr0_data = rd_data_h;
          wr1_data = rd_data_l;
        end else begin
          wr0_data = rd_data_l;
          wr1_data = rd_data_h;
        end
      end
      Q_REM: begin
        wr0_en   = 1'b1;
        wr0_data = left_done ? rd_data_h : rd_data_l;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= Q_IDLE;
      l         <= '0;
      h         <= '0;
      j         <= '0;
      t         <= '0;
      len_r     <= '0;
      p_r       <= '0;
      left_done <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        Q_IDLE: if (start) begin
          len_r     <= len;
          p_r       <= p;
          l         <= $signed({2'b00, p}) - 1;
          h         <= $signed({2'b00, p}) + 1;
          j         <= $signed({2'b00, len}) - 2;
          left_done <= (p <= ((len - 1'b1) >> 1));
          t         <= (p <= ((len - 1'b1) >> 1)) ? p : len - p - 1'b1;
          st        <= Q_FIRST;
        end
        Q_FIRST: begin
          if (t != '0)      st <= Q_PAIR;
          else if (j >= 0)  st <= Q_REM;
          else              st <= Q_DONE;
        end
        Q_PAIR: begin
          l <= l - 1;
          h <= h + 1;
          j <= j - 2;
          t <= t - 1'b1;
          if (t == AW'(1)) st <= (j - 2 >= 0) ? Q_REM : Q_DONE;
        end
        Q_REM: begin
          if (left_done) h <= h + 1;
          else           l <= l - 1;
          j <= j - 1;
          if (j == 0) st <= Q_DONE;
        end
        Q_DONE: begin
          done <= 1'b1;
          st   <= Q_IDLE;
        end
        default: st <= Q_IDLE;
      endcase
    end
  end
endmodule
