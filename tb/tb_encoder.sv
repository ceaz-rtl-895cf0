// tb_encoder: self-checking test of the codeword lookup stage.
//
// A behavioural table stands in for the codebook (some symbols without a
// codeword). Random beats with bubbles and stalls are checked for the
// registered codewords, the escape to the outlier code for symbols without
// a codeword, the outlier flags and the one-cycle latency.
module tb_encoder;
  import ceaz_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic adv, in_valid, in_first, out_valid, out_first;
  sym_t [N-1:0] in_sym, rd_sym;
  logic [N-1:0] in_outlier, out_outlier, out_escape;
  logic [N-1:0][31:0] in_q, out_q;
  cw_t [N-1:0] rd_cw, out_cw;
  cw_t esc_cw;

  function automatic cw_t tbl(int s);
    cw_t r;
    if (s % 5 == 3) return '0;          // no codeword
    r.len = len_t'(1 + s % 20);
    r.code = code_t'(s * 3);
    return r;
  endfunction

  always_comb for (int l = 0; l < N; l++) rd_cw[l] = tbl(int'(rd_sym[l]));
  assign esc_cw = '{len: 5'd9, code: 24'h1AB};

  encoder #(.N(N)) dut (.*);

  typedef struct { cw_t cw; bit olr; bit esc; int q; } e_t;
  e_t q[$];
  int esc_seen = 0;

  always @(posedge clk) if (rst_n && adv) begin
    #1;
    if (out_valid)
      for (int l = 0; l < N; l++) begin
        automatic e_t e = q.pop_front();
        checks++;
        if (out_cw[l] !== e.cw || out_outlier[l] !== e.olr || out_escape[l] !== e.esc || out_q[l] !== e.q) begin
          failures++; $display("FAIL lane %0d len %0d/%0d", l, out_cw[l].len, e.cw.len);
        end
        if (e.esc) esc_seen++;
      end
  end

  initial begin
    adv = 1; in_valid = 0; in_first = 0; in_sym = '0; in_outlier = '0; in_q = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency
    @(negedge clk); in_valid = 1; in_sym = '{default: sym_t'(512)};
    for (int l = 0; l < N; l++) begin automatic e_t e; e.cw = tbl(512); e.olr = 0; e.esc = 0; e.q = 0; q.push_back(e); end
    @(posedge clk); #1;
    checks++;
    if (!out_valid || out_cw[0] !== tbl(512)) begin failures++; $display("FAIL latency"); end
    for (int b = 0; b < 2000; b++) begin
      @(negedge clk);
      adv = ($urandom_range(0, 7) != 0);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int l = 0; l < N; l++) begin
        int s;
        s = $urandom_range(0, NSYM-1);
        in_sym[l] = sym_t'(s);
        in_outlier[l] = (s == 0);
        in_q[l] = $urandom;
        if (in_valid && adv) begin
          automatic e_t e;
          e.esc = (tbl(s).len == 0);
          e.cw  = e.esc ? esc_cw : tbl(s);
          e.olr = e.esc || (s == 0);
          e.q   = in_q[l];
          q.push_back(e);
        end
      end
    end
    @(negedge clk); in_valid = 0; adv = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (q.size() != 0 || esc_seen == 0) begin failures++; $display("FAIL leftover %0d escapes %0d", q.size(), esc_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
