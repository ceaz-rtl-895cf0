// tb_approx_sort: self-checking test of the approximate sort (Algorithm 1).
//
// For random array lengths, centre positions (both sides of the midpoint,
// the ends, length 1 and 2) and frequencies, a reference model of the
// algorithm computes the output array; the test compares every output
// entry, checks that each output index is written exactly once, and checks
// the cycle count 1 + t + remaining + 1 (about len/2 + remaining).
module tb_approx_sort;
  import ceaz_pkg::*;
  localparam int AW = 11;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic start, busy, done, wr0_en, wr1_en;
  logic [AW-1:0] len, p, rd_addr_l, rd_addr_h, wr0_addr, wr1_addr;
  symfreq_t rd_data_l, rd_data_h, wr0_data, wr1_data;

  symfreq_t amem [NSYM];
  symfreq_t omem [NSYM];
  int       wcnt [NSYM];
  symfreq_t ref_o [NSYM];

  assign rd_data_l = amem[rd_addr_l[9:0]];
  assign rd_data_h = amem[rd_addr_h[9:0]];

  approx_sort #(.AW(AW)) dut (.*);

  always @(posedge clk) begin
    if (wr0_en) begin omem[wr0_addr[9:0]] <= wr0_data; wcnt[wr0_addr[9:0]]++; end
    if (wr1_en) begin omem[wr1_addr[9:0]] <= wr1_data; wcnt[wr1_addr[9:0]]++; end
  end

  function automatic int model(int n, int pp);
    int l, h, j, t, m, cyc;
    l = pp - 1; h = pp + 1; j = n - 2; ref_o[n-1] = amem[pp];
    m = (n - 1) / 2;
    t = (pp <= m) ? pp : n - pp - 1;
    for (int i = 0; i < t; i++) begin
      if (amem[l].freq <= amem[h].freq) begin ref_o[j] = amem[h]; ref_o[j-1] = amem[l]; end
      else begin ref_o[j] = amem[l]; ref_o[j-1] = amem[h]; end
      l--; h++; j -= 2;
    end
    cyc = 1 + t;
    while (j >= 0) begin
      if (pp <= m) begin ref_o[j] = amem[h]; h++; end
      else begin ref_o[j] = amem[l]; l--; end
      j--; cyc++;
    end
    return cyc;
  endfunction

  task automatic run(input int n, input int pp);
    int exp_cyc, cyc;
    for (int i = 0; i < NSYM; i++) begin
      amem[i].sym = sym_t'(i);
      amem[i].freq = $urandom_range(1, 1000) * ((i > pp - 40 && i < pp + 40) ? 50 : 1);
      wcnt[i] = 0;
    end
    exp_cyc = model(n, pp);
    @(negedge clk);
    len = AW'(n); p = AW'(pp); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); #1; cyc++; end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (omem[i] !== ref_o[i] || wcnt[i] != 1) begin
        failures++;
        $display("FAIL n=%0d p=%0d O[%0d] sym %0d exp %0d writes %0d", n, pp, i, omem[i].sym, ref_o[i].sym, wcnt[i]);
      end
    end
    checks++;
    if (cyc != exp_cyc + 1) begin
      failures++; $display("FAIL n=%0d p=%0d cycles %0d expected %0d", n, pp, cyc, exp_cyc + 1);
    end
  endtask

  initial begin
    start = 0; len = 0; p = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 0);
    run(2, 0);
    run(2, 1);
    run(1024, 512);
    run(1024, 0);
    run(1024, 1023);
    run(900, 300);
    run(900, 700);
    for (int k = 0; k < 20; k++) begin
      int n;
      n = $urandom_range(1, 1024);
      run(n, $urandom_range(0, n - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
