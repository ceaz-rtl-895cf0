// tb_histogram: self-checking test of the per-lane symbol histogram.
//
// Counts three chunks of random symbols (skewed towards the centre) on a
// 4-lane instance, keeps a reference count per symbol, drains after each
// chunk and compares every bin, its address, the sweep length and the
// clear-after-drain behaviour (each chunk is compared against its own
// counts only).
module tb_histogram;
  import ceaz_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic in_valid, drain_start, busy, bin_valid, bin_last;
  sym_t [N-1:0] in_sym;
  sym_t bin_addr;
  logic [31:0] bin_freq;

  histogram #(.N(N)) dut (.*);

  int ref_cnt [NSYM];
  int nbins, lastpos;

  initial begin
    in_valid = 0; drain_start = 0; in_sym = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (!busy);
    for (int c = 0; c < 3; c++) begin
      foreach (ref_cnt[s]) ref_cnt[s] = 0;
      for (int b = 0; b < 400 + 300*c; b++) begin
        @(negedge clk);
        in_valid = ($urandom_range(0, 4) != 0);
        for (int l = 0; l < N; l++) begin
          int s;
          s = 512 + $urandom_range(0, 40) - 20;
          if ($urandom_range(0, 20) == 0) s = $urandom_range(0, NSYM-1);
          if (c == 1 && $urandom_range(0, 3) == 0) s = 7;   // same symbol on many lanes
          in_sym[l] = sym_t'(s);
          if (in_valid) ref_cnt[s]++;
        end
      end
      @(negedge clk); in_valid = 0;
      drain_start = 1;
      @(negedge clk); drain_start = 0;
      nbins = 0; lastpos = -1;
      checks++;
      if (!busy) begin failures++; $display("FAIL busy not raised"); end
      while (nbins < NSYM) begin
        @(posedge clk); #1;
        if (bin_valid) begin
          checks++;
          if (bin_addr !== sym_t'(nbins) || bin_freq !== ref_cnt[nbins]) begin
            failures++;
            $display("FAIL chunk %0d bin %0d: addr %0d freq %0d exp %0d", c, nbins, bin_addr, bin_freq, ref_cnt[nbins]);
          end
          if (bin_last) lastpos = nbins;
          nbins++;
        end
      end
      checks++;
      if (lastpos != NSYM-1) begin failures++; $display("FAIL bin_last at %0d", lastpos); end
      @(posedge clk); #1;
      checks++;
      if (busy || bin_valid) begin failures++; $display("FAIL sweep longer than NSYM"); end
    end
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
