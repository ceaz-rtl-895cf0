// tb_bit_counter: self-checking test of the per-chunk bit and value counter.
//
// Random beats with random bit counts, chunk ends (also in the same cycle as
// a beat) and a reference sum per chunk and over the whole stream.
module tb_bit_counter;
  localparam int N = 8;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic in_valid, chunk_end, chunk_done;
  logic [9:0] beat_bits;
  logic [47:0] chunk_bits, chunk_values, total_bits;

  bit_counter #(.N(N), .LW(10), .CW(48)) dut (.*);

  longint rb = 0, rv = 0, tb_total = 0;

  initial begin
    in_valid = 0; chunk_end = 0; beat_bits = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 20; c++) begin
      int nb;
      nb = $urandom_range(1, 200);
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        in_valid = $urandom_range(0, 3) != 0;
        beat_bits = 10'($urandom_range(0, 1000));
        chunk_end = (b == nb - 1);
        if (in_valid) begin rb += beat_bits; rv += N; tb_total += beat_bits; end
      end
      @(negedge clk); in_valid = 0; chunk_end = 0;
      checks++;
      if (!chunk_done || chunk_bits != rb || chunk_values != rv || total_bits != tb_total) begin
        failures++; $display("FAIL chunk %0d: bits %0d/%0d values %0d/%0d total %0d/%0d", c, chunk_bits, rb, chunk_values, rv, total_bits, tb_total);
      end
      rb = 0; rv = 0;
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
