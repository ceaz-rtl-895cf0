// bit_counter: counts the encoded bits and the values of the current chunk
// ("count bits" of the bottom dataflow path).
//
// Each accepted beat adds its total codeword length and N values. The
// outlier values sent on the side channel are not counted, since the paper
// feeds back only the total bits of the encoded symbols. On chunk_end the
// totals are copied to chunk_bits/chunk_values (for the error-bound
// adjuster) and the running counts restart; total_bits accumulates over the
// whole stream. Timing: totals are valid the cycle after chunk_end, together
// with the chunk_done pulse.
module bit_counter #(
  parameter int unsigned N   = 32,
  parameter int unsigned LW  = 10,    // width of the per-beat bit count
  parameter int unsigned CW  = 48     // counter width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [LW-1:0] beat_bits,
  input  logic          chunk_end,
  output logic          chunk_done,
  output logic [CW-1:0] chunk_bits,
  output logic [CW-1:0] chunk_values,
  output logic [CW-1:0] total_bits
);
  logic [CW-1:0] run_bits, run_vals;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_bits     <= '0;
      run_vals     <= '0;
      chunk_done   <= 1'b0;
      chunk_bits   <= '0;
      chunk_values <= '0;
      total_bits   <= '0;
    end else begin
      chunk_done <= 1'b0;
      if (in_valid) total_bits <= total_bits + CW'(beat_bits);
      if (chunk_end) begin
        chunk_bits   <= run_bits + (in_valid ? CW'(beat_bits) : '0);
        chunk_values <= run_vals + (in_valid ? CW'(N) : '0);
        chunk_done   <= 1'b1;
        run_bits     <= '0;
        run_vals     <= '0;
      end else if (in_valid) begin
        run_bits <= run_bits + CW'(beat_bits);
        run_vals <= run_vals + CW'(N);
      end
    end
  end
endmodule
