// tb_bit_packer: self-checking test of the bit packer.
//
// Random beats of variable-length codewords (0 to MAX_LEN bits per lane,
// with full-length beats to reach the one-word-per-cycle limit) are packed
// with random output backpressure and a flush after every chunk. The test
// keeps the expected bit stream as a queue of bits and compares every
// output bit, out_nbits and out_last, and checks beat_bits.
module tb_bit_packer;
  import ceaz_pkg::*;
  localparam int N = 4;
  localparam int OUT_W = 128;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic adv, in_valid, flush, out_valid, out_ready, out_last;
  cw_t [N-1:0] in_cw;
  logic [OUT_W-1:0] out_data;
  logic [$clog2(OUT_W+1)-1:0] out_nbits;
  logic [$clog2(N*MAX_LEN+1)-1:0] beat_bits;

  assign adv = !(out_valid && !out_ready);

  bit_packer #(.N(N), .OUT_W(OUT_W)) dut (.*);

  bit exp_bits[$];
  int exp_chunk_ends[$];     // bit counts at which chunks end
  int words = 0, lasts = 0, stalls = 0;
  int sent_bits = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready) begin
      int nb;
      nb = out_last ? int'(out_nbits) : OUT_W;
      checks++;
      if (!out_last && out_nbits != OUT_W) begin failures++; $display("FAIL nbits %0d", out_nbits); end
      for (int b = 0; b < nb; b++) begin
        bit e;
        e = exp_bits.pop_front();
        if (out_data[OUT_W-1-b] !== e) begin
          failures++; $display("FAIL word %0d bit %0d", words, b); break;
        end
      end
      if (out_last) begin
        checks++; lasts++;
        if (exp_chunk_ends.pop_front() != sent_bits + nb) begin failures++; $display("FAIL chunk end misplaced"); end
        for (int b = nb; b < OUT_W; b++) if (out_data[OUT_W-1-b]) begin failures++; $display("FAIL padding"); break; end
      end
      sent_bits += nb;
      words++;
    end
  end

  int total = 0;

  task automatic send_beat(input bit full);
    int s;
    s = 0;
    for (int l = 0; l < N; l++) begin
      int len;
      len = full ? MAX_LEN : $urandom_range(0, MAX_LEN);
      in_cw[l].len = len_t'(len);
      in_cw[l].code = code_t'($urandom);       // bits above len must be ignored
      for (int b = len - 1; b >= 0; b--) exp_bits.push_back(in_cw[l].code[b]);
      s += len;
    end
    in_valid = 1;
    #1;
    checks++;
    if (beat_bits != s) begin failures++; $display("FAIL beat_bits %0d exp %0d", beat_bits, s); end
    total += s;
  endtask

  initial begin
    in_valid = 0; flush = 0; in_cw = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 6; c++) begin
      for (int b = 0; b < 300; b++) begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 4) != 0);
        in_valid = 0;
        #1;
        if (adv && $urandom_range(0, 5) != 0) send_beat(c == 2);
        else in_valid = 0;
      end
      // flush: wait for a cycle that advances
      @(negedge clk); in_valid = 0; #1;
      while (!adv) begin @(negedge clk); #1; end
      flush = 1;
      exp_chunk_ends.push_back(total);
      @(negedge clk); flush = 0;
    end
    out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_bits.size() != 0 || lasts != 6 || stalls == 0) begin
      failures++; $display("FAIL leftover bits %0d, lasts %0d, stalls %0d", exp_bits.size(), lasts, stalls);
    end
    $display("words %0d, stalled cycles %0d", words, stalls);
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
