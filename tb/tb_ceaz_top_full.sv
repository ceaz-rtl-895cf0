// tb_ceaz_top_full: the engine at its full size (32 FP32 lanes, 1024-bit
// output words, 32 MB chunks, every parameter at its default).
//
// One full 32 MB chunk (262,144 beats of 32 values) is followed by two short
// chunks ended by in_last. The data is a smooth random walk, so the values
// behave like a climate or cosmology field after Lorenzo prediction. The
// compressed output is decoded as it arrives: a copy of the codebook bank
// in use is taken when each chunk begins, the bit stream is walked codeword
// by codeword, each prequantized value is restored (Lorenzo prediction or
// outlier side channel) and compared with round(d * scale). The test also
// checks that the bit totals agree with the engine's bit counter, that the
// first chunk used the offline codewords, and that a later chunk ran with an
// online (built) codebook.
module tb_ceaz_top_full;
  import ceaz_pkg::*;
  localparam int N = 32;
  localparam int OUT_W = 1024;
  localparam int FULL_BEATS = 33554432 / (4 * N);

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic fixed_ratio, load_scale, off_we, in_valid, in_ready, in_last;
  logic out_valid, out_ready, out_last, olr_valid;
  logic [15:0] c_target_q8;
  logic [31:0] scale_in;
  sym_t off_sym;
  cw_t off_cw;
  logic [N-1:0][31:0] in_data;
  logic [OUT_W-1:0] out_data;
  logic [$clog2(OUT_W+1)-1:0] out_nbits;
  logic [N-1:0] olr_mask, st_escape;
  logic [N-1:0][31:0] olr_q;
  logic cbw_valid, cbw_bank;
  sym_t cbw_sym;
  len_t cbw_len;
  cb_sel_e st_cb_sel;
  logic st_act_valid, st_codegen_busy, st_wait_codegen;
  action_e st_act;
  logic [31:0] st_sigma, st_chi, st_scale;
  logic [47:0] st_total_bits;
  logic signed [15:0] st_eb_step;
  logic [10:0] st_codegen_nsym;

  ceaz_top dut (.*);

  function automatic real f32_to_real(logic [31:0] b);
    logic [63:0] d;
    if (b[30:23] == 0) return 0.0;
    d = {b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction
  function automatic logic [31:0] real_to_f32(real v);
    logic [63:0] d;
    d = $realtobits(v);
    if (v == 0.0) return 32'd0;
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction
  function automatic int rnd(real v);
    real a;
    a = ((v < 0) ? -v : v) + 0.5;
    return (v < 0) ? -int'($floor(a)) : int'($floor(a));
  endfunction

  // reference prequantized values, in stream order, and per-chunk counts
  int      qref[$];
  int      chunk_vals[$];
  int      cur_vals = 0;
  int      dicts[$][longint];
  cb_sel_e sels[$];
  bit      in_chunk = 0;
  int      olr_fifo[$];
  bit      bits[$];
  longint  stream_bits = 0;

  // decoder state for the chunk being decoded
  int      dec_chunk = 0, dec_done = 0, dec_prev = 0;
  int      dict[longint];
  bit      have_dict = 0;
  int      dec_errs = 0;
  int      n_online_chunks = 0, n_offline_first = 0, n_outliers = 0;

  function automatic bit decode_one();
    longint code;
    int len, sym, q, pos, exp_q;
    if (!have_dict) begin
      dict = dicts.pop_front();
      have_dict = 1;
      if (sels[dec_chunk] != CB_OFFLINE) n_online_chunks++;
      else if (dec_chunk == 0) n_offline_first++;
    end
    code = 0; len = 0; sym = -1; pos = 0;
    while (len < MAX_LEN && pos < bits.size()) begin
      code = (code << 1) | longint'(bits[pos]); pos++; len++;
      if (dict.exists({longint'(len), 24'(code)})) begin sym = dict[{longint'(len), 24'(code)}]; break; end
    end
    if (sym < 0) return 0;
    repeat (pos) void'(bits.pop_front());
    if (sym == 0) begin
      if (olr_fifo.size() == 0) return 0;
      q = olr_fifo.pop_front();
    end else q = dec_prev + sym - 512;
    dec_prev = q;
    exp_q = qref.pop_front();
    dec_done++;
    if (q != exp_q) return 0;
    return 1;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (!in_chunk) begin
        int dd[longint];
        dd.delete();
        for (int s = 0; s < NSYM; s++) begin
          cw_t cw;
          cw = (st_cb_sel == CB_ONLINE0) ? dut.u_cb.on0_tbl[s] :
               (st_cb_sel == CB_ONLINE1) ? dut.u_cb.on1_tbl[s] : dut.u_cb.off_tbl[s];
          if (cw.len != 0) dd[{longint'(cw.len), 24'(cw.code)}] = s;
        end
        dicts.push_back(dd);
        sels.push_back(st_cb_sel);
        in_chunk = 1;
      end
      for (int l = 0; l < N; l++) qref.push_back(rnd(f32_to_real(in_data[l]) * f32_to_real(st_scale)));
      cur_vals += N;
      if (in_last || cur_vals == FULL_BEATS * N) begin
        chunk_vals.push_back(cur_vals); cur_vals = 0; in_chunk = 0;
      end
    end
    if (olr_valid)
      for (int l = 0; l < N; l++) if (olr_mask[l]) begin olr_fifo.push_back(int'(olr_q[l])); n_outliers++; end
    if (out_valid && out_ready) begin
      int nb;
      nb = out_last ? int'(out_nbits) : OUT_W;
      for (int b = 0; b < nb; b++) bits.push_back(out_data[OUT_W-1-b]);
      stream_bits += nb;
      // decode while a whole codeword is surely present
      while (bits.size() >= MAX_LEN)
        if (!decode_one()) begin dec_errs++; if (dec_errs < 5) $display("FAIL chunk %0d value %0d", dec_chunk, dec_done); end
      if (out_last) begin
        while (dec_done < chunk_vals[dec_chunk] && bits.size() > 0)
          if (!decode_one()) begin dec_errs++; if (dec_errs < 5) $display("FAIL chunk %0d value %0d", dec_chunk, dec_done); break; end
        checks++;
        if (dec_done != chunk_vals[dec_chunk] || bits.size() != 0) begin
          failures++;
          $display("FAIL chunk %0d: decoded %0d of %0d values, %0d bits left", dec_chunk, dec_done, chunk_vals[dec_chunk], bits.size());
        end
        $display("chunk %0d: %0d values decoded with %s codewords, stream so far %0d bits",
                 dec_chunk, dec_done, sels[dec_chunk].name(), stream_bits);
        bits = {};
        dec_chunk++; dec_done = 0; dec_prev = 0; have_dict = 0;
      end
    end
  end

  real walk = 0.0;
  task automatic send_chunk(input int nbeats, input bit early);
    real inv;
    inv = 1.0 / f32_to_real(st_scale);
    for (int b = 0; b < nbeats; b++) begin
      @(negedge clk);
      in_valid = 1;
      in_last = early && (b == nbeats - 1);
      for (int l = 0; l < N; l++) begin
        int s;
        s = int'($urandom_range(0, 6)) - 3;
        if ($urandom_range(0, 4095) == 0) s = 3000;
        walk = walk + (s + $urandom_range(0, 99) / 250.0) * inv;
        if (walk > 1.0e5 || walk < -1.0e5) walk = 0.0;
        in_data[l] = real_to_f32(walk);
      end
      do @(posedge clk); while (!in_ready);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
  endtask

  always @(negedge clk) out_ready <= ($urandom_range(0, 19) != 0);

  initial begin
    fixed_ratio = 0; load_scale = 0; off_we = 0; in_valid = 0; in_last = 0;
    c_target_q8 = 16'd2688; scale_in = 32'h3C80_0000;   // 1/64: eb = 32
    off_sym = '0; off_cw = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load_scale = 1;
    @(negedge clk); load_scale = 0;
    send_chunk(FULL_BEATS, 0);
    send_chunk(16384, 1);
    send_chunk(16384, 1);
    while (dec_chunk < 3) @(posedge clk);
    repeat (20) @(posedge clk);
    $display("outliers %0d, stream %0d bits, bit counter %0d, ratio %.2f",
             n_outliers, stream_bits, st_total_bits, 32.0 * (FULL_BEATS + 32768) * N / stream_bits);
    checks++; if (dec_errs != 0) begin failures += dec_errs; $display("FAIL %0d decode errors", dec_errs); end
    checks++; if (qref.size() != 0) begin failures++; $display("FAIL %0d values never decoded", qref.size()); end
    checks++; if (stream_bits != longint'(st_total_bits)) begin failures++; $display("FAIL bit counter mismatch"); end
    checks++; if (n_offline_first == 0) begin failures++; $display("FAIL first chunk not offline"); end
    checks++; if (n_online_chunks == 0) begin failures++; $display("FAIL no chunk used online codewords"); end
    checks++; if (n_outliers == 0) begin failures++; $display("FAIL no outliers"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
