// tb_ceaz_top: end-to-end test of the compression engine.
//
// A reduced engine (4 lanes, 4 KB chunks, 128-bit output words) compresses a
// stream whose statistics change from chunk to chunk. The test decodes the
// compressed output itself: for every chunk it takes a copy of the codebook
// bank the engine selected when the chunk began (as a decoder would receive
// it), walks the bit stream codeword by codeword, restores each
// prequantized value from the Lorenzo prediction or from the outlier side
// channel, and compares it with round(d * scale) computed from the input,
// i.e. it checks that every value is reconstructed within the error bound.
// It also checks that a chunk's bit stream ends exactly at out_last. Online
// codebooks are not read from the engine: they are rebuilt from the code
// lengths the engine sends on its cbw_* side channel, which checks that the
// codes are canonical.
//
// Mechanisms that must each occur at least once (counted, a failure if
// not): keep / build / offline decisions, switching to an online codebook,
// falling back to the offline codebook, escapes of symbols without an
// online codeword, outliers, output backpressure, waiting for the code
// generator, an error-bound change in fixed-ratio mode, and a chunk ended
// early by in_last.
module tb_ceaz_top;
  import ceaz_pkg::*;
  localparam int N = 4;
  localparam int OUT_W = 128;
  localparam longint CHUNK_BYTES = 4096;
  localparam int BEATS = CHUNK_BYTES / (4 * N);

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

  ceaz_top #(.N(N), .OUT_W(OUT_W), .CHUNK_BYTES(CHUNK_BYTES)) dut (.*);

  // ---------------------------------------------------------------- helpers
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
    if (a > 2147483647.0) a = 2147483647.0;
    return (v < 0) ? -int'($floor(a)) : int'($floor(a));
  endfunction

  // ------------------------------------------------------- per-chunk records
  typedef struct {
    real    d[$];            // input values
    real    scale;
    cw_t    cb[NSYM];        // codebook in use
    cb_sel_e sel;
  } chunk_t;
  chunk_t chunks[$];
  bit     words[$][$];       // bits of each finished chunk's stream
  bit     cur_bits[$];
  int     olr_q_fifo[$];
  int     sent_len[2][NSYM];
  int     n_rebuilt = 0;
  initial foreach (sent_len[b, s]) sent_len[b][s] = 0;
  bit     in_chunk = 0;

  int n_keep = 0, n_build = 0, n_offline = 0, n_to_online = 0, n_to_offline = 0;
  int n_escape = 0, n_outlier = 0, n_backpressure = 0, n_wait_cg = 0, n_eb_change = 0;
  int n_early_last = 0, n_chunks_out = 0;
  cb_sel_e prev_sel = CB_OFFLINE;

  always @(posedge clk) if (rst_n) begin
    // input side
    if (in_valid && in_ready) begin
      if (!in_chunk) begin
        chunk_t c;
        c.scale = f32_to_real(st_scale);
        c.sel = st_cb_sel;
        if (st_cb_sel == CB_OFFLINE) begin
          for (int s = 0; s < NSYM; s++) c.cb[s] = dut.u_cb.off_tbl[s];
        end else begin
          // rebuild the canonical code from the lengths sent on cbw_*
          int b, bl[MAX_LEN+1];
          longint nx[MAX_LEN+1], code;
          b = (st_cb_sel == CB_ONLINE1);
          foreach (bl[i]) bl[i] = 0;
          for (int s = 0; s < NSYM; s++) bl[sent_len[b][s]]++;
          bl[0] = 0; code = 0;
          for (int l = 1; l <= MAX_LEN; l++) begin code = (code + bl[l-1]) << 1; nx[l] = code; end
          for (int s = 0; s < NSYM; s++) begin
            c.cb[s].len = len_t'(sent_len[b][s]);
            c.cb[s].code = '0;
            if (sent_len[b][s] != 0) begin c.cb[s].code = code_t'(nx[sent_len[b][s]]); nx[sent_len[b][s]]++; end
          end
          n_rebuilt++;
        end
        chunks.push_back(c);
        in_chunk = 1;
      end
      for (int l = 0; l < N; l++) chunks[chunks.size()-1].d.push_back(f32_to_real(in_data[l]));
    end
    if (dut.st == 3'd2 && dut.fl_cnt == 0 && in_chunk) in_chunk = 0;   // flush started
    if (cbw_valid) sent_len[cbw_bank][cbw_sym] = int'(cbw_len);
    // outliers
    if (olr_valid)
      for (int l = 0; l < N; l++) if (olr_mask[l]) begin olr_q_fifo.push_back(int'(olr_q[l])); n_outlier++; end
    for (int l = 0; l < N; l++) if (st_escape[l]) n_escape++;
    // output side
    if (out_valid && !out_ready) n_backpressure++;
    if (out_valid && out_ready) begin
      int nb;
      nb = out_last ? int'(out_nbits) : OUT_W;
      for (int b = 0; b < nb; b++) cur_bits.push_back(out_data[OUT_W-1-b]);
      if (out_last) begin words.push_back(cur_bits); cur_bits = {}; end
    end
    // mechanisms
    if (st_act_valid) case (st_act)
      ACT_KEEP: n_keep++;
      ACT_BUILD: n_build++;
      default: n_offline++;
    endcase
    if (st_cb_sel != prev_sel) begin
      if (st_cb_sel == CB_OFFLINE) n_to_offline++; else n_to_online++;
      prev_sel = st_cb_sel;
    end
    if (st_wait_codegen) n_wait_cg++;
    if (dut.u_eb.done && st_eb_step != 0) n_eb_change++;
  end

  // ---------------------------------------------------------------- decoder
  task automatic decode_chunk(int k);
    chunk_t c;
    bit bits[$];
    int pos, prev, errs;
    int dict[longint];
    c = chunks.pop_front();
    bits = words.pop_front();
    for (int s = 0; s < NSYM; s++)
      if (c.cb[s].len != 0) dict[{longint'(c.cb[s].len), 24'(c.cb[s].code)}] = s;
    pos = 0; prev = 0; errs = 0;
    foreach (c.d[i]) begin
      longint code;
      int len, sym, q, qref;
      code = 0; len = 0; sym = -1;
      while (len < MAX_LEN && pos < bits.size()) begin
        code = (code << 1) | longint'(bits[pos]); pos++; len++;
        if (dict.exists({longint'(len), 24'(code)})) begin sym = dict[{longint'(len), 24'(code)}]; break; end
      end
      if (sym < 0) begin errs++; break; end
      if (sym == 0) q = olr_q_fifo.pop_front();
      else          q = prev + sym - 512;
      prev = q;
      qref = rnd(c.d[i] * c.scale);
      checks++;
      if (q != qref) begin
        errs++;
        if (errs < 5) $display("FAIL chunk %0d value %0d: decoded %0d expected %0d (sym %0d)", k, i, q, qref, sym);
      end
    end
    checks++;
    if (pos != bits.size()) begin errs++; $display("FAIL chunk %0d: %0d of %0d bits used", k, pos, bits.size()); end
    failures += errs;
    $display("chunk %0d: %0d values, %0d bits (%.2f bits/value), codebook %s, errors %0d",
             k, c.d.size(), bits.size(), real'(bits.size()) / c.d.size(), c.sel.name(), errs);
  endtask

  // --------------------------------------------------------------- stimulus
  real walk = 0.0;
  int  w;

  task automatic send_chunk(input int width, input int nbeats, input bit early);
    real sc;
    sc = f32_to_real(st_scale);
    for (int b = 0; b < nbeats; b++) begin
      @(negedge clk);
      while ($urandom_range(0, 9) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      in_last = early && (b == nbeats - 1);
      for (int l = 0; l < N; l++) begin
        int st;
        st = $urandom_range(0, 2*width) - width;
        if ($urandom_range(0, 300) == 0) st = 5000;     // outlier
        walk = walk + st / sc + ($urandom_range(0, 99) / 400.0) / sc;
        if (walk > 1.0e6 || walk < -1.0e6) walk = 0.0;
        in_data[l] = real_to_f32(walk);
      end
      do @(posedge clk); while (!in_ready);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    if (early) n_early_last++;
  endtask

  always @(negedge clk) out_ready <= ($urandom_range(0, 9) != 0);

  int widths[] = '{2, 2, 2, 4, 40, 40, 3, 3, 2, 2, 2, 2};

  initial begin
    fixed_ratio = 0; load_scale = 0; off_we = 0; in_valid = 0; in_last = 0;
    c_target_q8 = 16'd2688; scale_in = 32'h3F00_0000;   // 0.5: eb = 1
    off_sym = '0; off_cw = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load_scale = 1;
    @(negedge clk); load_scale = 0;
    foreach (widths[i]) begin
      if (i == 8) fixed_ratio = 1;         // last chunks: fixed-ratio mode, C = 10.5
      send_chunk(widths[i], (i == widths.size() - 1) ? BEATS / 2 : BEATS, i == widths.size() - 1);
    end
    // wait for the last chunk's output
    while (words.size() < widths.size()) @(posedge clk);
    repeat (10) @(posedge clk);
    foreach (widths[i]) decode_chunk(i);
    $display("decisions: keep %0d build %0d offline %0d; switches to online %0d, to offline %0d",
             n_keep, n_build, n_offline, n_to_online, n_to_offline);
    $display("escapes %0d outliers %0d backpressure cycles %0d codegen waits %0d eb changes %0d early ends %0d",
             n_escape, n_outlier, n_backpressure, n_wait_cg, n_eb_change, n_early_last);
    checks++; if (n_keep == 0)         begin failures++; $display("FAIL never kept codewords"); end
    checks++; if (n_build == 0)        begin failures++; $display("FAIL never built codewords"); end
    checks++; if (n_offline == 0)      begin failures++; $display("FAIL never chose offline codewords"); end
    checks++; if (n_to_online == 0)    begin failures++; $display("FAIL never switched to online codewords"); end
    checks++; if (n_to_offline == 0)   begin failures++; $display("FAIL never returned to offline codewords"); end
    checks++; if (n_escape == 0)       begin failures++; $display("FAIL no escape"); end
    checks++; if (n_outlier == 0)      begin failures++; $display("FAIL no outlier"); end
    checks++; if (n_backpressure == 0) begin failures++; $display("FAIL no backpressure"); end
    checks++; if (n_wait_cg == 0)      begin failures++; $display("FAIL never waited for the code generator"); end
    checks++; if (n_eb_change == 0)    begin failures++; $display("FAIL error bound never changed"); end
    checks++; if (n_rebuilt == 0)      begin failures++; $display("FAIL no online codebook rebuilt from cbw"); end
    checks++; if (n_early_last == 0)   begin failures++; $display("FAIL no early chunk end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
