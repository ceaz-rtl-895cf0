// tb_huff_codegen: self-checking test of the Huffman codebook generator.
//
// For several frequency tables (a Lorenzo-like peak, a sparse table, a
// single symbol, an all-zero table and a Fibonacci table whose optimal tree
// is deeper than MAX_LEN) the test
//   * runs an independent reference of the same steps (filter, the
//     Algorithm 1 sort, two-queue tree, depths, length limiting, canonical
//     assignment) and compares every symbol's length and codeword,
//   * checks the code is complete (Kraft sum exactly 1) and prefix-free
//     (canonical codes in order), that no length exceeds MAX_LEN and that
//     exactly the kept symbols have a codeword,
//   * checks the generation time stays below 8000 cycles.
module tb_huff_codegen;
  import ceaz_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic freq_we, start, busy, done, cb_we;
  sym_t freq_addr, cb_sym;
  logic [31:0] freq_data;
  cw_t cb_cw;
  logic [10:0] n_kept;

  huff_codegen dut (.*);

  longint f [NSYM];
  int     got_len [NSYM];
  longint got_code [NSYM];
  int     ref_len [NSYM];

  always @(posedge clk) if (cb_we) begin
    got_len[cb_sym]  <= int'(cb_cw.len);
    got_code[cb_sym] <= longint'(cb_cw.code);
  end

  // ---- reference
  function automatic void reference();
    int asym[$]; longint afr[$];
    int osym[NSYM]; longint ofr[NSYM];
    int n, p, l, h, j, t, m;
    int lpar[NSYM]; int ipar[NSYM]; longint ifr[NSYM]; int idep[NSYM];
    int cnt[64];
    int lp, ip, k, cl, rem;
    foreach (ref_len[s]) ref_len[s] = 0;
    p = -1;
    for (int s = 0; s < NSYM; s++) begin
      if (f[s] != 0 || s == 0) begin
        if (s >= 512 && p < 0) p = asym.size();
        asym.push_back(s); afr.push_back((s == 0 && f[s] == 0) ? 1 : f[s]);
      end
    end
    n = asym.size();
    if (p < 0) p = n - 1;
    // Algorithm 1
    l = p - 1; h = p + 1; j = n - 2; osym[n-1] = asym[p]; ofr[n-1] = afr[p];
    m = (n - 1) / 2; t = (p <= m) ? p : n - p - 1;
    for (int i = 0; i < t; i++) begin
      if (afr[l] <= afr[h]) begin osym[j] = asym[h]; ofr[j] = afr[h]; osym[j-1] = asym[l]; ofr[j-1] = afr[l]; end
      else begin osym[j] = asym[l]; ofr[j] = afr[l]; osym[j-1] = asym[h]; ofr[j-1] = afr[h]; end
      l--; h++; j -= 2;
    end
    while (j >= 0) begin
      if (p <= m) begin osym[j] = asym[h]; ofr[j] = afr[h]; h++; end
      else begin osym[j] = asym[l]; ofr[j] = afr[l]; l--; end
      j--;
    end
    foreach (cnt[d]) cnt[d] = 0;
    if (n == 1) cnt[1] = 1;
    else begin
      lp = 0; ip = 0;
      for (k = 0; k < n - 1; k++) begin
        longint s2 = 0;
        for (int c = 0; c < 2; c++) begin
          if (lp < n && (ip >= k || ofr[lp] <= ifr[ip])) begin lpar[lp] = k; s2 += ofr[lp]; lp++; end
          else begin ipar[ip] = k; s2 += ifr[ip]; ip++; end
        end
        ifr[k] = s2;
      end
      idep[n-2] = 0;
      for (k = n - 3; k >= 0; k--) idep[k] = idep[ipar[k]] + 1;
      for (lp = 0; lp < n; lp++) cnt[idep[lpar[lp]] + 1]++;
      for (int i = 63; i > MAX_LEN; i--)
        while (cnt[i] > 0) begin
          j = i - 2;
          while (cnt[j] == 0) j--;
          cnt[i] -= 2; cnt[i-1] += 1; cnt[j+1] += 2; cnt[j] -= 1;
        end
    end
    cl = MAX_LEN; rem = cnt[cl];
    for (lp = 0; lp < n; lp++) begin
      while (rem == 0) begin cl--; rem = cnt[cl]; end
      ref_len[osym[lp]] = cl; rem--;
    end
  endfunction

  task automatic run(input string name);
    int cyc, maxl, nref;
    real kraft;
    longint nxt[MAX_LEN+2]; int bl[MAX_LEN+2]; longint code;
    for (int s = 0; s < NSYM; s++) begin
      @(negedge clk);
      freq_we = 1; freq_addr = sym_t'(s); freq_data = 32'(f[s]);
    end
    @(negedge clk); freq_we = 0; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    reference();
    kraft = 0; maxl = 0; nref = 0;
    foreach (bl[i]) bl[i] = 0;
    for (int s = 0; s < NSYM; s++) begin
      checks++;
      if (got_len[s] != ref_len[s]) begin
        failures++; $display("FAIL %s sym %0d len %0d exp %0d", name, s, got_len[s], ref_len[s]);
      end
      if (got_len[s] > 0) begin kraft += 2.0 ** (-got_len[s]); bl[got_len[s]]++; end
      if (got_len[s] > maxl) maxl = got_len[s];
      if (ref_len[s] > 0) nref++;
    end
    // canonical codes from the lengths
    code = 0;
    for (int b = 1; b <= MAX_LEN; b++) begin code = (code + bl[b-1]) << 1; nxt[b] = code; end
    for (int s = 0; s < NSYM; s++) if (got_len[s] > 0) begin
      checks++;
      if (got_code[s] != nxt[got_len[s]]) begin
        failures++; $display("FAIL %s sym %0d code %0h exp %0h", name, s, got_code[s], nxt[got_len[s]]);
      end
      nxt[got_len[s]]++;
    end
    checks++;
    if (!(nref == 1 ? kraft == 0.5 : kraft == 1.0) || maxl > MAX_LEN) begin
      failures++; $display("FAIL %s kraft %f maxlen %0d", name, kraft, maxl);
    end
    checks++;
    if (int'(n_kept) != nref) begin failures++; $display("FAIL %s n_kept %0d exp %0d", name, n_kept, nref); end
    checks++;
    if (cyc > 8000) begin failures++; $display("FAIL %s took %0d cycles", name, cyc); end
    $display("%s: %0d symbols, max length %0d, %0d cycles", name, nref, maxl, cyc);
  endtask

  initial begin
    freq_we = 0; start = 0; freq_addr = '0; freq_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (f[s]) f[s] = 0;
    for (int d = -200; d <= 200; d++) f[512+d] = 1 + 4000000 / (1 + d*d) + $urandom_range(0, 3);
    run("peaked");
    foreach (f[s]) f[s] = ($urandom_range(0, 9) == 0) ? $urandom_range(1, 5000) : 0;
    f[0] = 0;
    run("sparse");
    foreach (f[s]) f[s] = 0;
    f[0] = 77;
    run("single");
    foreach (f[s]) f[s] = 0;
    run("empty");
    foreach (f[s]) f[s] = 0;
    begin
      // largest counts at the centre, as the approximate sort expects
      longint fib[40];
      fib[0] = 1; fib[1] = 2;      // with symbol 0 (count 1) a chain 41 deep
      for (int i = 2; i < 40; i++) fib[i] = fib[i-1] + fib[i-2];
      for (int i = 0; i < 40; i++) f[512 + ((i % 2) ? (i+1)/2 : -(i/2))] = fib[39-i];
    end
    run("fibonacci");
    foreach (f[s]) f[s] = $urandom_range(1, 1000000);
    run("full");
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
