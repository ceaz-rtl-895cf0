// tb_codebook: self-checking test of the codeword tables.
//
// Checks the default offline code after reset against an independent
// exponential-Golomb computation (and that it is a complete prefix code),
// host loading of the offline bank, writing of both online banks without
// disturbing each other, and bank selection on all read ports.
module tb_codebook;
  import ceaz_pkg::*;
  localparam int N = 3;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic init_busy, off_we, on_we, on_bank;
  sym_t off_sym, on_sym;
  cw_t off_cw, on_cw;
  cb_sel_e sel;
  sym_t [N-1:0] rd_sym;
  cw_t [N-1:0] rd_cw;

  codebook #(.N(N)) dut (.*);

  function automatic cw_t eg(int s);
    int d, u, nb;
    cw_t r;
    d = s - 512;
    u = (d > 0) ? 2*d - 1 : -2*d;
    nb = $clog2(u + 2);          // bits of u+1
    r.len = len_t'(2*nb - 1);
    r.code = code_t'(u + 1);
    return r;
  endfunction

  function automatic cw_t on_val(int bank, int s);
    cw_t r;
    r.len = len_t'(1 + (s + bank*7) % MAX_LEN);
    r.code = code_t'((s * 2654435761 + bank) & ((1 << r.len) - 1));
    return r;
  endfunction

  task automatic read_check(cb_sel_e sl, int s, cw_t e, string what);
    @(negedge clk);
    sel = sl;
    for (int l = 0; l < N; l++) rd_sym[l] = sym_t'((s + l*311) % NSYM);
    #1;
    checks++;
    if (rd_cw[0] !== e) begin
      failures++; $display("FAIL %s sym %0d: len %0d code %0h exp len %0d code %0h", what, s, rd_cw[0].len, rd_cw[0].code, e.len, e.code);
    end
  endtask

  initial begin
    real kraft;
    off_we = 0; on_we = 0; on_bank = 0; off_sym = '0; on_sym = '0; off_cw = '0; on_cw = '0;
    sel = CB_OFFLINE; rd_sym = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (!init_busy) begin failures++; $display("FAIL init_busy low after reset"); end
    wait (!init_busy);
    kraft = 0;
    for (int s = 0; s < NSYM; s++) begin
      automatic cw_t e = eg(s);
      read_check(CB_OFFLINE, s, e, "offline default");
      kraft += 1.0 / real'(longint'(1) << e.len);
    end
    checks++;
    if (kraft > 1.0) begin failures++; $display("FAIL offline kraft %f", kraft); end
    // fill both online banks
    for (int b = 0; b < 2; b++)
      for (int s = 0; s < NSYM; s++) begin
        @(negedge clk); on_we = 1; on_bank = b[0]; on_sym = sym_t'(s); on_cw = on_val(b, s);
      end
    @(negedge clk); on_we = 0;
    for (int s = 0; s < NSYM; s += 3) begin
      read_check(CB_ONLINE0, s, on_val(0, s), "online0");
      read_check(CB_ONLINE1, s, on_val(1, s), "online1");
    end
    // other read ports
    @(negedge clk); sel = CB_ONLINE1;
    for (int l = 0; l < N; l++) rd_sym[l] = sym_t'(100 + l);
    #1;
    for (int l = 0; l < N; l++) begin
      checks++;
      if (rd_cw[l] !== on_val(1, 100 + l)) begin failures++; $display("FAIL port %0d", l); end
    end
    // host load of the offline bank
    @(negedge clk); off_we = 1; off_sym = sym_t'(600); off_cw = '{len: 5'd3, code: 24'h5};
    @(negedge clk); off_we = 0;
    read_check(CB_OFFLINE, 600, '{len: 5'd3, code: 24'h5}, "offline loaded");
    read_check(CB_OFFLINE, 601, eg(601), "offline neighbour");
    read_check(CB_ONLINE0, 600, on_val(0, 600), "online0 untouched");
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
