// tb_dual_quant: self-checking test of the dual-quantization lanes.
//
// Drives a smooth random walk with occasional jumps (to create outliers)
// through a 4-lane single-precision instance and a 2-lane double-precision
// instance, with random bubbles and stalls. The reference computes
// d' = round(d * scale) in double-precision real arithmetic (exact for the
// products used), the 1-D Lorenzo prediction in stream order with a restart
// at every first beat, and the symbol mapping. It also checks the
// two-cycle latency.
module tb_dual_quant;
  import ceaz_pkg::*;
  localparam int N = 4;
  localparam int M = 2;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // single precision
  logic adv, in_valid, in_first;
  logic [N-1:0][31:0] in_data;
  logic [31:0] scale;
  logic out_valid, out_first;
  sym_t [N-1:0] out_sym;
  logic [N-1:0] out_outlier;
  logic [N-1:0][31:0] out_q;

  dual_quant #(.N(N), .DATA_W(32)) dut (
    .clk, .rst_n, .adv, .in_valid, .in_first, .in_data, .scale,
    .out_valid, .out_first, .out_sym, .out_outlier, .out_q
  );

  // double precision
  logic d_in_valid;
  logic [M-1:0][63:0] d_in_data;
  logic [63:0] d_scale;
  logic d_out_valid, d_out_first;
  sym_t [M-1:0] d_out_sym;
  logic [M-1:0] d_out_outlier;
  logic [M-1:0][31:0] d_out_q;

  dual_quant #(.N(M), .DATA_W(64)) dut64 (
    .clk, .rst_n, .adv, .in_valid(d_in_valid), .in_first, .in_data(d_in_data), .scale(d_scale),
    .out_valid(d_out_valid), .out_first(d_out_first), .out_sym(d_out_sym),
    .out_outlier(d_out_outlier), .out_q(d_out_q)
  );

  // single-precision bits <-> real (normal numbers only, truncating)
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
    a = (v < 0) ? -v : v;
    a = a + 0.5;
    if (a > 2147483647.0) a = 2147483647.0;
    return (v < 0) ? -int'($floor(a)) : int'($floor(a));
  endfunction

  typedef struct { int q; int sym; bit olr; bit first; int cyc; } exp_t;
  exp_t exq[$];
  exp_t dxq[$];
  longint prev_s, prev_d;
  int cyc = 0;
  real walk = 0.0;
  real sc = 50.0;          // eb = 0.01
  real dsc = 64.0;         // power of two: products stay exact in real

  always @(posedge clk) cyc <= cyc + 1;

  task automatic push_expected(input bit first);
    for (int i = 0; i < N; i++) begin
      exp_t e; int q; longint dl;
      q  = rnd(f32_to_real(in_data[i]) * sc);
      if (first && i == 0) prev_s = 0;
      dl = q - prev_s;
      prev_s = q;
      e.q = q; e.olr = (dl > 511 || dl < -511); e.sym = e.olr ? 0 : int'(dl) + 512;
      e.first = first; e.cyc = cyc;
      exq.push_back(e);
    end
    for (int i = 0; i < M; i++) begin
      exp_t e; int q; longint dl;
      q  = rnd($bitstoreal(d_in_data[i]) * dsc);
      if (first && i == 0) prev_d = 0;
      dl = q - prev_d;
      prev_d = q;
      e.q = q; e.olr = (dl > 511 || dl < -511); e.sym = e.olr ? 0 : int'(dl) + 512;
      e.first = first; e.cyc = cyc;
      dxq.push_back(e);
    end
  endtask

  int beats_out = 0, olr_seen = 0, first_seen = 0;

  // check on every edge where the output registers advanced
  always @(posedge clk) if (rst_n && adv) begin
    #1;
    if (out_valid) begin
      beats_out++;
      for (int i = 0; i < N; i++) begin
        automatic exp_t e = exq.pop_front();
        checks++;
        if (out_q[i] !== e.q || out_sym[i] !== sym_t'(e.sym) || out_outlier[i] !== e.olr ||
            (i == 0 && out_first !== e.first)) begin
          failures++;
          $display("FAIL sp lane %0d: q=%0d/%0d sym=%0d/%0d olr=%0b/%0b", i,
                   $signed(out_q[i]), e.q, out_sym[i], e.sym, out_outlier[i], e.olr);
        end
        if (e.olr) olr_seen++;
        if (e.first && i == 0) first_seen++;
      end
    end
    if (d_out_valid) begin
      for (int i = 0; i < M; i++) begin
        automatic exp_t e = dxq.pop_front();
        checks++;
        if (d_out_q[i] !== e.q || d_out_sym[i] !== sym_t'(e.sym) || d_out_outlier[i] !== e.olr) begin
          failures++;
          $display("FAIL dp lane %0d: q=%0d/%0d sym=%0d/%0d", i, $signed(d_out_q[i]), e.q,
                   d_out_sym[i], e.sym);
        end
      end
    end
  end

  // latency: with adv held high a beat appears exactly two cycles later
  int lat_beat_cyc = -1, lat_seen = -1;

  initial begin
    adv = 1; in_valid = 0; in_first = 0; d_in_valid = 0; in_data = '0; d_in_data = '0;
    scale = real_to_f32(sc);
    d_scale = $realtobits(dsc);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // single beat for the latency check
    @(negedge clk);
    in_valid = 1; d_in_valid = 1; in_first = 1;
    for (int i = 0; i < N; i++) in_data[i] = real_to_f32(1.25 * i);
    for (int i = 0; i < M; i++) d_in_data[i] = $realtobits(0.5 * i);
    push_expected(1);
    lat_beat_cyc = cyc;
    @(negedge clk); in_valid = 0; d_in_valid = 0; in_first = 0;
    wait (out_valid);
    lat_seen = cyc;
    checks++;
    if (lat_seen - lat_beat_cyc != 2) begin
      failures++; $display("FAIL latency %0d", lat_seen - lat_beat_cyc);
    end
    // random traffic
    for (int b = 0; b < 3000; b++) begin
      @(negedge clk);
      adv = ($urandom_range(0, 9) != 0);
      in_valid = ($urandom_range(0, 3) != 0);
      d_in_valid = in_valid;
      in_first = (b % 500 == 0);
      for (int i = 0; i < N; i++) begin
        walk = walk + ($urandom_range(0, 2000) - 1000) / 10000.0;
        if ($urandom_range(0, 200) == 0) walk = walk + 30.0;
        in_data[i] = real_to_f32(walk);
      end
      for (int i = 0; i < M; i++) begin
        automatic real v = walk + ($urandom_range(0, 1000) / 1024.0);
        if ($urandom_range(0, 100) == 0) v = -v * 10;
        d_in_data[i] = $realtobits(v);
      end
      if (in_valid && adv) push_expected(in_first);
    end
    @(negedge clk); in_valid = 0; d_in_valid = 0; adv = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (exq.size() != 0 || dxq.size() != 0) begin failures++; $display("FAIL leftover"); end
    checks++;
    if (olr_seen == 0 || first_seen < 3) begin failures++; $display("FAIL coverage olr=%0d first=%0d", olr_seen, first_seen); end
    $display("outliers seen %0d, chunk starts %0d", olr_seen, first_seen);
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
