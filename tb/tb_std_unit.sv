// tb_std_unit: self-checking test of the frequency STD unit.
//
// Feeds several 1024-bin frequency tables (a peaked, a flat, a single-bin, a
// random and an all-zero one) and compares sigma with
// 1000 * sqrt(1024*S2 - T^2) / (1024*T) computed in real arithmetic
// (allowing 2 LSB of Q16.16 for truncation). Also checks the result latency
// bound.
module tb_std_unit;
  import ceaz_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic clear, bin_valid, bin_last, sigma_valid;
  logic [31:0] bin_freq, sigma_q16;

  std_unit dut (.*);

  longint f [NSYM];

  task automatic run_table(input string name);
    real t, s2, expv;
    longint got;
    int lat;
    t = 0; s2 = 0;
    foreach (f[i]) begin t += f[i]; s2 += real'(f[i]) * real'(f[i]); end
    if (t == 0) expv = 0;
    else expv = 1000.0 * $sqrt(1024.0 * s2 - t * t) / (1024.0 * t) * 65536.0;
    for (int i = 0; i < NSYM; i++) begin
      @(negedge clk);
      bin_valid = 1; bin_freq = 32'(f[i]); bin_last = (i == NSYM-1);
    end
    @(negedge clk); bin_valid = 0; bin_last = 0;
    lat = 0;
    while (!sigma_valid) begin @(posedge clk); #1; lat++; end
    got = sigma_q16;
    checks++;
    if ((real'(got) - expv) > 2.0 || (expv - real'(got)) > 2.0) begin
      failures++; $display("FAIL %s: sigma %0d expected %f", name, got, expv);
    end else $display("%s: sigma = %f per mille", name, real'(got) / 65536.0);
    checks++;
    if (lat > 130) begin failures++; $display("FAIL %s: latency %0d", name, lat); end
  endtask

  initial begin
    clear = 0; bin_valid = 0; bin_last = 0; bin_freq = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (f[i]) f[i] = 0;
    for (int d = -30; d <= 30; d++) f[512+d] = 100000 / (1 + d*d);
    run_table("peaked");
    foreach (f[i]) f[i] = 8192;
    run_table("flat");
    foreach (f[i]) f[i] = 0;
    f[512] = 8388608;
    run_table("single");
    foreach (f[i]) f[i] = $urandom_range(0, 100000);
    run_table("random");
    foreach (f[i]) f[i] = 0;
    run_table("empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
