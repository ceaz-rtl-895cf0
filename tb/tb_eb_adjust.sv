// tb_eb_adjust: self-checking test of the error-bound adjuster.
//
// For random chunk bit counts and target ratios the reference computes
// B = bits/N and B_target = 32/C_target in Q8.8, the step
// round(B - B_target) and the new exponent of scale (eb' = 2^step * eb, so
// the exponent of 1/(2eb) drops by step), clamped to the normal range. Also
// checks that fixed-accuracy mode leaves scale alone, host loading, and the
// update latency.
module tb_eb_adjust;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic fixed_ratio, load_scale, chunk_done, busy, done;
  logic [15:0] c_target_q8;
  logic [31:0] scale_in, scale;
  logic [47:0] chunk_bits, chunk_values;
  logic signed [15:0] last_step;

  eb_adjust #(.DATA_W(32), .CW(48)) dut (.*);

  task automatic one(input longint bits, input longint vals, input int ct, input bit fr);
    longint bq, btq, diff, stp;
    int ne, oe, lat;
    logic [31:0] old;
    old = scale;
    bq = (bits * 256) / vals;
    btq = (32 * 65536) / ct;
    diff = bq - btq;
    stp = (diff + 128) >>> 8;
    if (stp > 255) stp = 255;
    if (stp < -255) stp = -255;
    oe = int'(old[30:23]);
    ne = oe - int'(stp);
    if (ne < 1) ne = 1;
    if (ne > 254) ne = 254;
    if (!fr) begin ne = oe; stp = 0; end
    @(negedge clk);
    fixed_ratio = fr; c_target_q8 = 16'(ct); chunk_bits = 48'(bits); chunk_values = 48'(vals);
    chunk_done = 1;
    @(negedge clk); chunk_done = 0;
    lat = 1;
    while (!done) begin @(posedge clk); #1; lat++; end
    checks++;
    if (scale[30:23] != 8'(ne) || scale[22:0] != old[22:0] || scale[31] != old[31] || last_step != 16'(stp)) begin
      failures++;
      $display("FAIL bits %0d vals %0d ct %0d: exp %0d got %0d step %0d/%0d", bits, vals, ct, ne, scale[30:23], last_step, stp);
    end
    checks++;
    if (lat > 130) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  initial begin
    fixed_ratio = 1; load_scale = 0; chunk_done = 0; c_target_q8 = 0; scale_in = 0;
    chunk_bits = 0; chunk_values = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load_scale = 1; scale_in = 32'h4248_0000;   // 50.0: eb = 0.01
    @(negedge clk); load_scale = 0;
    checks++;
    if (scale != 32'h4248_0000) begin failures++; $display("FAIL load"); end
    // exact cases: C_target 10.5 -> B_target = 3.047
    one(8388608 * 6, 8388608, 16'd2688, 1);   // B = 6: eb x8, exponent -3
    one(8388608 * 3, 8388608, 16'd2688, 1);   // B = 3: no change
    one(8388608 * 1, 8388608, 16'd2688, 1);   // B = 1: eb / 4
    one(8388608 * 9, 8388608, 16'd2688, 0);   // fixed accuracy: unchanged
    for (int i = 0; i < 100; i++)
      one($urandom_range(0, 24 * 4096), 4096, $urandom_range(256, 64 * 256), 1);
    // clamp at the top of the exponent range
    @(negedge clk); load_scale = 1; scale_in = 32'h7F00_0000;
    @(negedge clk); load_scale = 0;
    one(10, 4096, 16'd8192, 1);
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
