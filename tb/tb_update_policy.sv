// tb_update_policy: self-checking test of the codeword update policy.
//
// Presents a sequence of sigma values and checks keep / build / offline
// against chi = |sigma0 - sigma1| with tau0 = 3.05 and tau1 = 4.88,
// including both thresholds exactly, the first-chunk rule and restart.
module tb_update_policy;
  import ceaz_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic restart, sigma_valid, act_valid;
  logic [31:0] sigma_q16, chi_q16;
  action_e act;

  update_policy dut (.*);

  longint prev = -1;

  task automatic step(input longint s, input bit do_restart = 0);
    action_e e;
    longint chi;
    if (do_restart) begin
      @(negedge clk); restart = 1; @(negedge clk); restart = 0; prev = -1;
    end
    @(negedge clk);
    sigma_valid = 1; sigma_q16 = 32'(s);
    chi = (prev < 0) ? 0 : ((s > prev) ? s - prev : prev - s);
    if (prev < 0)              e = ACT_BUILD;
    else if (chi <= 199885)    e = ACT_KEEP;
    else if (chi < 319816)     e = ACT_BUILD;
    else                       e = ACT_OFFLINE;
    @(negedge clk); sigma_valid = 0;
    checks++;
    if (!act_valid || act !== e || (prev >= 0 && chi_q16 !== 32'(chi))) begin
      failures++;
      $display("FAIL sigma %0d prev %0d: act %s exp %s valid %0b", s, prev, act.name(), e.name(), act_valid);
    end
    @(negedge clk);
    checks++;
    if (act_valid) begin failures++; $display("FAIL act_valid longer than one cycle"); end
    prev = s;
  endtask

  initial begin
    restart = 0; sigma_valid = 0; sigma_q16 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    step(1000000);                 // first: build
    step(1000000 + 199885);        // chi = tau0 exactly: keep
    step(1000000);                 // keep
    step(1000000 + 199886);        // just above tau0: build
    step(1000000 + 199886 + 319815); // below tau1: build
    step(1000000 + 199886);        // chi = 319815 -> build
    step(1000000 + 199886 + 319816); // chi = tau1 exactly: offline
    step(100);                     // large drop: offline
    step(150, 1);                  // after restart: build
    for (int i = 0; i < 200; i++) step($urandom_range(0, 2000000));
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
