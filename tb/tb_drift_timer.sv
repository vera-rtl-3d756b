// tb_drift_timer: self-checking test of the elapsed-time counter with a
// prescaler of 5 cycles per second. Checks the tick period, the count, a
// host preload that restarts the prescaler, and saturation at the top.
module tb_drift_timer;
  import vera_pkg::*;

  localparam int CPS = 5;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic          load_en = 0;
  logic [TW-1:0] load_val = 0;
  logic [TW-1:0] now;
  logic          sec_tick;

  drift_timer #(.CYC_PER_SEC(CPS)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0, last_tick = -1, ticks = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (sec_tick) begin
      if (last_tick >= 0) begin
        checks++;
        if (cyc - last_tick != CPS) begin failures++; $display("FAIL: tick period %0d", cyc - last_tick); end
      end
      last_tick <= cyc;
      ticks <= ticks + 1;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (now != 0) begin failures++; $display("FAIL: now after reset %0d", now); end
    rst_n = 1;
    repeat (CPS * 20) @(negedge clk);
    checks++;
    if (now != 20) begin failures++; $display("FAIL: now=%0d want 20", now); end
    // preload: count restarts from the loaded value with a full period
    load_en = 1; load_val = 32'd86400;
    @(negedge clk); load_en = 0;
    last_tick = -1;
    checks++;
    if (now != 86400) begin failures++; $display("FAIL: preload now=%0d", now); end
    repeat (CPS - 1) @(negedge clk);
    checks++;
    if (now != 86400) begin failures++; $display("FAIL: early increment now=%0d", now); end
    @(negedge clk);
    checks++;
    if (now != 86401) begin failures++; $display("FAIL: now=%0d want 86401", now); end
    // saturation
    load_en = 1; load_val = 32'hffff_fffe;
    @(negedge clk); load_en = 0;
    last_tick = -1;
    repeat (CPS * 4) @(negedge clk);
    checks++;
    if (now != 32'hffff_ffff) begin failures++; $display("FAIL: saturation now=%h", now); end
    checks++;
    if (ticks < 20) begin failures++; $display("FAIL: only %0d ticks", ticks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
