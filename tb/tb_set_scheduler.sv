// tb_set_scheduler: self-checking test of set selection. Eleven drift points
// growing by 1.5x are written, the elapsed time is swept across and around
// them, and the target set is compared with a linear search done here. The
// reload handshake is exercised: switch_req must rise when the target moves
// away from the held set, cur_valid must drop during a load, and the loaded
// set must become cur_set.
module tb_set_scheduler;
  import vera_pkg::*;

  localparam int NS = NSETS;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic          tbl_wr_en = 0;
  logic [3:0]    tbl_idx = 0;
  logic [TW-1:0] tbl_val = 0;
  logic [3:0]    num_sets = 0;
  logic [TW-1:0] now = 0;
  logic          shared_ok = 0, load_start = 0, load_done = 0;
  logic          switch_req;
  logic [3:0]    target_set, cur_set;
  logic          cur_valid;

  set_scheduler #(.NS(NS)) dut (.*);

  longint tp [NS];
  int checks = 0, failures = 0, switches = 0;

  function automatic int ref_target(input longint t, input int n);
    int k;
    k = 0;
    for (int i = 0; i < n; i++) if (tp[i] <= t) k = i;
    return k;
  endfunction

  task automatic reload();
    // answer a pending request like the loader would
    @(negedge clk);
    if (switch_req) begin
      load_start = 1;
      @(negedge clk); load_start = 0;
      checks++;
      if (cur_valid) begin failures++; $display("FAIL: cur_valid high during load"); end
      repeat (3) @(negedge clk);
      load_done = 1;
      @(negedge clk); load_done = 0;
      switches++;
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t;
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    t = 1;
    for (int k = 0; k < NS; k++) begin
      tp[k] = t;
      @(negedge clk);
      tbl_wr_en = 1; tbl_idx = 4'(k); tbl_val = TW'(t);
      t = t * 7 + 3;      // ascending, spread over orders of magnitude
    end
    @(negedge clk); tbl_wr_en = 0; num_sets = 4'(NS);
    // no request before the shared matrices are there
    repeat (3) @(negedge clk);
    checks++;
    if (switch_req) begin failures++; $display("FAIL: request before shared_ok"); end
    shared_ok = 1;
    // sweep the elapsed time
    for (int s = 0; s < 3*NS; s++) begin
      longint tn;
      int e;
      tn = (s % 3 == 0) ? tp[s/3] : (s % 3 == 1) ? tp[s/3] - 1 : tp[s/3] + 1;
      @(negedge clk); now = TW'(tn);
      repeat (2) @(negedge clk);
      e = ref_target(tn, NS);
      checks++;
      if (target_set != 4'(e)) begin failures++; $display("FAIL: t=%0d target %0d want %0d", tn, target_set, e); end
      checks++;
      if (switch_req != (!cur_valid || cur_set != 4'(e))) begin failures++; $display("FAIL: switch_req at t=%0d", tn); end
      reload();
      @(negedge clk);
      checks++;
      if (!cur_valid || cur_set != 4'(e)) begin failures++; $display("FAIL: held set %0d want %0d", cur_set, e); end
      checks++;
      if (switch_req) begin failures++; $display("FAIL: request after load"); end
    end
    // fewer sets in use: the last used set stays valid for ever
    num_sets = 4'd4; now = '1;
    repeat (2) @(negedge clk);
    checks++;
    if (target_set != 4'd3) begin failures++; $display("FAIL: num_sets limit, target %0d", target_set); end
    reload();
    checks++;
    if (switches < NS) begin failures++; $display("FAIL: only %0d switches", switches); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
