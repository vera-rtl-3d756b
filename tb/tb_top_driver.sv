// tb_top_driver: stimulus and checker for vera_plus_top, shared by the
// reduced-size and the full-size end-to-end testbenches. Sizes are passed
// as parameters and must match the top it is connected to.
//
// Sequence: program the RRAM rows of the layers used with random weights,
// write a drift-point table (t_0 = 1 s, each next point TP_MUL times the last), load
// the shared projections, then issue NCMD random layer commands. Before some
// commands the elapsed time is moved, either by letting the timer run or by
// a host preload, so that sets are switched while commands are waiting. Each
// result is compared with a reference computed here from the programmed
// weights and the external-memory contents (tb_ref_pkg), using the set that
// was held when the command was accepted; the command latency must be DO+3
// cycles. The mechanisms of the design are counted and every one must occur.
// With RESNET20 set, the random commands are replaced by the ResNet-20 layer
// sequence run once inside every drift interval.
module tb_top_driver
  import vera_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int R = RANK, NS = NSETS, NL = NLAYERS, DI = DIN_MAX, DO = DOUT_MAX,
  parameter int K = KK, CT = CTAP, CPS = 100_000_000, SH = SHIFT,
  parameter int NCMD = 20,
  parameter int TP_MUL = 3,        // ratio of successive drift points
  parameter bit TIMER_RUNS = 0,    // advance time by waiting instead of preloading
  parameter bit RESNET20 = 0       // run the ResNet-20 layer sequence at every drift level
) (
  input  logic                 clk,
  output logic                 rst_n,
  output logic                 time_load_en,
  output logic [TW-1:0]        time_load_val,
  input  logic [TW-1:0]        now,
  output logic                 tbl_wr_en,
  output logic [3:0]           tbl_idx,
  output logic [TW-1:0]        tbl_val,
  output logic [3:0]           num_sets,
  output logic                 shared_load,
  input  logic                 loader_busy,
  input  logic                 shared_ok,
  input  logic [3:0]           cur_set,
  input  logic                 cur_valid,
  output logic                 rram_prog_en,
  output logic [15:0]          rram_prog_row,
  output logic signed [WW-1:0] rram_prog_data [K*DI],
  output logic                 in_wr_en,
  output logic [3:0]           in_wr_idx,
  output logic [AW-1:0]        in_wr_data [K*DI],
  output logic                 cmd_valid,
  input  logic                 cmd_ready,
  output cmd_t                 cmd,
  input  logic                 cmd_done,
  output logic                 out_rd_en,
  output logic [3:0]           out_rd_idx,
  input  logic signed [YW-1:0] out_rd_data [DO],
  input  int unsigned          bus_stalls
);

  localparam int NSH = R*DI + DO*R;
  localparam int NST = NL*DO + NL*R;

  int checks = 0, failures = 0;
  int n_switch = 0, n_stall = 0, n_slice = 0, n_onebyone = 0, n_preload = 0;
  int n_timer_switch = 0, n_skip = 0;
  longint tp [NS];
  logic signed [WW-1:0] w_m [int][];   // programmed rows
  int layers_used [$];

  // count set switches as they complete
  logic [3:0] last_set;
  logic       last_valid;
  always @(posedge clk) begin
    last_set <= cur_set; last_valid <= cur_valid;
    if (rst_n && cur_valid && !last_valid && last_set != cur_set) begin
      n_switch++;
      if (int'(cur_set) > int'(last_set) + 1) n_skip++;
    end
    if (rst_n && cmd_valid && !cmd_ready && (loader_busy || !cur_valid)) n_stall++;
  end

  task automatic fail(input string s);
    failures++;
    $display("FAIL: %s", s);
  endtask

  function automatic longint expect_y(input int l, input int din, input int j, input int k,
                                      input int xv []);
    longint acc, xs [], a [], bm [], dv [], bvj;
    acc = 0;
    for (int t = 0; t < K; t++)
      for (int c = 0; c < din; c++) acc += longint'(w_m[l*DO + j][t*DI + c]) * xv[t*DI + c];
    xs = new[DI]; a = new[R*DI]; bm = new[DO*R]; dv = new[R];
    for (int c = 0; c < DI; c++) xs[c] = (c < din) ? xv[CT*DI + c] : 0;
    for (int i = 0; i < R*DI; i++) a[i]  = $signed(ext_byte(64'(i)));
    for (int i = 0; i < DO*R; i++) bm[i] = $signed(ext_byte(64'(R*DI + i)));
    for (int r = 0; r < R; r++)    dv[r] = $signed(ext_byte(64'(NSH + k*NST + NL*DO + l*R + r)));
    bvj = $signed(ext_byte(64'(NSH + k*NST + l*DO + j)));
    acc += comp_ref(R, DI, din, j, SH, xs, a, bm, bvj, dv);
    return longint'(YW'(acc));
  endfunction

  task automatic set_time(input longint t);
    @(negedge clk);
    time_load_en = 1; time_load_val = TW'(t);
    @(negedge clk);
    time_load_en = 0;
    n_preload++;
  endtask

  task automatic run_cmd(input int n, input int fl = -1, input int fdin = 0,
                         input int fdout = 0, input bit f1x1 = 0);
    int l, din, dout, ii, oi, k, lat;
    bit onebyone;
    int xv [];
    xv = new[K*DI];
    l    = layers_used[$urandom_range(layers_used.size() - 1)];
    din  = (n % 4 == 0) ? DI : $urandom_range(DI, 1);
    dout = (n % 4 == 1) ? DO : $urandom_range(DO, 1);
    onebyone = (n % 5 == 2);
    if (fl >= 0) begin l = fl; din = fdin; dout = fdout; onebyone = f1x1; end
    ii = $urandom_range(15); oi = $urandom_range(15);
    if (din < DI && dout < DO) n_slice++;
    if (onebyone) n_onebyone++;
    // input vector into the buffer
    @(negedge clk);
    in_wr_en = 1; in_wr_idx = 4'(ii);
    for (int q = 0; q < K*DI; q++) begin
      in_wr_data[q] = (onebyone && q / DI != CT) ? '0 : AW'($urandom);
      xv[q] = int'(in_wr_data[q]);
    end
    @(negedge clk);
    in_wr_en = 0;
    cmd_valid = 1;
    cmd = '{layer: 8'(l), din: 8'(din), dout: 8'(dout), in_idx: 4'(ii), out_idx: 4'(oi)};
    // wait for acceptance, note the set in use
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    k = int'(cur_set);
    checks++;
    if (!cur_valid) fail("command accepted without a valid set");
    @(negedge clk);
    cmd_valid = 0;
    lat = 1;
    while (!cmd_done) begin @(negedge clk); lat++; end
    checks++;
    if (lat != DO + 3) fail($sformatf("command latency %0d want %0d", lat, DO + 3));
    @(negedge clk);
    out_rd_en = 1; out_rd_idx = 4'(oi);
    @(negedge clk);
    out_rd_en = 0;
    for (int j = 0; j < DO; j++) begin
      longint e;
      e = (j < dout) ? expect_y(l, din, j, k, xv) : 0;
      checks++;
      if (longint'(out_rd_data[j]) != e)
        fail($sformatf("cmd %0d layer %0d set %0d y[%0d]=%0d want %0d", n, l, k, j, out_rd_data[j], e));
    end
  endtask

  // ResNet-20 (CIFAR): conv1 3->16, three stages of six 3x3 convs (16, 32, 64
  // channels, the first of stages 2 and 3 widening), then a 64->100 classifier.
  // One output pixel per layer, at an age inside every drift interval; before
  // each age every weight of the array is nudged by -1, 0 or +1 LSB to stand
  // in for conductance drift.
  function automatic void r20_shape(input int l, output int din, output int dout, output bit fc);
    fc = 0;
    if (l == 0)       begin din = 3;  dout = 16; end
    else if (l <= 6)  begin din = 16; dout = 16; end
    else if (l == 7)  begin din = 16; dout = 32; end
    else if (l <= 12) begin din = 32; dout = 32; end
    else if (l == 13) begin din = 32; dout = 64; end
    else if (l <= 18) begin din = 64; dout = 64; end
    else              begin din = 64; dout = DO; fc = 1; end
  endfunction

  task automatic drift_weights();
    foreach (layers_used[u])
      for (int o = 0; o < DO; o++) begin
        int row;
        row = layers_used[u]*DO + o;
        @(negedge clk);
        rram_prog_en = 1; rram_prog_row = 16'(row);
        for (int q = 0; q < K*DI; q++) begin
          int v;
          v = int'(w_m[row][q]) + int'($urandom_range(2)) - 1;
          if (v > 7) v = 7;
          if (v < -8) v = -8;
          w_m[row][q] = WW'(v);
          rram_prog_data[q] = WW'(v);
        end
      end
    @(negedge clk); rram_prog_en = 0;
  endtask

  int n_layers_run = 0;
  task automatic run_resnet20();
    int n;
    n = 0;
    for (int k = 0; k < NS; k++) begin
      drift_weights();
      set_time(tp[k] + (k == 0 ? 0 : 1));
      for (int l = 0; l < NL; l++) begin
        int din, dout;
        bit fc;
        r20_shape(l, din, dout, fc);
        run_cmd(n, l, din, dout, fc);
        checks++;
        if (cur_set != 4'(k)) fail($sformatf("age %0d s used set %0d want %0d", tp[k], cur_set, k));
        n++;
        n_layers_run++;
      end
    end
    // a big jump back to the start and out to the last interval again
    set_time(0);
    run_cmd(n, 0, 3, 16, 0);
    set_time(tp[NS-1] * 4);
    run_cmd(n + 1, NL - 1, 64, DO, 1);
    n_slice++;
  endtask

  initial begin
    rst_n = 1; time_load_en = 0; time_load_val = '0; tbl_wr_en = 0; tbl_idx = '0;
    tbl_val = '0; num_sets = '0; shared_load = 0; rram_prog_en = 0; rram_prog_row = '0;
    in_wr_en = 0; in_wr_idx = '0; cmd_valid = 0; cmd = '0; out_rd_en = 0; out_rd_idx = '0;
    for (int q = 0; q < K*DI; q++) begin rram_prog_data[q] = '0; in_wr_data[q] = '0; end
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // layers used: all of them when small, first, a middle and the last otherwise
    if (NL <= 4 || RESNET20) for (int l = 0; l < NL; l++) layers_used.push_back(l);
    else begin layers_used.push_back(0); layers_used.push_back(NL/2); layers_used.push_back(NL-1); end
    foreach (layers_used[u]) begin
      for (int o = 0; o < DO; o++) begin
        int row;
        row = layers_used[u]*DO + o;
        w_m[row] = new[K*DI];
        @(negedge clk);
        rram_prog_en = 1; rram_prog_row = 16'(row);
        for (int q = 0; q < K*DI; q++) begin
          rram_prog_data[q] = WW'($urandom);
          w_m[row][q] = rram_prog_data[q];
        end
      end
    end
    @(negedge clk); rram_prog_en = 0;
    // drift points
    tp[0] = 1;
    for (int q = 1; q < NS; q++) tp[q] = tp[q-1] * TP_MUL;
    for (int q = 0; q < NS; q++) begin
      @(negedge clk);
      tbl_wr_en = 1; tbl_idx = 4'(q); tbl_val = TW'(tp[q]);
    end
    @(negedge clk); tbl_wr_en = 0; num_sets = 4'(NS);
    // shared projections, then set 0 follows automatically
    shared_load = 1;
    @(negedge clk); shared_load = 0;
    while (!cur_valid) @(negedge clk);
    checks++;
    if (!shared_ok || (!TIMER_RUNS && cur_set != 0)) fail("first set not loaded after start-up");
    if (RESNET20) run_resnet20();
    else for (int n = 0; n < NCMD; n++) begin
      if (TIMER_RUNS) begin
        if (n == NCMD/2) set_time(0);                    // host restarts the count
        else if (n == NCMD/2 + 1) set_time(tp[NS-1] + 5); // host jump across several sets
        else if (n % 3 == 0) begin
          int s0;
          s0 = int'(cur_set);
          repeat (CPS * 4) @(negedge clk);             // let some seconds pass
          if (int'(cur_set) != s0 || loader_busy || !cur_valid) n_timer_switch++;
        end
      end else begin
        if (n == 1) set_time(tp[1]);
        if (n == 2) set_time(tp[1] + 1);                 // same set: no reload
        if (n == NCMD/2) set_time(tp[NS-1] * 2);         // jump to the last set
      end
      run_cmd(n);
    end
    // mechanism coverage
    checks++; if (n_switch < 2)    fail($sformatf("only %0d set switches", n_switch));
    checks++; if (n_skip < 1)      fail("no switch skipped over sets");
    checks++; if (n_stall < 1)     fail("no command stalled on a reload");
    checks++; if (n_slice < 1)     fail("no sliced layer");
    checks++; if (n_onebyone < 1)  fail("no 1x1 layer");
    checks++; if (n_preload < 1)   fail("no host time preload");
    checks++; if (bus_stalls < 1)  fail("no bus back-pressure");
    if (TIMER_RUNS) begin checks++; if (n_timer_switch < 1) fail("timer never caused a switch"); end
    checks++; if (cur_set != 4'(NS-1)) fail($sformatf("final set %0d want %0d", cur_set, NS-1));
    if (RESNET20) begin checks++; if (n_layers_run != NS*NL) fail("ResNet-20 sequence incomplete"); end
    $display("mechanisms: switches=%0d skips=%0d stall_cycles=%0d sliced=%0d 1x1=%0d preloads=%0d bus_stalls=%0d timer_switches=%0d",
             n_switch, n_skip, n_stall, n_slice, n_onebyone, n_preload, bus_stalls, n_timer_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
