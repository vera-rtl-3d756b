// tb_sram_imc_comp: self-checking test of the compensation unit at a reduced
// size with rank 2, so that the rank sum, the per-layer vectors and the
// column/row slicing are all exercised. Parameters are written through the
// write port, random commands are issued back to back, and every result is
// compared with tb_ref_pkg::comp_ref and must appear exactly three cycles
// after its start.
module tb_sram_imc_comp;
  import vera_pkg::*;
  import tb_ref_pkg::*;

  localparam int R = 2, NL = 3, DI = 8, DO = 6, SH = 4;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic                 wr_en = 0;
  psel_e                wr_sel = SEL_A;
  logic [15:0]          wr_addr = 0;
  logic signed [PW-1:0] wr_data = 0;
  logic                 start = 0;
  logic [7:0]           layer = 0, din = 0, dout = 0;
  logic [AW-1:0]        x [DI];
  logic                 out_valid;
  logic signed [YW-1:0] comp [DO];

  sram_imc_comp #(.R(R), .NL(NL), .DI(DI), .DO(DO), .SH(SH)) dut (.*);

  longint a_m [R*DI], bm_m [DO*R], bv_m [NL*DO], dv_m [NL*R];
  int checks = 0, failures = 0;

  // expected results queued per start, with the cycle it must appear in
  longint exp_q [$];   // DO values per expected result
  int     due_q [$];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic wr(input psel_e s, input int a, input longint v);
    @(negedge clk);
    wr_en = 1; wr_sel = s; wr_addr = 16'(a); wr_data = PW'(v);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic issue(input int l, input int di_, input int do_);
    longint xs [];
    longint e [DO];
    xs = new[DI];
    @(negedge clk);
    for (int i = 0; i < DI; i++) begin x[i] = AW'($urandom); xs[i] = longint'(x[i]); end
    layer = 8'(l); din = 8'(di_); dout = 8'(do_); start = 1;
    for (int j = 0; j < DO; j++) begin
      longint dsl [];
      dsl = new[R];
      for (int r = 0; r < R; r++) dsl[r] = dv_m[l*R + r];
      e[j] = (j < do_) ? comp_ref(R, DI, di_, j, SH, xs, a_m, bm_m, bv_m[l*DO + j], dsl) : 0;
    end
    for (int j = 0; j < DO; j++) exp_q.push_back(e[j]);
    due_q.push_back(cyc + 3);
  endtask

  // checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected out_valid");
      end else begin
        longint e [DO];
        int due;
        for (int j = 0; j < DO; j++) e[j] = exp_q.pop_front();
        due = due_q.pop_front();
        checks++;
        if (cyc != due) begin failures++; $display("FAIL: latency, got cycle %0d want %0d", cyc, due); end
        for (int j = 0; j < DO; j++) begin
          checks++;
          if (longint'(comp[j]) != e[j]) begin
            failures++; $display("FAIL: comp[%0d]=%0d want %0d", j, comp[j], e[j]);
          end
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DI; i++) x[i] = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < R*DI; i++)  begin a_m[i]  = $signed(PW'($urandom)); wr(SEL_A, i, a_m[i]); end
    for (int i = 0; i < DO*R; i++)  begin bm_m[i] = $signed(PW'($urandom)); wr(SEL_BMAT, i, bm_m[i]); end
    for (int i = 0; i < NL*DO; i++) begin bv_m[i] = $signed(PW'($urandom)); wr(SEL_BVEC, i, bv_m[i]); end
    for (int i = 0; i < NL*R; i++)  begin dv_m[i] = $signed(PW'($urandom)); wr(SEL_DVEC, i, dv_m[i]); end
    // full size, sliced sizes, every layer; back to back starts
    issue(0, DI, DO);
    issue(1, DI, DO);
    issue(2, 3, 4);
    for (int n = 0; n < 40; n++) issue($urandom_range(NL-1), $urandom_range(DI, 1), $urandom_range(DO, 1));
    @(negedge clk); start = 0;
    // spaced starts
    for (int n = 0; n < 10; n++) begin
      issue($urandom_range(NL-1), $urandom_range(DI, 1), $urandom_range(DO, 1));
      @(negedge clk); start = 0;
      repeat ($urandom_range(4)) @(negedge clk);
    end
    // extreme values: saturation path
    for (int i = 0; i < R*DI; i++)  begin a_m[i] = 127; wr(SEL_A, i, 127); end
    for (int i = 0; i < DO*R; i++)  begin bm_m[i] = -128; wr(SEL_BMAT, i, -128); end
    for (int i = 0; i < NL*DO; i++) begin bv_m[i] = 127; wr(SEL_BVEC, i, 127); end
    for (int i = 0; i < NL*R; i++)  begin dv_m[i] = 127; wr(SEL_DVEC, i, 127); end
    issue(0, DI, DO);
    @(negedge clk); start = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (due_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", due_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
