// tb_param_loader: self-checking test of the parameter loader against the
// external-memory model, which withholds ready at random. A shared job and
// set jobs for several set indices are run; every write to the parameter
// port is checked for region, index and value against the memory layout,
// the number of writes and the done pulse are checked, and a start while
// busy must be ignored.
module tb_param_loader;
  import vera_pkg::*;
  import tb_ref_pkg::*;

  localparam int R = 2, NL = 3, DI = 5, DO = 4;
  localparam int NSH = R*DI + DO*R;
  localparam int NST = NL*DO + NL*R;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  ext_bus_if bus (.clk, .rst_n);
  int unsigned stalls;
  ext_mem_model #(.LAT(3), .STALL_PCT(30)) mem (
    .clk, .rst_n, .req_valid(bus.req_valid), .req_ready(bus.req_ready),
    .req_addr(bus.req_addr), .rsp_valid(bus.rsp_valid), .rsp_data(bus.rsp_data), .stalls
  );

  logic                 start_shared = 0, start_set = 0;
  logic [3:0]           set_idx = 0;
  logic                 busy, done, wr_en;
  psel_e                wr_sel;
  logic [15:0]          wr_addr;
  logic signed [PW-1:0] wr_data;

  param_loader #(.R(R), .NL(NL), .DI(DI), .DO(DO)) dut (
    .clk, .rst_n, .start_shared, .start_set, .set_idx, .busy, .done, .bus(bus.master),
    .wr_en, .wr_sel, .wr_addr, .wr_data
  );

  int checks = 0, failures = 0;
  int nwr = 0, ndone = 0;
  bit job_shared;
  int job_set;

  // expected write number n of the running job
  always @(posedge clk) begin
    if (wr_en) begin
      psel_e es; int ea; longint addr;
      if (job_shared) begin
        addr = n2a(nwr, 0, 1);
        es = (nwr < R*DI) ? SEL_A : SEL_BMAT;
        ea = (nwr < R*DI) ? nwr : nwr - R*DI;
      end else begin
        addr = n2a(nwr, job_set, 0);
        es = (nwr < NL*DO) ? SEL_BVEC : SEL_DVEC;
        ea = (nwr < NL*DO) ? nwr : nwr - NL*DO;
      end
      checks++;
      if (wr_sel != es || int'(wr_addr) != ea || wr_data != $signed(ext_byte(64'(addr)))) begin
        failures++;
        $display("FAIL: write %0d sel=%0d addr=%0d data=%0d want %0d/%0d/%0d", nwr, wr_sel, wr_addr, wr_data, es, ea, $signed(ext_byte(64'(addr))));
      end
      nwr <= nwr + 1;
    end
    if (done) ndone <= ndone + 1;
  end

  function automatic longint n2a(input int n, input int k, input bit sh);
    return sh ? longint'(n) : longint'(NSH + k*NST + n);
  endfunction

  task automatic run_job(input bit sh, input int k);
    int cycles;
    @(negedge clk);
    job_shared = sh; job_set = k; nwr = 0; ndone = 0;
    start_shared = sh; start_set = !sh; set_idx = 4'(k);
    @(negedge clk);
    // a second start while busy must be ignored
    start_shared = 0; start_set = 1; set_idx = 4'(k + 1);
    @(negedge clk);
    start_set = 0;
    cycles = 0;
    while (busy) begin @(negedge clk); cycles++; end
    checks++;
    if (nwr != (sh ? NSH : NST)) begin failures++; $display("FAIL: %0d writes want %0d", nwr, sh ? NSH : NST); end
    checks++;
    if (ndone != 1) begin failures++; $display("FAIL: %0d done pulses", ndone); end
    repeat (5) @(negedge clk);
    checks++;
    if (nwr != (sh ? NSH : NST)) begin failures++; $display("FAIL: writes after done"); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_job(1, 0);
    run_job(0, 0);
    run_job(0, 3);
    run_job(0, 10);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: bus back-pressure never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
