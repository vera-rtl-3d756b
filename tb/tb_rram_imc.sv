// tb_rram_imc: self-checking test of the RRAM array model at a reduced size.
// Random signed weights are programmed row by row, random activation vectors
// are applied to each layer, and the result vector is compared with an
// integer dot product computed here. `done` must come DO+1 cycles after
// `start`, and a start while busy must be ignored.
module tb_rram_imc;
  import vera_pkg::*;

  localparam int NL = 3, DI = 4, DO = 5, K = 3;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic                 prog_en = 0;
  logic [15:0]          prog_row = 0;
  logic signed [WW-1:0] prog_data [K*DI];
  logic                 start = 0;
  logic [7:0]           layer = 0;
  logic [AW-1:0]        x [K*DI];
  logic                 busy, done;
  logic signed [YW-1:0] y [DO];

  rram_imc #(.NL(NL), .DI(DI), .DO(DO), .K(K)) dut (.*);

  int w_m [NL*DO][K*DI];
  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xs [K*DI];
    int lat;
    for (int k = 0; k < K*DI; k++) begin prog_data[k] = '0; x[k] = '0; end
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NL*DO; r++) begin
      @(negedge clk);
      prog_en = 1; prog_row = 16'(r);
      for (int k = 0; k < K*DI; k++) begin
        prog_data[k] = WW'($urandom);
        w_m[r][k] = int'(prog_data[k]);
      end
    end
    @(negedge clk); prog_en = 0;
    for (int n = 0; n < 12; n++) begin
      int l;
      l = $urandom_range(NL-1);
      @(negedge clk);
      start = 1; layer = 8'(l);
      for (int k = 0; k < K*DI; k++) begin
        x[k] = (n == 0) ? 4'hf : AW'($urandom);
        xs[k] = int'(x[k]);
      end
      @(negedge clk);
      start = 0;
      lat = 1;
      // a second start while busy with other data must be ignored
      start = 1; layer = 8'((l + 1) % NL);
      for (int k = 0; k < K*DI; k++) x[k] = ~x[k];
      @(negedge clk); start = 0;
      lat++;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != DO + 1) begin failures++; $display("FAIL: latency %0d want %0d", lat, DO + 1); end
      for (int o = 0; o < DO; o++) begin
        int e;
        e = 0;
        for (int k = 0; k < K*DI; k++) e += w_m[l*DO + o][k] * xs[k];
        checks++;
        if (y[o] != e) begin failures++; $display("FAIL: layer %0d y[%0d]=%0d want %0d", l, o, y[o], e); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
