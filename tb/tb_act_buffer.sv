// tb_act_buffer: self-checking test of the activation buffer at its default
// size. Random vectors are written to every entry of both stores, then read
// back in random order; read data must appear exactly one cycle after the
// index and must hold while no new read is issued.
module tb_act_buffer;
  import vera_pkg::*;

  localparam int DEPTH = 16, DI = DIN_MAX, DO = DOUT_MAX, K = KK;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                 in_wr_en = 0, in_rd_en = 0, out_wr_en = 0, out_rd_en = 0;
  logic [3:0]           in_wr_idx = 0, in_rd_idx = 0, out_wr_idx = 0, out_rd_idx = 0;
  logic [AW-1:0]        in_wr_data [K*DI];
  logic [AW-1:0]        in_rd_data [K*DI];
  logic signed [YW-1:0] out_wr_data [DO];
  logic signed [YW-1:0] out_rd_data [DO];

  act_buffer #(.DEPTH(DEPTH), .DI(DI), .DO(DO), .K(K)) dut (.*);

  logic [AW-1:0] in_m  [DEPTH][K*DI];
  logic [YW-1:0] out_m [DEPTH][DO];
  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_in(input int e);
    int bad;
    bad = 0;
    for (int k = 0; k < K*DI; k++) if (in_rd_data[k] != in_m[e][k]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL: input entry %0d, %0d values wrong", e, bad); end
  endtask

  task automatic check_out(input int e);
    int bad;
    bad = 0;
    for (int j = 0; j < DO; j++) if (out_rd_data[j] != $signed(out_m[e][j])) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL: output entry %0d, %0d values wrong", e, bad); end
  endtask

  initial begin
    for (int k = 0; k < K*DI; k++) in_wr_data[k] = '0;
    for (int j = 0; j < DO; j++) out_wr_data[j] = '0;
    for (int e = 0; e < DEPTH; e++) begin
      @(negedge clk);
      in_wr_en = 1; in_wr_idx = 4'(e);
      out_wr_en = 1; out_wr_idx = 4'(DEPTH - 1 - e);
      for (int k = 0; k < K*DI; k++) begin in_wr_data[k] = AW'($urandom); in_m[e][k] = in_wr_data[k]; end
      for (int j = 0; j < DO; j++) begin out_wr_data[j] = $urandom; out_m[DEPTH-1-e][j] = out_wr_data[j]; end
    end
    @(negedge clk);
    in_wr_en = 0; out_wr_en = 0;
    for (int n = 0; n < 40; n++) begin
      int a, b;
      a = $urandom_range(DEPTH-1); b = $urandom_range(DEPTH-1);
      @(negedge clk);
      in_rd_en = 1; in_rd_idx = 4'(a);
      out_rd_en = 1; out_rd_idx = 4'(b);
      @(negedge clk);
      in_rd_en = 0; out_rd_en = 0;
      in_rd_idx = 4'(b); out_rd_idx = 4'(a);   // not enabled: data must hold
      check_in(a); check_out(b);
      @(negedge clk);
      check_in(a); check_out(b);
    end
    // overwrite one entry and read it back
    @(negedge clk);
    in_wr_en = 1; in_wr_idx = 4'd3;
    for (int k = 0; k < K*DI; k++) begin in_wr_data[k] = AW'(k); in_m[3][k] = AW'(k); end
    @(negedge clk);
    in_wr_en = 0; in_rd_en = 1; in_rd_idx = 4'd3;
    @(negedge clk);
    in_rd_en = 0;
    check_in(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
