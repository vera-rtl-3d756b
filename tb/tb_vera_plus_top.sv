// tb_vera_plus_top: end-to-end test of vera_plus_top at a reduced size
// (rank 2, 4 sets, 3 layers, 8 input and 6 output channels, 3x3 taps) with
// a fast timer (8 cycles per second) so that drift points are crossed by
// the running timer as well as by a host preload. Stimulus and checks are in
// tb_top_driver; the external memory is ext_mem_model.
module tb_vera_plus_top;
  import vera_pkg::*;

  localparam int R = 2, NS = 4, NL = 3, DI = 8, DO = 6, K = 9, CT = 4, CPS = 8;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                 rst_n, time_load_en, tbl_wr_en, shared_load, loader_busy, shared_ok;
  logic                 cur_valid, rram_prog_en, in_wr_en, cmd_valid, cmd_ready, cmd_done, out_rd_en;
  logic [TW-1:0]        time_load_val, now, tbl_val;
  logic [3:0]           tbl_idx, num_sets, cur_set, in_wr_idx, out_rd_idx;
  logic [15:0]          rram_prog_row;
  logic signed [WW-1:0] rram_prog_data [K*DI];
  logic [AW-1:0]        in_wr_data [K*DI];
  cmd_t                 cmd;
  logic signed [YW-1:0] out_rd_data [DO];
  logic                 ext_req_valid, ext_req_ready, ext_rsp_valid;
  logic [EAW-1:0]       ext_req_addr;
  logic [7:0]           ext_rsp_data;
  int unsigned          bus_stalls;

  vera_plus_top #(.R(R), .NS(NS), .NL(NL), .DI(DI), .DO(DO), .K(K), .CT(CT), .CYC_PER_SEC(CPS)) dut (.*);

  ext_mem_model #(.LAT(2), .STALL_PCT(25)) mem (
    .clk, .rst_n, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_addr(ext_req_addr),
    .rsp_valid(ext_rsp_valid), .rsp_data(ext_rsp_data), .stalls(bus_stalls)
  );

  tb_top_driver #(.R(R), .NS(NS), .NL(NL), .DI(DI), .DO(DO), .K(K), .CT(CT), .CPS(CPS),
                  .NCMD(40), .TP_MUL(10), .TIMER_RUNS(1)) drv (.*);

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
endmodule
