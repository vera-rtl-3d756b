// tb_resnet20_workload: the ResNet-20 workload on vera_plus_top at its
// default size (rank 1, 11 drift sets, 20 layers). All 20 layers are
// programmed with random 4-bit weights; for each of the 11 drift intervals
// (drift points 1 s, 7 s, 49 s, ... up to about 9 years) the weights are
// nudged to stand in for drift, the age is set inside the interval, and one
// output pixel of every layer is computed and checked, including the
// 64->100 classifier of CIFAR-100. The set in use must match the interval.
module tb_resnet20_workload;
  import vera_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                 rst_n, time_load_en, tbl_wr_en, shared_load, loader_busy, shared_ok;
  logic                 cur_valid, rram_prog_en, in_wr_en, cmd_valid, cmd_ready, cmd_done, out_rd_en;
  logic [TW-1:0]        time_load_val, now, tbl_val;
  logic [3:0]           tbl_idx, num_sets, cur_set, in_wr_idx, out_rd_idx;
  logic [15:0]          rram_prog_row;
  logic signed [WW-1:0] rram_prog_data [KK*DIN_MAX];
  logic [AW-1:0]        in_wr_data [KK*DIN_MAX];
  cmd_t                 cmd;
  logic signed [YW-1:0] out_rd_data [DOUT_MAX];
  logic                 ext_req_valid, ext_req_ready, ext_rsp_valid;
  logic [EAW-1:0]       ext_req_addr;
  logic [7:0]           ext_rsp_data;
  int unsigned          bus_stalls;

  vera_plus_top dut (.*);

  ext_mem_model #(.LAT(2), .STALL_PCT(10)) mem (
    .clk, .rst_n, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_addr(ext_req_addr),
    .rsp_valid(ext_rsp_valid), .rsp_data(ext_rsp_data), .stalls(bus_stalls)
  );

  tb_top_driver #(.TP_MUL(7), .RESNET20(1)) drv (.*);

  initial begin
    repeat (500000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
endmodule
