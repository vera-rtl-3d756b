// tb_resnet20_rank6: the ResNet-20 workload with the rank-6 variant of the
// compensation (A_max of 6 x 64, B_max of 100 x 6, six d entries per layer),
// otherwise at the default size: 11 drift sets, all 20 layers, one output
// pixel per layer inside every drift interval, every value checked.
module tb_resnet20_rank6;
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

  vera_plus_top #(.R(6)) dut (.*);

  ext_mem_model #(.LAT(2), .STALL_PCT(10)) mem (
    .clk, .rst_n, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_addr(ext_req_addr),
    .rsp_valid(ext_rsp_valid), .rsp_data(ext_rsp_data), .stalls(bus_stalls)
  );

  tb_top_driver #(.R(6), .TP_MUL(7), .RESNET20(1)) drv (.*);

  initial begin
    repeat (500000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
endmodule
