// vera_plus_top: hybrid RRAM/SRAM in-memory-compute system with VeRA+ drift
// compensation.
//
// The backbone weights of the network live in an RRAM array that is
// programmed once and then left alone while its conductances drift. A small
// digital unit adds, per layer, the correction b_k ⊙ (B_R (d_k ⊙ (A_R X)))
// whose shared projections A_R, B_R and per-layer vectors b_k, d_k were
// trained offline for drift level k. Only one set k is held on chip; all
// sets sit in an external ROM/Flash reached over a byte bus.
//
// Blocks: drift_timer counts seconds since programming; set_scheduler
// compares that age with the table of drift points and asks for a new set
// when the age crosses one; param_loader fetches A_R/B_R once (host
// `shared_load`) and each requested set over the external bus into
// sram_imc_comp; act_buffer holds input and output vectors; vera_ctrl
// sequences one layer operation per command through rram_imc (all taps) and
// sram_imc_comp (centre tap) and stores their sum. A set reload is started
// only between commands, and commands wait (stall) until it has finished.
//
// Host interface: program the RRAM rows, write the drift-point table and
// num_sets, pulse shared_load, optionally preload the timer, write input
// vectors, issue cmd_t commands (valid/ready, cmd_done pulse) and read the
// results. The architecture (RRAM array, SRAM compensation, external memory,
// bus and buffer) is the paper's; the interfaces, the handshakes and the
// ordering rules are this design's.
module vera_plus_top
  import vera_pkg::*;
#(
  parameter int unsigned R           = RANK,
  parameter int unsigned NS          = NSETS,
  parameter int unsigned NL          = NLAYERS,
  parameter int unsigned DI          = DIN_MAX,
  parameter int unsigned DO          = DOUT_MAX,
  parameter int unsigned K           = KK,
  parameter int unsigned CT          = CTAP,
  parameter int unsigned DEPTH       = 16,
  parameter int unsigned CYC_PER_SEC = 100_000_000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // elapsed time
  input  logic                 time_load_en,
  input  logic [TW-1:0]        time_load_val,
  output logic [TW-1:0]        now,
  // drift-point table
  input  logic                 tbl_wr_en,
  input  logic [3:0]           tbl_idx,
  input  logic [TW-1:0]        tbl_val,
  input  logic [3:0]           num_sets,
  // parameter loading
  input  logic                 shared_load,
  output logic                 loader_busy,
  output logic                 shared_ok,
  output logic [3:0]           cur_set,
  output logic                 cur_valid,
  // external memory bus
  output logic                 ext_req_valid,
  input  logic                 ext_req_ready,
  output logic [EAW-1:0]       ext_req_addr,
  input  logic                 ext_rsp_valid,
  input  logic [7:0]           ext_rsp_data,
  // RRAM programming
  input  logic                 rram_prog_en,
  input  logic [15:0]          rram_prog_row,
  input  logic signed [WW-1:0] rram_prog_data [K*DI],
  // input activations
  input  logic                 in_wr_en,
  input  logic [3:0]           in_wr_idx,
  input  logic [AW-1:0]        in_wr_data [K*DI],
  // layer commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  cmd_t                 cmd,
  output logic                 cmd_done,
  // results
  input  logic                 out_rd_en,
  input  logic [3:0]           out_rd_idx,
  output logic signed [YW-1:0] out_rd_data [DO]
);

  // ---- elapsed time and set selection ---------------------------------
  logic sec_tick;
  drift_timer #(.CYC_PER_SEC(CYC_PER_SEC)) u_timer (
    .clk, .rst_n, .load_en(time_load_en), .load_val(time_load_val),
    .now, .sec_tick
  );

  logic       switch_req, set_start, ld_done, set_job;
  logic [3:0] target_set;
  set_scheduler #(.NS(NS)) u_sched (
    .clk, .rst_n, .tbl_wr_en, .tbl_idx, .tbl_val, .num_sets, .now,
    .shared_ok, .load_start(set_start), .load_done(ld_done && set_job),
    .switch_req, .target_set, .cur_set, .cur_valid
  );

  // ---- parameter loader and bus ------------------------------------------
  ext_bus_if bus (.clk, .rst_n);
  assign ext_req_valid = bus.req_valid;
  assign ext_req_addr  = bus.req_addr;
  assign bus.req_ready = ext_req_ready;
  assign bus.rsp_valid = ext_rsp_valid;
  assign bus.rsp_data  = ext_rsp_data;

  logic                 ctrl_idle, sh_start;
  logic                 p_wr_en;
  psel_e                p_wr_sel;
  logic [15:0]          p_wr_addr;
  logic signed [PW-1:0] p_wr_data;

  // a set is fetched only between layer operations
  assign sh_start  = shared_load && !loader_busy;
  assign set_start = switch_req && ctrl_idle && !loader_busy && !sh_start;

  param_loader #(.R(R), .NL(NL), .DI(DI), .DO(DO)) u_loader (
    .clk, .rst_n, .start_shared(sh_start), .start_set(set_start), .set_idx(target_set),
    .busy(loader_busy), .done(ld_done), .bus(bus.master),
    .wr_en(p_wr_en), .wr_sel(p_wr_sel), .wr_addr(p_wr_addr), .wr_data(p_wr_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_job   <= 1'b0;
      shared_ok <= 1'b0;
    end else begin
      if (sh_start)  begin set_job <= 1'b0; shared_ok <= 1'b0; end
      if (set_start) set_job <= 1'b1;
      if (ld_done && !set_job) shared_ok <= 1'b1;
    end
  end

  // ---- datapath --------------------------------------------------------
  logic                 in_rd_en, out_wr_en;
  logic [3:0]           in_rd_idx, out_wr_idx;
  logic [AW-1:0]        in_rd_data [K*DI];
  logic signed [YW-1:0] out_wr_data [DO];

  act_buffer #(.DEPTH(DEPTH), .DI(DI), .DO(DO), .K(K)) u_buf (
    .clk, .in_wr_en, .in_wr_idx, .in_wr_data, .in_rd_en, .in_rd_idx, .in_rd_data,
    .out_wr_en, .out_wr_idx, .out_wr_data, .out_rd_en, .out_rd_idx, .out_rd_data
  );

  logic                 rr_start, rr_busy, rr_done;
  logic [7:0]           rr_layer;
  logic [AW-1:0]        rr_x [K*DI];
  logic signed [YW-1:0] rr_y [DO];

  rram_imc #(.NL(NL), .DI(DI), .DO(DO), .K(K)) u_rram (
    .clk, .rst_n, .prog_en(rram_prog_en), .prog_row(rram_prog_row),
    .prog_data(rram_prog_data), .start(rr_start), .layer(rr_layer), .x(rr_x),
    .busy(rr_busy), .done(rr_done), .y(rr_y)
  );

  logic                 c_start, c_valid;
  logic [7:0]           c_layer, c_din, c_dout;
  logic [AW-1:0]        c_x [DI];
  logic signed [YW-1:0] c_y [DO];

  sram_imc_comp #(.R(R), .NL(NL), .DI(DI), .DO(DO)) u_comp (
    .clk, .rst_n, .wr_en(p_wr_en), .wr_sel(p_wr_sel), .wr_addr(p_wr_addr),
    .wr_data(p_wr_data), .start(c_start), .layer(c_layer), .din(c_din),
    .dout(c_dout), .x(c_x), .out_valid(c_valid), .comp(c_y)
  );

  logic params_ready;
  assign params_ready = cur_valid && !switch_req && !loader_busy;

  vera_ctrl #(.DI(DI), .DO(DO), .K(K), .CT(CT)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_done, .params_ready,
    .idle(ctrl_idle), .in_rd_en, .in_rd_idx, .in_rd_data, .out_wr_en, .out_wr_idx,
    .out_wr_data, .rr_start, .rr_layer, .rr_x, .rr_done, .rr_y, .c_start,
    .c_layer, .c_din, .c_dout, .c_x, .c_valid, .c_y
  );

  // the RRAM array is never started while still busy
  assert property (@(posedge clk) disable iff (!rst_n) rr_start |-> !rr_busy);
  // the compensation set is never rewritten under a running operation
  assert property (@(posedge clk) disable iff (!rst_n) p_wr_en |-> ctrl_idle);

endmodule
