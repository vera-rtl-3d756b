// param_loader: fetches compensation parameters from external memory into
// the SRAM compensation unit.
//
// Two kinds of job. `start_shared` copies the shared projections A_max and
// B_max, done once after power-up because they serve every layer and every
// drift level. `start_set` with `set_idx` copies set k: the b vectors of all
// layers followed by their d vectors. The external memory holds one signed
// byte per parameter in the order of vera_pkg: A_max, B_max, then the sets
// one after another, so set k begins at shared_words + k*set_words.
//
// The loader issues byte reads back to back as long as the bus accepts them
// (several may be outstanding) and turns every response, in order, into one
// write of the compensation unit's parameter port, so a job of N bytes takes
// about N cycles plus the memory latency. `busy` is high from the start
// cycle until the last write; `done` pulses in the cycle of that write.
// Starts while busy are ignored. Loading the parameters from ROM/Flash on
// demand follows the paper; the layout, the byte bus and the timing are this
// design's choices.
module param_loader
  import vera_pkg::*;
#(
  parameter int unsigned R    = RANK,
  parameter int unsigned NL   = NLAYERS,
  parameter int unsigned DI   = DIN_MAX,
  parameter int unsigned DO   = DOUT_MAX,
  parameter logic [EAW-1:0] BASE = '0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start_shared,
  input  logic                 start_set,
  input  logic [3:0]           set_idx,
  output logic                 busy,
  output logic                 done,
  ext_bus_if.master            bus,
  // write port of sram_imc_comp
  output logic                 wr_en,
  output psel_e                wr_sel,
  output logic [15:0]          wr_addr,
  output logic signed [PW-1:0] wr_data
);

  localparam int unsigned NSH = shared_words(R, DI, DO);
  localparam int unsigned NST = set_words(R, NL, DO);

  logic           job_shared;
  logic [15:0]    total, n_req, n_rsp;
  logic [EAW-1:0] base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      job_shared <= 1'b0;
      total      <= '0;
      n_req      <= '0;
      n_rsp      <= '0;
      base       <= '0;
    end else if (!busy) begin
      if (start_shared || start_set) begin
        busy       <= 1'b1;
        job_shared <= start_shared;
        total      <= start_shared ? 16'(NSH) : 16'(NST);
        base       <= start_shared ? BASE : BASE + EAW'(NSH) + EAW'(set_idx) * EAW'(NST);
        n_req      <= '0;
        n_rsp      <= '0;
      end
    end else begin
      if (bus.req_valid && bus.req_ready) n_req <= n_req + 1'b1;
      if (bus.rsp_valid) begin
        n_rsp <= n_rsp + 1'b1;
        if (n_rsp == total - 1'b1) busy <= 1'b0;
      end
    end
  end

  assign bus.req_valid = busy && (n_req < total);
  assign bus.req_addr  = base + EAW'(n_req);

  // map the response index onto a parameter region
  always_comb begin
    wr_en   = busy && bus.rsp_valid;
    wr_data = $signed(bus.rsp_data);
    if (job_shared) begin
      if (32'(n_rsp) < R*DI) begin wr_sel = SEL_A;    wr_addr = n_rsp; end
      else                   begin wr_sel = SEL_BMAT; wr_addr = n_rsp - 16'(R*DI); end
    end else begin
      if (32'(n_rsp) < NL*DO) begin wr_sel = SEL_BVEC; wr_addr = n_rsp; end
      else                    begin wr_sel = SEL_DVEC; wr_addr = n_rsp - 16'(NL*DO); end
    end
  end

  assign done = wr_en && (n_rsp == total - 1'b1);

  assert property (@(posedge clk) disable iff (!rst_n) bus.rsp_valid |-> busy)
    else $error("param_loader: response without a job");

endmodule
