// act_buffer: activation buffer shared by the RRAM and SRAM compute arrays.
//
// Two independent simple-dual-port stores. The input side holds DEPTH
// im2col activation vectors (K taps x DI channels of AW-bit activations);
// the host writes whole vectors and the layer controller reads one, which
// then feeds both the RRAM array (all taps) and the compensation unit (the
// centre tap). The output side holds DEPTH result vectors of DO signed
// YW-bit values, written by the controller and read by the host.
//
// Timing: writes take effect at the clock edge; reads are registered, the
// data of an index presented in cycle n is valid in cycle n+1. A read and a
// write of the same entry in one cycle return the old contents.
// The paper shows a buffer between the two arrays but gives neither its
// organisation nor its size; the split into an input and an output store,
// the depth of 16 and the registered reads are this design's choices.
module act_buffer
  import vera_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned DI    = DIN_MAX,
  parameter int unsigned DO    = DOUT_MAX,
  parameter int unsigned K     = KK
) (
  input  logic                 clk,
  // input activations: host write, controller read
  input  logic                 in_wr_en,
  input  logic [3:0]           in_wr_idx,
  input  logic [AW-1:0]        in_wr_data [K*DI],
  input  logic                 in_rd_en,
  input  logic [3:0]           in_rd_idx,
  output logic [AW-1:0]        in_rd_data [K*DI],
  // results: controller write, host read
  input  logic                 out_wr_en,
  input  logic [3:0]           out_wr_idx,
  input  logic signed [YW-1:0] out_wr_data [DO],
  input  logic                 out_rd_en,
  input  logic [3:0]           out_rd_idx,
  output logic signed [YW-1:0] out_rd_data [DO]
);

  localparam int unsigned IWB = K*DI*AW;
  localparam int unsigned OWB = DO*YW;

  logic [IWB-1:0] in_mem  [DEPTH];
  logic [OWB-1:0] out_mem [DEPTH];
  logic [IWB-1:0] in_q;
  logic [OWB-1:0] out_q;

  always_ff @(posedge clk) begin
    if (in_wr_en && 32'(in_wr_idx) < DEPTH)
      for (int k = 0; k < K*DI; k++) in_mem[in_wr_idx][k*AW +: AW] <= in_wr_data[k];
    if (in_rd_en)
      in_q <= (32'(in_rd_idx) < DEPTH) ? in_mem[in_rd_idx] : '0;
  end

  always_ff @(posedge clk) begin
    if (out_wr_en && 32'(out_wr_idx) < DEPTH)
      for (int j = 0; j < DO; j++) out_mem[out_wr_idx][j*YW +: YW] <= out_wr_data[j];
    if (out_rd_en)
      out_q <= (32'(out_rd_idx) < DEPTH) ? out_mem[out_rd_idx] : '0;
  end

  always_comb begin
    for (int k = 0; k < K*DI; k++) in_rd_data[k]  = in_q[k*AW +: AW];
    for (int j = 0; j < DO; j++)   out_rd_data[j] = $signed(out_q[j*YW +: YW]);
  end

endmodule
