// vera_ctrl: layer-operation sequencer of the hybrid RRAM/SRAM datapath.
//
// One command computes one output vector of one layer:
//   y[j] = W(t)[layer][j] . X  +  comp[j]        for j < dout, 0 above.
// The controller accepts a command only while a complete compensation set
// is present (`params_ready`); otherwise the command waits, which is the
// stall seen while a new set is being loaded. Sequence, one state per
// cycle except WAIT:
//   IDLE  accept the command and issue the input-buffer read
//   GO    mask channels >= din to zero, start the RRAM array on all KK taps
//         and the compensation unit on the centre tap (the 1x1 branch)
//   WAIT  collect both results; the RRAM array is the slower one
//   WRITE add them, write the output buffer, pulse `cmd_done`
// Inputs of a 1x1 or fully connected layer are expected in the centre tap
// with the other taps zero. The split of W(t)X and the compensation between
// the two arrays and their sum follow the paper; the command format, the
// masking and the state sequence are this design's choices.
module vera_ctrl
  import vera_pkg::*;
#(
  parameter int unsigned DI = DIN_MAX,
  parameter int unsigned DO = DOUT_MAX,
  parameter int unsigned K  = KK,
  parameter int unsigned CT = CTAP
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  cmd_t                 cmd,
  output logic                 cmd_done,
  input  logic                 params_ready,
  output logic                 idle,
  // activation buffer
  output logic                 in_rd_en,
  output logic [3:0]           in_rd_idx,
  input  logic [AW-1:0]        in_rd_data [K*DI],
  output logic                 out_wr_en,
  output logic [3:0]           out_wr_idx,
  output logic signed [YW-1:0] out_wr_data [DO],
  // RRAM array
  output logic                 rr_start,
  output logic [7:0]           rr_layer,
  output logic [AW-1:0]        rr_x [K*DI],
  input  logic                 rr_done,
  input  logic signed [YW-1:0] rr_y [DO],
  // compensation unit
  output logic                 c_start,
  output logic [7:0]           c_layer,
  output logic [7:0]           c_din,
  output logic [7:0]           c_dout,
  output logic [AW-1:0]        c_x [DI],
  input  logic                 c_valid,
  input  logic signed [YW-1:0] c_y [DO]
);

  typedef enum logic [1:0] {S_IDLE, S_GO, S_WAIT, S_WRITE} state_e;
  state_e state;
  cmd_t   cur;
  logic   rr_got, c_got;
  logic signed [YW-1:0] rr_q [DO];
  logic signed [YW-1:0] c_q  [DO];

  assign idle      = (state == S_IDLE);
  assign cmd_ready = idle && params_ready;
  assign in_rd_en  = cmd_valid && cmd_ready;
  assign in_rd_idx = cmd.in_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cur    <= '0;
      rr_got <= 1'b0;
      c_got  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE:  if (cmd_valid && cmd_ready) begin
                   cur   <= cmd;
                   state <= S_GO;
                 end
        S_GO:    begin
                   rr_got <= 1'b0;
                   c_got  <= 1'b0;
                   state  <= S_WAIT;
                 end
        S_WAIT:  begin
                   if (rr_done) rr_got <= 1'b1;
                   if (c_valid) c_got  <= 1'b1;
                   if ((rr_got || rr_done) && (c_got || c_valid)) state <= S_WRITE;
                 end
        S_WRITE: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_WAIT && rr_done) rr_q <= rr_y;
    if (state == S_WAIT && c_valid) c_q  <= c_y;
  end

  // input masking: channels at or above din carry no data
  always_comb begin
    for (int t = 0; t < K; t++)
      for (int c = 0; c < DI; c++)
        rr_x[t*DI + c] = (c < int'(cur.din)) ? in_rd_data[t*DI + c] : '0;
    for (int c = 0; c < DI; c++)
      c_x[c] = rr_x[CT*DI + c];
  end

  assign rr_start = (state == S_GO);
  assign c_start  = (state == S_GO);
  assign rr_layer = cur.layer;
  assign c_layer  = cur.layer;
  assign c_din    = cur.din;
  assign c_dout   = cur.dout;

  always_comb begin
    for (int j = 0; j < DO; j++)
      out_wr_data[j] = (j < int'(cur.dout)) ? rr_q[j] + c_q[j] : '0;
  end
  assign out_wr_en  = (state == S_WRITE);
  assign out_wr_idx = cur.out_idx;
  assign cmd_done   = (state == S_WRITE);

  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid && !cmd_ready |=> cmd_valid)
    else $error("vera_ctrl: command withdrawn before it was accepted");

endmodule
