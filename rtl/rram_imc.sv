// rram_imc: behavioural model of the RRAM in-memory-compute array (not
// synthesizable logic in the real chip: the multiply-accumulate happens in
// analog, as currents summed on bit lines and digitised by ADCs).
//
// The array holds the backbone weights of every layer, one row of KK*DI
// signed WW-bit weights per (layer, output channel), row index
// layer*DO + o. In the real part the conductances are programmed once and
// then drift; the model simply stores whatever is written through the
// programming port, so a testbench injects drift by writing drifted weights
// W(t) in place of W0. Nothing in the design rewrites the array after
// deployment.
//
// Interface and timing: a one-cycle `start` with `layer` and the im2col
// input vector x (KK taps x DI channels, tap-major: x[t*DI + c]) starts a
// matrix-vector product. The model reads one row per cycle, as a column-
// serial ADC readout would, and pulses `done` with the complete vector
// y[o] = sum_k W[layer][o][k] * x[k] DO+1 cycles after start. A start while
// busy is ignored. The storage organisation and the readout timing are this
// model's assumptions; the paper gives only the function of the array.
module rram_imc
  import vera_pkg::*;
#(
  parameter int unsigned NL = NLAYERS,
  parameter int unsigned DI = DIN_MAX,
  parameter int unsigned DO = DOUT_MAX,
  parameter int unsigned K  = KK
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // one-time programming (and drift injection in simulation)
  input  logic                 prog_en,
  input  logic [15:0]          prog_row,
  input  logic signed [WW-1:0] prog_data [K*DI],
  // compute
  input  logic                 start,
  input  logic [7:0]           layer,
  input  logic [AW-1:0]        x [K*DI],
  output logic                 busy,
  output logic                 done,
  output logic signed [YW-1:0] y [DO]
);

  localparam int unsigned NROWS = NL*DO;
  localparam int unsigned RW    = K*DI*WW;

  localparam int unsigned RAW = $clog2(NROWS);
  logic [RW-1:0] cells [NROWS];

  always_ff @(posedge clk) begin
    if (prog_en && 32'(prog_row) < NROWS) begin
      for (int k = 0; k < K*DI; k++)
        cells[prog_row[$clog2(NROWS)-1:0]][k*WW +: WW] <= prog_data[k];
    end
  end

  logic [AW-1:0] xr [K*DI];
  logic [7:0]    layer_r;
  logic [$clog2(DO+1)-1:0] row;

  // one bit-line column (output channel) per cycle
  logic signed [YW-1:0] dot;
  always_comb begin
    logic [RW-1:0] w;
    w   = cells[RAW'(32'(layer_r)*DO + 32'(row))];
    dot = '0;
    for (int k = 0; k < K*DI; k++)
      dot += YW'($signed(w[k*WW +: WW])) * YW'($signed({1'b0, xr[k]}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      row  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          row     <= '0;
        end
      end else begin
        if (32'(row) == DO-1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          row <= row + 1'b1;
        end
      end
    end
  end

  // captured operands and the result vector carry no reset
  always_ff @(posedge clk) begin
    if (!busy && start) begin
      xr      <= x;
      layer_r <= layer;
    end
    if (busy) y[row] <= dot;
  end

endmodule
