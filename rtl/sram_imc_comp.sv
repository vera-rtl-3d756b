// sram_imc_comp: the digital (SRAM) compensation unit of VeRA+.
//
// It stores the shared projections A_max (RANK x DIN_MAX) and B_max
// (DOUT_MAX x RANK) together with the currently active drift set: one vector
// b (DOUT_MAX entries) and one vector d (RANK entries) per layer. For a layer
// with din input and dout output channels it computes, in the 1x1 form,
//   comp[j] = ( b[layer][j] * sum_r B_max[j][r] * ( d[layer][r] * h[r] ) ) >>> SHIFT
//   h[r]    = sum_{i<din} A_max[r][i] * x[i]
// for j < dout and 0 for the unused rows, i.e. it uses the first din columns
// of A_max and the first dout rows of B_max, as the paper prescribes.
//
// Interface: a single write port (wr_*) fills the four parameter regions,
// selected by wr_sel (see vera_pkg::psel_e). A one-cycle `start` with layer,
// din, dout and the input vector x launches a computation; `out_valid` pulses
// with the result exactly three cycles later (stage 1: A_R X, stage 2: d ⊙,
// stage 3: B_R and b ⊙ and the shift). A new start may be issued every cycle.
// The formula, the slicing and the 1x1 form follow the paper. The three-stage
// pipeline, the 8-bit signed parameters, the shift and the saturation to YW
// bits are this design's choices; the parameters themselves are written here
// only by the loader, never trained on chip.
module sram_imc_comp
  import vera_pkg::*;
#(
  parameter int unsigned R   = RANK,
  parameter int unsigned NL  = NLAYERS,
  parameter int unsigned DI  = DIN_MAX,
  parameter int unsigned DO  = DOUT_MAX,
  parameter int unsigned SH  = SHIFT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // parameter write port
  input  logic                 wr_en,
  input  psel_e                wr_sel,
  input  logic [15:0]          wr_addr,
  input  logic signed [PW-1:0] wr_data,
  // compute request
  input  logic                 start,
  input  logic [7:0]           layer,
  input  logic [7:0]           din,
  input  logic [7:0]           dout,
  input  logic [AW-1:0]        x [DI],
  // result
  output logic                 out_valid,
  output logic signed [YW-1:0] comp [DO]
);

  localparam int unsigned HW = PW + AW + 1 + $clog2(DI);           // A_R X
  localparam int unsigned GW = HW + PW;                             // d ⊙ h
  localparam int unsigned SW = GW + PW + $clog2(R) + 1;             // B_R g
  localparam int unsigned OW = SW + PW;                             // b ⊙ s

  // ---- parameter storage ----------------------------------------------
  logic signed [PW-1:0] a_mem    [R*DI];
  logic signed [PW-1:0] bmat_mem [DO*R];
  logic signed [PW-1:0] bvec_mem [NL*DO];
  logic signed [PW-1:0] dvec_mem [NL*R];

  localparam int unsigned NA = R*DI, NB = DO*R, NBV = NL*DO, NDV = NL*R;
  int unsigned wa;
  assign wa = 32'(wr_addr);

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_sel)
        SEL_A:    if (wa < NA)  a_mem[wa[$clog2(NA)-1:0]]     <= wr_data;
        SEL_BMAT: if (wa < NB)  bmat_mem[wa[$clog2(NB)-1:0]]  <= wr_data;
        SEL_BVEC: if (wa < NBV) bvec_mem[wa[$clog2(NBV)-1:0]] <= wr_data;
        SEL_DVEC: if (wa < NDV) dvec_mem[wa[$clog2(NDV)-1:0]] <= wr_data;
      endcase
    end
  end

  // ---- stage 1: h = A_max[:, 0:din] x ------------------------------------
  logic signed [HW-1:0] h_c [R];
  always_comb begin
    for (int r = 0; r < R; r++) begin
      h_c[r] = '0;
      for (int i = 0; i < DI; i++)
        if (i < int'(din))
          h_c[r] += HW'(a_mem[r*DI + i]) * HW'($signed({1'b0, x[i]}));
    end
  end

  logic                 v1, v2, v3;
  logic [7:0]           layer1, layer2, dout1, dout2;
  logic signed [HW-1:0] h1 [R];
  logic signed [GW-1:0] g2 [R];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
    end else begin
      v1 <= start; v2 <= v1; v3 <= v2;
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      h1     <= h_c;
      layer1 <= layer;
      dout1  <= dout;
    end
    if (v1) begin
      layer2 <= layer1;
      dout2  <= dout1;
    end
  end

  // ---- stage 2: g = d[layer] ⊙ h ---------------------------------------
  always_ff @(posedge clk) begin
    if (v1)
      for (int r = 0; r < R; r++)
        g2[r] <= GW'(dvec_mem[32'(layer1)*R + r]) * GW'(h1[r]);
  end

  // ---- stage 3: comp = (b[layer] ⊙ (B_max[0:dout, :] g)) >>> SH ---------
  localparam logic signed [OW-1:0] YMAX = OW'({1'b0, {(YW-1){1'b1}}});
  localparam logic signed [OW-1:0] YMIN = -YMAX - OW'(1);

  logic signed [YW-1:0] comp_c [DO];
  always_comb begin
    for (int j = 0; j < DO; j++) begin
      logic signed [SW-1:0] s;
      logic signed [OW-1:0] o;
      s = '0;
      for (int r = 0; r < R; r++)
        s += SW'(bmat_mem[j*R + r]) * SW'(g2[r]);
      o = (OW'(bvec_mem[32'(layer2)*DO + j]) * OW'(s)) >>> SH;
      if (j >= int'(dout2))  comp_c[j] = '0;
      else if (o > YMAX)     comp_c[j] = YMAX[YW-1:0];
      else if (o < YMIN)     comp_c[j] = YMIN[YW-1:0];
      else                   comp_c[j] = o[YW-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (v2) comp <= comp_c;
  end

  assign out_valid = v3;

endmodule
