// ext_mem_model: behavioural stand-in for the external ROM/Flash that holds
// all VeRA+ parameter sets. Read-only, one byte per address, contents given
// by tb_ref_pkg::ext_byte. It accepts a request when req_ready is high
// (ready is withheld pseudo-randomly about one cycle in STALL_PCT percent)
// and answers LAT cycles later, in order, with any number of requests in
// flight. `stalls` counts the cycles a request waited for ready.
module ext_mem_model
  import vera_pkg::*;
#(
  parameter int unsigned LAT       = 2,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  output logic           req_ready,
  input  logic [EAW-1:0] req_addr,
  output logic           rsp_valid,
  output logic [7:0]     rsp_data,
  output int unsigned    stalls
);
  logic       v_pipe [LAT];
  logic [7:0] d_pipe [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0;
      stalls    <= 0;
      for (int i = 0; i < LAT; i++) begin v_pipe[i] <= 1'b0; d_pipe[i] <= '0; end
    end else begin
      req_ready <= ($urandom_range(99) >= STALL_PCT);
      if (req_valid && !req_ready) stalls <= stalls + 1;
      v_pipe[0] <= req_valid && req_ready;
      d_pipe[0] <= tb_ref_pkg::ext_byte(64'(req_addr));
      for (int i = 1; i < LAT; i++) begin
        v_pipe[i] <= v_pipe[i-1];
        d_pipe[i] <= d_pipe[i-1];
      end
    end
  end

  assign rsp_valid = v_pipe[LAT-1];
  assign rsp_data  = d_pipe[LAT-1];
endmodule
