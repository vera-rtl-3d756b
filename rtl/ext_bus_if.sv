// ext_bus_if: read-only bus from the chip to the external parameter memory.
//
// A request carries one byte address (req_addr) and is transferred in a cycle
// where req_valid and req_ready are both high. Each accepted request is
// answered by exactly one rsp_valid cycle carrying one byte (rsp_data), in
// request order, at any later cycle; several requests may be outstanding.
// The requester may not withdraw or change a request that is waiting for
// req_ready (asserted below). The bus protocol is this design's choice; the
// paper only draws a bus between the external memory and both arrays.
interface ext_bus_if
  import vera_pkg::*;
(
  input logic clk,
  input logic rst_n
);
  logic           req_valid;
  logic           req_ready;
  logic [EAW-1:0] req_addr;
  logic           rsp_valid;
  logic [7:0]     rsp_data;

  modport master (output req_valid, req_addr, input req_ready, rsp_valid, rsp_data);
  modport slave  (input req_valid, req_addr, output req_ready, rsp_valid, rsp_data);

  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid && !req_ready |=> req_valid && $stable(req_addr))
    else $error("ext_bus_if: request changed while waiting");
endinterface
