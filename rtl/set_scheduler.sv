// set_scheduler: chooses which pre-trained VeRA+ set (b_k, d_k) is active.
//
// Offline scheduling yields drift points t_0 < t_1 < ... < t_{n-1} (seconds
// after programming); set k is valid for t in [t_k, t_{k+1}). The host
// writes these points into a table of NS entries and tells the scheduler how
// many are in use (`num_sets`). Every cycle the scheduler counts the used
// points that are <= `now`; the target set is that count minus one (set 0
// before t_0). When the target differs from the set held in the SRAM unit,
// or none is held yet, `switch_req` rises; the surrounding logic answers
// with `load_start` when the loader begins to fetch the target set, and
// `load_done` when it has finished. Between the two `cur_valid` is low so no
// computation uses a half-written set.
// Selecting a set from the elapsed time and the count of 11 sets follow the
// paper; the table, the count-based comparison and the handshake are this
// design's choices. The table must be sorted ascending (asserted).
module set_scheduler
  import vera_pkg::*;
#(
  parameter int unsigned NS = NSETS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // drift-point table
  input  logic                    tbl_wr_en,
  input  logic [3:0]              tbl_idx,
  input  logic [TW-1:0]           tbl_val,
  input  logic [3:0]              num_sets,
  // elapsed time
  input  logic [TW-1:0]           now,
  // loader handshake
  input  logic                    shared_ok,
  input  logic                    load_start,
  input  logic                    load_done,
  output logic                    switch_req,
  output logic [3:0]              target_set,
  output logic [3:0]              cur_set,
  output logic                    cur_valid
);

  logic [TW-1:0] tbl [NS];
  logic          pending;
  logic [3:0]    pend_set;

  always_ff @(posedge clk) begin
    if (tbl_wr_en && 32'(tbl_idx) < NS) tbl[tbl_idx] <= tbl_val;
  end

  // number of drift points already passed
  logic [4:0] cnt;
  always_comb begin
    cnt = '0;
    for (int k = 0; k < NS; k++)
      if (k < int'(num_sets) && tbl[k] <= now) cnt = cnt + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) target_set <= '0;
    else        target_set <= (cnt == 0) ? 4'd0 : 4'(cnt - 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending   <= 1'b0;
      pend_set  <= '0;
      cur_set   <= '0;
      cur_valid <= 1'b0;
    end else begin
      if (load_start) begin
        pending   <= 1'b1;
        pend_set  <= target_set;
        cur_valid <= 1'b0;
      end else if (load_done && pending) begin
        pending   <= 1'b0;
        cur_set   <= pend_set;
        cur_valid <= 1'b1;
      end
    end
  end

  assign switch_req = shared_ok && !pending && (!cur_valid || target_set != cur_set);

  // drift points in use must be ascending
  always_ff @(posedge clk) begin
    if (cur_valid)
      for (int k = 1; k < NS; k++)
        if (k < int'(num_sets))
          assert (tbl[k-1] < tbl[k]) else $error("drift points not ascending at %0d", k);
  end
  // a loader start only answers a request
  assert property (@(posedge clk) disable iff (!rst_n) load_start |-> switch_req);

endmodule
