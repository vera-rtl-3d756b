// drift_timer: elapsed-time counter used to pick the drift compensation set.
//
// Counts seconds since the RRAM array was programmed. A prescaler divides
// the clock by CYC_PER_SEC; `sec_tick` pulses once per second and `now`
// (seconds, TW bits) saturates at its maximum instead of wrapping, so a very
// old part keeps using the last set. The host may overwrite the count at
// any time with `load_en`/`load_val` (for instance after a power cycle, when
// it knows the real age of the array from a clock of its own); a load also
// restarts the prescaler.
// The paper only says that a lightweight timer or the host supplies the
// elapsed time; the prescaler, the saturation and the load port are this
// design's choices, and the 100 MHz default clock is an assumption.
module drift_timer
  import vera_pkg::*;
#(
  parameter int unsigned CYC_PER_SEC = 100_000_000
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load_en,
  input  logic [TW-1:0] load_val,
  output logic [TW-1:0] now,
  output logic          sec_tick
);

  localparam int unsigned PW_ = (CYC_PER_SEC > 1) ? $clog2(CYC_PER_SEC) : 1;
  logic [PW_-1:0] pre;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre      <= '0;
      now      <= '0;
      sec_tick <= 1'b0;
    end else begin
      sec_tick <= 1'b0;
      if (load_en) begin
        pre <= '0;
        now <= load_val;
      end else if (32'(pre) == CYC_PER_SEC-1) begin
        pre      <= '0;
        sec_tick <= 1'b1;
        if (now != '1) now <= now + 1'b1;
      end else begin
        pre <= pre + 1'b1;
      end
    end
  end

endmodule
