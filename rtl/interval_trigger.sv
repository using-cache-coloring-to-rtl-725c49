// interval_trigger -- decides when the wear-levelling algorithm runs.
//
// The interval is measured in writes, not cycles: every K_WRITES writes to the LLC
// the trigger checks whether at least MIN_CYCLES cycles have passed since the
// algorithm last ran. If so it pulses start for one cycle and restarts the cycle
// count; if not it pulses deferred, and the next check comes after the next
// K_WRITES writes (the cycle count keeps running). This follows the paper's rule
// "after every K writes, if at least 3M cycles have elapsed since the last
// algorithm execution". K is not given in the paper; 32768 is this design's
// choice. The cycle counter saturates at MIN_CYCLES.
module interval_trigger #(
  parameter int unsigned K_WRITES   = wl_pkg::K_WRITES,
  parameter int unsigned MIN_CYCLES = wl_pkg::MIN_CYCLES,
  localparam int unsigned KW = $clog2(K_WRITES + 1),
  localparam int unsigned MW = $clog2(MIN_CYCLES + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic wr_event,
  output logic start,
  output logic deferred
);

  logic [KW-1:0] wcount;
  logic [MW-1:0] cycles;
  logic          kth;

  assign kth = wr_event && (wcount == KW'(K_WRITES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcount   <= '0;
      cycles   <= '0;
      start    <= 1'b0;
      deferred <= 1'b0;
    end else begin
      start    <= 1'b0;
      deferred <= 1'b0;
      if (wr_event) wcount <= kth ? '0 : wcount + 1'b1;
      if (kth && cycles >= MW'(MIN_CYCLES)) begin
        start  <= 1'b1;
        cycles <= '0;
      end else begin
        if (kth) deferred <= 1'b1;
        if (cycles < MW'(MIN_CYCLES)) cycles <= cycles + 1'b1;
      end
    end
  end

endmodule
