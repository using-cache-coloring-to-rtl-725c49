// sttram_array -- behavioural model of the STT-RAM data array of the last-level cache.
//
// This is a model of a process-specific non-volatile memory macro, not logic to be
// synthesised as is: one LINE_W-bit line per (set, way), LINES lines in all
// (4MB / 64B = 65536 by default). It accepts one operation at a time while ready
// is high. A read (rd_en) returns its line on rdata with a one-cycle rvalid pulse
// RD_LAT cycles after it was accepted; a write (wr_en) stores wdata and pulses
// wdone WR_LAT cycles after it was accepted. The latencies are those of the paper's
// 1-second-retention STT-RAM at 2GHz: a 12-cycle write as stated, and the 0.973 ns
// read rounded up to 2 cycles. Reads and writes of the real macro could overlap;
// serving one at a time is this model's simplification.
module sttram_array #(
  parameter int unsigned LINES  = wl_pkg::SETS * wl_pkg::WAYS,
  parameter int unsigned LINE_W = wl_pkg::LINE_W,
  parameter int unsigned RD_LAT = wl_pkg::RD_LAT,
  parameter int unsigned WR_LAT = wl_pkg::WR_LAT,
  localparam int unsigned AW = $clog2(LINES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_en,
  input  logic              wr_en,
  input  logic [AW-1:0]     idx,
  input  logic [LINE_W-1:0] wdata,
  output logic              ready,
  output logic              rvalid,
  output logic [LINE_W-1:0] rdata,
  output logic              wdone
);

  logic [LINE_W-1:0] mem [LINES];

  logic              busy;
  logic              op_wr;
  logic [7:0]        cnt;
  logic [AW-1:0]     idx_q;
  logic [LINE_W-1:0] wdata_q;

  assign ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      op_wr   <= 1'b0;
      cnt     <= '0;
      idx_q   <= '0;
      wdata_q <= '0;
      rvalid  <= 1'b0;
      wdone   <= 1'b0;
    end else begin
      rvalid <= 1'b0;
      wdone  <= 1'b0;
      if (!busy) begin
        if (rd_en || wr_en) begin
          busy    <= 1'b1;
          op_wr   <= wr_en;
          cnt     <= 8'(wr_en ? WR_LAT - 1 : RD_LAT - 1);
          idx_q   <= idx;
          wdata_q <= wdata;
        end
      end else if (cnt != 0) begin
        cnt <= cnt - 1'b1;
      end else begin
        busy <= 1'b0;
        if (op_wr) wdone  <= 1'b1;
        else       rvalid <= 1'b1;
      end
    end
  end

  // The storage itself has no reset, like the macro it models.
  always_ff @(posedge clk) begin
    if (busy && cnt == 0) begin
      if (op_wr) mem[idx_q] <= wdata_q;
      else       rdata      <= mem[idx_q];
    end
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && wr_en))
    else $error("sttram_array: read and write requested together");

endmodule
