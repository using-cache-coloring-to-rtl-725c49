// color_write_counters -- per-colour write statistics for the wear-levelling algorithm.
//
// For each of the N colours it keeps nWriteGlobal[i] (writes to colour i since reset)
// and nWriteLastInterval[i] (writes to colour i since the last algorithm run). One
// write event (wr_event with its colour wr_color) is counted per cycle at the clock
// edge. clear_interval zeroes every interval counter; a write in the same cycle is
// then the first write of the new interval. Both counters saturate instead of
// wrapping. What counts as a write (every write into the data array: write hits
// and line fills) is decided by the cache controller; the widths are this design's
// choice, the paper gives none.
module color_write_counters #(
  parameter int unsigned N_COLORS = wl_pkg::N_COLORS,
  parameter int unsigned GW       = wl_pkg::GW,
  parameter int unsigned IW       = wl_pkg::IW,
  localparam int unsigned CW = $clog2(N_COLORS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_event,
  input  logic [CW-1:0] wr_color,
  input  logic          clear_interval,
  output logic [GW-1:0] n_global [N_COLORS],
  output logic [IW-1:0] n_last   [N_COLORS]
);

  logic [N_COLORS-1:0] hit;
  always_comb for (int i = 0; i < N_COLORS; i++) hit[i] = wr_event && (wr_color == CW'(i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_COLORS; i++) begin
        n_global[i] <= '0;
        n_last[i]   <= '0;
      end
    end else begin
      for (int i = 0; i < N_COLORS; i++) begin
        if (hit[i] && n_global[i] != '1)   n_global[i] <= n_global[i] + 1'b1;
        if (clear_interval)                n_last[i]   <= IW'(hit[i]);
        else if (hit[i] && n_last[i] != '1) n_last[i]  <= n_last[i] + 1'b1;
      end
    end
  end

endmodule
