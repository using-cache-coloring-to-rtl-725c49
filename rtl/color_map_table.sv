// color_map_table -- the region-to-colour mapping table of the cache-colouring layer.
//
// Holds the mapping between the N memory regions (the low bits of the physical page
// number) and the N cache colours as two mutually inverse tables:
//   color_of_region[r] : the colour region r is cached in (used on every access)
//   region_of_color[c] : Region[c] of the algorithm, the region held by colour c
//                        (used to rebuild the address of a line being written back)
// Both lookups are combinational. A swap (swap_valid for one cycle) exchanges the
// regions of colours swap_c1 and swap_c2 in both tables at the next clock edge, as
// the paper defines swapping (r1,c1),(r2,c2) -> (r1,c2),(r2,c1); swapping a colour
// with itself changes nothing. Reset loads the identity mapping (region i -> colour
// i), which is this design's choice; the paper does not give an initial mapping.
module color_map_table #(
  parameter int unsigned N_COLORS = wl_pkg::N_COLORS,
  localparam int unsigned CW = $clog2(N_COLORS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] lk_region,
  output logic [CW-1:0] lk_color,
  input  logic [CW-1:0] rc_color,
  output logic [CW-1:0] rc_region,
  input  logic          swap_valid,
  input  logic [CW-1:0] swap_c1,
  input  logic [CW-1:0] swap_c2
);

  logic [CW-1:0] color_of_region [N_COLORS];
  logic [CW-1:0] region_of_color [N_COLORS];

  assign lk_color  = color_of_region[lk_region];
  assign rc_region = region_of_color[rc_color];

  logic [CW-1:0] r1, r2;
  assign r1 = region_of_color[swap_c1];
  assign r2 = region_of_color[swap_c2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_COLORS; i++) begin
        color_of_region[i] <= CW'(i);
        region_of_color[i] <= CW'(i);
      end
    end else if (swap_valid && swap_c1 != swap_c2) begin
      region_of_color[swap_c1] <= r2;
      region_of_color[swap_c2] <= r1;
      color_of_region[r1]      <= swap_c2;
      color_of_region[r2]      <= swap_c1;
    end
  end

  // The two tables must stay inverse permutations of each other.
  a_inverse: assert property (@(posedge clk) disable iff (!rst_n)
    color_of_region[region_of_color[rc_color]] == rc_color)
    else $error("colour map tables out of step at colour %0d", rc_color);

endmodule
