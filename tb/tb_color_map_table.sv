// tb_color_map_table -- self-checking test of the region/colour mapping table.
// After reset the mapping must be the identity. Then 300 random swaps (some with
// both colours equal, which must change nothing) are applied, and after each one
// every region -> colour and colour -> region lookup is compared with a reference
// permutation kept in the testbench.
module tb_color_map_table;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic [5:0] lk_region, lk_color, rc_color, rc_region, c1, c2;
  logic swap_valid;
  int checks = 0, failures = 0;
  int ref_roc [N];  // region of colour
  int ref_cor [N];  // colour of region

  color_map_table #(.N_COLORS(N)) dut (.clk, .rst_n, .lk_region, .lk_color, .rc_color,
    .rc_region, .swap_valid, .swap_c1(c1), .swap_c2(c2));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int i = 0; i < N; i++) begin
      lk_region = 6'(i); rc_color = 6'(i);
      #1;
      checks += 2;
      if (lk_color != 6'(ref_cor[i])) begin failures++; $display("region %0d -> %0d exp %0d", i, lk_color, ref_cor[i]); end
      if (rc_region != 6'(ref_roc[i])) begin failures++; $display("colour %0d -> %0d exp %0d", i, rc_region, ref_roc[i]); end
    end
  endtask

  initial begin
    swap_valid = 0; c1 = 0; c2 = 0; lk_region = 0; rc_color = 0;
    for (int i = 0; i < N; i++) begin ref_roc[i] = i; ref_cor[i] = i; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int t = 0; t < 300; t++) begin
      int a, b, ra, rb;
      a = $urandom_range(N - 1);
      b = (t % 10 == 0) ? a : $urandom_range(N - 1);
      @(negedge clk);
      c1 = 6'(a); c2 = 6'(b); swap_valid = 1;
      @(negedge clk);
      swap_valid = 0;
      ra = ref_roc[a]; rb = ref_roc[b];
      ref_roc[a] = rb; ref_roc[b] = ra;
      ref_cor[ra] = b; ref_cor[rb] = a;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
