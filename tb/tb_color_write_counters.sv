// tb_color_write_counters -- self-checking test of the per-colour write counters.
// Random write events (about two thirds of the cycles, colours skewed towards a few
// hot colours) are counted by a reference model; every 500 cycles the interval
// counters are cleared (a write in the clearing cycle must count as 1). All 64
// global and interval counters are compared with the model every 50 cycles.
module tb_color_write_counters;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic wr_event, clear_interval;
  logic [5:0] wr_color;
  logic [31:0] n_global [N];
  logic [23:0] n_last [N];
  int checks = 0, failures = 0;
  int eg [N], el [N];

  color_write_counters #(.N_COLORS(N), .GW(32), .IW(24)) dut (.clk, .rst_n, .wr_event,
    .wr_color, .clear_interval, .n_global, .n_last);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_event = 0; wr_color = 0; clear_interval = 0;
    for (int i = 0; i < N; i++) begin eg[i] = 0; el[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 1; t <= 5000; t++) begin
      @(negedge clk);
      wr_event = ($urandom_range(2) != 0);
      wr_color = ($urandom_range(3) == 0) ? 6'($urandom_range(N - 1)) : 6'($urandom_range(3));
      clear_interval = (t % 500 == 0);
      if (clear_interval) for (int i = 0; i < N; i++) el[i] = 0;
      if (wr_event) begin eg[wr_color]++; el[wr_color]++; end
      if (t % 50 == 0) begin
        @(negedge clk);
        wr_event = 0; clear_interval = 0;
        for (int i = 0; i < N; i++) begin
          checks += 2;
          if (n_global[i] != 32'(eg[i])) begin failures++; $display("global[%0d]=%0d exp %0d", i, n_global[i], eg[i]); end
          if (n_last[i] != 24'(el[i])) begin failures++; $display("last[%0d]=%0d exp %0d", i, n_last[i], el[i]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
