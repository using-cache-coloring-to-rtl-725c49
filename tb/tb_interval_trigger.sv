// tb_interval_trigger -- self-checking test of the write-count interval trigger.
// With K_WRITES = 100 and MIN_CYCLES = 1000, writes arrive at a random rate that is
// sometimes fast (K writes in fewer than 1000 cycles: the check must be deferred)
// and sometimes slow (the algorithm must start). A reference model counts writes
// and cycles since the last start and predicts start/deferred for every cycle; the
// exact cycle of each pulse is checked. Both outcomes must occur.
module tb_interval_trigger;
  localparam int K = 100, M = 1000;
  logic clk = 0, rst_n = 0;
  logic wr_event, start, deferred;
  int checks = 0, failures = 0;
  int wc, cyc, n_start, n_def;
  logic exp_start, exp_def;

  interval_trigger #(.K_WRITES(K), .MIN_CYCLES(M)) dut (.clk, .rst_n, .wr_event, .start, .deferred);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_event = 0; wc = 0; cyc = 0; n_start = 0; n_def = 0; exp_start = 0; exp_def = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60000; t++) begin
      // phases of 4000 cycles alternate between fast (1/2) and slow (1/20) writes
      wr_event = ((t / 4000) % 2 == 0) ? ($urandom_range(1) == 0) : ($urandom_range(19) == 0);
      @(posedge clk);
      // model: what the registered outputs will show after this edge
      exp_start = 0; exp_def = 0;
      if (wr_event && wc == K - 1) begin
        wc = 0;
        if (cyc >= M) begin exp_start = 1; cyc = 0; end
        else begin exp_def = 1; cyc++; end
      end else begin
        if (wr_event) wc++;
        if (cyc < M) cyc++;
      end
      @(negedge clk);
      checks++;
      if (start != exp_start || deferred != exp_def) begin
        failures++;
        $display("t=%0d start=%0b/%0b deferred=%0b/%0b", t, start, exp_start, deferred, exp_def);
      end
      n_start += int'(start); n_def += int'(deferred);
    end
    checks++;
    if (n_start == 0 || n_def == 0) begin failures++; $display("start %0d deferred %0d", n_start, n_def); end
    $display("starts=%0d deferrals=%0d", n_start, n_def);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
