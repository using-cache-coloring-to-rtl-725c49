// tb_wl_engine -- self-checking test of the wear-levelling algorithm sequencer.
// Each trial loads random per-colour write counts, starts the engine and records
// every flush request and every swap it issues (a responder answers each flush
// after a random delay). A reference model in the testbench, written from the
// algorithm's steps with real arithmetic (AVG, standard deviation, sorting by
// selection), predicts: no swap and a "skipped" pulse when SD < beta; otherwise
// for k < MAX(nHigher, lambda) with L1[k] != L2[k] the flushes L1[k], L2[k] and the
// swap (L1[k], L2[k]), in order. Trials cover nearly uniform counts (skip), a few
// hot colours (nHigher < lambda) and many hot colours (nHigher > lambda). The
// cycle count of a skipped run (N + 3 cycles from start to clear_interval) is
// checked as well.
module tb_wl_engine;
  localparam int N = 64, BETA = 75, LAMBDA = 16;
  logic clk = 0, rst_n = 0;
  logic start, llc_idle, busy, flush_req, flush_done, swap_valid, clear_interval, skipped;
  logic [5:0] flush_color, swap_c1, swap_c2;
  logic [6:0] n_swapped;
  logic [31:0] n_global [N];
  logic [23:0] n_last [N];
  int checks = 0, failures = 0;
  int got_fl[$], got_sw1[$], got_sw2[$];
  int exp_fl[$], exp_sw1[$], exp_sw2[$];
  int n_skip_seen, n_swap_runs, n_hi_small, n_hi_big;

  wl_engine #(.N_COLORS(N), .GW(32), .IW(24), .BETA(BETA), .LAMBDA(LAMBDA)) dut (
    .clk, .rst_n, .start, .llc_idle, .n_global, .n_last, .busy, .flush_req, .flush_color,
    .flush_done, .swap_valid, .swap_c1, .swap_c2, .clear_interval, .skipped, .n_swapped);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // flush responder: answers each request after 1..6 cycles
  initial begin
    flush_done = 0;
    forever begin
      @(posedge clk);
      if (flush_req && !flush_done) begin
        got_fl.push_back(int'(flush_color));
        repeat ($urandom_range(5)) @(posedge clk);
        #1 flush_done = 1;
        @(posedge clk);
        #1 flush_done = 0;
      end
    end
  end

  always @(posedge clk) if (rst_n && swap_valid) begin
    got_sw1.push_back(int'(swap_c1));
    got_sw2.push_back(int'(swap_c2));
  end

  // reference model
  task automatic model();
    real avg, var_, sd;
    int l1[N], l2[N], used1[N], used2[N], n_higher, nts;
    longint sum;
    exp_fl.delete(); exp_sw1.delete(); exp_sw2.delete();
    sum = 0;
    for (int i = 0; i < N; i++) sum += n_last[i];
    avg = real'(sum) / N;
    var_ = 0;
    for (int i = 0; i < N; i++) var_ += (real'(n_last[i]) - avg) ** 2;
    sd = $sqrt(var_ / N);
    if (sd < BETA) return;
    n_higher = 0;
    for (int i = 0; i < N; i++) if (real'(n_last[i]) > avg) n_higher++;
    if (n_higher < LAMBDA) n_hi_small++; else n_hi_big++;
    for (int i = 0; i < N; i++) begin used1[i] = 0; used2[i] = 0; end
    for (int k = 0; k < N; k++) begin
      int b1, b2;
      b1 = -1; b2 = -1;
      for (int j = 0; j < N; j++) begin
        if (!used1[j] && (b1 < 0 || n_last[j] > n_last[b1])) b1 = j;
        if (!used2[j] && (b2 < 0 || n_global[j] < n_global[b2])) b2 = j;
      end
      l1[k] = b1; used1[b1] = 1;
      l2[k] = b2; used2[b2] = 1;
    end
    nts = (n_higher > LAMBDA) ? n_higher : LAMBDA;
    for (int k = 0; k < nts; k++) if (l1[k] != l2[k]) begin
      exp_fl.push_back(l1[k]); exp_fl.push_back(l2[k]);
      exp_sw1.push_back(l1[k]); exp_sw2.push_back(l2[k]);
    end
  endtask

  task automatic run_trial(int kind);
    int t0, t1;
    bit skip_seen;
    for (int i = 0; i < N; i++) begin
      n_global[i] = 32'($urandom_range(100000));
      case (kind)
        0: n_last[i] = 24'(1000 + $urandom_range(100));                                   // uniform
        1: n_last[i] = 24'((i % 13 == 0) ? 5000 + $urandom_range(3000) : $urandom_range(500)); // few hot
        default: n_last[i] = 24'(($urandom_range(1) == 0) ? 3000 + $urandom_range(3000) : $urandom_range(800));
      endcase
    end
    model();
    got_fl.delete(); got_sw1.delete(); got_sw2.delete();
    skip_seen = 0;
    @(negedge clk);
    start = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    forever begin
      if (skipped) skip_seen = 1;
      if (clear_interval) break;
      @(negedge clk);
    end
    t1 = $time;
    @(negedge clk);
    checks++;
    if (skip_seen != (exp_sw1.size() == 0 && kind == 0)) begin
      // a skipped run must be reported, and only then
      if (!(exp_sw1.size() == 0 && skip_seen == 0 && kind != 0)) begin
        failures++; $display("kind %0d skipped=%0b expected swaps %0d", kind, skip_seen, exp_sw1.size());
      end
    end
    if (skip_seen) begin
      n_skip_seen++;
      checks++;
      if ((t1 - t0) / 10 != N + 3) begin failures++; $display("skip run took %0d cycles", (t1 - t0) / 10); end
    end else n_swap_runs++;
    checks++;
    if (got_sw1.size() != exp_sw1.size() || int'(n_swapped) != exp_sw1.size()) begin
      failures++; $display("kind %0d swaps %0d/%0d exp %0d", kind, got_sw1.size(), n_swapped, exp_sw1.size());
    end else begin
      for (int k = 0; k < exp_sw1.size(); k++) begin
        checks++;
        if (got_sw1[k] != exp_sw1[k] || got_sw2[k] != exp_sw2[k]) begin
          failures++; $display("swap %0d: (%0d,%0d) exp (%0d,%0d)", k, got_sw1[k], got_sw2[k], exp_sw1[k], exp_sw2[k]);
        end
      end
    end
    checks++;
    if (got_fl.size() != exp_fl.size()) begin
      failures++; $display("flushes %0d exp %0d", got_fl.size(), exp_fl.size());
    end else for (int k = 0; k < exp_fl.size(); k++) begin
      checks++;
      if (got_fl[k] != exp_fl[k]) begin failures++; $display("flush %0d: %0d exp %0d", k, got_fl[k], exp_fl[k]); end
    end
  endtask

  initial begin
    start = 0; llc_idle = 1;
    n_skip_seen = 0; n_swap_runs = 0; n_hi_small = 0; n_hi_big = 0;
    for (int i = 0; i < N; i++) begin n_global[i] = 0; n_last[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) run_trial(t % 3);
    checks++;
    if (n_skip_seen == 0 || n_hi_small == 0 || n_hi_big == 0) begin
      failures++; $display("coverage: skip %0d small %0d big %0d", n_skip_seen, n_hi_small, n_hi_big);
    end
    $display("skipped runs %0d, remapping runs %0d (nHigher<lambda %0d, >=lambda %0d)",
             n_skip_seen, n_swap_runs, n_hi_small, n_hi_big);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
