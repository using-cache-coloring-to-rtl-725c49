// tb_wl_llc_top -- end-to-end test of the wear-levelled LLC.
// The whole design runs at a reduced size (16 colours x 4 sets x 4 ways, K = 2000
// writes, 100000-cycle minimum interval, beta 75, lambda 4) against a behavioural
// memory. Traffic has "hot" phases, where most writes go to pages of
// regions 0 and 1, and three "uniform" phases in the middle. Every read is checked against a reference
// copy of the data, so lines lost or misplaced by a flush or a remap are caught.
// The test counts how often each mechanism happened and fails if one never did:
// fills, dirty write-backs, a deferred interval check (K writes before the minimum
// time), an algorithm run, a run skipped for low write variation, colour swaps,
// colour flushes and requests stalled while the engine ran. It also checks that
// the hot region 0 has been moved to another colour at some time, and prints the
// largest and mean write count per colour.
module tb_wl_llc_top;
  localparam int AW = 24, W = 512, NC = 16, SPC = 4, WAYS = 4;
  localparam int K = 2000, MINC = 100000;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_write, resp_valid;
  logic [AW-1:0] req_addr;
  logic [W-1:0] req_wdata, resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  logic [AW-1:0] mem_req_addr;
  logic [W-1:0] mem_req_wdata, mem_resp_rdata;
  logic wl_busy, wl_start, wl_deferred, wl_skipped, wl_swap, wl_flush_done, wl_wr_event;
  logic [3:0] wl_wr_color;
  logic [4:0] wl_n_swapped;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_data [longint];
  int n_start = 0, n_defer = 0, n_skip = 0, n_swap = 0, n_flush = 0, n_stall = 0;
  int n_reads = 0, n_moved = 0;

  wl_llc_top #(
    .ADDR_W(AW), .LINE_W(W), .N_COLORS(NC), .SETS_PER_COLOR(SPC), .WAYS(WAYS),
    .BETA(75), .LAMBDA(NC / 4), .K_WRITES(K), .MIN_CYCLES(MINC), .RD_LAT(2), .WR_LAT(12)
  ) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_write, .req_addr, .req_wdata, .resp_valid, .resp_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata, .wl_busy, .wl_start, .wl_deferred, .wl_skipped,
    .wl_swap, .wl_flush_done, .wl_wr_event, .wl_wr_color, .wl_n_swapped);

  mem_model #(.ADDR_W(AW), .LINE_W(W), .LAT(20)) u_mem (.clk, .mem_req_valid, .mem_req_ready,
    .mem_req_write, .mem_req_addr, .mem_req_wdata, .mem_resp_valid, .mem_resp_rdata);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    n_start += int'(wl_start);
    n_defer += int'(wl_deferred);
    n_skip  += int'(wl_skipped);
    n_swap  += int'(wl_swap);
    n_flush += int'(wl_flush_done);
    n_stall += int'(req_valid && wl_busy);
    n_moved += int'(dut.u_map.color_of_region[0] != 4'd0);
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // line n: tag = n / 64, region = (n / 4) % 16, set within colour = n % 4
  function automatic logic [AW-1:0] line_addr(int n);
    return AW'(n) << 6;
  endfunction

  function automatic logic [W-1:0] rnd_line();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic access(bit wr, int n);
    logic [AW-1:0] a;
    a = line_addr(n);
    @(negedge clk);
    req_valid = 1; req_write = wr; req_addr = a; req_wdata = rnd_line();
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    do @(posedge clk); while (!resp_valid);
    if (wr) ref_data[longint'(a)] = req_wdata;
    else begin
      logic [W-1:0] e;
      e = ref_data.exists(longint'(a)) ? ref_data[longint'(a)] : u_mem.init_line(longint'(a));
      n_reads++;
      checks++;
      if (resp_rdata != e) begin failures++; $display("read of %h wrong", a); end
    end
  endtask

  // a line of region 0 or 1 (hot) or of any region; 8 tags per region/set
  function automatic int pick(bit hot);
    int tag, region, sic;
    tag = $urandom_range(7);
    region = hot ? $urandom_range(1) : $urandom_range(NC - 1);
    sic = $urandom_range(SPC - 1);
    return tag * 64 + region * 4 + sic;
  endfunction

  initial begin
    req_valid = 0; req_write = 0; req_addr = '0; req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // hot phases, uniform phases 4 to 6; each phase is K writes or more
    for (int phase = 0; phase < 8; phase++) begin
      bit uniform;
      uniform = (phase >= 4 && phase <= 6);
      for (int t = 0; t < 3000; t++) begin
        bit hot;
        hot = !uniform && ($urandom_range(9) != 0);
        access($urandom_range(2) != 0, pick(hot));
      end
      $display("phase %0d done at %0t: starts %0d deferred %0d skipped %0d swaps %0d, region0 in colour %0d",
               phase, $time, n_start, n_defer, n_skip, n_swap, dut.u_map.color_of_region[0]);
    end
    // read back every line and compare
    for (int n = 0; n < 8 * 64; n++) access(0, n);
    checks++;
    if (u_mem.n_reads == 0 || u_mem.n_writes == 0 || n_defer == 0 || n_start == 0 || n_skip == 0 ||
        n_swap == 0 || n_flush == 0 || n_stall == 0) begin
      $display("mechanism counts: fills %0d wb %0d deferred %0d runs %0d skipped %0d swaps %0d flushes %0d stalls %0d",
               u_mem.n_reads, u_mem.n_writes, n_defer, n_start, n_skip, n_swap, n_flush, n_stall);
      failures++; $display("a mechanism never happened");
    end
    checks++;
    if (n_moved == 0) begin
      failures++; $display("hot regions were never moved");
    end
    $display("fills %0d write-backs %0d deferred %0d runs %0d skipped %0d swaps %0d flushes %0d stalled cycles %0d reads checked %0d",
             u_mem.n_reads, u_mem.n_writes, n_defer, n_start, n_skip, n_swap, n_flush, n_stall, n_reads);
    begin
      longint mx, tot;
      mx = 0; tot = 0;
      for (int i = 0; i < NC; i++) begin
        tot += dut.u_cnt.n_global[i];
        if (dut.u_cnt.n_global[i] > mx) mx = dut.u_cnt.n_global[i];
      end
      $display("global writes per colour: max %0d, mean %0d", mx, tot / NC);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
