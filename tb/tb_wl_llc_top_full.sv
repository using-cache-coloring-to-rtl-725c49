// tb_wl_llc_top_full -- one complete wear-levelling interval at full size.
// The design is instantiated with all its default parameters: 4MB, 16 ways,
// 64 colours of 64 sets, K = 32768 writes, 3,000,000-cycle minimum interval,
// beta 75, lambda 16. Traffic is write-heavy and 90% of it goes to pages of
// regions 0 to 3 (four tags per set, 16384 lines). The first K writes arrive long
// before 3M cycles, so the first interval check must be deferred; traffic goes on
// until the algorithm has run once after the 3M cycles, remapped colours (flushing
// them) and released the cache. Then 2000 more accesses follow and every line
// written during the test is read back and compared with a reference copy.
// Checked: data, at least one deferral, exactly the expected start after the
// minimum time, at least one swap and flush, and that region 0 has left colour 0.
module tb_wl_llc_top_full;
  localparam int AW = 48, W = 512;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_write, resp_valid;
  logic [AW-1:0] req_addr;
  logic [W-1:0] req_wdata, resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  logic [AW-1:0] mem_req_addr;
  logic [W-1:0] mem_req_wdata, mem_resp_rdata;
  logic wl_busy, wl_start, wl_deferred, wl_skipped, wl_swap, wl_flush_done, wl_wr_event;
  logic [5:0] wl_wr_color;
  logic [6:0] wl_n_swapped;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_data [longint];
  longint cycle = 0, start_cycle = -1;
  int n_start = 0, n_defer = 0, n_skip = 0, n_swap = 0, n_flush = 0, n_wr = 0, n_busy = 0;

  wl_llc_top dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_write, .req_addr, .req_wdata, .resp_valid, .resp_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata, .wl_busy, .wl_start, .wl_deferred, .wl_skipped,
    .wl_swap, .wl_flush_done, .wl_wr_event, .wl_wr_color, .wl_n_swapped);

  mem_model #(.ADDR_W(AW), .LINE_W(W), .LAT(20)) u_mem (.clk, .mem_req_valid, .mem_req_ready,
    .mem_req_write, .mem_req_addr, .mem_req_wdata, .mem_resp_valid, .mem_resp_rdata);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cycle++;
    if (wl_start && start_cycle < 0) start_cycle = cycle;
    n_start += int'(wl_start);
    n_defer += int'(wl_deferred);
    n_skip  += int'(wl_skipped);
    n_swap  += int'(wl_swap);
    n_flush += int'(wl_flush_done);
    n_wr    += int'(wl_wr_event);
    n_busy  += int'(wl_busy);
  end

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd_line();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic access(bit wr, logic [AW-1:0] a);
    @(negedge clk);
    req_valid = 1; req_write = wr; req_addr = a; req_wdata = rnd_line();
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    do @(posedge clk); while (!resp_valid);
    if (wr) ref_data[longint'(a)] = req_wdata;
    else begin
      logic [W-1:0] e;
      e = ref_data.exists(longint'(a)) ? ref_data[longint'(a)] : u_mem.init_line(longint'(a));
      checks++;
      if (resp_rdata != e) begin failures++; $display("read of %h wrong", a); end
    end
  endtask

  // address: tag 0..3 above bit 18, region in bits 17:12, set within colour in 11:6
  function automatic logic [AW-1:0] pick();
    logic [AW-1:0] tag, region, sic;
    tag    = AW'($urandom_range(3));
    region = ($urandom_range(9) != 0) ? AW'($urandom_range(3)) : AW'($urandom_range(63));
    sic    = AW'($urandom_range(63));
    return (tag << 18) | (region << 12) | (sic << 6);
  endfunction

  initial begin
    req_valid = 0; req_write = 0; req_addr = '0; req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n_start == 0 || wl_busy || n_flush == 0) access($urandom_range(3) != 0, pick());
    $display("algorithm ran at cycle %0d after %0d array writes; %0d deferrals, %0d swaps, %0d flushes, busy %0d cycles",
             start_cycle, n_wr, n_defer, n_swap, n_flush, n_busy);
    for (int t = 0; t < 2000; t++) access($urandom_range(3) != 0, pick());
    foreach (ref_data[a]) access(0, AW'(a));
    checks++;
    if (n_defer == 0 || n_start != 1 || start_cycle < 3_000_000 || n_swap == 0 || n_flush == 0) begin
      failures++; $display("deferred %0d starts %0d at %0d swaps %0d flushes %0d", n_defer, n_start, start_cycle, n_swap, n_flush);
    end
    checks++;
    if (dut.u_map.color_of_region[0] == 6'd0) begin failures++; $display("region 0 not remapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
