// tb_llc_ctrl -- self-checking test of the colour-mapped LLC controller.
// A small cache (4 colours x 4 sets x 4 ways, 20-bit addresses) is built from
// llc_ctrl, the STT-RAM array model and the mapping table, with a behavioural
// memory. Random full-line reads and writes over 128 lines (twice the capacity, so
// there are hits, misses and dirty evictions) are checked against a reference copy
// of memory contents. Between phases the test plays the wear-levelling engine:
// it raises hold, flushes two colours, swaps their mapping and releases hold; the
// data must stay correct. At the end every colour is flushed and memory is
// compared line by line. Also checked: hit latencies (response sampled 4+2 cycles
// after the accepting edge for a read, 4+12 for a write; the response is
// registered one cycle after the array answers), the array-write count (= write requests + line fills),
// that no request is accepted under hold, and that each mechanism occurred.
module tb_llc_ctrl;
  localparam int AW = 20, W = 512, NC = 4, SPC = 4, WAYS = 4;
  localparam int CW = 2, IDXW = 6;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_write, resp_valid;
  logic [AW-1:0] req_addr;
  logic [W-1:0] req_wdata, resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  logic [AW-1:0] mem_req_addr;
  logic [W-1:0] mem_req_wdata, mem_resp_rdata;
  logic [CW-1:0] lk_region, lk_color, rc_color, rc_region, flush_color, wr_color, sw1, sw2;
  logic hold, idle, flush_req, flush_done, wr_event, swap_valid;
  logic arr_rd_en, arr_wr_en, arr_ready, arr_rvalid, arr_wdone;
  logic [IDXW-1:0] arr_idx;
  logic [W-1:0] arr_wdata, arr_rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_data [longint];
  int n_wr_events = 0, n_write_req = 0, n_read_req = 0, n_hits_timed = 0, n_flush = 0;

  llc_ctrl #(.ADDR_W(AW), .LINE_W(W), .N_COLORS(NC), .SETS_PER_COLOR(SPC), .WAYS(WAYS)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_write, .req_addr, .req_wdata, .resp_valid, .resp_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata, .lk_region, .lk_color, .rc_color, .rc_region,
    .hold, .idle, .flush_req, .flush_color, .flush_done, .wr_event, .wr_color,
    .arr_rd_en, .arr_wr_en, .arr_idx, .arr_wdata, .arr_ready, .arr_rvalid, .arr_rdata, .arr_wdone);

  sttram_array #(.LINES(NC * SPC * WAYS), .LINE_W(W), .RD_LAT(2), .WR_LAT(12)) u_arr (
    .clk, .rst_n, .rd_en(arr_rd_en), .wr_en(arr_wr_en), .idx(arr_idx), .wdata(arr_wdata),
    .ready(arr_ready), .rvalid(arr_rvalid), .rdata(arr_rdata), .wdone(arr_wdone));

  color_map_table #(.N_COLORS(NC)) u_map (.clk, .rst_n, .lk_region, .lk_color, .rc_color,
    .rc_region, .swap_valid, .swap_c1(sw1), .swap_c2(sw2));

  mem_model #(.ADDR_W(AW), .LINE_W(W), .LAT(8)) u_mem (.clk, .mem_req_valid, .mem_req_ready,
    .mem_req_write, .mem_req_addr, .mem_req_wdata, .mem_resp_valid, .mem_resp_rdata);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n && wr_event) n_wr_events++;
    if (rst_n && hold && req_ready) begin failures++; $display("request accepted under hold"); end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [AW-1:0] line_addr(int n);
    // n in 0..127: tag = n[6:4] (8 tags), region/set bits = n[3:0]
    return AW'((n >> 4) << 10) | AW'((n & 15) << 6);
  endfunction

  function automatic logic [W-1:0] rnd_line();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // one request; returns the cycles from the accepting edge to the response edge
  task automatic access(bit wr, int n, output int lat);
    logic [AW-1:0] a;
    a = line_addr(n);
    @(negedge clk);
    req_valid = 1; req_write = wr; req_addr = a; req_wdata = rnd_line();
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!resp_valid);
    if (wr) begin
      ref_data[longint'(a)] = req_wdata;
      n_write_req++;
    end else begin
      logic [W-1:0] e;
      e = ref_data.exists(longint'(a)) ? ref_data[longint'(a)] : u_mem.init_line(longint'(a));
      n_read_req++;
      checks++;
      if (resp_rdata != e) begin failures++; $display("read of %h wrong", a); end
    end
  endtask

  task automatic flush_color_now(int c);
    @(negedge clk);
    flush_req = 1; flush_color = CW'(c);
    do @(posedge clk); while (!flush_done);
    #1 flush_req = 0;
    n_flush++;
  endtask

  initial begin
    int lat;
    req_valid = 0; req_write = 0; req_addr = '0; req_wdata = '0;
    hold = 0; flush_req = 0; flush_color = 0; swap_valid = 0; sw1 = 0; sw2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // timed hits: write a line (miss, fill), then write and read it again (hits)
    access(1, 5, lat);
    access(1, 5, lat);
    checks++; if (lat != 4 + 12) begin failures++; $display("write hit latency %0d", lat); end
    access(0, 5, lat);
    checks++; if (lat != 4 + 2) begin failures++; $display("read hit latency %0d", lat); end
    for (int phase = 0; phase < 6; phase++) begin
      for (int t = 0; t < 400; t++) access($urandom_range(2) == 0, $urandom_range(127), lat);
      // act as the wear-levelling engine: hold, flush two colours, swap them
      begin
        int a, b;
        a = $urandom_range(NC - 1);
        b = (a + 1 + $urandom_range(NC - 2)) % NC;
        @(negedge clk); hold = 1;
        do @(posedge clk); while (!idle);
        flush_color_now(a);
        flush_color_now(b);
        @(negedge clk); swap_valid = 1; sw1 = CW'(a); sw2 = CW'(b);
        @(negedge clk); swap_valid = 0; hold = 0;
      end
    end
    // flush everything and compare memory with the reference
    @(negedge clk); hold = 1;
    for (int c = 0; c < NC; c++) flush_color_now(c);
    for (int n = 0; n < 128; n++) begin
      longint a;
      a = longint'(line_addr(n));
      checks++;
      if (u_mem.peek(a) != (ref_data.exists(a) ? ref_data[a] : u_mem.init_line(a))) begin
        failures++; $display("memory line %h wrong after final flush", a);
      end
    end
    checks++;
    if (n_wr_events != n_write_req + u_mem.n_reads) begin
      failures++; $display("array writes %0d, expected %0d", n_wr_events, n_write_req + u_mem.n_reads);
    end
    checks++;
    if (u_mem.n_reads == 0 || u_mem.n_writes == 0 || n_flush == 0) begin
      failures++; $display("coverage: fills %0d write-backs %0d flushes %0d", u_mem.n_reads, u_mem.n_writes, n_flush);
    end
    $display("reads %0d writes %0d fills %0d write-backs %0d flushes %0d",
             n_read_req, n_write_req, u_mem.n_reads, u_mem.n_writes, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
