// tb_wl_lifetime -- measures the wear-levelling effect on a synthetic write-skewed
// workload.
// Two copies of the design (16 colours x 4 sets x 4 ways, K = 2000 writes, minimum
// interval 20000 cycles) run the same access sequence, each against its own
// memory. In the reference copy K_WRITES is so large that remapping never runs,
// which makes it a plain LLC. The testbench counts the writes to every physical
// line of each copy's data array. Raw lifetime is the inverse of the largest
// per-line write count, so relative lifetime = max(reference) / max(wear-levelled).
// The traffic sends 80% of writes to pages of two regions; reads are checked for
// data in both copies. Checked: the data, that the remapping copy actually
// remapped, and that its relative lifetime is above 1.5.
module tb_wl_lifetime;
  localparam int AW = 24, W = 512, NC = 16, SPC = 4, WAYS = 4, LINES = NC * SPC * WAYS;
  localparam int OPS = 40000;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int op_line [OPS];
  bit op_wr [OPS];
  int wr_cnt [2][LINES];
  int n_swaps [2];
  bit done [2];

  always #5 clk = ~clk;

  initial begin
    repeat (6_000_000) @(posedge clk);
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

  for (genvar g = 0; g < 2; g++) begin : inst
    logic req_valid, req_ready, req_write, resp_valid;
    logic [AW-1:0] req_addr;
    logic [W-1:0] req_wdata, resp_rdata;
    logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
    logic [AW-1:0] mem_req_addr;
    logic [W-1:0] mem_req_wdata, mem_resp_rdata;
    logic wl_busy, wl_start, wl_deferred, wl_skipped, wl_swap, wl_flush_done, wl_wr_event;
    logic [3:0] wl_wr_color;
    logic [4:0] wl_n_swapped;
    logic [W-1:0] ref_data [longint];

    wl_llc_top #(
      .ADDR_W(AW), .LINE_W(W), .N_COLORS(NC), .SETS_PER_COLOR(SPC), .WAYS(WAYS),
      .K_WRITES(g == 0 ? 1 << 30 : 2000), .MIN_CYCLES(20000)
    ) dut (
      .clk, .rst_n, .req_valid, .req_ready, .req_write, .req_addr, .req_wdata, .resp_valid, .resp_rdata,
      .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
      .mem_resp_valid, .mem_resp_rdata, .wl_busy, .wl_start, .wl_deferred, .wl_skipped,
      .wl_swap, .wl_flush_done, .wl_wr_event, .wl_wr_color, .wl_n_swapped);

    mem_model #(.ADDR_W(AW), .LINE_W(W), .LAT(20)) u_mem (.clk, .mem_req_valid, .mem_req_ready,
      .mem_req_write, .mem_req_addr, .mem_req_wdata, .mem_resp_valid, .mem_resp_rdata);

    always @(posedge clk) if (rst_n) begin
      if (dut.arr_wr_en && dut.arr_ready) wr_cnt[g][dut.arr_idx]++;
      if (wl_swap) n_swaps[g]++;
    end

    initial begin
      req_valid = 0; req_write = 0; req_addr = '0; req_wdata = '0;
      @(posedge rst_n);
      for (int t = 0; t < OPS; t++) begin
        logic [AW-1:0] a;
        a = AW'(op_line[t]) << 6;
        @(negedge clk);
        req_valid = 1; req_write = op_wr[t]; req_addr = a; req_wdata = rnd_line();
        do @(posedge clk); while (!req_ready);
        #1 req_valid = 0;
        do @(posedge clk); while (!resp_valid);
        if (op_wr[t]) ref_data[longint'(a)] = req_wdata;
        else begin
          checks++;
          if (resp_rdata != (ref_data.exists(longint'(a)) ? ref_data[longint'(a)] : u_mem.init_line(longint'(a)))) begin
            failures++; $display("copy %0d: read of %h wrong", g, a);
          end
        end
      end
      done[g] = 1;
    end
  end

  initial begin
    int mx [2];
    real rel;
    for (int i = 0; i < LINES; i++) begin wr_cnt[0][i] = 0; wr_cnt[1][i] = 0; end
    n_swaps[0] = 0; n_swaps[1] = 0; done[0] = 0; done[1] = 0;
    // the shared access sequence: line = tag(0..7) * 64 + region * 4 + set within colour
    for (int t = 0; t < OPS; t++) begin
      int region;
      op_wr[t] = ($urandom_range(3) != 0);
      region = (op_wr[t] && $urandom_range(4) != 0) ? $urandom_range(1) : $urandom_range(NC - 1);
      op_line[t] = $urandom_range(7) * 64 + region * 4 + $urandom_range(SPC - 1);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1]);
    for (int g = 0; g < 2; g++) begin
      mx[g] = 0;
      for (int i = 0; i < LINES; i++) if (wr_cnt[g][i] > mx[g]) mx[g] = wr_cnt[g][i];
    end
    rel = real'(mx[0]) / real'(mx[1] > 0 ? mx[1] : 1);
    $display("largest writes to one line: plain %0d, wear-levelled %0d; relative lifetime %0.2f; swaps %0d/%0d",
             mx[0], mx[1], rel, n_swaps[0], n_swaps[1]);
    checks++;
    if (n_swaps[0] != 0 || n_swaps[1] == 0) begin failures++; $display("swap counts wrong"); end
    checks++;
    if (rel <= 1.5) begin failures++; $display("relative lifetime too low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
