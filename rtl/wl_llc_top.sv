// wl_llc_top -- non-volatile last-level cache with cache-colouring wear-levelling.
//
// An STT-RAM LLC whose writes are spread over its sets by remapping memory regions
// to cache colours. The parts and their links:
//   llc_ctrl             the cache: colour-translated set index, tags, LRU, misses,
//                        write-backs, colour flushes; reports each array write
//   sttram_array         the STT-RAM data array (behavioural model, 2/12-cycle
//                        read/write latency)
//   color_map_table      region <-> colour mapping, swapped by the engine
//   color_write_counters nWriteGlobal / nWriteLastInterval per colour
//   interval_trigger     every K writes, if MIN_CYCLES have passed, start the engine
//   wl_engine            the algorithm: SD test, sort, flush and swap colours
// While the engine runs, the cache finishes its current request and then takes no
// new ones; the engine's flushes are carried out by the cache controller.
// Ports: a line-wide request/response port towards the upper cache level and a
// line-wide request port towards main memory (valid/ready requests, a one-cycle
// valid for responses), plus event outputs for observing the wear-levelling.
// Default parameters are the paper's configuration (4MB, 16 ways, 64 colours,
// beta 75, lambda N/4, 3M cycles); K and all interfaces are this design's choices.
module wl_llc_top #(
  parameter int unsigned ADDR_W         = wl_pkg::ADDR_W,
  parameter int unsigned LINE_W         = wl_pkg::LINE_W,
  parameter int unsigned N_COLORS       = wl_pkg::N_COLORS,
  parameter int unsigned SETS_PER_COLOR = wl_pkg::SETS_PER_COLOR,
  parameter int unsigned WAYS           = wl_pkg::WAYS,
  parameter int unsigned BETA           = wl_pkg::BETA,
  parameter int unsigned LAMBDA         = N_COLORS / 4,
  parameter int unsigned K_WRITES       = wl_pkg::K_WRITES,
  parameter int unsigned MIN_CYCLES     = wl_pkg::MIN_CYCLES,
  parameter int unsigned RD_LAT         = wl_pkg::RD_LAT,
  parameter int unsigned WR_LAT         = wl_pkg::WR_LAT,
  localparam int unsigned CW = $clog2(N_COLORS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_write,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [LINE_W-1:0] req_wdata,
  output logic              resp_valid,
  output logic [LINE_W-1:0] resp_rdata,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_write,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [LINE_W-1:0] mem_req_wdata,
  input  logic              mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_rdata,
  // observation of the wear-levelling
  output logic              wl_busy,
  output logic              wl_start,
  output logic              wl_deferred,
  output logic              wl_skipped,
  output logic              wl_swap,
  output logic              wl_flush_done,
  output logic              wl_wr_event,
  output logic [CW-1:0]     wl_wr_color,
  output logic [CW:0]       wl_n_swapped
);

  localparam int unsigned GW   = wl_pkg::GW;
  localparam int unsigned IW   = wl_pkg::IW;
  localparam int unsigned IDXW = $clog2(N_COLORS * SETS_PER_COLOR * WAYS);

  logic [CW-1:0] lk_region, lk_color, rc_color, rc_region;
  logic          swap_valid;
  logic [CW-1:0] swap_c1, swap_c2;
  logic          llc_idle, flush_req, flush_done;
  logic [CW-1:0] flush_color;
  logic          wr_event;
  logic [CW-1:0] wr_color;
  logic          clear_interval, start, deferred, skipped;
  logic [CW:0]   n_swapped;
  logic [GW-1:0] n_global [N_COLORS];
  logic [IW-1:0] n_last   [N_COLORS];

  logic              arr_rd_en, arr_wr_en, arr_ready, arr_rvalid, arr_wdone;
  logic [IDXW-1:0]   arr_idx;
  logic [LINE_W-1:0] arr_wdata, arr_rdata;

  llc_ctrl #(
    .ADDR_W(ADDR_W), .LINE_W(LINE_W), .N_COLORS(N_COLORS),
    .SETS_PER_COLOR(SETS_PER_COLOR), .WAYS(WAYS)
  ) u_llc (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_write, .req_addr, .req_wdata, .resp_valid, .resp_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .lk_region, .lk_color, .rc_color, .rc_region,
    .hold(wl_busy), .idle(llc_idle), .flush_req, .flush_color, .flush_done,
    .wr_event, .wr_color,
    .arr_rd_en, .arr_wr_en, .arr_idx, .arr_wdata, .arr_ready, .arr_rvalid, .arr_rdata, .arr_wdone
  );

  sttram_array #(
    .LINES(N_COLORS * SETS_PER_COLOR * WAYS), .LINE_W(LINE_W), .RD_LAT(RD_LAT), .WR_LAT(WR_LAT)
  ) u_array (
    .clk, .rst_n, .rd_en(arr_rd_en), .wr_en(arr_wr_en), .idx(arr_idx), .wdata(arr_wdata),
    .ready(arr_ready), .rvalid(arr_rvalid), .rdata(arr_rdata), .wdone(arr_wdone)
  );

  color_map_table #(.N_COLORS(N_COLORS)) u_map (
    .clk, .rst_n, .lk_region, .lk_color, .rc_color, .rc_region, .swap_valid, .swap_c1, .swap_c2
  );

  color_write_counters #(.N_COLORS(N_COLORS), .GW(GW), .IW(IW)) u_cnt (
    .clk, .rst_n, .wr_event, .wr_color, .clear_interval, .n_global, .n_last
  );

  interval_trigger #(.K_WRITES(K_WRITES), .MIN_CYCLES(MIN_CYCLES)) u_trig (
    .clk, .rst_n, .wr_event, .start, .deferred
  );

  wl_engine #(
    .N_COLORS(N_COLORS), .GW(GW), .IW(IW), .BETA(BETA), .LAMBDA(LAMBDA)
  ) u_engine (
    .clk, .rst_n, .start, .llc_idle, .n_global, .n_last, .busy(wl_busy),
    .flush_req, .flush_color, .flush_done, .swap_valid, .swap_c1, .swap_c2,
    .clear_interval, .skipped, .n_swapped
  );

  assign wl_start      = start;
  assign wl_deferred   = deferred;
  assign wl_skipped    = skipped;
  assign wl_swap       = swap_valid;
  assign wl_flush_done = flush_done;
  assign wl_wr_event   = wr_event;
  assign wl_wr_color   = wr_color;
  assign wl_n_swapped  = n_swapped;

endmodule
