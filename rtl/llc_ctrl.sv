// llc_ctrl -- controller of the colour-mapped, write-back STT-RAM last-level cache.
//
// Requests arrive one line at a time from the level above (a read returns the line,
// a write is a full-line write-back from the upper level). The set index is not
// taken straight from the address: the region bits (low page-number bits) go
// through the region-to-colour table, and the set is {colour, set within colour}.
// Because a colour is flushed whenever its region changes, every line in a colour
// belongs to the region that colour holds, so the tag needs only the bits above the
// region and the set-matching is the ordinary one.
//
// Operation (one request at a time):
//   LOOKUP  : tag compare over the WAYS ways of the set.
//   hit     : read -> array read, response with the line; write -> array write,
//             line marked dirty, response as acknowledgement.
//   miss    : victim = first invalid way, else the least recently used way. A dirty
//             victim is read and written back to memory, its address rebuilt from
//             its tag, Region[colour] and the set within the colour. A read miss
//             then fetches the line from memory; a write miss writes the full line
//             without fetching. The line is written into the array (a fill).
//   flush   : on flush_req the 64 sets x WAYS ways of flush_color are walked; dirty
//             lines are written back, every line is invalidated; flush_done pulses.
// LRU is kept as a per-way age (0 = most recent), reset to a permutation by an
// initialisation walk over all sets after reset (SETS cycles). Every write into the
// array (write hit or fill) is reported on wr_event/wr_color for the per-colour
// write counters. New requests and flushes are taken only in IDLE, and no new
// request is taken while hold (the wear-levelling engine runs) is high.
// The cache geometry and LRU follow the paper; the request/memory handshakes,
// write-allocate without fetch for full-line writes, and counting fills as writes
// are this design's choices.
module llc_ctrl #(
  parameter int unsigned ADDR_W         = wl_pkg::ADDR_W,
  parameter int unsigned LINE_W         = wl_pkg::LINE_W,
  parameter int unsigned N_COLORS       = wl_pkg::N_COLORS,
  parameter int unsigned SETS_PER_COLOR = wl_pkg::SETS_PER_COLOR,
  parameter int unsigned WAYS           = wl_pkg::WAYS,
  localparam int unsigned CW    = $clog2(N_COLORS),
  localparam int unsigned SW    = $clog2(SETS_PER_COLOR),
  localparam int unsigned SETW  = CW + SW,
  localparam int unsigned SETS  = N_COLORS * SETS_PER_COLOR,
  localparam int unsigned WW    = $clog2(WAYS),
  localparam int unsigned OFF   = $clog2(LINE_W / 8),
  localparam int unsigned TAG_W = ADDR_W - OFF - SW - CW,
  localparam int unsigned IDXW  = SETW + WW
) (
  input  logic              clk,
  input  logic              rst_n,
  // upper-level request / response
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_write,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [LINE_W-1:0] req_wdata,
  output logic              resp_valid,
  output logic [LINE_W-1:0] resp_rdata,
  // main memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_write,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [LINE_W-1:0] mem_req_wdata,
  input  logic              mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_rdata,
  // colour mapping table
  output logic [CW-1:0]     lk_region,
  input  logic [CW-1:0]     lk_color,
  output logic [CW-1:0]     rc_color,
  input  logic [CW-1:0]     rc_region,
  // wear-levelling engine
  input  logic              hold,
  output logic              idle,
  input  logic              flush_req,
  input  logic [CW-1:0]     flush_color,
  output logic              flush_done,
  output logic              wr_event,
  output logic [CW-1:0]     wr_color,
  // STT-RAM data array
  output logic              arr_rd_en,
  output logic              arr_wr_en,
  output logic [IDXW-1:0]   arr_idx,
  output logic [LINE_W-1:0] arr_wdata,
  input  logic              arr_ready,
  input  logic              arr_rvalid,
  input  logic [LINE_W-1:0] arr_rdata,
  input  logic              arr_wdone
);

  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic [TAG_W-1:0] tag;
  } tag_entry_t;

  typedef enum logic [4:0] {
    S_INIT, S_IDLE, S_LOOKUP,
    S_HRD_ISSUE, S_HRD_WAIT, S_HWR_ISSUE, S_HWR_WAIT,
    S_VRD_ISSUE, S_VRD_WAIT, S_VWB,
    S_MRD, S_MRD_WAIT, S_FILL_ISSUE, S_FILL_WAIT, S_RESP,
    S_FL_SCAN, S_FL_RD_ISSUE, S_FL_RD_WAIT, S_FL_WB, S_FL_DONE
  } state_t;

  // One row per set: all ways' tag entries, and all ways' LRU ages.
  typedef tag_entry_t [WAYS-1:0] tag_row_t;
  typedef logic [WAYS-1:0][WW-1:0] age_row_t;
  tag_row_t tag_mem [SETS];
  age_row_t age_mem [SETS];

  state_t            state;
  logic              q_write;
  logic [ADDR_W-1:0] q_addr;
  logic [LINE_W-1:0] line_q;     // write data, fetched line or line being written back
  logic [SETW-1:0]   cur_set;
  logic [WW-1:0]     cur_way;
  logic [TAG_W-1:0]  wb_tag;
  logic [SW:0]       fl_set;     // flush walk position (one extra bit to end the walk)

  // The full-line write data must survive a dirty-victim write-back, which reuses
  // line_q, so it is kept in its own register as well.
  logic [LINE_W-1:0] req_wdata_q;
  always_ff @(posedge clk) begin
    if (req_valid && req_ready) req_wdata_q <= req_wdata;
  end

  logic [SW-1:0]    q_sic;
  logic [TAG_W-1:0] q_tag;
  assign lk_region = q_addr[OFF+SW +: CW];
  assign q_sic     = q_addr[OFF +: SW];
  assign q_tag     = q_addr[ADDR_W-1 -: TAG_W];

  // ---------------------------------------------------------------- lookup
  logic [SETW-1:0] lk_set;
  assign lk_set = {lk_color, q_sic};

  tag_row_t lk_tags, cur_tags;
  age_row_t lk_ages, cur_ages;
  assign lk_tags  = tag_mem[lk_set];
  assign lk_ages  = age_mem[lk_set];
  assign cur_tags = tag_mem[cur_set];
  assign cur_ages = age_mem[cur_set];

  logic          hit;
  logic [WW-1:0] hit_way;
  logic          any_inv;
  logic [WW-1:0] inv_way;
  logic [WW-1:0] lru_way;
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    any_inv = 1'b0;
    inv_way = '0;
    lru_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (lk_tags[w].valid && lk_tags[w].tag == q_tag) begin
        hit     = 1'b1;
        hit_way = WW'(w);
      end
      if (!lk_tags[w].valid) begin
        any_inv = 1'b1;
        inv_way = WW'(w);
      end
      if (lk_ages[w] == WW'(WAYS - 1)) lru_way = WW'(w);
    end
  end

  logic [WW-1:0] victim;
  assign victim = any_inv ? inv_way : lru_way;

  // ---------------------------------------------------------------- outputs
  assign rc_color = cur_set[SETW-1 -: CW];
  assign idle     = (state == S_IDLE);
  assign req_ready = (state == S_IDLE) && !hold && !flush_req;

  always_comb begin
    arr_rd_en     = (state == S_HRD_ISSUE) || (state == S_VRD_ISSUE) || (state == S_FL_RD_ISSUE);
    arr_wr_en     = (state == S_HWR_ISSUE) || (state == S_FILL_ISSUE);
    arr_idx       = {cur_set, cur_way};
    arr_wdata     = line_q;
    wr_event      = arr_wr_en && arr_ready;
    wr_color      = cur_set[SETW-1 -: CW];
    mem_req_valid = (state == S_VWB) || (state == S_FL_WB) || (state == S_MRD);
    mem_req_write = (state != S_MRD);
    mem_req_addr  = (state == S_MRD)
                  ? {q_addr[ADDR_W-1:OFF], OFF'(0)}
                  : {wb_tag, rc_region, cur_set[SW-1:0], OFF'(0)};
    mem_req_wdata = line_q;
    resp_valid    = (state == S_RESP);
    resp_rdata    = line_q;
    flush_done    = (state == S_FL_DONE);
  end

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_INIT;
      q_write <= 1'b0;
      q_addr  <= '0;
      line_q  <= '0;
      cur_set <= '0;
      cur_way <= '0;
      wb_tag  <= '0;
      fl_set  <= '0;
    end else begin
      unique case (state)
        S_INIT: begin
          cur_set <= cur_set + 1'b1;
          if (cur_set == SETW'(SETS - 1)) state <= S_IDLE;
        end

        S_IDLE: begin
          if (flush_req) begin
            cur_set <= {flush_color, SW'(0)};
            cur_way <= '0;
            fl_set  <= '0;
            state   <= S_FL_SCAN;
          end else if (req_valid && !hold) begin
            q_write <= req_write;
            q_addr  <= req_addr;
            line_q  <= req_wdata;
            state   <= S_LOOKUP;
          end
        end

        S_LOOKUP: begin
          cur_set <= lk_set;
          if (hit) begin
            cur_way <= hit_way;
            state   <= q_write ? S_HWR_ISSUE : S_HRD_ISSUE;
          end else begin
            cur_way <= victim;
            wb_tag  <= lk_tags[victim].tag;
            if (lk_tags[victim].valid && lk_tags[victim].dirty)
              state <= S_VRD_ISSUE;
            else
              state <= q_write ? S_FILL_ISSUE : S_MRD;
          end
        end

        S_HRD_ISSUE: if (arr_ready) state <= S_HRD_WAIT;
        S_HRD_WAIT: if (arr_rvalid) begin
          line_q <= arr_rdata;
          state  <= S_RESP;
        end
        S_HWR_ISSUE: if (arr_ready) state <= S_HWR_WAIT;
        S_HWR_WAIT: if (arr_wdone) begin
          state <= S_RESP;
        end

        // dirty victim: read it, then write it back
        S_VRD_ISSUE: if (arr_ready) state <= S_VRD_WAIT;
        S_VRD_WAIT: if (arr_rvalid) begin
          line_q <= arr_rdata;
          state  <= S_VWB;
        end
        S_VWB: if (mem_req_ready) begin
          if (q_write) begin
            line_q <= req_wdata_q;
            state  <= S_FILL_ISSUE;
          end else begin
            state  <= S_MRD;
          end
        end

        S_MRD: if (mem_req_ready) state <= S_MRD_WAIT;
        S_MRD_WAIT: if (mem_resp_valid) begin
          line_q <= mem_resp_rdata;
          state  <= S_FILL_ISSUE;
        end
        S_FILL_ISSUE: if (arr_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (arr_wdone) begin
          state <= S_RESP;
        end

        S_RESP: state <= S_IDLE;

        // colour flush: walk every way of every set of the colour
        S_FL_SCAN: begin
          if (fl_set[SW]) begin
            state <= S_FL_DONE;
          end else if (cur_tags[cur_way].valid && cur_tags[cur_way].dirty) begin
            wb_tag <= cur_tags[cur_way].tag;
            state  <= S_FL_RD_ISSUE;
          end else begin
            next_flush_line();
          end
        end
        S_FL_RD_ISSUE: if (arr_ready) state <= S_FL_RD_WAIT;
        S_FL_RD_WAIT: if (arr_rvalid) begin
          line_q <= arr_rdata;
          state  <= S_FL_WB;
        end
        S_FL_WB: if (mem_req_ready) begin
          next_flush_line();
          state <= S_FL_SCAN;
        end
        S_FL_DONE: state <= S_IDLE;

        default: state <= S_IDLE;
      endcase
    end
  end

  // LRU age update: the touched way becomes 0, younger ways age by one.
  function automatic age_row_t touched(age_row_t ages, logic [WW-1:0] way);
    age_row_t r;
    for (int w = 0; w < WAYS; w++) begin
      if (WW'(w) == way)           r[w] = '0;
      else if (ages[w] < ages[way]) r[w] = ages[w] + 1'b1;
      else                          r[w] = ages[w];
    end
    return r;
  endfunction

  // ---------------------------------------------------------------- tag / LRU arrays
  // At most one tag row and one age row are written per cycle.
  logic            tag_we, age_we;
  logic [SETW-1:0] age_wset;
  tag_row_t        tag_wrow;
  age_row_t        age_wrow;
  always_comb begin
    tag_we   = 1'b0;
    tag_wrow = cur_tags;
    age_we   = 1'b0;
    age_wset = cur_set;
    age_wrow = cur_ages;
    unique case (state)
      S_INIT: begin
        tag_we   = 1'b1;
        tag_wrow = '0;
        age_we   = 1'b1;
        for (int w = 0; w < WAYS; w++) age_wrow[w] = WW'(w);
      end
      S_LOOKUP: if (hit) begin
        age_we   = 1'b1;
        age_wset = lk_set;
        age_wrow = touched(lk_ages, hit_way);
      end
      S_HWR_WAIT: if (arr_wdone) begin
        tag_we = 1'b1;
        tag_wrow[cur_way].dirty = 1'b1;
      end
      S_VWB: if (mem_req_ready) begin
        tag_we = 1'b1;
        tag_wrow[cur_way].valid = 1'b0;
      end
      S_FILL_WAIT: if (arr_wdone) begin
        tag_we   = 1'b1;
        tag_wrow[cur_way] = '{valid: 1'b1, dirty: q_write, tag: q_tag};
        age_we   = 1'b1;
        age_wrow = touched(cur_ages, cur_way);
      end
      S_FL_SCAN: if (!fl_set[SW] && !(cur_tags[cur_way].valid && cur_tags[cur_way].dirty)) begin
        tag_we = 1'b1;
        tag_wrow[cur_way].valid = 1'b0;
      end
      S_FL_WB: if (mem_req_ready) begin
        tag_we = 1'b1;
        tag_wrow[cur_way] = '0;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (tag_we) tag_mem[cur_set]  <= tag_wrow;
    if (age_we) age_mem[age_wset] <= age_wrow;
  end

  task automatic next_flush_line();
    cur_way <= cur_way + 1'b1;
    if (cur_way == WW'(WAYS - 1)) begin
      cur_set[SW-1:0] <= cur_set[SW-1:0] + 1'b1;
      fl_set          <= fl_set + 1'b1;
    end
  endtask

  a_hold_no_accept: assert property (@(posedge clk) disable iff (!rst_n) hold |-> !req_ready)
    else $error("llc_ctrl accepted a request while held");
  a_one_array_op: assert property (@(posedge clk) disable iff (!rst_n) !(arr_rd_en && arr_wr_en))
    else $error("llc_ctrl issued array read and write together");

endmodule
