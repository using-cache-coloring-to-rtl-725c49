// wl_engine -- the inter-set wear-levelling algorithm, run once per interval.
//
// Started by a start pulse, it waits until the cache is idle (the cache holds new
// requests while busy is high), then:
//   STATS : one colour per cycle, sums nWriteLastInterval (S1) and its squares (S2).
//   CHECK : step 1, "if SDW < beta, return". SDW is the population standard
//           deviation; the test is done without a square root as
//           N*S2 - S1^2 < N^2 * beta^2.
//   RANK  : step 2, one colour per cycle. The rank of colour i in L1 is the number
//           of colours with more interval writes (ties: lower index first), its
//           rank in L2 the number with fewer global writes; L1[rank]=L2[rank]=i.
//           The same pass counts nHigher, colours with writes above AVG = S1/N,
//           tested exactly as n_last[i]*N > S1.
//   SWAP  : steps 3-4, for k = 0 .. nColorToSwap-1 with nColorToSwap =
//           MAX(nHigher, lambda): when L1[k] != L2[k], flush colour L1[k], flush
//           colour L2[k] (flush_req held until flush_done), then swap their
//           mappings (swap_valid for one cycle). Flushing before the swap keeps
//           the write-back addresses right, because they are rebuilt from the old
//           region of the colour.
//   FINISH: clear_interval for one cycle starts a new interval.
// The algorithm follows the paper's steps. The paper calls lambda both the operand
// of MAX(nHigher, lambda) and "the fixed upper limit on nColorToSwap"; the MAX of
// the written algorithm is used here. The paper runs the algorithm as a kernel
// module; here it is a hardware sequencer, and stalling the cache while it runs is
// this design's choice. A run without remapping takes about 2N+4 cycles.
module wl_engine #(
  parameter int unsigned N_COLORS = wl_pkg::N_COLORS,
  parameter int unsigned GW       = wl_pkg::GW,
  parameter int unsigned IW       = wl_pkg::IW,
  parameter int unsigned BETA     = wl_pkg::BETA,
  parameter int unsigned LAMBDA   = N_COLORS / 4,
  localparam int unsigned CW = $clog2(N_COLORS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          llc_idle,
  input  logic [GW-1:0] n_global [N_COLORS],
  input  logic [IW-1:0] n_last   [N_COLORS],
  output logic          busy,
  output logic          flush_req,
  output logic [CW-1:0] flush_color,
  input  logic          flush_done,
  output logic          swap_valid,
  output logic [CW-1:0] swap_c1,
  output logic [CW-1:0] swap_c2,
  output logic          clear_interval,
  output logic          skipped,
  output logic [CW:0]   n_swapped
);

  localparam int unsigned S1W = IW + CW;
  localparam int unsigned S2W = 2 * IW + CW;
  localparam int unsigned VW  = 2 * IW + 2 * CW + 1;
  localparam logic [VW-1:0] THRESH = VW'(N_COLORS) * VW'(N_COLORS) * VW'(BETA) * VW'(BETA);

  // The algorithm's symbol table bounds lambda by N/2.
  if (LAMBDA > N_COLORS / 2) begin : g_lambda_check
    $error("wl_engine: LAMBDA (%0d) must not exceed N_COLORS/2", LAMBDA);
  end

  typedef enum logic [3:0] {
    S_IDLE, S_WAIT, S_STATS, S_CHECK, S_RANK, S_SETUP, S_FL1, S_FL2, S_SWAP, S_FINISH
  } state_t;

  state_t         state;
  logic [CW:0]    i;          // colour / list position being processed
  logic [S1W-1:0] s1;
  logic [S2W-1:0] s2;
  logic [CW:0]    n_higher;
  logic [CW:0]    n_to_swap;
  logic [CW-1:0]  l1 [N_COLORS];
  logic [CW-1:0]  l2 [N_COLORS];
  logic [CW-1:0]  ic;

  assign ic   = i[CW-1:0];
  assign busy = (state != S_IDLE);

  // Ranks of colour ic in L1 (decreasing n_last) and L2 (increasing n_global).
  logic [CW-1:0] rank1, rank2;
  always_comb begin
    rank1 = '0;
    rank2 = '0;
    for (int j = 0; j < N_COLORS; j++) begin
      if (n_last[j] > n_last[ic] || (n_last[j] == n_last[ic] && CW'(j) < ic))
        rank1 = rank1 + 1'b1;
      if (n_global[j] < n_global[ic] || (n_global[j] == n_global[ic] && CW'(j) < ic))
        rank2 = rank2 + 1'b1;
    end
  end

  logic [VW-1:0] var_n2;   // N*S2 - S1^2 = N^2 * SDW^2
  assign var_n2 = VW'(N_COLORS) * VW'(s2) - VW'(s1) * VW'(s1);

  logic above_avg;
  assign above_avg = (S1W'(n_last[ic]) * S1W'(N_COLORS)) > s1;

  logic [CW-1:0] c1, c2;
  assign c1 = l1[ic];
  assign c2 = l2[ic];

  always_comb begin
    flush_req   = (state == S_FL1 && i != n_to_swap && c1 != c2) || (state == S_FL2);
    flush_color = (state == S_FL2) ? c2 : c1;
    swap_valid  = (state == S_SWAP);
    swap_c1     = c1;
    swap_c2     = c2;
    clear_interval = (state == S_FINISH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      i         <= '0;
      s1        <= '0;
      s2        <= '0;
      n_higher  <= '0;
      n_to_swap <= '0;
      skipped   <= 1'b0;
      n_swapped <= '0;
      for (int j = 0; j < N_COLORS; j++) begin
        l1[j] <= '0;
        l2[j] <= '0;
      end
    end else begin
      skipped <= 1'b0;
      unique case (state)
        S_IDLE: if (start) state <= S_WAIT;
        S_WAIT: if (llc_idle) begin
          state <= S_STATS;
          i     <= '0;
          s1    <= '0;
          s2    <= '0;
        end
        S_STATS: begin
          s1 <= s1 + S1W'(n_last[ic]);
          s2 <= s2 + S2W'(n_last[ic]) * S2W'(n_last[ic]);
          if (i == (CW+1)'(N_COLORS - 1)) state <= S_CHECK;
          i <= i + 1'b1;
        end
        S_CHECK: begin
          i        <= '0;
          n_higher <= '0;
          n_swapped <= '0;
          if (var_n2 < THRESH) begin
            skipped <= 1'b1;
            state   <= S_FINISH;
          end else begin
            state <= S_RANK;
          end
        end
        S_RANK: begin
          l1[rank1] <= ic;
          l2[rank2] <= ic;
          if (above_avg) n_higher <= n_higher + 1'b1;
          if (i == (CW+1)'(N_COLORS - 1)) state <= S_SETUP;
          i <= i + 1'b1;
        end
        S_SETUP: begin
          n_to_swap <= (n_higher > (CW+1)'(LAMBDA)) ? n_higher : (CW+1)'(LAMBDA);
          i         <= '0;
          state     <= S_FL1;
        end
        S_FL1: begin
          if (i == n_to_swap)    state <= S_FINISH;
          else if (c1 == c2)     i <= i + 1'b1;      // swapping a colour with itself: no action
          else if (flush_done)   state <= S_FL2;
        end
        S_FL2: if (flush_done) state <= S_SWAP;
        S_SWAP: begin
          n_swapped <= n_swapped + 1'b1;
          i         <= i + 1'b1;
          state     <= S_FL1;
        end
        S_FINISH: state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

endmodule
