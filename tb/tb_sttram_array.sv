// tb_sttram_array -- self-checking test of the STT-RAM data array model.
// Random reads and writes to a 256-line array are compared with a reference copy;
// the latency of each operation (2 cycles for a read, 12 for a write, counted from
// the accepting clock edge to the edge that raises rvalid/wdone) and the ready
// signal while busy are checked.
module tb_sttram_array;
  localparam int LINES = 256, W = 512, RL = 2, WL = 12;
  logic clk = 0, rst_n = 0;
  logic rd_en, wr_en, ready, rvalid, wdone;
  logic [7:0] idx;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [LINES];
  logic written [LINES];
  int checks = 0, failures = 0;

  sttram_array #(.LINES(LINES), .LINE_W(W), .RD_LAT(RL), .WR_LAT(WL)) dut (
    .clk, .rst_n, .rd_en, .wr_en, .idx, .wdata, .ready, .rvalid, .rdata, .wdone);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd_line();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    rd_en = 0; wr_en = 0; idx = 0; wdata = '0;
    for (int i = 0; i < LINES; i++) written[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int lat, a;
      bit do_wr;
      a = $urandom_range(LINES - 1);
      do_wr = !written[a] || ($urandom_range(1) == 0);
      @(negedge clk);
      idx = 8'(a); wr_en = do_wr; rd_en = !do_wr; wdata = rnd_line();
      @(posedge clk);   // accepted here
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      lat = 0;
      checks++;
      if (ready) begin failures++; $display("ready while busy"); end
      while (!(do_wr ? wdone : rvalid)) begin @(negedge clk); lat++; if (lat > 50) break; end
      checks++;
      if (lat != (do_wr ? WL : RL)) begin failures++; $display("%s latency %0d", do_wr ? "write" : "read", lat); end
      if (do_wr) begin
        model[a] = wdata; written[a] = 1;
      end else begin
        checks++;
        if (rdata != model[a]) begin failures++; $display("line %0d read mismatch", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
