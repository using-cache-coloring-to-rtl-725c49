// mem_model -- behavioural main-memory model used by the cache testbenches.
// Holds lines in an associative array; a line never written reads as a pattern
// derived from its address (init_line). A request is accepted after 0..3 cycles of
// mem_req_ready low; a read answers with a one-cycle mem_resp_valid LAT cycles
// later. It counts the reads and write-backs it served.
module mem_model #(
  parameter int unsigned ADDR_W = 48,
  parameter int unsigned LINE_W = 512,
  parameter int unsigned LAT    = 8
) (
  input  logic              clk,
  input  logic              mem_req_valid,
  output logic              mem_req_ready,
  input  logic              mem_req_write,
  input  logic [ADDR_W-1:0] mem_req_addr,
  input  logic [LINE_W-1:0] mem_req_wdata,
  output logic              mem_resp_valid,
  output logic [LINE_W-1:0] mem_resp_rdata
);
  logic [LINE_W-1:0] lines [longint];
  int n_reads = 0, n_writes = 0;

  function automatic logic [LINE_W-1:0] init_line(longint a);
    logic [LINE_W-1:0] v;
    for (int i = 0; i < LINE_W / 64; i++) v[i*64 +: 64] = 64'(a) * 64'h9E3779B97F4A7C15 + 64'(i);
    return v;
  endfunction

  function automatic logic [LINE_W-1:0] peek(longint a);
    return lines.exists(a) ? lines[a] : init_line(a);
  endfunction

  initial begin
    mem_req_ready = 0; mem_resp_valid = 0; mem_resp_rdata = '0;
    forever begin
      @(posedge clk);
      if (mem_req_valid && !mem_req_ready) begin
        repeat ($urandom_range(3)) @(posedge clk);
        #1 mem_req_ready = 1;
        @(posedge clk);
        if (mem_req_write) begin
          lines[longint'(mem_req_addr)] = mem_req_wdata;
          n_writes++;
          #1 mem_req_ready = 0;
        end else begin
          longint a;
          a = longint'(mem_req_addr);
          n_reads++;
          #1 mem_req_ready = 0;
          repeat (LAT) @(posedge clk);
          #1 mem_resp_rdata = peek(a); mem_resp_valid = 1;
          @(posedge clk);
          #1 mem_resp_valid = 0;
        end
      end
    end
  end
endmodule
