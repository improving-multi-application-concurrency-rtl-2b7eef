// tb_l2_cache_bank: self-checking test of one shared L2 cache bank with a
// behavioural DRAM channel. Checks miss -> DRAM -> refill -> response with
// the right word, a hit answered exactly LATENCY cycles after its lookup
// (the lookup happens one cycle after acceptance, in the request buffer head),
// LRU replacement in a 16-way set, the lookup reports, write-through and
// write acknowledgement, and a full request buffer pushing back.
module tb_l2_cache_bank;
  import mask_pkg::*;
  import mask_tb_pkg::*;
  localparam int LAT = 10, SETS = 64, WAYS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic req_valid, req_ready, rsp_valid, dreq_valid, dreq_ready, dfill_valid, dfill_ready;
  logic ev_valid, ev_hit;
  depth_t ev_depth;
  mem_req_t req; mem_rsp_t rsp; dram_req_t dreq; dram_rsp_t dfill;
  int n_reads, n_row_hits, nwrites;

  l2_cache_bank #(.SETS(SETS), .WAYS(WAYS), .LATENCY(LAT)) dut (.*);
  dram_model u_dram (.clk, .rst_n, .stall(1'b0), .cmd_valid(dreq_valid), .cmd_ready(dreq_ready), .cmd(dreq),
    .rsp_valid(dfill_valid), .rsp_ready(dfill_ready), .rsp(dfill), .n_reads, .n_row_hits);
  always @(posedge clk) if (rst_n && dreq_valid && dreq_ready && dreq.req.we) nwrites++;

  int nev = 0, nev_hit = 0;
  always @(posedge clk) if (rst_n && ev_valid) begin nev++; if (ev_hit) nev_hit++; end

  // address in set s of this bank (bank bit 10 = 0), line tag t, word w
  function automatic logic [PA_W-1:0] A(input int s, input int t, input int w);
    return {PA_W'(t) << 17} | {PA_W'(s) << 11} | PA_W'(w * 8);
  endfunction

  // read and wait for the response; returns the cycles from acceptance
  task automatic rd(input logic [PA_W-1:0] a, input int d, output int lat);
    req_valid = 1; req = '0; req.addr = a; req.depth = 3'(d); req.src = 8'h5a;
    @(posedge clk); while (!req_ready) @(posedge clk);
    #1 req_valid = 0; lat = 1;
    while (!rsp_valid) begin @(posedge clk); #1 lat++; end
    check(rsp.src == 8'h5a && rsp.depth == 3'(d), "response tag");
    check(rsp.data == mem_word(a), $sformatf("response data for %h", a));
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int lat, r0;
    req_valid = 0; req = '0; nwrites = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    rd(A(3, 1, 2), 0, lat); check(lat > LAT + 15, $sformatf("miss goes to DRAM (%0d cycles)", lat));
    rd(A(3, 1, 5), 2, lat); check(lat == LAT + 1, $sformatf("hit after LATENCY cycles (%0d)", lat));
    check(nev == 2 && nev_hit == 1, "lookups reported");
    // fill all 16 ways of set 3 (tag 1 already there) -> tags 1..16
    for (int t = 2; t <= WAYS; t++) rd(A(3, t, 0), 0, lat);
    rd(A(3, 1, 0), 0, lat); check(lat == LAT + 1, "tag 1 still cached and now most recent");
    r0 = n_reads;
    rd(A(3, 17, 0), 0, lat);   // evicts tag 2 (LRU)
    rd(A(3, 2, 0), 0, lat); check(lat > LAT, "LRU line was evicted");
    rd(A(3, 1, 1), 0, lat); check(lat == LAT + 1, "recently used line kept");
    check(n_reads == r0 + 2, "only the two misses read DRAM");
    // write-through: ack after LATENCY, DRAM sees the write
    req_valid = 1; req = '0; req.addr = A(3, 1, 4); req.we = 1; req.wdata = 64'hDEAD_BEEF; req.src = 8'h11;
    @(posedge clk); #1 req_valid = 0; lat = 1;
    while (!rsp_valid) begin @(posedge clk); #1 lat++; end
    check(lat == LAT + 1 && rsp.src == 8'h11, "write acknowledged after LATENCY");
    check(nwrites == 1, "write written through to DRAM");
    req_valid = 1; req = '0; req.addr = A(3, 1, 4); req.src = 8'h12;
    @(posedge clk); #1 req_valid = 0;
    while (!rsp_valid) begin @(posedge clk); #1; end
    check(rsp.data == 64'hDEAD_BEEF, "write hit updated the line");
    @(posedge clk);
    // back-pressure: many misses to distinct lines fill the request buffer
    begin
      int stalls;
      stalls = 0;
      for (int i = 0; i < 40; i++) begin
        req_valid = 1; req = '0; req.addr = A(9, 100 + i, 0);
        @(posedge clk); while (!req_ready) begin stalls++; @(posedge clk); end
        #1;
      end
      req_valid = 0;
      check(stalls > 0, "request buffer fills and pushes back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
