// tb_pt_root_cache: self-checking test of the per-core page table root
// registers and root cache. A root write of a core with in-flight requests
// must wait for the drain; a write of an idle core takes effect at once and
// is visible on the walker-side read port and the core's ASID output.
module tb_pt_root_cache;
  import mask_pkg::*;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [NC-1:0] set_valid, set_ready, core_busy, core_valid;
  logic [PPN_W-1:0] set_root [NC];
  logic [ASID_W-1:0] set_asid [NC], core_asid [NC], rd_asid;
  logic [CORE_W-1:0] rd_core;
  logic [PPN_W-1:0] rd_root;
  pt_root_cache #(.NUM_CORES(NC)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    set_valid = 0; core_busy = 0; rd_core = 0;
    for (int c = 0; c < NC; c++) begin set_root[c] = PPN_W'(100 + c); set_asid[c] = ASID_W'(10 + c); end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    check(core_valid == '0, "no core has a root after reset");
    set_valid = 4'b0011; core_busy = 4'b0010;
    @(posedge clk); #1;
    check(core_valid == 4'b0001, "idle core written, busy core waits");
    rd_core = 0; #1 check(rd_root == 100 && rd_asid == 10 && core_asid[0] == 10, "core 0 root visible");
    repeat (5) @(posedge clk); #1;
    check(core_valid[1] == 1'b0 && !set_ready[1], "busy core still waiting");
    core_busy = 0; #1 check(set_ready[1], "ready once drained");
    @(posedge clk); #1 set_valid = 0;
    rd_core = 1; #1 check(rd_root == 101 && rd_asid == 11 && core_asid[1] == 11, "core 1 root after drain");
    set_root[0] = 28'h55; set_asid[0] = 8'h7; set_valid = 4'b0001; @(posedge clk); #1 set_valid = 0;
    rd_core = 0; #1 check(rd_root == 28'h55 && core_asid[0] == 8'h7, "root change applied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
