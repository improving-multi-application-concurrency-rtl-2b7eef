// tb_silver_thres: self-checking test of the Silver quota computation
// (Equation 1: thres_i = 500 * C_i * W_i / sum_j C_j * W_j) with the
// default 30 applications. Hand-computed vectors, an all-zero epoch, and
// random vectors against the same formula; checks that the update takes
// NUM_APPS cycles after epoch_end (one application per cycle).
module tb_silver_thres;
  localparam int NA = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic epoch_end, busy;
  logic [5:0] concurrent [NA], stalled [NA];
  logic [9:0] thres [NA];
  silver_thres dut (.*);

  task automatic run(output int cyc);
    @(negedge clk) epoch_end = 1;
    @(negedge clk) epoch_end = 0;
    cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int cyc;
    epoch_end = 0;
    for (int a = 0; a < NA; a++) begin concurrent[a] = 0; stalled[a] = 0; end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // app0: 4 walks x 10 stalled = 40; app1: 2 x 5 = 10; app2: 10 x 5 = 50
    concurrent[0] = 4; stalled[0] = 10;
    concurrent[1] = 2; stalled[1] = 5;
    concurrent[2] = 10; stalled[2] = 5;
    run(cyc);
    check(cyc == NA, $sformatf("one application per cycle (%0d cycles)", cyc));
    check(thres[0] == 200, $sformatf("thres0 = 500*40/100 (%0d)", thres[0]));
    check(thres[1] == 50, $sformatf("thres1 = 500*10/100 (%0d)", thres[1]));
    check(thres[2] == 250, $sformatf("thres2 = 500*50/100 (%0d)", thres[2]));
    check(thres[3] == 0, "idle application gets no quota");
    // a single stalled application takes the whole 500
    for (int a = 0; a < NA; a++) begin concurrent[a] = 0; stalled[a] = 0; end
    concurrent[7] = 63; stalled[7] = 63;
    run(cyc);
    check(thres[7] == 500 && thres[0] == 0, "single application gets 500");
    // nobody stalled: all quotas zero
    concurrent[7] = 0;
    run(cyc);
    for (int a = 0; a < NA; a++) check(thres[a] == 0, "no stalls -> no quota");
    // random epochs
    for (int n = 0; n < 5; n++) begin
      longint sum;
      sum = 0;
      for (int a = 0; a < NA; a++) begin
        concurrent[a] = 6'($urandom_range(63)); stalled[a] = 6'($urandom_range(63));
        sum += concurrent[a] * stalled[a];
      end
      run(cyc);
      for (int a = 0; a < NA; a++)
        check(thres[a] == 10'((500 * concurrent[a] * stalled[a]) / sum), "random epoch matches Eq. 1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
