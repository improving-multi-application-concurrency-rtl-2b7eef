// sync_fifo: single-clock first-in first-out buffer with valid/ready on both
// sides. DEPTH entries of type T held in a circular array; push when
// in_valid && in_ready, pop when out_valid && out_ready. The head entry is
// presented combinationally. Count is exported for drain/occupancy checks.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);
  T mem [DEPTH];
  logic [AW-1:0] rd, wr;
  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; count <= '0;
    end else begin
      if (push) begin
        mem[wr] <= in_data;
        wr <= (wr == AW'(DEPTH-1)) ? '0 : wr + 1'b1;
      end
      if (pop) rd <= (rd == AW'(DEPTH-1)) ? '0 : rd + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end
endmodule
