// sync_fifo: the input/output FIFO of an FFT/IFFT core.
//
// A synchronous first-in first-out queue of DEPTH words with a valid/ready
// handshake on both sides (synchronous active-low reset): a word is written when in_valid && in_ready and
// read when out_valid && out_ready, in the same cycle if both happen.  Output
// data is the head of the queue (first-word fall-through).  The paper only
// names the two FIFOs; depth, width and handshake are this design's choice.
module sync_fifo #(
  parameter int W     = 128,
  parameter int DEPTH = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [AW:0]  count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic          push, pop;

  assign in_ready  = (count != DEPTH[AW:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wr_ptr] <= in_data;

  // Handshake rules: never write when full, never read when empty.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
endmodule
