// floo_fifo: valid/ready FIFO used as router input buffer, output elastic buffer and
// network-interface queue.
//
// Storage is a register array with read and write pointers. The output comes straight from the
// array, so an element written in one cycle is visible at the output in the next: a FIFO adds
// exactly one cycle of latency. in_ready_o depends only on the fill level (no combinational path
// from out_ready_i), and with Depth >= 2 it sustains one element per cycle. Reset empties it.
module floo_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned Depth = 2
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic in_valid_i,
  output logic in_ready_o,
  input  T     in_data_i,
  output logic out_valid_o,
  input  logic out_ready_i,
  output T     out_data_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  T                  mem_q [Depth];
  logic [PtrW-1:0]   rd_q, wr_q;
  logic [PtrW:0]     cnt_q;
  logic              push, pop;

  assign in_ready_o  = (cnt_q != (PtrW+1)'(Depth));
  assign out_valid_o = (cnt_q != '0);
  assign out_data_o  = mem_q[rd_q];
  assign push        = in_valid_i & in_ready_o;
  assign pop         = out_valid_o & out_ready_i;

  function automatic logic [PtrW-1:0] incr(logic [PtrW-1:0] p);
    return (p == PtrW'(Depth-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      cnt_q <= cnt_q + (PtrW+1)'(push) - (PtrW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= in_data_i;
  end

  // A full FIFO must not be written, an empty one not read.
  assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= (PtrW+1)'(Depth));
endmodule
