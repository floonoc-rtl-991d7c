// floo_rr_arb: round-robin arbiter with a valid/ready handshake on every input.
//
// Among the requesting inputs, the first one after the last granted input wins. The priority
// pointer moves only when a grant is accepted downstream (out_valid_o & out_ready_i), so the
// grant is stable while the output is stalled. With Lock set, an input that was granted keeps
// the output until it presents a flit whose last_i bit is set (wormhole packets stay whole).
// Purely combinational from request to grant; the pointer and the lock are the only state.
module floo_rr_arb #(
  parameter int unsigned N    = 4,
  parameter type         T    = logic [7:0],
  parameter bit          Lock = 1'b1
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [N-1:0] valid_i,
  output logic [N-1:0] ready_o,
  input  T             data_i [N],
  input  logic [N-1:0] last_i,
  output logic         out_valid_o,
  input  logic         out_ready_i,
  output T             out_data_o,
  output logic [$clog2(N > 1 ? N : 2)-1:0] idx_o
);
  localparam int unsigned IdxW = $clog2(N > 1 ? N : 2);

  logic [IdxW-1:0] prio_q, lock_idx_q, sel;
  logic            locked_q, found;

  always_comb begin
    sel   = '0;
    found = 1'b0;
    if (Lock && locked_q) begin
      sel   = lock_idx_q;
      found = valid_i[lock_idx_q];
    end else begin
      for (int unsigned k = 0; k < N; k++) begin
        if (!found && valid_i[(int'(prio_q) + 1 + k) % N]) begin
          sel   = IdxW'((int'(prio_q) + 1 + k) % N);
          found = 1'b1;
        end
      end
    end
  end

  assign out_valid_o = found;
  assign out_data_o  = data_i[sel];
  assign idx_o       = sel;

  always_comb begin
    ready_o = '0;
    if (found) ready_o[sel] = out_ready_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prio_q     <= IdxW'(N-1);
      lock_idx_q <= '0;
      locked_q   <= 1'b0;
    end else if (found && out_ready_i) begin
      prio_q     <= sel;
      lock_idx_q <= sel;
      locked_q   <= Lock && !last_i[sel];
    end
  end
endmodule
