// floo_meta_buffer: target-side bookkeeping of the network interface. It remembers, for each
// request the NI hands to the local AXI slave, where the response has to go: the source tile,
// the rob_req bit and the rob_idx that came with the request (the "meta" information).
//
// Non-atomic requests are all issued on the AXI bus with the same ID (0). The slave must then
// answer them in order, so one FIFO per direction suffices: the write FIFO is pushed when an AW
// is issued and popped by its B; the read FIFO is pushed by an AR and popped by the last R beat.
// Atomic writes (AXI ATOP, atop_i != 0) need IDs of their own: each takes a free slot k of
// NumAtomics meta registers and is issued with AXI ID k+1. Its B, and for atomics that return
// data (atop_i[5]) also its R burst, find the meta information by that ID; the slot is freed
// once every expected response has gone back.
//
// Interface: *_ready_o says whether a request can be accepted (FIFO or slot free); *_push_i
// marks the AXI handshake of the request and *_id_o is the AXI ID to issue it with. The b_* and
// r_* ports look the meta data up combinationally from the response ID; *_pop_i marks the
// handshake of the B or of the last R beat. One cycle from push to a lookup being possible.
// The meta FIFO, the common ID for ordering and the separate meta buffers for atomics follow the
// paper; depths, the ID numbering and the freeing rule are this design's choices.
module floo_meta_buffer
  import floo_pkg::*;
#(
  parameter int unsigned AxiIdWidth     = NarrowIdWidth,
  parameter int unsigned MaxOutstanding = 8,
  parameter int unsigned NumAtomics     = 4,
  parameter type         meta_t         = logic [$bits(id_t)+1+RobIdxWidth-1:0]
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // write requests
  output logic                  aw_ready_o,
  input  logic                  aw_push_i,
  input  meta_t                 aw_meta_i,
  input  logic [5:0]            aw_atop_i,
  output logic [AxiIdWidth-1:0] aw_id_o,
  // read requests
  output logic                  ar_ready_o,
  input  logic                  ar_push_i,
  input  meta_t                 ar_meta_i,
  output logic [AxiIdWidth-1:0] ar_id_o,
  // write responses
  input  logic [AxiIdWidth-1:0] b_id_i,
  output meta_t                 b_meta_o,
  input  logic                  b_pop_i,
  // read responses
  input  logic [AxiIdWidth-1:0] r_id_i,
  output meta_t                 r_meta_o,
  input  logic                  r_pop_i
);
  localparam int unsigned SlotW = (NumAtomics > 1) ? $clog2(NumAtomics) : 1;

  // ---------------- FIFOs for non-atomic transactions ----------------
  logic  wf_ready, wf_valid, rf_ready, rf_valid;
  meta_t wf_head, rf_head;
  logic  is_atomic;
  assign is_atomic = (aw_atop_i != '0);

  floo_fifo #(.T(meta_t), .Depth(MaxOutstanding)) i_w_fifo (
    .clk_i, .rst_ni,
    .in_valid_i  (aw_push_i && !is_atomic),
    .in_ready_o  (wf_ready),
    .in_data_i   (aw_meta_i),
    .out_valid_o (wf_valid),
    .out_ready_i (b_pop_i && (b_id_i == '0)),
    .out_data_o  (wf_head)
  );
  floo_fifo #(.T(meta_t), .Depth(MaxOutstanding)) i_r_fifo (
    .clk_i, .rst_ni,
    .in_valid_i  (ar_push_i),
    .in_ready_o  (rf_ready),
    .in_data_i   (ar_meta_i),
    .out_valid_o (rf_valid),
    .out_ready_i (r_pop_i && (r_id_i == '0)),
    .out_data_o  (rf_head)
  );

  // ---------------- meta buffers for atomics ----------------
  meta_t                 at_meta_q [NumAtomics];
  logic [NumAtomics-1:0] at_busy_q, at_b_wait_q, at_r_wait_q;
  logic [SlotW-1:0]      free_slot;
  logic                  slot_found;

  always_comb begin
    free_slot  = '0;
    slot_found = 1'b0;
    for (int unsigned k = 0; k < NumAtomics; k++) begin
      if (!slot_found && !at_busy_q[k]) begin
        free_slot  = SlotW'(k);
        slot_found = 1'b1;
      end
    end
  end

  assign aw_ready_o = is_atomic ? slot_found : wf_ready;
  assign aw_id_o    = is_atomic ? AxiIdWidth'(free_slot) + AxiIdWidth'(1) : '0;
  assign ar_ready_o = rf_ready;
  assign ar_id_o    = '0;

  logic [SlotW-1:0] b_slot, r_slot;
  assign b_slot   = SlotW'(b_id_i - AxiIdWidth'(1));
  assign r_slot   = SlotW'(r_id_i - AxiIdWidth'(1));
  assign b_meta_o = (b_id_i == '0) ? wf_head : at_meta_q[b_slot];
  assign r_meta_o = (r_id_i == '0) ? rf_head : at_meta_q[r_slot];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      at_busy_q   <= '0;
      at_b_wait_q <= '0;
      at_r_wait_q <= '0;
    end else begin
      logic [NumAtomics-1:0] b_wait, r_wait;
      b_wait = at_b_wait_q;
      r_wait = at_r_wait_q;
      if (aw_push_i && is_atomic) begin
        b_wait[free_slot] = 1'b1;
        r_wait[free_slot] = aw_atop_i[5];
      end
      if (b_pop_i && (b_id_i != '0)) b_wait[b_slot] = 1'b0;
      if (r_pop_i && (r_id_i != '0)) r_wait[r_slot] = 1'b0;
      at_b_wait_q <= b_wait;
      at_r_wait_q <= r_wait;
      at_busy_q   <= b_wait | r_wait;
    end
  end

  always_ff @(posedge clk_i) begin
    if (aw_push_i && is_atomic) at_meta_q[free_slot] <= aw_meta_i;
  end

  // Responses must belong to an outstanding request.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      b_pop_i |-> ((b_id_i == '0) ? wf_valid : at_b_wait_q[b_slot]));
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      r_pop_i |-> ((r_id_i == '0) ? rf_valid : at_r_wait_q[r_slot]));
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      aw_push_i |-> aw_ready_o);
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      ar_push_i |-> ar_ready_o);
endmodule
