// floo_rob: reorder table and reorder buffer (ROB) of one AXI response channel (R or B) on the
// initiator side of the network interface.
//
// Request side. When the NI injects an AXI read (or write) request, it asks this block for a
// slot: req_id_i is the AXI ID, req_dst_i the destination tile and req_len_i the burst length
// (beats - 1; 0 for B). The reorder table keeps one FIFO per AXI ID (TableDepth entries, the
// number of outstanding transactions per ID). A response needs no reordering, and gets no ROB
// space, when no transaction of its ID is outstanding, or when all outstanding ones of its ID
// go to the same destination and none of them uses the ROB: with deterministic routing such
// responses arrive in order. Otherwise req_len_i+1 consecutive ROB entries are reserved at the
// ROB's allocation pointer (circular, wrapping) and their first index is returned in
// req_rob_idx_o; a request waits (req_ready_o low) while the ROB lacks that space or the ID's
// FIFO is full, which is the end-to-end flow control: a request is only injected when the
// space for its response is reserved. For a direct response the returned index is the AXI ID.
//
// Response side. Each response flit carries back rob_req and rob_idx. A direct response is
// forwarded to the AXI port at once (it is always the oldest of its ID). A buffered response
// is written into its reserved entries (the beats of one burst arrive back to back) and is read
// out once its transaction is the oldest of its ID; readout picks such an ID round-robin and
// streams its whole burst. Entries are released as they are read; the release pointer passes
// over released entries one per cycle, so space is reclaimed in allocation order.
//
// Timing: req_* is combinational (rob_idx valid in the handshake cycle); a direct response
// passes combinationally from rsp_* to out_*; a buffered beat can leave one cycle after it was
// written. The reorder table with one FIFO per ID, ROB-index tagging, dynamic allocation for
// bursts of any length and the two "no reordering needed" rules follow the paper. The
// contiguous circular allocation, in-order reclaim, round-robin readout and not interleaving
// bursts on the output are this design's choices.
module floo_rob
  import floo_pkg::*;
#(
  parameter int unsigned IdWidth    = NarrowIdWidth,
  parameter int unsigned TableDepth = 4,
  parameter int unsigned RobSize    = 256,
  parameter type         data_t     = logic [NarrowDataWidth+2+NarrowUserWidth-1:0]
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // allocation (request path)
  input  logic                   req_valid_i,
  output logic                   req_ready_o,
  input  logic [IdWidth-1:0]     req_id_i,
  input  id_t                    req_dst_i,
  input  logic [7:0]             req_len_i,
  output logic                   req_rob_req_o,
  output logic [RobIdxWidth-1:0] req_rob_idx_o,
  // responses from the network
  input  logic                   rsp_valid_i,
  output logic                   rsp_ready_o,
  input  logic                   rsp_rob_req_i,
  input  logic [RobIdxWidth-1:0] rsp_rob_idx_i,
  input  logic                   rsp_last_i,
  input  data_t                  rsp_data_i,
  // in-order responses to the AXI port
  output logic                   out_valid_o,
  input  logic                   out_ready_i,
  output logic [IdWidth-1:0]     out_id_o,
  output logic                   out_last_o,
  output data_t                  out_data_o
);
  localparam int unsigned NumIds = 2 ** IdWidth;
  localparam int unsigned RobAw  = $clog2(RobSize);
  localparam int unsigned TblAw  = (TableDepth > 1) ? $clog2(TableDepth) : 1;

  typedef struct packed {
    logic             rob;
    logic [RobAw-1:0] base;
    logic [7:0]       len;
  } tbl_entry_t;

  // ---------------- reorder table: one FIFO per AXI ID ----------------
  tbl_entry_t       tbl_q   [NumIds][TableDepth];
  logic [TblAw-1:0] tbl_rd_q [NumIds], tbl_wr_q [NumIds];
  logic [TblAw:0]   tbl_cnt_q [NumIds];
  logic [TblAw:0]   tbl_rob_cnt_q [NumIds];  // outstanding entries that use the ROB
  id_t              last_dst_q [NumIds];
  tbl_entry_t       head [NumIds];

  for (genvar i = 0; i < NumIds; i++) begin : gen_head
    assign head[i] = tbl_q[i][tbl_rd_q[i]];
  end

  // ---------------- reorder buffer ----------------
  data_t            rob_mem_q [RobSize];
  logic [RobSize-1:0] rob_valid_q, rob_used_q;
  logic [RobAw-1:0] alloc_q, free_q;
  logic [RobAw:0]   used_cnt_q;
  logic [7:0]       wr_cnt_q;       // beat counter of the buffered response being written

  // ---------------- allocation ----------------
  logic        need_rob, space_ok, tbl_ok, alloc_push;
  logic [8:0]  n_entries;
  assign n_entries = {1'b0, req_len_i} + 9'd1;
  assign need_rob  = !((tbl_cnt_q[req_id_i] == '0) ||
                       ((tbl_rob_cnt_q[req_id_i] == '0) && (last_dst_q[req_id_i] == req_dst_i)));
  assign space_ok  = (32'(RobSize) - 32'(used_cnt_q)) >= 32'(n_entries);
  assign tbl_ok    = (tbl_cnt_q[req_id_i] != (TblAw+1)'(TableDepth));
  assign req_ready_o   = tbl_ok && (!need_rob || space_ok);
  assign alloc_push    = req_valid_i && req_ready_o;
  assign req_rob_req_o = need_rob;
  assign req_rob_idx_o = need_rob ? RobIdxWidth'(alloc_q) : RobIdxWidth'(req_id_i);

  // ---------------- readout of buffered responses ----------------
  logic              ro_active_q;
  logic [IdWidth-1:0] ro_id_q, ro_pick;
  logic [7:0]        ro_cnt_q;
  logic              ro_found;
  logic [RobAw-1:0]  ro_slot;

  always_comb begin
    ro_pick  = ro_id_q;
    ro_found = 1'b0;
    for (int unsigned k = 1; k <= NumIds; k++) begin
      if (!ro_found && tbl_cnt_q[IdWidth'(int'(ro_id_q) + k)] != '0 &&
          head[IdWidth'(int'(ro_id_q) + k)].rob &&
          rob_valid_q[head[IdWidth'(int'(ro_id_q) + k)].base]) begin
        ro_pick  = IdWidth'(int'(ro_id_q) + k);
        ro_found = 1'b1;
      end
    end
  end

  logic [IdWidth-1:0] ro_id;
  logic [7:0]         ro_cnt;
  logic               ro_valid;
  assign ro_id    = ro_active_q ? ro_id_q : ro_pick;
  assign ro_cnt   = ro_active_q ? ro_cnt_q : 8'd0;
  assign ro_slot  = head[ro_id].base + RobAw'(ro_cnt);
  assign ro_valid = (ro_active_q || ro_found) && rob_valid_q[ro_slot];

  // ---------------- direct responses ----------------
  logic              dir_valid;
  logic [IdWidth-1:0] dir_id;
  assign dir_valid = rsp_valid_i && !rsp_rob_req_i;
  assign dir_id    = rsp_rob_idx_i[IdWidth-1:0];

  // Output mux: a burst that started (buffered or direct) keeps the output until its last beat.
  logic out_lock_q, out_lock_dir_q;   // locked, and to which source
  logic sel_dir;
  always_comb begin
    if (out_lock_q) sel_dir = out_lock_dir_q;
    else            sel_dir = !ro_valid;        // buffered data first, it frees ROB space
  end
  assign out_valid_o = sel_dir ? dir_valid : ro_valid;
  assign out_id_o    = sel_dir ? dir_id : ro_id;
  assign out_data_o  = sel_dir ? rsp_data_i : rob_mem_q[ro_slot];
  assign out_last_o  = sel_dir ? rsp_last_i : (ro_cnt == head[ro_id].len);

  logic out_hs, ro_hs, dir_hs, pop;
  logic [IdWidth-1:0] pop_id;
  assign out_hs = out_valid_o && out_ready_i;
  assign ro_hs  = out_hs && !sel_dir;
  assign dir_hs = out_hs && sel_dir;
  assign pop    = out_hs && out_last_o;
  assign pop_id = out_id_o;

  // Buffered responses always have reserved space; direct ones wait for the output.
  logic rob_write;
  assign rsp_ready_o = rsp_rob_req_i ? 1'b1 : (sel_dir && out_ready_i);
  assign rob_write   = rsp_valid_i && rsp_rob_req_i;

  logic [RobAw-1:0] wr_slot;
  assign wr_slot = RobAw'(rsp_rob_idx_i) + RobAw'(wr_cnt_q);

  logic reclaim;
  assign reclaim = (used_cnt_q != '0) && !rob_used_q[free_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned i = 0; i < NumIds; i++) begin
        tbl_rd_q[i]      <= '0;
        tbl_wr_q[i]      <= '0;
        tbl_cnt_q[i]     <= '0;
        tbl_rob_cnt_q[i] <= '0;
        last_dst_q[i]    <= '0;
      end
      rob_valid_q    <= '0;
      rob_used_q     <= '0;
      alloc_q        <= '0;
      free_q         <= '0;
      used_cnt_q     <= '0;
      wr_cnt_q       <= '0;
      ro_active_q    <= 1'b0;
      ro_id_q        <= '0;
      ro_cnt_q       <= '0;
      out_lock_q     <= 1'b0;
      out_lock_dir_q <= 1'b0;
    end else begin
      // table push (allocation) and pop (last beat delivered)
      for (int unsigned i = 0; i < NumIds; i++) begin
        logic push_i, pop_i, poprob_i;
        push_i   = alloc_push && (req_id_i == IdWidth'(i));
        pop_i    = pop && (pop_id == IdWidth'(i));
        poprob_i = pop_i && head[i].rob;
        if (push_i) begin
          tbl_wr_q[i]   <= (tbl_wr_q[i] == TblAw'(TableDepth-1)) ? '0 : tbl_wr_q[i] + 1'b1;
          last_dst_q[i] <= req_dst_i;
        end
        if (pop_i) tbl_rd_q[i] <= (tbl_rd_q[i] == TblAw'(TableDepth-1)) ? '0 : tbl_rd_q[i] + 1'b1;
        tbl_cnt_q[i]     <= tbl_cnt_q[i] + (TblAw+1)'(push_i) - (TblAw+1)'(pop_i);
        tbl_rob_cnt_q[i] <= tbl_rob_cnt_q[i] + (TblAw+1)'(push_i && need_rob)
                                              - (TblAw+1)'(poprob_i);
      end
      // ROB space: reserve on allocation, release as read, reclaim in order
      if (alloc_push && need_rob) begin
        alloc_q <= alloc_q + RobAw'(n_entries);
        for (int unsigned s = 0; s < RobSize; s++)
          if (32'(RobAw'(RobAw'(s) - alloc_q)) < 32'(n_entries)) rob_used_q[s] <= 1'b1;
      end
      used_cnt_q <= used_cnt_q + ((alloc_push && need_rob) ? (RobAw+1)'(n_entries) : '0)
                               - (RobAw+1)'(reclaim);
      if (reclaim) free_q <= free_q + 1'b1;
      if (rob_write) begin
        rob_valid_q[wr_slot] <= 1'b1;
        wr_cnt_q <= rsp_last_i ? 8'd0 : wr_cnt_q + 8'd1;
      end
      if (ro_hs) begin
        rob_valid_q[ro_slot] <= 1'b0;
        rob_used_q[ro_slot]  <= 1'b0;
      end
      // readout state
      if (ro_hs) begin
        ro_id_q     <= ro_id;
        ro_active_q <= !out_last_o;
        ro_cnt_q    <= out_last_o ? 8'd0 : ro_cnt + 8'd1;
      end
      if (out_hs) begin
        out_lock_q     <= !out_last_o;
        out_lock_dir_q <= sel_dir;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (rob_write) rob_mem_q[wr_slot] <= rsp_data_i;
    if (alloc_push) tbl_q[req_id_i][tbl_wr_q[req_id_i]] <= '{rob: need_rob, base: alloc_q,
                                                              len: req_len_i};
  end

  // A direct response is always the oldest outstanding one of its ID.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      dir_hs |-> (tbl_cnt_q[dir_id] != '0) && !head[dir_id].rob)
    else $error("rob: direct response for ID %0d is not the oldest of its ID", dir_id);
  // A burst can never need more entries than the ROB has.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      req_valid_i |-> 32'(n_entries) <= RobSize);
endmodule
