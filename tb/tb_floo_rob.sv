// tb_floo_rob: self-checking test of the reorder table + reorder buffer (floo_rob, default
// parameters: 16 AXI IDs, 4 outstanding per ID, 256 entries).
//
// The testbench issues read requests with random IDs, destinations (4 of them) and burst
// lengths, and plays the network: each destination answers its requests in order after a
// random delay, different destinations in any order, each burst back to back. It checks:
//  - the rob_req decision against its own model (direct only if nothing of the ID is
//    outstanding, or everything outstanding is direct and goes to the same destination),
//  - that every ID's responses reach the output in request order, beats in order, with the
//    right ID, data and last flag,
//  - that a direct response passes from input to output in the same cycle.
// It counts direct responses, buffered responses and cycles in which a request waited for
// ROB space, and fails if any of the three never happened.
module tb_floo_rob;
  import floo_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  typedef logic [NarrowDataWidth+2+NarrowUserWidth-1:0] data_t;

  logic                   req_valid, req_ready, req_rob_req;
  logic [3:0]             req_id;
  id_t                    req_dst;
  logic [7:0]             req_len;
  logic [RobIdxWidth-1:0] req_rob_idx;
  logic                   rsp_valid, rsp_ready, rsp_rob_req, rsp_last;
  logic [RobIdxWidth-1:0] rsp_rob_idx;
  data_t                  rsp_data;
  logic                   out_valid, out_ready, out_last;
  logic [3:0]             out_id;
  data_t                  out_data;

  floo_rob dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_valid_i (req_valid), .req_ready_o (req_ready), .req_id_i (req_id),
    .req_dst_i (req_dst), .req_len_i (req_len), .req_rob_req_o (req_rob_req),
    .req_rob_idx_o (req_rob_idx),
    .rsp_valid_i (rsp_valid), .rsp_ready_o (rsp_ready), .rsp_rob_req_i (rsp_rob_req),
    .rsp_rob_idx_i (rsp_rob_idx), .rsp_last_i (rsp_last), .rsp_data_i (rsp_data),
    .out_valid_o (out_valid), .out_ready_i (out_ready), .out_id_o (out_id),
    .out_last_o (out_last), .out_data_o (out_data)
  );

  int checks = 0, failures = 0;
  int n_direct = 0, n_rob = 0, n_space_stall = 0, n_issued = 0, n_done = 0;
  localparam int NumTxn = 400;

  typedef struct {
    int txn;
    int id;
    int dst;
    int len;
    bit rob;
    int idx;
    int ready_at;
  } txn_t;

  txn_t net_q [4][$];       // per destination, in order
  txn_t id_q  [16][$];      // per ID: outstanding, in request order
  int   cycle = 0;

  function automatic data_t beat_data(int txn, int beat);
    return data_t'({32'(txn), 16'(beat), 23'h5a5a5});
  endfunction

  // handshakes, sampled at the clock edge
  bit req_hs = 1'b0, rsp_hs = 1'b0;
  always @(posedge clk) begin
    req_hs <= req_valid && req_ready;
    rsp_hs <= rsp_valid && rsp_ready;
  end

  // ---------------- request driver ----------------
  always @(negedge clk) begin
    if (rst_n) begin
      if (!req_valid || req_hs) begin
        if (n_issued < NumTxn && $urandom_range(0, 2) != 0) begin
          req_valid = 1'b1;
          req_id    = 4'($urandom_range(0, 3));      // few IDs: many per ID
          req_dst   = '{x: 3'($urandom_range(0, 3)), y: 3'd0};
          req_len   = ($urandom_range(0, 3) == 0) ? 8'($urandom_range(16, 63))
                                                  : 8'($urandom_range(0, 3));
        end else req_valid = 1'b0;
      end
      out_ready = ($urandom_range(0, 4) != 0);
    end
  end

  // ---------------- network model ----------------
  int cur_dst = -1, cur_beat = 0;
  txn_t cur;
  always @(negedge clk) begin
    if (rst_n) begin
      if (rsp_hs) begin
        cur_beat++;
        if (cur_beat > cur.len) begin
          cur_dst  = -1;
          cur_beat = 0;
        end
      end
      if (cur_dst < 0) begin
        int d;
        d = $urandom_range(0, 3);
        if (net_q[d].size() != 0 && net_q[d][0].ready_at <= cycle) begin
          cur     = net_q[d].pop_front();
          cur_dst = d;
        end
      end
      rsp_valid = (cur_dst >= 0);
      if (cur_dst >= 0) begin
        rsp_rob_req = cur.rob;
        rsp_rob_idx = RobIdxWidth'(cur.idx);
        rsp_last    = (cur_beat == cur.len);
        rsp_data    = beat_data(cur.txn, cur_beat);
      end
    end
  end

  // ---------------- scoreboard ----------------
  int out_beat [16];
  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      // request side, against the state before this cycle's completions
      if (req_valid && !req_ready && req_rob_req) n_space_stall++;
      if (req_valid && req_ready) begin
        txn_t t;
        bit exp_direct;
        exp_direct = 1'b1;
        foreach (id_q[req_id][k])
          if (id_q[req_id][k].rob || id_q[req_id][k].dst != int'(req_dst.x)) exp_direct = 1'b0;
        checks++;
        if (exp_direct == req_rob_req) begin
          failures++;
          $display("ERROR: txn %0d rob_req=%0d, model expects %0d", n_issued, req_rob_req,
                   !exp_direct);
        end
        t.txn = n_issued; t.id = int'(req_id); t.dst = int'(req_dst.x); t.len = int'(req_len);
        t.rob = req_rob_req; t.idx = int'(req_rob_idx);
        t.ready_at = cycle + $urandom_range(5, 60);
        if (!req_rob_req) begin
          checks++;
          if (req_rob_idx != RobIdxWidth'(req_id)) begin
            failures++;
            $display("ERROR: direct request does not carry its ID as rob_idx");
          end
        end
        if (req_rob_req) n_rob++; else n_direct++;
        net_q[t.dst].push_back(t);
        id_q[t.id].push_back(t);
        n_issued++;
      end
      // direct responses are forwarded in the same cycle
      if (rsp_valid && !rsp_rob_req && rsp_ready) begin
        checks++;
        if (!(out_valid && out_ready && out_data == rsp_data)) begin
          failures++;
          $display("ERROR: direct response not forwarded combinationally");
        end
      end
      if (out_valid && out_ready) begin
        txn_t h;
        checks++;
        if (id_q[out_id].size() == 0) begin
          failures++;
          $display("ERROR: response for ID %0d with nothing outstanding", out_id);
        end else begin
          h = id_q[out_id][0];
          if (out_data != beat_data(h.txn, out_beat[out_id]) ||
              out_last != (out_beat[out_id] == h.len)) begin
            failures++;
            $display("ERROR: ID %0d beat %0d of txn %0d wrong (data %h last %0d)", out_id,
                     out_beat[out_id], h.txn, out_data, out_last);
          end
          out_beat[out_id]++;
          if (out_beat[out_id] > h.len) begin
            out_beat[out_id] = 0;
            void'(id_q[out_id].pop_front());
            n_done++;
          end
        end
      end
    end
  end

  initial begin
    req_valid = 1'b0; rsp_valid = 1'b0; out_ready = 1'b0;
    req_id = '0; req_dst = '0; req_len = '0;
    rsp_rob_req = 1'b0; rsp_rob_idx = '0; rsp_last = 1'b0; rsp_data = '0;
    for (int i = 0; i < 16; i++) out_beat[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    wait (n_done == NumTxn);
    repeat (5) @(posedge clk);
    $display("rob: %0d direct, %0d buffered, %0d cycles waiting for ROB space",
             n_direct, n_rob, n_space_stall);
    checks += 3;
    if (n_direct == 0) begin failures++; $display("ERROR: no direct response"); end
    if (n_rob == 0) begin failures++; $display("ERROR: no buffered response"); end
    if (n_space_stall == 0) begin failures++; $display("ERROR: ROB never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired, %0d of %0d transactions done", n_done, NumTxn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
