// tb_floo_router: self-checking test of one 5x5 XY router (floo_router, default parameters,
// narrow_req flits, tile (2,2)).
//
// Phase 1 measures zero-load latency: one flit from the local port to East must appear at the
// output two cycles after it was accepted (input FIFO + output elastic buffer). Phase 2 lets
// every input send random wormhole packets (1-4 flits) to destinations that XY routing can
// reach from that input, with random idle cycles, while outputs apply random backpressure. The
// checker routes each flit with its own XY rule, and at every output checks that flits arrive
// on the right port, in order per (input, output) pair, and that packets never interleave.
// Phase 3 uses a second router built for table-based routing, whose table holds YX routes for
// tile (2,2): single flits to random destinations from random inputs must each leave on the
// port the table names (checked against an independent YX function).
module tb_floo_router;
  import floo_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  id_t                my_id;
  logic [4:0]         valid_i, ready_o, valid_o, ready_i;
  narrow_req_flit_t   data_i [5], data_o [5];

  floo_router dut (
    .clk_i (clk), .rst_ni (rst_n), .id_i (my_id),
    .valid_i, .ready_o, .data_i, .valid_o, .ready_i, .data_o
  );

  // ---------------- table-routed router (YX table) ----------------
  function automatic int yx_port(int dx, int dy);
    if (dy > 2) return 0;
    if (dy < 2) return 2;
    if (dx > 2) return 1;
    if (dx < 2) return 3;
    return 4;
  endfunction

  function automatic logic [3*NumNodeIds-1:0] yx_table();
    logic [3*NumNodeIds-1:0] tbl;
    tbl = '0;
    for (int d = 0; d < NumNodeIds; d++) tbl[3*d +: 3] = 3'(yx_port(d % 8, d / 8));
    return tbl;
  endfunction

  localparam logic [3*NumNodeIds-1:0] YxTable = yx_table();

  logic [4:0]       tv_i, tr_o, tv_o, tr_i;
  narrow_req_flit_t td_i [5], td_o [5];

  floo_router #(.RouteAlgo(IdTable), .RouteTable(YxTable)) dut_tbl (
    .clk_i (clk), .rst_ni (rst_n), .id_i (my_id),
    .valid_i (tv_i), .ready_o (tr_o), .data_i (td_i),
    .valid_o (tv_o), .ready_i (tr_i), .data_o (td_o)
  );

  int checks = 0, failures = 0;
  int unsigned exp_q [5][5][$];
  int          lock_src [5];
  int          sent_flits = 0, recv_flits = 0;
  int          cycle = 0;
  always @(posedge clk) cycle++;

  // independent XY reference: port numbers N=0 E=1 S=2 W=3 L=4, North is y+1
  function automatic int ref_route(int dx, int dy, int cx, int cy);
    if (dx > cx) return 1;
    if (dx < cx) return 3;
    if (dy > cy) return 0;
    if (dy < cy) return 2;
    return 4;
  endfunction

  // a destination reachable from input port p at tile (2,2) in a 5x5 grid of ids 0..4
  function automatic id_t pick_dst(int p);
    id_t d;
    int x, y;
    do begin
      x = $urandom_range(0, 4);
      y = $urandom_range(0, 4);
      case (p)
        0: x = 2;                                // came from North: going south or eject
        2: x = 2;
        default: ;
      endcase
    end while ((p == 0 && y > 2) || (p == 2 && y < 2) || (p == 1 && x > 2) ||
               (p == 3 && x < 2) || (p == 4 && x == 2 && y == 2) ||
               (p == 0 && y == 2 && 0) || (p == 1 && x == 2 && 0) ||
               ((p == 1) && (x == 2) && (y == 2) && 0));
    d.x = 3'(x);
    d.y = 3'(y);
    return d;
  endfunction

  function automatic narrow_req_flit_t mk_flit(int p, int pkt, int idx, bit last, id_t dst);
    narrow_req_flit_t f;
    f = '0;
    f.hdr.dst_id = dst;
    f.hdr.last   = last;
    f.payload[31:0] = {5'(p), 16'(pkt), 8'(idx), 3'b101};
    return f;
  endfunction

  // ---------------- input drivers ----------------
  localparam int NumPkts = 150;
  int  pkt_cnt [5], flit_idx [5], pkt_len [5];
  id_t pkt_dst [5];
  bit  phase2 = 1'b0;
  bit  drivers_done;

  logic [4:0] in_hs = '0;
  always @(posedge clk) in_hs <= valid_i & ready_o;

  always @(negedge clk) begin
    if (phase2) begin
      for (int p = 0; p < 5; p++) begin
        if (in_hs[p]) begin
          // flit taken at the last posedge
          flit_idx[p]++;
          if (flit_idx[p] == pkt_len[p]) begin
            pkt_cnt[p]++;
            flit_idx[p] = 0;
          end
        end
        if (pkt_cnt[p] < NumPkts) begin
          if (flit_idx[p] == 0 && !(valid_i[p] && !in_hs[p])) begin
            pkt_len[p] = $urandom_range(1, 4);
            pkt_dst[p] = pick_dst(p);
          end
          if (valid_i[p] && !in_hs[p]) ;  // hold
          else begin
            valid_i[p] = ($urandom_range(0, 3) != 0) || flit_idx[p] != 0;
            data_i[p]  = mk_flit(p, pkt_cnt[p], flit_idx[p], flit_idx[p] == pkt_len[p] - 1,
                                 pkt_dst[p]);
          end
        end else valid_i[p] = 1'b0;
      end
      for (int o = 0; o < 5; o++) ready_i[o] = ($urandom_range(0, 3) != 0);
    end
  end

  // ---------------- scoreboard ----------------
  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < 5; p++) begin
        if (valid_i[p] && ready_o[p]) begin
          int o;
          o = ref_route(int'(data_i[p].hdr.dst_id.x), int'(data_i[p].hdr.dst_id.y), 2, 2);
          exp_q[p][o].push_back(data_i[p].payload[31:0]);
          sent_flits++;
        end
      end
      for (int o = 0; o < 5; o++) begin
        if (valid_o[o] && ready_i[o]) begin
          int p;
          int unsigned got;
          got = data_o[o].payload[31:0];
          p = int'(got[31:27]);
          recv_flits++;
          checks++;
          if (p > 4 || exp_q[p][o].size() == 0) begin
            failures++;
            $display("ERROR: unexpected flit %h at output %0d", got, o);
          end else begin
            if (exp_q[p][o][0] != got) begin
              failures++;
              $display("ERROR: output %0d got %h expected %h", o, got, exp_q[p][o][0]);
            end
            void'(exp_q[p][o].pop_front());
          end
          checks++;
          if (lock_src[o] >= 0 && lock_src[o] != p) begin
            failures++;
            $display("ERROR: packets interleaved on output %0d", o);
          end
          lock_src[o] = data_o[o].hdr.last ? -1 : p;
        end
      end
    end
  end

  initial begin
    int t0, lat;
    my_id.x = 3'd2;
    my_id.y = 3'd2;
    valid_i = '0;
    ready_i = '1;
    tv_i = '0;
    tr_i = '1;
    for (int p = 0; p < 5; p++) td_i[p] = '0;
    for (int p = 0; p < 5; p++) begin
      data_i[p] = '0; pkt_cnt[p] = 0; flit_idx[p] = 0; pkt_len[p] = 1; pkt_dst[p] = '0;
    end
    for (int o = 0; o < 5; o++) lock_src[o] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // ---- phase 1: zero-load latency, local -> East ----
    @(negedge clk);
    valid_i[4] = 1'b1;
    data_i[4]  = mk_flit(4, 999, 0, 1'b1, '{x: 3'd3, y: 3'd2});
    @(posedge clk);
    t0 = cycle;
    @(negedge clk);
    valid_i[4] = 1'b0;
    while (!valid_o[1]) @(negedge clk);
    lat = cycle - t0;
    checks++;
    if (lat != 2) begin
      failures++;
      $display("ERROR: zero-load latency %0d cycles, expected 2", lat);
    end else $display("zero-load router latency: %0d cycles", lat);
    @(posedge clk);
    @(negedge clk);
    // ---- phase 2: random traffic ----
    phase2 = 1'b1;
    wait (pkt_cnt[0] == NumPkts && pkt_cnt[1] == NumPkts && pkt_cnt[2] == NumPkts &&
          pkt_cnt[3] == NumPkts && pkt_cnt[4] == NumPkts);
    repeat (50) @(posedge clk);
    checks++;
    if (sent_flits != recv_flits) begin
      failures++;
      $display("ERROR: sent %0d flits, received %0d", sent_flits, recv_flits);
    end
    $display("router: %0d flits routed", recv_flits);
    // ---- phase 3: table-based routing ----
    for (int k = 0; k < 300; k++) begin
      int p, dx, dy, o, seen;
      p  = $urandom_range(0, 4);
      dx = $urandom_range(0, 7);
      dy = $urandom_range(0, 7);
      @(negedge clk);
      tv_i[p] = 1'b1;
      td_i[p] = mk_flit(p, k, 0, 1'b1, '{x: 3'(dx), y: 3'(dy)});
      do @(posedge clk); while (!tr_o[p]);
      @(negedge clk);
      tv_i[p] = 1'b0;
      seen = 0;
      for (int c = 0; c < 6 && seen == 0; c++) begin
        for (o = 0; o < 5; o++) begin
          if (tv_o[o]) begin
            seen = 1;
            checks++;
            if (o != yx_port(dx, dy) || td_o[o].payload[31:0] != td_i[p].payload[31:0]) begin
              failures++;
              $display("ERROR: table router sent flit for (%0d,%0d) to port %0d", dx, dy, o);
            end
          end
        end
        if (seen == 0) @(negedge clk);
      end
      checks++;
      if (seen == 0) begin
        failures++;
        $display("ERROR: table router lost the flit for (%0d,%0d)", dx, dy);
      end
    end
    $display("table-routed router: 300 flits checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
