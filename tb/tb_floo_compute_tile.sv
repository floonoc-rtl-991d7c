// tb_floo_compute_tile: end-to-end test of the tile's network part in a 2x2 mesh.
//
// Four floo_compute_tile instances (default parameters) are abutted into a 2x2 mesh: East of
// (0,y) to West of (1,y), North of (x,0) to South of (x,1). Each tile has a narrow master
// (with atomics) and a wide master standing in for its cluster, plus narrow and wide memory
// models as the cluster's slaves. Outer link inputs are idle; outer outputs must stay silent.
//
// Phase 1 measures the zero-load latency of a narrow read from tile (0,0) to its neighbour
// (1,0): four router traversals of 2 cycles, 1 cycle in the NI and 1 in the memory model give
// 10 cycles from AR handshake to the first R beat. Phase 2 lets tile (0,0) issue wide reads
// back to back (no writes in flight, so any number may be outstanding) until its wide R reorder
// buffer runs out of space. Phase 3 runs random reads, writes and
// atomics from all masters to all tiles with random memory delays and backpressure. Masters
// check data, per-ID AXI order, last flags and responses. The test counts the mechanisms of
// the design and fails if one never happened: responses buffered in a reorder buffer,
// responses forwarded directly, requests waiting for reorder-buffer space, wormhole packets
// holding a router output over several flits, router backpressure, atomics, wide W bursts
// waiting for their AW at the target, and narrow and wide traffic crossing one router in the
// same cycle.
module tb_floo_compute_tile;
  import floo_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NT = 4;
  localparam int NumNarrow = 300, NumWide = 120;

  narrow_req_t n_in_req [NT], n_out_req [NT];
  narrow_rsp_t n_in_rsp [NT], n_out_rsp [NT];
  wide_req_t   w_in_req [NT], w_out_req [NT];
  wide_rsp_t   w_in_rsp [NT], w_out_rsp [NT];

  logic [3:0]       nreq_vi [NT], nreq_ro [NT], nreq_vo [NT], nreq_ri [NT];
  narrow_req_flit_t nreq_di [NT][4], nreq_do [NT][4];
  logic [3:0]       nrsp_vi [NT], nrsp_ro [NT], nrsp_vo [NT], nrsp_ri [NT];
  narrow_rsp_flit_t nrsp_di [NT][4], nrsp_do [NT][4];
  logic [3:0]       wide_vi [NT], wide_ro [NT], wide_vo [NT], wide_ri [NT];
  wide_flit_t       wide_di [NT][4], wide_do [NT][4];

  bit en = 1'b0, rnd = 1'b0, only_rd = 1'b1;
  bit [3:0] wen = 4'b0000;   // per-tile enable of the wide masters
  int only_tile [NT];
  int mem_delay = 0;
  int nc [NT], nf [NT], ni [NT], nd [NT], na [NT], nl [NT];
  int wc [NT], wf [NT], wi [NT], wd [NT], wa [NT], wl [NT];

  for (genvar t = 0; t < NT; t++) begin : gen_tile
    localparam int X = t % 2, Y = t / 2;
    id_t tid;
    assign tid = '{x: 3'(X), y: 3'(Y)};

    floo_compute_tile i_tile (
      .clk_i (clk), .rst_ni (rst_n), .id_i (tid),
      .narrow_in_req_i (n_in_req[t]), .narrow_in_rsp_o (n_in_rsp[t]),
      .narrow_out_req_o (n_out_req[t]), .narrow_out_rsp_i (n_out_rsp[t]),
      .wide_in_req_i (w_in_req[t]), .wide_in_rsp_o (w_in_rsp[t]),
      .wide_out_req_o (w_out_req[t]), .wide_out_rsp_i (w_out_rsp[t]),
      .nreq_valid_i (nreq_vi[t]), .nreq_ready_o (nreq_ro[t]), .nreq_data_i (nreq_di[t]),
      .nreq_valid_o (nreq_vo[t]), .nreq_ready_i (nreq_ri[t]), .nreq_data_o (nreq_do[t]),
      .nrsp_valid_i (nrsp_vi[t]), .nrsp_ready_o (nrsp_ro[t]), .nrsp_data_i (nrsp_di[t]),
      .nrsp_valid_o (nrsp_vo[t]), .nrsp_ready_i (nrsp_ri[t]), .nrsp_data_o (nrsp_do[t]),
      .wide_valid_i (wide_vi[t]), .wide_ready_o (wide_ro[t]), .wide_data_i (wide_di[t]),
      .wide_valid_o (wide_vo[t]), .wide_ready_i (wide_ri[t]), .wide_data_o (wide_do[t])
    );

    tb_axi_master #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t), .DataWidth(64), .IdWidth(4),
                    .MasterIdx(t), .BusOff(0), .NumTxn(NumNarrow), .MaxLen(3),
                    .Atomics(1'b1), .SkipTile(t)) i_nm (
      .clk_i (clk), .rst_ni (rst_n), .req_o (n_in_req[t]), .rsp_i (n_in_rsp[t]),
      .enable_i (en), .rnd_i (rnd), .only_tile_i (only_tile[t]), .only_read_i (only_rd),
      .checks_o (nc[t]), .failures_o (nf[t]), .issued_o (ni[t]), .done_o (nd[t]),
      .atomics_o (na[t]), .last_rd_lat_o (nl[t])
    );
    // Wide masters keep at most two transactions in flight: with three initiators this stays
    // within the target's eight-entry wide AW buffer (and its 32-entry record FIFOs), which is
    // the condition under which wide W and wide R can share one link without deadlock.
    tb_axi_master #(.req_t(wide_req_t), .rsp_t(wide_rsp_t), .DataWidth(512), .IdWidth(3),
                    .MasterIdx(t), .BusOff(65536), .NumTxn(NumWide), .MaxLen(15),
                    .Atomics(1'b0), .SkipTile(t), .MaxOutstanding(2)) i_wm (
      .clk_i (clk), .rst_ni (rst_n), .req_o (w_in_req[t]), .rsp_i (w_in_rsp[t]),
      .enable_i (en && wen[t]), .rnd_i (rnd), .only_tile_i (only_tile[t]),
      .only_read_i (only_rd), .checks_o (wc[t]), .failures_o (wf[t]), .issued_o (wi[t]),
      .done_o (wd[t]), .atomics_o (wa[t]), .last_rd_lat_o (wl[t])
    );
    tb_axi_mem #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t), .DataWidth(64), .IdWidth(4))
      i_nmem (.clk_i (clk), .rst_ni (rst_n), .req_i (n_out_req[t]), .rsp_o (n_out_rsp[t]),
              .max_delay_i (mem_delay), .rnd_i (rnd));
    tb_axi_mem #(.req_t(wide_req_t), .rsp_t(wide_rsp_t), .DataWidth(512), .IdWidth(3))
      i_wmem (.clk_i (clk), .rst_ni (rst_n), .req_i (w_out_req[t]), .rsp_o (w_out_rsp[t]),
              .max_delay_i (mem_delay), .rnd_i (rnd));
  end

  // ---------------- mesh wiring (N=0, E=1, S=2, W=3) ----------------
  // neighbour of tile t in direction d, or -1 at the mesh edge
  function automatic int nb(int t, int d);
    int x, y;
    x = t % 2; y = t / 2;
    case (d)
      0: return (y == 0) ? t + 2 : -1;
      1: return (x == 0) ? t + 1 : -1;
      2: return (y == 1) ? t - 2 : -1;
      default: return (x == 1) ? t - 1 : -1;
    endcase
  endfunction

  always_comb begin
    for (int t = 0; t < NT; t++) begin
      for (int d = 0; d < 4; d++) begin
        int n, od;
        n  = nb(t, d);
        od = (d + 2) % 4;
        if (n >= 0) begin
          nreq_vi[t][d] = nreq_vo[n][od]; nreq_di[t][d] = nreq_do[n][od];
          nreq_ri[t][d] = nreq_ro[n][od];
          nrsp_vi[t][d] = nrsp_vo[n][od]; nrsp_di[t][d] = nrsp_do[n][od];
          nrsp_ri[t][d] = nrsp_ro[n][od];
          wide_vi[t][d] = wide_vo[n][od]; wide_di[t][d] = wide_do[n][od];
          wide_ri[t][d] = wide_ro[n][od];
        end else begin
          nreq_vi[t][d] = 1'b0; nreq_di[t][d] = '0; nreq_ri[t][d] = 1'b1;
          nrsp_vi[t][d] = 1'b0; nrsp_di[t][d] = '0; nrsp_ri[t][d] = 1'b1;
          wide_vi[t][d] = 1'b0; wide_di[t][d] = '0; wide_ri[t][d] = 1'b1;
        end
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int checks = 0, failures = 0;
  int n_rob = 0, n_direct = 0, n_space = 0, n_worm = 0, n_bp = 0, n_wwait = 0, n_both = 0;
  int n_edge = 0;

  for (genvar t = 0; t < NT; t++) begin : gen_mon
    always @(posedge clk) begin
      if (rst_n) begin
        // reorder units of the narrow R and wide R channels
        if (gen_tile[t].i_tile.i_ni.i_narrow_r_rob.alloc_push) begin
          if (gen_tile[t].i_tile.i_ni.i_narrow_r_rob.need_rob) n_rob++; else n_direct++;
        end
        if (gen_tile[t].i_tile.i_ni.i_wide_r_rob.alloc_push) begin
          if (gen_tile[t].i_tile.i_ni.i_wide_r_rob.need_rob) n_rob++; else n_direct++;
        end
        if (gen_tile[t].i_tile.i_ni.i_wide_r_rob.req_valid_i === 1'b0 &&
            w_in_req[t].ar_valid && !gen_tile[t].i_tile.i_ni.wr_alloc_ready) n_space++;
        // wormhole: a router output kept locked after a non-tail flit
        for (int d = 0; d < 4; d++) begin
          if (nreq_vo[t][d] && nreq_ri[t][d] && !nreq_do[t][d].hdr.last) n_worm++;
          if (wide_vo[t][d] && wide_ri[t][d] && !wide_do[t][d].hdr.last) n_worm++;
          if ((nreq_vo[t][d] && !nreq_ri[t][d]) || (wide_vo[t][d] && !wide_ri[t][d]) ||
              (nrsp_vo[t][d] && !nrsp_ri[t][d])) n_bp++;
          if (nb(t, d) < 0 && (nreq_vo[t][d] || nrsp_vo[t][d] || wide_vo[t][d])) n_edge++;
          if (wide_vo[t][d] && wide_ri[t][d] && (nreq_vo[t][d] && nreq_ri[t][d] ||
              nrsp_vo[t][d] && nrsp_ri[t][d])) n_both++;
        end
        if (gen_tile[t].i_tile.i_ni.tw_v && !gen_tile[t].i_tile.i_ni.tw_act_q) n_wwait++;
      end
    end
  end

  function automatic int sum(int a [NT]);
    int s = 0;
    for (int i = 0; i < NT; i++) s += a[i];
    return s;
  endfunction

  task automatic need(int cnt, string what);
    checks++;
    if (cnt == 0) begin
      failures++;
      $display("ERROR: %s never happened", what);
    end
  endtask

  initial begin
    for (int t = 0; t < NT; t++) only_tile[t] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    // ---- phase 1: zero-load narrow read from (0,0) to (1,0) ----
    only_tile[0] = 1;
    force gen_tile[1].i_nm.enable_i = 1'b0;
    force gen_tile[2].i_nm.enable_i = 1'b0;
    force gen_tile[3].i_nm.enable_i = 1'b0;
    en = 1'b1;
    wait (ni[0] >= 1);
    en = 1'b0;
    wait (nd[0] == ni[0]);
    checks++;
    $display("zero-load tile-to-tile narrow read latency: %0d cycles", nl[0]);
    if (nl[0] != 10) begin
      failures++;
      $display("ERROR: latency %0d, expected 10 (4 x 2 router + 1 NI + 1 memory)", nl[0]);
    end
    release gen_tile[1].i_nm.enable_i;
    release gen_tile[2].i_nm.enable_i;
    release gen_tile[3].i_nm.enable_i;
    @(posedge clk);
    // ---- phase 2: back-to-back wide reads from tile 0 fill its wide R reorder buffer ----
    only_tile[0] = -1;
    rnd = 1'b0; only_rd = 1'b1; mem_delay = 30; wen = 4'b0001; en = 1'b1;
    while (wd[0] < NumWide / 2) @(posedge clk);
    en = 1'b0;
    while (sum(nd) != sum(ni) || sum(wd) != sum(wi)) @(posedge clk);
    wen = '1;
    // ---- phase 3: random mixed traffic everywhere ----
    rnd = 1'b1; only_rd = 1'b0; en = 1'b1;
    while (sum(nd) != NT * NumNarrow || sum(wd) != NT * NumWide) @(posedge clk);
    repeat (20) @(posedge clk);
    checks += sum(nc) + sum(wc);
    failures += sum(nf) + sum(wf);
    $display("mesh: %0d narrow txns (%0d atomic), %0d wide txns", sum(nd), sum(na), sum(wd));
    $display("  R responses via ROB %0d, direct %0d; cycles waiting for ROB space %0d",
             n_rob, n_direct, n_space);
    $display("  non-tail flits passed %0d, backpressured link-cycles %0d, W waiting for AW %0d",
             n_worm, n_bp, n_wwait);
    $display("  narrow and wide flits on one link pair in the same cycle %0d", n_both);
    need(n_rob, "reorder-buffer allocation");
    need(n_direct, "direct (no reordering) response");
    need(n_space, "wait for reorder-buffer space");
    need(n_worm, "multi-flit wormhole packet");
    need(n_bp, "router backpressure");
    need(sum(na), "atomic transaction");
    need(n_wwait, "wide W burst waiting for its AW");
    need(n_both, "concurrent narrow and wide traffic");
    checks++;
    if (n_edge != 0) begin failures++; $display("ERROR: flits left the mesh edge"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired (narrow %0d, wide %0d done)", sum(nd), sum(wd));
    $display("TB_RESULT checks=%0d failures=%0d", checks + sum(nc) + sum(wc),
             failures + sum(nf) + sum(wf));
    $finish;
  end
endmodule
