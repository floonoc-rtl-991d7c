// tb_floo_workload_lat_bw: latency and bandwidth sweeps between two neighbouring tiles.
//
// Two floo_compute_tile instances with default parameters sit side by side, tile (0,0) and
// tile (1,0), with AXI memory models on their target ports. Directed AXI drivers on the
// initiator ports reproduce two experiments, each one-way (tile 0 to tile 1) and both ways
// (each tile reads from the other):
//
//  - Narrow latency under wide interference: 100 narrow single-beat reads, issued one after
//    the other, run alongside N wide read bursts of 16 beats, N in {0,2,4,8,16,32,64}. The
//    narrow traffic has links of its own, so its mean latency must stay within one cycle of
//    the zero-load value for every N.
//  - Wide bandwidth under narrow interference: 16 wide read bursts of 16 beats run alongside N
//    narrow reads. The effective bandwidth is the 256 delivered beats divided by the cycles
//    from the first wide AR handshake to the last R beat, and it must stay at or above 85%.
//
// All read data are checked against the memory model's initial contents. The results are
// printed per sweep point.
module tb_floo_workload_lat_bw;
  import floo_pkg::*;
  import tb_floo_util_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NT = 2;
  localparam int NumNarrowTrans = 100;
  localparam int NumWideTrans = 16;
  localparam int BurstLen = 16;

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

  for (genvar t = 0; t < NT; t++) begin : gen_tile
    id_t tid;
    assign tid = '{x: 3'(t), y: 3'd0};
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
    tb_axi_mem #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t), .DataWidth(64), .IdWidth(4))
      i_nmem (.clk_i (clk), .rst_ni (rst_n), .req_i (n_out_req[t]), .rsp_o (n_out_rsp[t]),
              .max_delay_i (0), .rnd_i (1'b0));
    tb_axi_mem #(.req_t(wide_req_t), .rsp_t(wide_rsp_t), .DataWidth(512), .IdWidth(3))
      i_wmem (.clk_i (clk), .rst_ni (rst_n), .req_i (w_out_req[t]), .rsp_o (w_out_rsp[t]),
              .max_delay_i (0), .rnd_i (1'b0));
  end

  // East port (1) of tile 0 faces the West port (3) of tile 1; all other ports are idle.
  always_comb begin
    for (int t = 0; t < NT; t++) begin
      for (int d = 0; d < 4; d++) begin
        int n;
        n = (t == 0 && d == 1) ? 1 : (t == 1 && d == 3) ? 0 : -1;
        if (n >= 0) begin
          nreq_vi[t][d] = nreq_vo[n][(d + 2) % 4]; nreq_di[t][d] = nreq_do[n][(d + 2) % 4];
          nreq_ri[t][d] = nreq_ro[n][(d + 2) % 4];
          nrsp_vi[t][d] = nrsp_vo[n][(d + 2) % 4]; nrsp_di[t][d] = nrsp_do[n][(d + 2) % 4];
          nrsp_ri[t][d] = nrsp_ro[n][(d + 2) % 4];
          wide_vi[t][d] = wide_vo[n][(d + 2) % 4]; wide_di[t][d] = wide_do[n][(d + 2) % 4];
          wide_ri[t][d] = wide_ro[n][(d + 2) % 4];
        end else begin
          nreq_vi[t][d] = 1'b0; nreq_di[t][d] = '0; nreq_ri[t][d] = 1'b1;
          nrsp_vi[t][d] = 1'b0; nrsp_di[t][d] = '0; nrsp_ri[t][d] = 1'b1;
          wide_vi[t][d] = 1'b0; wide_di[t][d] = '0; wide_ri[t][d] = 1'b1;
        end
      end
    end
  end

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  // ---------------- directed drivers, one pair per tile ----------------
  int n_left [NT], w_left [NT];         // transactions still to issue
  int n_open [NT], w_open [NT];         // issued, not yet complete
  longint n_lat_sum [NT];
  int n_done [NT], w_beats [NT];
  int w_first [NT], w_last [NT];        // first wide AR handshake, last wide R beat
  int n_issue_at [NT];
  longint unsigned n_addr [NT][$], w_addr [NT][$];
  int w_beat_idx [NT];

  function automatic longint unsigned tile_base(int t);
    return longint'(t) << AddrXOffset;
  endfunction

  for (genvar t = 0; t < NT; t++) begin : gen_drv
    localparam int Other = 1 - t;
    initial begin
      n_in_req[t] = '0;
      w_in_req[t] = '0;
    end
    always @(posedge clk) begin
      if (rst_n) begin
        // ---- narrow: one read at a time ----
        if (n_in_req[t].ar_valid && n_in_rsp[t].ar_ready) begin
          n_in_req[t].ar_valid <= 1'b0;
          n_issue_at[t] = cycle;
        end
        if (n_in_rsp[t].r_valid) begin
          longint unsigned a;
          a = n_addr[t].pop_front();
          checks++;
          if (n_in_rsp[t].r.data != init_data(a)[63:0] || !n_in_rsp[t].r.last) begin
            failures++;
            $display("ERROR: tile %0d narrow read %h returned %h", t, a, n_in_rsp[t].r.data);
          end
          n_lat_sum[t] += longint'(cycle - n_issue_at[t]);
          n_done[t]++;
          n_open[t]--;
        end
        if (n_left[t] > 0 && n_open[t] == 0 && !n_in_req[t].ar_valid) begin
          longint unsigned a;
          a = tile_base(Other) + 64'h1000 + 64'(n_left[t] % 64) * 8;
          n_in_req[t].ar_valid <= 1'b1;
          n_in_req[t].ar.addr  <= AddrWidth'(a);
          n_in_req[t].ar.id    <= NarrowIdWidth'(n_left[t] % 16);
          n_in_req[t].ar.len   <= '0;
          n_in_req[t].ar.size  <= 3'd3;
          n_in_req[t].ar.burst <= 2'b01;
          n_addr[t].push_back(a);
          n_left[t]--;
          n_open[t]++;
        end
        n_in_req[t].r_ready <= 1'b1;
        n_in_req[t].b_ready <= 1'b1;
        // ---- wide: bursts back to back ----
        if (w_in_req[t].ar_valid && w_in_rsp[t].ar_ready) begin
          if (w_first[t] < 0) w_first[t] = cycle;
          w_left[t]--;
          if (w_left[t] == 0) w_in_req[t].ar_valid <= 1'b0;
          else begin
            longint unsigned a;
            a = tile_base(Other) + 64'h10000 + 64'(w_left[t] % 32) * 64 * BurstLen;
            w_in_req[t].ar.addr <= AddrWidth'(a);
            w_in_req[t].ar.id   <= WideIdWidth'(w_left[t] % 8);
            w_addr[t].push_back(a);
          end
        end else if (w_left[t] > 0 && !w_in_req[t].ar_valid) begin
          longint unsigned a;
          a = tile_base(Other) + 64'h10000 + 64'(w_left[t] % 32) * 64 * BurstLen;
          w_in_req[t].ar_valid <= 1'b1;
          w_in_req[t].ar.addr  <= AddrWidth'(a);
          w_in_req[t].ar.id    <= WideIdWidth'(w_left[t] % 8);
          w_in_req[t].ar.len   <= 8'(BurstLen - 1);
          w_in_req[t].ar.size  <= 3'd6;
          w_in_req[t].ar.burst <= 2'b01;
          w_addr[t].push_back(a);
        end
        if (w_in_rsp[t].r_valid) begin
          longint unsigned a;
          a = w_addr[t][0] + 64'(w_beat_idx[t]) * 64;
          checks++;
          if (w_in_rsp[t].r.data != init_data(a)) begin
            failures++;
            $display("ERROR: tile %0d wide read %h wrong data", t, a);
          end
          w_beats[t]++;
          w_last[t] = cycle;
          w_beat_idx[t]++;
          if (w_in_rsp[t].r.last) begin
            checks++;
            if (w_beat_idx[t] != BurstLen) begin
              failures++;
              $display("ERROR: tile %0d wide burst of %0d beats", t, w_beat_idx[t]);
            end
            w_beat_idx[t] = 0;
            void'(w_addr[t].pop_front());
          end
        end
        w_in_req[t].r_ready <= 1'b1;
        w_in_req[t].b_ready <= 1'b1;
      end
    end
  end

  // start a run: tile 0 always, tile 1 only when both ways
  task automatic run(int n_narrow, int n_wide, bit bidir);
    for (int t = 0; t < NT; t++) begin
      n_lat_sum[t] = 0; n_done[t] = 0; w_beats[t] = 0; w_first[t] = -1; w_last[t] = 0;
      w_beat_idx[t] = 0; n_open[t] = 0;
    end
    @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      n_left[t] = (t == 0 || bidir) ? n_narrow : 0;
      w_left[t] = (t == 0 || bidir) ? n_wide : 0;
    end
    while (n_left[0] + n_left[1] + w_left[0] + w_left[1] != 0 ||
           n_open[0] + n_open[1] != 0 ||
           w_beats[0] != ((n_wide > 0) ? n_wide * BurstLen : 0) ||
           (bidir && w_beats[1] != n_wide * BurstLen)) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  int points [7] = '{0, 2, 4, 8, 16, 32, 64};

  initial begin
    real lat0, lat, bw;
    for (int t = 0; t < NT; t++) begin
      n_left[t] = 0; w_left[t] = 0; n_open[t] = 0; w_first[t] = -1; w_beat_idx[t] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    for (int b = 0; b < 2; b++) begin
      // ---- narrow latency with wide interference ----
      lat0 = 0.0;
      for (int i = 0; i < 7; i++) begin
        run(NumNarrowTrans, points[i], b[0]);
        lat = real'(n_lat_sum[0]) / real'(n_done[0]);
        if (i == 0) lat0 = lat;
        $display("%s narrow latency, %0d wide bursts: %0.2f cycles",
                 b ? "bidir" : "one-way", points[i], lat);
        checks++;
        if (n_done[0] != NumNarrowTrans || lat > lat0 + 1.0) begin
          failures++;
          $display("ERROR: narrow latency degraded from %0.2f to %0.2f", lat0, lat);
        end
      end
      // ---- wide bandwidth with narrow interference ----
      for (int i = 0; i < 7; i++) begin
        run(points[i], NumWideTrans, b[0]);
        bw = real'(w_beats[0]) / real'(w_last[0] - w_first[0] + 1);
        $display("%s wide bandwidth, %0d narrow reads: %0d beats in %0d cycles = %0.1f%%",
                 b ? "bidir" : "one-way", points[i], w_beats[0], w_last[0] - w_first[0] + 1,
                 100.0 * bw);
        checks++;
        if (w_beats[0] != NumWideTrans * BurstLen || bw < 0.85) begin
          failures++;
          $display("ERROR: effective wide bandwidth %0.1f%% below 85%%", 100.0 * bw);
        end
      end
    end
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
