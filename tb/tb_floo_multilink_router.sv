// tb_floo_multilink_router: self-checking test of the three-link router of one tile (floo_multilink_router,
// default parameters, tile (2,2)).
//
// Every input of every link (narrow_req, narrow_rsp, wide) sends single-flit packets to random
// destinations that XY routing can reach from that input. A reference XY model predicts the
// output port; the checker compares each arriving flit against the per (link, input, output)
// expectation queue, so misrouting, loss, duplication, reordering or a flit leaving on the
// wrong link are all caught. In the middle of the run every wide output is held not-ready for
// a long window: the narrow links must keep delivering during that window (the links share no
// resources), and the blocked wide flits must all arrive once the outputs are released.
module tb_floo_multilink_router;
  import floo_pkg::*;

  localparam int NP = 5;
  localparam int NL = 3;                 // 0 narrow_req, 1 narrow_rsp, 2 wide
  localparam int NumFlits = 300;         // per link and input

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  id_t my_id;
  logic [NP-1:0] valid_i [NL], ready_o [NL], valid_o [NL], ready_i [NL];
  narrow_req_flit_t nreq_di [NP], nreq_do [NP];
  narrow_rsp_flit_t nrsp_di [NP], nrsp_do [NP];
  wide_flit_t       wide_di [NP], wide_do [NP];

  floo_multilink_router dut (
    .clk_i (clk), .rst_ni (rst_n), .id_i (my_id),
    .nreq_valid_i (valid_i[0]), .nreq_ready_o (ready_o[0]), .nreq_data_i (nreq_di),
    .nreq_valid_o (valid_o[0]), .nreq_ready_i (ready_i[0]), .nreq_data_o (nreq_do),
    .nrsp_valid_i (valid_i[1]), .nrsp_ready_o (ready_o[1]), .nrsp_data_i (nrsp_di),
    .nrsp_valid_o (valid_o[1]), .nrsp_ready_i (ready_i[1]), .nrsp_data_o (nrsp_do),
    .wide_valid_i (valid_i[2]), .wide_ready_o (ready_o[2]), .wide_data_i (wide_di),
    .wide_valid_o (valid_o[2]), .wide_ready_i (ready_i[2]), .wide_data_o (wide_do)
  );

  int checks = 0, failures = 0;
  int unsigned exp_q [NL][NP][NP][$];
  int sent [NL], recv [NL];
  int narrow_in_block = 0;
  bit wide_block = 1'b0;

  // XY reference: N=0 E=1 S=2 W=3 L=4, North is y+1
  function automatic int ref_route(id_t d);
    if (d.x > 3'd2) return 1;
    if (d.x < 3'd2) return 3;
    if (d.y > 3'd2) return 0;
    if (d.y < 3'd2) return 2;
    return 4;
  endfunction

  // destination reachable from input p (no U-turn, no y-to-x turn, no local loopback)
  function automatic id_t pick_dst(int p);
    id_t d;
    int x, y;
    do begin
      x = $urandom_range(0, 4);
      y = $urandom_range(0, 4);
      if (p == 0 || p == 2) x = 2;
    end while ((p == 0 && y > 2) || (p == 2 && y < 2) || (p == 1 && x > 2) ||
               (p == 3 && x < 2) || (p == 4 && x == 2 && y == 2));
    d.x = 3'(x);
    d.y = 3'(y);
    return d;
  endfunction

  function automatic int unsigned tag(int l, int p, int n);
    return {2'(l), 3'(p), 27'(n)};
  endfunction

  // ---------------- drivers (negedge), handshakes captured at posedge ----------------
  int  cnt [NL][NP];
  logic [NP-1:0] in_hs [NL];
  always @(posedge clk) for (int l = 0; l < NL; l++) in_hs[l] <= valid_i[l] & ready_o[l];

  bit run = 1'b0;
  always @(negedge clk) begin
    if (run) begin
      for (int l = 0; l < NL; l++) begin
        for (int p = 0; p < NP; p++) begin
          if (in_hs[l][p]) begin
            cnt[l][p]++;
            valid_i[l][p] = 1'b0;
          end
          if (!valid_i[l][p] && cnt[l][p] < NumFlits && $urandom_range(0, 2) != 0) begin
            id_t d;
            d = pick_dst(p);
            valid_i[l][p] = 1'b1;
            case (l)
              0: begin nreq_di[p] = '0; nreq_di[p].hdr.dst_id = d; nreq_di[p].hdr.last = 1'b1;
                       nreq_di[p].payload[31:0] = tag(l, p, cnt[l][p]); end
              1: begin nrsp_di[p] = '0; nrsp_di[p].hdr.dst_id = d; nrsp_di[p].hdr.last = 1'b1;
                       nrsp_di[p].payload[31:0] = tag(l, p, cnt[l][p]); end
              default: begin wide_di[p] = '0; wide_di[p].hdr.dst_id = d;
                       wide_di[p].hdr.last = 1'b1;
                       wide_di[p].payload[31:0] = tag(l, p, cnt[l][p]); end
            endcase
          end
        end
        for (int o = 0; o < NP; o++)
          ready_i[l][o] = (l == 2 && wide_block) ? 1'b0 : ($urandom_range(0, 3) != 0);
      end
    end
  end

  // ---------------- scoreboard ----------------
  function automatic id_t in_dst(int l, int p);
    case (l)
      0: return nreq_di[p].hdr.dst_id;
      1: return nrsp_di[p].hdr.dst_id;
      default: return wide_di[p].hdr.dst_id;
    endcase
  endfunction

  function automatic int unsigned in_tag(int l, int p);
    case (l)
      0: return nreq_di[p].payload[31:0];
      1: return nrsp_di[p].payload[31:0];
      default: return wide_di[p].payload[31:0];
    endcase
  endfunction

  function automatic int unsigned out_tag(int l, int o);
    case (l)
      0: return nreq_do[o].payload[31:0];
      1: return nrsp_do[o].payload[31:0];
      default: return wide_do[o].payload[31:0];
    endcase
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int l = 0; l < NL; l++) begin
        for (int p = 0; p < NP; p++) begin
          if (valid_i[l][p] && ready_o[l][p]) begin
            exp_q[l][p][ref_route(in_dst(l, p))].push_back(in_tag(l, p));
            sent[l]++;
          end
        end
        for (int o = 0; o < NP; o++) begin
          if (valid_o[l][o] && ready_i[l][o]) begin
            int unsigned got;
            int gl, gp;
            got = out_tag(l, o);
            gl = int'(got[31:30]);
            gp = int'(got[29:27]);
            recv[l]++;
            if (l < 2 && wide_block) narrow_in_block++;
            checks++;
            if (gl != l || gp >= NP || exp_q[l][gp][o].size() == 0) begin
              failures++;
              $display("ERROR: link %0d output %0d: unexpected flit %h", l, o, got);
            end else begin
              if (exp_q[l][gp][o][0] != got) begin
                failures++;
                $display("ERROR: link %0d output %0d got %h expected %h", l, o, got,
                         exp_q[l][gp][o][0]);
              end
              void'(exp_q[l][gp][o].pop_front());
            end
          end
        end
      end
    end
  end

  function automatic bit all_sent();
    for (int l = 0; l < NL; l++)
      for (int p = 0; p < NP; p++)
        if (cnt[l][p] < NumFlits) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    int wide_before, wide_stuck;
    my_id.x = 3'd2;
    my_id.y = 3'd2;
    for (int l = 0; l < NL; l++) begin
      valid_i[l] = '0; ready_i[l] = '1; in_hs[l] = '0; sent[l] = 0; recv[l] = 0;
      for (int p = 0; p < NP; p++) cnt[l][p] = 0;
    end
    for (int p = 0; p < NP; p++) begin nreq_di[p] = '0; nrsp_di[p] = '0; wide_di[p] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run = 1'b1;
    repeat (100) @(posedge clk);
    // ---- block all wide outputs, narrow links must keep flowing ----
    wide_block = 1'b1;
    repeat (4) @(posedge clk);
    wide_before = recv[2];
    repeat (200) @(posedge clk);
    checks++;
    if (recv[2] != wide_before) begin
      failures++;
      $display("ERROR: wide flits left a blocked output");
    end
    wide_stuck = sent[2] - recv[2];
    checks++;
    if (narrow_in_block < 100) begin
      failures++;
      $display("ERROR: only %0d narrow flits delivered while the wide link was blocked",
               narrow_in_block);
    end
    $display("wide link blocked: %0d narrow flits still delivered, %0d wide flits held",
             narrow_in_block, wide_stuck);
    wide_block = 1'b0;
    while (!all_sent()) @(posedge clk);
    repeat (50) @(posedge clk);
    for (int l = 0; l < NL; l++) begin
      checks++;
      if (sent[l] != recv[l] || sent[l] != NP * NumFlits) begin
        failures++;
        $display("ERROR: link %0d sent %0d received %0d", l, sent[l], recv[l]);
      end
    end
    $display("routed %0d narrow_req, %0d narrow_rsp, %0d wide flits", recv[0], recv[1], recv[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
