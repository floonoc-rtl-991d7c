// tb_floo_nw_chimney: self-checking test of the narrow-wide network interface on its own.
//
// The NI (tile (0,0), default parameters) has its three link outputs wired back to its own
// link inputs, so every request it sends comes back to its own target side, goes to a memory
// model, and the response returns through the link to the initiator side. A narrow master
// (with AtomicSwap operations) and a wide master (bursts up to 16 x 512 bit) check data, AXI
// ID order, last flags and responses. Phase 1 measures the zero-load read round trip: one
// cycle in the NI plus one in the memory model, so the first R beat comes 2 cycles after the
// AR handshake. Phase 2 runs random traffic with random backpressure. The test fails unless
// narrow writes, atomics and wide writes whose W beats reached the target before their AW had
// been issued (the AW/W matching buffer) all occurred.
module tb_floo_nw_chimney;
  import floo_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  narrow_req_t n_in_req, n_out_req;
  narrow_rsp_t n_in_rsp, n_out_rsp;
  wide_req_t   w_in_req, w_out_req;
  wide_rsp_t   w_in_rsp, w_out_rsp;
  logic nreq_v, nreq_r, nrsp_v, nrsp_r, wide_v, wide_r;
  narrow_req_flit_t nreq_d;
  narrow_rsp_flit_t nrsp_d;
  wide_flit_t       wide_d;

  floo_nw_chimney dut (
    .clk_i (clk), .rst_ni (rst_n), .id_i ('0),
    .narrow_in_req_i (n_in_req), .narrow_in_rsp_o (n_in_rsp),
    .narrow_out_req_o (n_out_req), .narrow_out_rsp_i (n_out_rsp),
    .wide_in_req_i (w_in_req), .wide_in_rsp_o (w_in_rsp),
    .wide_out_req_o (w_out_req), .wide_out_rsp_i (w_out_rsp),
    .nreq_valid_o (nreq_v), .nreq_ready_i (nreq_r), .nreq_data_o (nreq_d),
    .nreq_valid_i (nreq_v), .nreq_ready_o (nreq_r), .nreq_data_i (nreq_d),
    .nrsp_valid_o (nrsp_v), .nrsp_ready_i (nrsp_r), .nrsp_data_o (nrsp_d),
    .nrsp_valid_i (nrsp_v), .nrsp_ready_o (nrsp_r), .nrsp_data_i (nrsp_d),
    .wide_valid_o (wide_v), .wide_ready_i (wide_r), .wide_data_o (wide_d),
    .wide_valid_i (wide_v), .wide_ready_o (wide_r), .wide_data_i (wide_d)
  );

  bit en = 1'b0, rnd = 1'b0, only_rd = 1'b1;
  int mem_delay = 0;
  int nc, nf, ni, nd, na, nl, wc, wf, wi, wd, wa, wl;

  tb_axi_master #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t), .DataWidth(64), .IdWidth(4),
                  .MasterIdx(0), .BusOff(0), .NumTxn(600), .MaxLen(7), .Atomics(1'b1),
                  .NumX(1), .NumY(1)) i_nm (
    .clk_i (clk), .rst_ni (rst_n), .req_o (n_in_req), .rsp_i (n_in_rsp), .enable_i (en),
    .rnd_i (rnd), .only_tile_i (0), .only_read_i (only_rd), .checks_o (nc), .failures_o (nf),
    .issued_o (ni), .done_o (nd), .atomics_o (na), .last_rd_lat_o (nl)
  );
  tb_axi_master #(.req_t(wide_req_t), .rsp_t(wide_rsp_t), .DataWidth(512), .IdWidth(3),
                  .MasterIdx(0), .BusOff(65536), .NumTxn(300), .MaxLen(15), .Atomics(1'b0),
                  .NumX(1), .NumY(1)) i_wm (
    .clk_i (clk), .rst_ni (rst_n), .req_o (w_in_req), .rsp_i (w_in_rsp), .enable_i (en),
    .rnd_i (rnd), .only_tile_i (0), .only_read_i (only_rd), .checks_o (wc), .failures_o (wf),
    .issued_o (wi), .done_o (wd), .atomics_o (wa), .last_rd_lat_o (wl)
  );
  tb_axi_mem #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t), .DataWidth(64), .IdWidth(4)) i_nmem (
    .clk_i (clk), .rst_ni (rst_n), .req_i (n_out_req), .rsp_o (n_out_rsp),
    .max_delay_i (mem_delay), .rnd_i (rnd)
  );
  tb_axi_mem #(.req_t(wide_req_t), .rsp_t(wide_rsp_t), .DataWidth(512), .IdWidth(3)) i_wmem (
    .clk_i (clk), .rst_ni (rst_n), .req_i (w_out_req), .rsp_o (w_out_rsp),
    .max_delay_i (mem_delay), .rnd_i (rnd)
  );

  int checks = 0, failures = 0;
  int n_w_wait = 0, n_nw = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      // a wide W burst waits at the target for its AW to be issued
      if (dut.tw_v && !dut.tw_act_q) n_w_wait++;
      if (n_out_req.w_valid && n_out_rsp.w_ready) n_nw++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    // ---- phase 1: one narrow and one wide read at zero load ----
    en = 1'b1;
    wait (ni >= 1 && wi >= 1);
    en = 1'b0;
    wait (nd == ni && wd == wi);
    checks += 2;
    $display("zero-load loopback read latency: narrow %0d, wide %0d cycles", nl, wl);
    if (nl != 2) begin failures++; $display("ERROR: narrow latency %0d, expected 2", nl); end
    if (wl != 2) begin failures++; $display("ERROR: wide latency %0d, expected 2", wl); end
    // ---- phase 2: random traffic ----
    @(posedge clk);
    rnd = 1'b1; only_rd = 1'b0; mem_delay = 20; en = 1'b1;
    wait (nd == 600 && wd == 300);
    repeat (20) @(posedge clk);
    checks += nc + wc + 3;
    failures += nf + wf;
    $display("NI: narrow %0d txns (%0d atomic, %0d W beats), wide %0d txns, %0d cycles W before AW",
             nd, na, n_nw, wd, n_w_wait);
    if (na == 0) begin failures++; $display("ERROR: no atomic"); end
    if (n_nw == 0) begin failures++; $display("ERROR: no narrow write"); end
    if (n_w_wait == 0) begin failures++; $display("ERROR: wide W never waited for its AW"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired (narrow %0d/%0d, wide %0d/%0d done)", nd, ni, wd, wi);
    $display("TB_RESULT checks=%0d failures=%0d", checks + nc + wc, failures + nf + wf);
    $finish;
  end
endmodule
