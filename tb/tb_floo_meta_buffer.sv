// tb_floo_meta_buffer: self-checking test of the target-side meta FIFO and atomic meta
// buffers (floo_meta_buffer, default parameters: 8 outstanding per direction, 4 atomics).
//
// The testbench plays both the NI (pushing write and read requests with random meta data,
// one in four writes atomic, half of those returning data) and a slave that answers ID-0
// requests in order and atomic ones, by their own IDs, in random order. It checks the IDs
// handed out (0 for ordinary requests, unique 1..4 for atomics) and that every B and R lookup
// returns exactly the meta data pushed with its request. It also checks that a fifth
// concurrent atomic is held back, and that an atomic slot stays busy until both its B and its
// R are returned.
module tb_floo_meta_buffer;
  import floo_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       aw_ready, aw_push, ar_ready, ar_push, b_pop, r_pop;
  meta_t      aw_meta, ar_meta, b_meta, r_meta;
  logic [5:0] aw_atop;
  logic [3:0] aw_id, ar_id, b_id, r_id;

  floo_meta_buffer #(.meta_t(meta_t)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .aw_ready_o (aw_ready), .aw_push_i (aw_push), .aw_meta_i (aw_meta), .aw_atop_i (aw_atop),
    .aw_id_o (aw_id),
    .ar_ready_o (ar_ready), .ar_push_i (ar_push), .ar_meta_i (ar_meta), .ar_id_o (ar_id),
    .b_id_i (b_id), .b_meta_o (b_meta), .b_pop_i (b_pop),
    .r_id_i (r_id), .r_meta_o (r_meta), .r_pop_i (r_pop)
  );

  int checks = 0, failures = 0;
  meta_t wq [$], rq [$];                 // ordinary requests, in order
  meta_t at_meta [5];                    // by atomic ID
  bit    at_b [5], at_r [5];             // responses still owed per atomic ID
  int    n_atomic = 0, n_full = 0, n_w = 0, n_r = 0, n_resp = 0;
  localparam int NumReq = 600;

  function automatic meta_t rnd_meta();
    meta_t m;
    m = meta_t'({$urandom, $urandom});
    return m;
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("ERROR: %s", msg);
    end
  endtask

  initial begin
    aw_push = 0; ar_push = 0; b_pop = 0; r_pop = 0; aw_meta = '0; ar_meta = '0; aw_atop = '0;
    b_id = '0; r_id = '0;
    for (int i = 0; i < 5; i++) begin at_b[i] = 0; at_r[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (n_w + n_r < NumReq || wq.size() != 0 || rq.size() != 0 ||
           at_b[1] || at_b[2] || at_b[3] || at_b[4] || at_r[1] || at_r[2] || at_r[3] ||
           at_r[4]) begin
      @(negedge clk);
      aw_push = 0; ar_push = 0; b_pop = 0; r_pop = 0;
      // ---- responses, for requests pushed in earlier cycles ----
      if ($urandom_range(0, 2) == 0) begin
        int k;
        k = $urandom_range(1, 4);
        if (at_b[k] && $urandom_range(0, 1) == 1) begin
          b_id = 4'(k);
          #1 check(b_meta == at_meta[k], "atomic B meta mismatch");
          b_pop = 1; at_b[k] = 0; n_resp++;
        end else if (wq.size() != 0) begin
          b_id = 0;
          #1 check(b_meta == wq[0], "B meta mismatch");
          b_pop = 1; void'(wq.pop_front()); n_resp++;
        end
      end
      if ($urandom_range(0, 2) == 0) begin
        int k;
        k = $urandom_range(1, 4);
        if (at_r[k] && !at_b[k]) begin
          r_id = 4'(k);
          #1 check(r_meta == at_meta[k], "atomic R meta mismatch");
          r_pop = 1; at_r[k] = 0; n_resp++;
        end else if (rq.size() != 0) begin
          r_id = 0;
          #1 check(r_meta == rq[0], "R meta mismatch");
          r_pop = 1; void'(rq.pop_front()); n_resp++;
        end
      end
      // ---- requests ----
      if (n_w + n_r < NumReq) begin
        aw_meta = rnd_meta();
        aw_atop = ($urandom_range(0, 3) == 0) ? {$urandom_range(0, 1) == 1, 5'b10001} : 6'd0;
        #1;
        if ($urandom_range(0, 1) == 1) begin
          if (aw_atop != 0 && !aw_ready) n_full++;
          if (aw_ready) begin
            aw_push = 1;
            if (aw_atop != 0) begin
              check(aw_id != 0 && !at_b[aw_id] && !at_r[aw_id], "atomic got a busy or zero ID");
              at_meta[aw_id] = aw_meta;
              at_b[aw_id] = 1;
              at_r[aw_id] = aw_atop[5];
              n_atomic++;
            end else begin
              check(aw_id == 0, "ordinary write not issued with ID 0");
              wq.push_back(aw_meta);
            end
            n_w++;
          end
        end
        ar_meta = rnd_meta();
        if ($urandom_range(0, 1) == 1 && ar_ready) begin
          ar_push = 1;
          check(ar_id == 0, "read not issued with ID 0");
          rq.push_back(ar_meta);
          n_r++;
        end
      end
    end
    @(negedge clk);
    aw_push = 0; ar_push = 0; b_pop = 0; r_pop = 0;
    $display("meta buffer: %0d writes (%0d atomic), %0d reads, %0d cycles atomics full",
             n_w, n_atomic, n_r, n_full);
    check(n_atomic > 0 && n_full > 0, "atomic slots never exhausted");
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
