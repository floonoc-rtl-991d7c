// tb_axi_mem: behavioural AXI4 slave memory used by the testbenches (not synthesizable).
//
// It accepts AW, W and AR with random ready (when rnd_i is set), answers reads after
// 0..max_delay_i cycles in request order and writes likewise, using full-width INCR bursts.
// Unwritten words read as tb_floo_util_pkg::init_data(address). An atomic (ATOP, AtomicSwap)
// returns the old word on R (same ID) and stores the new one. With max_delay_i = 0 and rnd_i
// clear, R is valid in the cycle after the AR handshake.
module tb_axi_mem #(
  parameter type req_t     = logic,
  parameter type rsp_t     = logic,
  parameter int  DataWidth = 64,
  parameter int  IdWidth   = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  req_t req_i,
  output rsp_t rsp_o,
  input  int   max_delay_i,
  input  bit   rnd_i
);
  import tb_floo_util_pkg::*;
  localparam int Bytes = DataWidth / 8;

  typedef struct {
    logic [IdWidth-1:0] id;
    longint unsigned    addr;
    int                 len;
    int                 ready_at;
    bit                 atomic;
    logic [DataWidth-1:0] old;
  } txn_t;

  logic [DataWidth-1:0] mem [longint unsigned];
  txn_t arq [$], awq [$], bq [$];
  int   cycle = 0, r_beat = 0, w_beat = 0;

  function automatic logic [DataWidth-1:0] rd(longint unsigned a);
    if (mem.exists(a)) return mem[a];
    return init_data(a)[DataWidth-1:0];
  endfunction

  initial rsp_o = '0;

  always @(posedge clk_i) begin
    cycle++;
    if (!rst_ni) begin
      rsp_o <= '0;
    end else begin
      // ---- sample handshakes of the previous cycle's outputs ----
      if (req_i.ar_valid && rsp_o.ar_ready) begin
        txn_t t;
        t.id = req_i.ar.id; t.addr = longint'(req_i.ar.addr); t.len = int'(req_i.ar.len);
        t.ready_at = cycle + ((max_delay_i > 0) ? $urandom_range(0, max_delay_i) : 0);
        t.atomic = 1'b0; t.old = '0;
        arq.push_back(t);
      end
      if (req_i.aw_valid && rsp_o.aw_ready) begin
        txn_t t;
        t.id = req_i.aw.id; t.addr = longint'(req_i.aw.addr); t.len = int'(req_i.aw.len);
        t.ready_at = 0; t.atomic = (req_i.aw.atop != '0); t.old = '0;
        awq.push_back(t);
      end
      if (req_i.w_valid && rsp_o.w_ready) begin
        longint unsigned a;
        logic [DataWidth-1:0] d;
        a = awq[0].addr + longint'(w_beat * Bytes);
        d = rd(a);
        if (awq[0].atomic && w_beat == 0) begin
          txn_t t;
          t = awq[0];
          t.len = 0; t.old = d;
          t.ready_at = cycle + ((max_delay_i > 0) ? $urandom_range(0, max_delay_i) : 0);
          arq.push_back(t);
        end
        for (int b = 0; b < Bytes; b++) if (req_i.w.strb[b]) d[b*8 +: 8] = req_i.w.data[b*8 +: 8];
        mem[a] = d;
        w_beat++;
        if (req_i.w.last) begin
          txn_t t;
          t = awq.pop_front();
          t.ready_at = cycle + ((max_delay_i > 0) ? $urandom_range(0, max_delay_i) : 0);
          bq.push_back(t);
          w_beat = 0;
        end
      end
      if (rsp_o.b_valid && req_i.b_ready) void'(bq.pop_front());
      if (rsp_o.r_valid && req_i.r_ready) begin
        r_beat++;
        if (r_beat > arq[0].len) begin
          void'(arq.pop_front());
          r_beat = 0;
        end
      end
      // ---- drive ----
      rsp_o.ar_ready <= rnd_i ? ($urandom_range(0, 3) != 0) : 1'b1;
      rsp_o.aw_ready <= rnd_i ? ($urandom_range(0, 3) != 0) : 1'b1;
      rsp_o.w_ready  <= (awq.size() != 0) && (rnd_i ? ($urandom_range(0, 3) != 0) : 1'b1);
      if (bq.size() != 0 && bq[0].ready_at <= cycle) begin
        rsp_o.b_valid <= 1'b1;
        rsp_o.b.id    <= bq[0].id;
        rsp_o.b.resp  <= 2'b00;
        rsp_o.b.user  <= '0;
      end else rsp_o.b_valid <= 1'b0;
      if (arq.size() != 0 && arq[0].ready_at <= cycle) begin
        rsp_o.r_valid <= 1'b1;
        rsp_o.r.id    <= arq[0].id;
        rsp_o.r.data  <= arq[0].atomic ? arq[0].old
                                       : rd(arq[0].addr + longint'(r_beat * Bytes));
        rsp_o.r.resp  <= 2'b00;
        rsp_o.r.last  <= (r_beat == arq[0].len);
        rsp_o.r.user  <= '0;
      end else rsp_o.r_valid <= 1'b0;
    end
  end
endmodule
