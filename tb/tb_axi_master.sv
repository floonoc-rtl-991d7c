// tb_axi_master: behavioural AXI4 traffic generator and checker used by the testbenches.
//
// It issues NumTxn random reads and writes (and, with Atomics, AtomicSwap operations) to the
// tiles of a NumX x NumY mesh. Every master owns private slots in every tile (offset BusOff +
// MasterIdx * 16 KiB), and a slot is never accessed by two of its transactions at once, so the
// master can predict every read: from what it wrote, or tb_floo_util_pkg::init_data. IDs are
// random, so transactions of one ID go to different tiles and their responses may arrive out
// of order in the network. SkipTile (its own tile) is never addressed: a tile reaches its own
// memory inside the cluster, and the router has no local-to-local connection. The checker requires AXI order per ID: R beats and B responses of
// an ID in the order the requests were issued, the right data, last flags and OKAY responses.
// All outputs change at the rising clock edge, after the handshakes of the cycle are sampled.
module tb_axi_master #(
  parameter type req_t     = logic,
  parameter type rsp_t     = logic,
  parameter int  DataWidth = 64,
  parameter int  IdWidth   = 4,
  parameter int  MasterIdx = 0,
  parameter int  BusOff    = 0,
  parameter int  NumTxn    = 100,
  parameter int  MaxLen    = 3,
  parameter bit  Atomics   = 1'b0,
  parameter int  NumX      = 2,
  parameter int  NumY      = 2,
  parameter int  SkipTile  = -1,    // never addressed (the master's own tile)
  parameter int  MaxOutstanding = 1 << 20  // cap on reads plus writes in flight (mixed traffic)
) (
  input  logic clk_i,
  input  logic rst_ni,
  output req_t req_o,
  input  rsp_t rsp_i,
  input  bit   enable_i,
  input  bit   rnd_i,        // random idle cycles and ready
  input  int   only_tile_i,  // >= 0: send everything to this tile
  input  bit   only_read_i,
  output int   checks_o,
  output int   failures_o,
  output int   issued_o,
  output int   done_o,
  output int   atomics_o,
  output int   last_rd_lat_o  // cycles from the last AR handshake to its first R beat
);
  import tb_floo_util_pkg::*;
  localparam int Bytes    = DataWidth / 8;
  localparam int NumSlots = 8;
  localparam int SlotSize = (MaxLen + 1) * Bytes;
  localparam int NumIds   = 2 ** IdWidth;

  typedef struct {
    longint unsigned      addr;
    int                   len;
    int                   slot;
    bit                   atomic;
    logic [DataWidth-1:0] old;
    int                   t_issue;
  } txn_t;

  logic [DataWidth-1:0] ref_mem [longint unsigned];
  bit   slot_busy [NumX*NumY][NumSlots];
  txn_t rq [NumIds][$], bq [NumIds][$], wq [$];
  int   r_beat [NumIds];
  int   w_beat = 0, cycle = 0, outstanding = 0;
  int   checks = 0, failures = 0, issued = 0, done = 0, n_atomic = 0, last_lat = 0;
  int   id_atomic [NumIds];   // atomics in flight per ID

  assign checks_o = checks;
  assign failures_o = failures;
  assign issued_o = issued;
  assign done_o = done;
  assign atomics_o = n_atomic;
  assign last_rd_lat_o = last_lat;

  function automatic logic [DataWidth-1:0] exp_rd(longint unsigned a);
    if (ref_mem.exists(a)) return ref_mem[a];
    return init_data(a)[DataWidth-1:0];
  endfunction

  function automatic logic [DataWidth-1:0] rnd_data();
    logic [DataWidth-1:0] d;
    for (int i = 0; i < DataWidth / 32; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  function automatic bit pick_slot(output int tile, output int slot);
    do tile = (only_tile_i >= 0) ? only_tile_i : $urandom_range(0, NumX*NumY - 1);
    while (tile == SkipTile && only_tile_i < 0);
    slot = $urandom_range(0, NumSlots - 1);
    return !slot_busy[tile][slot];
  endfunction

  function automatic longint unsigned slot_addr(int tile, int slot);
    int x, y;
    x = tile % NumX;
    y = tile / NumX;
    return (longint'(y) << floo_pkg::AddrYOffset) | (longint'(x) << floo_pkg::AddrXOffset) |
           longint'(BusOff + MasterIdx * 16384 + slot * SlotSize);
  endfunction

  task automatic fail(string msg);
    failures++;
    $display("ERROR (master %0d, bus offset %0h): %s", MasterIdx, BusOff, msg);
  endtask

  initial req_o = '0;

  always @(posedge clk_i) begin
    cycle++;
    if (!rst_ni) begin
      req_o <= '0;
    end else begin
      // ---------------- responses ----------------
      if (rsp_i.r_valid && req_o.r_ready) begin
        int id;
        id = int'(rsp_i.r.id);
        checks++;
        if (rq[id].size() == 0) fail($sformatf("R for ID %0d with no read outstanding", id));
        else begin
          txn_t t;
          logic [DataWidth-1:0] e;
          t = rq[id][0];
          if (r_beat[id] == 0 && !t.atomic) last_lat = cycle - t.t_issue;
          e = t.atomic ? t.old : exp_rd(t.addr + longint'(r_beat[id] * Bytes));
          if (rsp_i.r.data != e) fail($sformatf("R data ID %0d beat %0d addr %h", id,
                                               r_beat[id], t.addr));
          if (rsp_i.r.last != (r_beat[id] == t.len)) fail("R last flag");
          if (rsp_i.r.resp != 2'b00) fail("R resp not OKAY");
          r_beat[id]++;
          if (r_beat[id] > t.len) begin
            r_beat[id] = 0;
            void'(rq[id].pop_front());
            if (!t.atomic) begin
              slot_busy[int'(t.addr >> floo_pkg::AddrXOffset) % NumX +
                        NumX * (int'(t.addr >> floo_pkg::AddrYOffset) % NumY)][t.slot] = 1'b0;
              done++;
              outstanding--;
            end else id_atomic[id]--;
          end
        end
      end
      if (rsp_i.b_valid && req_o.b_ready) begin
        int id;
        id = int'(rsp_i.b.id);
        checks++;
        if (bq[id].size() == 0) fail($sformatf("B for ID %0d with no write outstanding", id));
        else begin
          txn_t t;
          t = bq[id].pop_front();
          if (rsp_i.b.resp != 2'b00) fail("B resp not OKAY");
          slot_busy[int'(t.addr >> floo_pkg::AddrXOffset) % NumX +
                    NumX * (int'(t.addr >> floo_pkg::AddrYOffset) % NumY)][t.slot] = 1'b0;
          if (t.atomic) id_atomic[id]--;
          done++;
          outstanding--;
        end
      end
      // ---------------- W beats ----------------
      if (req_o.w_valid && rsp_i.w_ready) begin
        w_beat++;
        if (w_beat > wq[0].len) begin
          void'(wq.pop_front());
          w_beat = 0;
        end
      end
      if (wq.size() != 0) begin
        req_o.w_valid <= 1'b1;
        req_o.w.data  <= ref_mem[wq[0].addr + longint'(w_beat * Bytes)];
        req_o.w.strb  <= '1;
        req_o.w.last  <= (w_beat == wq[0].len);
        req_o.w.user  <= '0;
      end else req_o.w_valid <= 1'b0;
      // ---------------- AR ----------------
      if (!req_o.ar_valid || rsp_i.ar_ready) begin
        int tile, slot, id;
        req_o.ar_valid <= 1'b0;
        if (req_o.ar_valid) begin
          rq[int'(req_o.ar.id)][rq[int'(req_o.ar.id)].size()-1].t_issue = cycle;
        end
        id = $urandom_range(0, NumIds - 1);
        if (enable_i && issued < NumTxn && (!rnd_i || $urandom_range(0, 2) == 0) &&
            (outstanding < MaxOutstanding || only_read_i) && pick_slot(tile, slot) &&
            id_atomic[id] == 0) begin
          txn_t t;
          t.addr = slot_addr(tile, slot); t.len = $urandom_range(0, MaxLen); t.slot = slot;
          t.atomic = 1'b0; t.old = '0; t.t_issue = cycle;
          slot_busy[tile][slot] = 1'b1;
          rq[id].push_back(t);
          issued++;
          outstanding++;
          req_o.ar_valid <= 1'b1;
          req_o.ar       <= '0;
          req_o.ar.id    <= IdWidth'(id);
          req_o.ar.addr  <= t.addr;
          req_o.ar.len   <= 8'(t.len);
          req_o.ar.size  <= 3'($clog2(Bytes));
          req_o.ar.burst <= 2'b01;
        end
      end
      // ---------------- AW ----------------
      if (!req_o.aw_valid || rsp_i.aw_ready) begin
        int tile, slot, id;
        bit atomic;
        req_o.aw_valid <= 1'b0;
        id = $urandom_range(0, NumIds - 1);
        atomic = Atomics && ($urandom_range(0, 5) == 0) && rq[id].size() == 0 &&
                 bq[id].size() == 0;
        if (enable_i && !only_read_i && issued < NumTxn && (!rnd_i || $urandom_range(0, 2) == 0)
            && outstanding < MaxOutstanding && pick_slot(tile, slot) && id_atomic[id] == 0
            && wq.size() < 4) begin
          txn_t t;
          t.addr = slot_addr(tile, slot); t.len = atomic ? 0 : $urandom_range(0, MaxLen);
          t.slot = slot; t.atomic = atomic; t.old = exp_rd(t.addr); t.t_issue = cycle;
          for (int b = 0; b <= t.len; b++) ref_mem[t.addr + longint'(b * Bytes)] = rnd_data();
          slot_busy[tile][slot] = 1'b1;
          bq[id].push_back(t);
          wq.push_back(t);
          if (atomic) begin
            rq[id].push_back(t);
            id_atomic[id] += 2;
            n_atomic++;
          end
          issued++;
          outstanding++;
          req_o.aw_valid <= 1'b1;
          req_o.aw       <= '0;
          req_o.aw.id    <= IdWidth'(id);
          req_o.aw.addr  <= t.addr;
          req_o.aw.len   <= 8'(t.len);
          req_o.aw.size  <= 3'($clog2(Bytes));
          req_o.aw.burst <= 2'b01;
          req_o.aw.atop  <= atomic ? 6'b110000 : 6'b000000;
        end
      end
      req_o.r_ready <= rnd_i ? ($urandom_range(0, 4) != 0) : 1'b1;
      req_o.b_ready <= rnd_i ? ($urandom_range(0, 4) != 0) : 1'b1;
    end
  end

  initial begin
    for (int i = 0; i < NumIds; i++) begin r_beat[i] = 0; id_atomic[i] = 0; end
    for (int t = 0; t < NumX*NumY; t++) for (int s = 0; s < NumSlots; s++) slot_busy[t][s] = 0;
  end
endmodule
