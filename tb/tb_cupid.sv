// tb_cupid: self-checking test of the Cupid join controller on its own.
//
// Cupid is connected to a small PJR cache instance and to behavioural
// stand-ins for MatchMaker, the two Midwife units and the ST unit. The
// stand-ins work directly on a trie image held in the testbench: a Midwife
// job returns [base + cr[i], base + cr[i+1]); a MatchMaker job, once both
// of its ranges are known, returns the smallest common value of the two
// ranges with its positions, or "no match". Every answer is delayed by a
// random number of cycles, so answers of different threads return out of
// order, and the ST unit and the job queues are randomly back-pressured.
//
// A random graph with a hub node is stored as a forward and a backward
// trie. The Path-3 (cached), Cycle-3 and Cycle-4 (cached) queries are run
// under several thread settings; the result records must equal the set
// computed by brute force over the adjacency matrix, with no repeats, and
// the DONE request must come once all threads have ended. Spawns,
// backtracks, cache hits and cache allocations must each happen.
module tb_cupid;
  import tj_pkg::*;
  localparam int unsigned NT = 8, N = 16, MW = 4096;
  localparam addr_t FX = 32'd100, FCR = 32'd200, FY = 32'd300;
  localparam addr_t BX = 32'd1100, BCR = 32'd1200, BY = 32'd1300;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                start, done;
  query_t              query;
  logic                mm_valid, mm_ready, mmd_valid, mmd_ready;
  mm_req_t             mm_req;
  mm_done_t            mmd;
  logic [NSLOT-1:0]    mw_valid, mw_ready;
  mw_req_t [NSLOT-1:0] mw_req;
  logic                wb_valid, wb_ready, wb_finish, wb_finished;
  val_t [MAX_VARS-1:0] wb_rec;
  val_t [MAX_VARS-1:0] pc_key, pc_path;
  logic                pc_hit, pc_alloc_ok, pc_alloc, pc_app_valid, pc_inc_valid, pc_dec_valid;
  logic [31:0]         pc_hit_idx, pc_rd_idx;
  logic [7:0]          pc_hit_cnt, pc_alloc_slot, pc_rd_pos, pc_app_slot, pc_inc_slot, pc_dec_slot;
  pjr_rec_t            pc_rd_rec, pc_app_rec;
  logic [31:0]         n_results, n_spawns, n_backtracks, n_cache_hits, n_cache_allocs;
  logic                ev_commit, ev_overflow, pc_busy;

  cupid #(.NUM_THREADS(NT)) dut (.*);

  pjr_cache #(.NUM_ENTRIES(64), .ENTRY_SIZE(8), .IB_ENTRIES(4), .NBANKS(4)) u_pc (
    .clk, .rst_n, .clear(start), .probe_key(pc_key), .hit(pc_hit), .hit_idx(pc_hit_idx),
    .hit_cnt(pc_hit_cnt), .alloc_ok(pc_alloc_ok), .alloc_slot(pc_alloc_slot),
    .alloc(pc_alloc), .alloc_path(pc_path), .rd_idx(pc_rd_idx), .rd_pos(pc_rd_pos),
    .rd_rec(pc_rd_rec), .app_valid(pc_app_valid), .app_slot(pc_app_slot), .app_path(pc_path),
    .app_rec(pc_app_rec), .inc_valid(pc_inc_valid), .inc_slot(pc_inc_slot),
    .dec_valid(pc_dec_valid), .dec_slot(pc_dec_slot), .ev_commit, .ev_overflow, .busy(pc_busy));

  int checks = 0, failures = 0;
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired"); for (int t = 0; t < NT; t++) $display("t%0d rdy %0d%0d depth %0d root %0d cmode %0d", t, rdy[t][0], rdy[t][1], dut.ts[t].depth, dut.ts[t].root, dut.ts[t].cmode); $display("ev=%0d la=%0d lb=%0d w_mm=%0d w_mw=%0d%0d w_wb=%0d w_la=%0d w_lb=%0d", dut.ev, dut.loopa_out_v, dut.loopb_out_v, dut.w_mm, dut.w_mw0, dut.w_mw1, dut.w_wb, dut.w_la, dut.w_lb); $display("busy=%b started=%0d evq=%0d have_d=%0d fin=%0d run=%0d", dut.busy_thr, dut.started_all, evq.size(), have_d, dut.fin_sent, dut.running);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- trie image ----------------
  val_t tm [MW];
  bit   adj [N][N];
  int   nn, nfx, nbx;

  task automatic lay_trie(bit rev, addr_t xb, addr_t crb, addr_t yb, output int nx);
    int off;
    nx = 0; off = 0;
    for (int a = 0; a < nn; a++) begin
      int deg;
      deg = 0;
      for (int b = 0; b < nn; b++) if (rev ? adj[b][a] : adj[a][b]) deg++;
      if (deg > 0) begin
        tm[xb + nx] = val_t'(3*a + 2);
        tm[crb + nx] = off;
        for (int b = 0; b < nn; b++)
          if (rev ? adj[b][a] : adj[a][b]) begin
            tm[yb + off] = val_t'(3*b + 2);
            off++;
          end
        nx++;
      end
    end
    tm[crb + nx] = off;
  endtask

  // ---------------- MatchMaker / Midwife stand-ins ----------------
  bit     rdy [NT][NSLOT];
  range_t rg  [NT][NSLOT];
  // delayed events: kind 0/1 = Midwife k range, 2 = MatchMaker answer
  typedef struct { int due; int kind; int tid; range_t r; mm_done_t d; } ev_t;
  ev_t evq [$];
  int  now = 0;
  mm_done_t cur_d;
  bit       have_d;

  function automatic mm_done_t join2(int t);
    mm_done_t r;
    addr_t i, j;
    r = '{tid: tid_t'(t), matched: 1'b0, val: '0, ind: '0, hi: '0};
    r.hi[0] = rg[t][0].hi; r.hi[1] = rg[t][1].hi;
    i = rg[t][0].lo; j = rg[t][1].lo;
    r.ind[0] = i; r.ind[1] = j;
    while (i < rg[t][0].hi && j < rg[t][1].hi) begin
      if (tm[i] == tm[j]) begin
        r.matched = 1'b1; r.val = tm[i]; r.ind[0] = i; r.ind[1] = j;
        break;
      end else if (tm[i] < tm[j]) i++;
      else j++;
    end
    return r;
  endfunction

  task automatic kick(int t);
    if (rdy[t][0] && rdy[t][1]) begin
      ev_t e;
      rdy[t][0] = 0; rdy[t][1] = 0;
      e.due = now + 1 + ($urandom % 12); e.kind = 2; e.tid = t; e.r = '0;
      e.d = join2(t);
      evq.push_back(e);
    end
  endtask

  always @(posedge clk) begin
    now++;
    if (rst_n) begin
      if (mmd_valid && mmd_ready) have_d = 0;
      if (mm_valid && mm_ready) begin
        for (int k = 0; k < NSLOT; k++)
          if (mm_req.rdy[k]) begin
            rg[mm_req.tid][k] = mm_req.rng[k];
            rdy[mm_req.tid][k] = 1;
          end
        kick(int'(mm_req.tid));
      end
      for (int k = 0; k < NSLOT; k++)
        if (mw_valid[k] && mw_ready[k]) begin
          ev_t e;
          e.due = now + 1 + ($urandom % 8); e.kind = k; e.tid = int'(mw_req[k].tid);
          e.r.lo = mw_req[k].val_base + tm[mw_req[k].cr_addr];
          e.r.hi = mw_req[k].val_base + tm[mw_req[k].cr_addr + 1];
          e.d = '0;
          evq.push_back(e);
        end
      // deliver due events (Midwife ranges at once, one answer at a time)
      for (int i = 0; i < evq.size(); i++) begin
        if (evq[i].due <= now && evq[i].kind < 2) begin
          rg[evq[i].tid][evq[i].kind] = evq[i].r;
          rdy[evq[i].tid][evq[i].kind] = 1;
          kick(evq[i].tid);
          evq.delete(i);
          i--;
        end
      end
      if (!have_d) begin
        for (int i = 0; i < evq.size(); i++)
          if (evq[i].due <= now && evq[i].kind == 2) begin
            cur_d = evq[i].d; have_d = 1; evq.delete(i); break;
          end
      end
    end
  end
  assign mmd_valid = have_d;
  assign mmd       = cur_d;

  // ---------------- ST unit stand-in ----------------
  int res_set [logic [127:0]];
  int n_dup = 0, n_bad = 0, n_fin = 0;
  int exp_set [logic [127:0]];
  always @(posedge clk) begin
    if (rst_n && wb_valid && wb_ready) begin
      logic [127:0] k;
      k = {wb_rec[0], wb_rec[1], wb_rec[2], wb_rec[3]};
      if (!exp_set.exists(k)) n_bad++;
      else if (res_set.exists(k)) n_dup++;
      else res_set[k] = 1;
    end
    if (rst_n && wb_finish && !wb_finished) begin
      n_fin++;
      if (evq.size() != 0 || have_d) n_bad++;   // DONE before all threads ended
    end
  end
  always @(negedge clk) begin
    wb_ready    = ($urandom % 3 != 0);
    mm_ready    = ($urandom % 5 != 0);
    mw_ready[0] = ($urandom % 5 != 0);
    mw_ready[1] = ($urandom % 5 != 0);
  end
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb_finished <= 1'b0;
    else if (start) wb_finished <= 1'b0;
    else if (wb_finish) wb_finished <= 1'b1;
  end

  // ---------------- queries ----------------
  typedef enum {L0F, L0B, CF, CB} sk_e;
  function automatic slot_spec_t mk(sk_e k, int pv = 0, int ps = 0);
    slot_spec_t s;
    s.level0   = (k == L0F || k == L0B);
    s.pvar     = 2'(pv);
    s.pslot    = 1'(ps);
    s.val_base = (k == L0F) ? FX : (k == L0B) ? BX : (k == CF) ? FY : BY;
    s.len      = (k == L0F) ? nfx : (k == L0B) ? nbx : 0;
    s.cr_base  = (k == CF) ? FCR : (k == CB) ? BCR : 0;
    return s;
  endfunction

  int m_spawn = 0, m_back = 0, m_hit = 0, m_alloc = 0;

  task automatic run(int q, int thr, bit dyn);
    query = '0;
    query.hdr.static_thr = 6'(thr);
    query.hdr.dyn_en     = dyn;
    exp_set.delete();
    res_set.delete();
    n_dup = 0; n_bad = 0; n_fin = 0;
    if (q == 0) begin        // path3 = R(x,y),S(y,z), z cached by y
      query.hdr.num_vars = 3; query.hdr.cache_en = 1; query.hdr.cache_var = 2; query.hdr.key_mask = 4'b0010;
      query.slot[0][0] = mk(L0F); query.slot[0][1] = mk(L0F);
      query.slot[1][0] = mk(CF,0,0); query.slot[1][1] = mk(L0F);
      query.slot[2][0] = mk(CF,1,1); query.slot[2][1] = mk(CF,1,1);
    end else if (q == 1) begin  // cycle3
      query.hdr.num_vars = 3;
      query.slot[0][0] = mk(L0F); query.slot[0][1] = mk(L0B);
      query.slot[1][0] = mk(CF,0,0); query.slot[1][1] = mk(L0F);
      query.slot[2][0] = mk(CF,1,1); query.slot[2][1] = mk(CB,0,1);
    end else begin           // cycle4, w cached by (x,z)
      query.hdr.num_vars = 4; query.hdr.cache_en = 1; query.hdr.cache_var = 3; query.hdr.key_mask = 4'b0101;
      query.slot[0][0] = mk(L0F); query.slot[0][1] = mk(L0B);
      query.slot[1][0] = mk(CF,0,0); query.slot[1][1] = mk(L0F);
      query.slot[2][0] = mk(CF,1,1); query.slot[2][1] = mk(L0F);
      query.slot[3][0] = mk(CF,2,1); query.slot[3][1] = mk(CB,0,1);
    end
    for (int x = 0; x < nn; x++) for (int y = 0; y < nn; y++) if (adj[x][y])
      for (int z = 0; z < nn; z++) if (adj[y][z]) begin
        if (q == 0) exp_set[{val_t'(3*x+2), val_t'(3*y+2), val_t'(3*z+2), 32'd0}] = 0;
        else if (q == 1) begin
          if (adj[z][x]) exp_set[{val_t'(3*x+2), val_t'(3*y+2), val_t'(3*z+2), 32'd0}] = 0;
        end else
          for (int w = 0; w < nn; w++)
            if (adj[z][w] && adj[w][x])
              exp_set[{val_t'(3*x+2), val_t'(3*y+2), val_t'(3*z+2), val_t'(3*w+2)}] = 0;
      end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks += 4;
    if (n_bad != 0) begin failures++; $display("q%0d: %0d unexpected records", q, n_bad); end
    if (n_dup != 0) begin failures++; $display("q%0d: %0d repeated records", q, n_dup); end
    if (res_set.num() != exp_set.num()) begin
      failures++; $display("q%0d: %0d results, want %0d", q, res_set.num(), exp_set.num());
    end
    if (n_fin != 1 || n_results != 32'(res_set.num() + n_dup + n_bad)) begin
      failures++; $display("q%0d: DONE requests %0d, result counter %0d", q, n_fin, n_results);
    end
    $display("q%0d thr=%0d dyn=%0d: %0d results (spawn %0d back %0d hit %0d alloc %0d)",
             q, thr, dyn, res_set.num(), n_spawns, n_backtracks, n_cache_hits, n_cache_allocs);
    m_spawn += n_spawns; m_back += n_backtracks; m_hit += n_cache_hits; m_alloc += n_cache_allocs;
  endtask

  int cq [6] = '{0, 0, 1, 2, 2, 1};
  int ct [6] = '{1, 3, 2, 1, 8, 8};
  bit cd [6] = '{0, 1, 1, 1, 0, 1};

  initial begin
    start = 0; query = '0; have_d = 0; cur_d = '0;
    wb_ready = 0; mm_ready = 0; mw_ready = '0;
    for (int t = 0; t < NT; t++) for (int k = 0; k < NSLOT; k++) begin
      rdy[t][k] = 0; rg[t][k] = '0;
    end
    nn = N;
    for (int i = 0; i < MW; i++) tm[i] = '0;
    for (int a = 0; a < nn; a++)
      for (int b = 0; b < nn; b++)
        adj[a][b] = (a != b) && (($urandom % 100) < 18);
    for (int b = 0; b < 14; b++) if (b != 3) adj[3][b] = 1;
    adj[1][3] = 1; adj[7][3] = 1;
    lay_trie(0, FX, FCR, FY, nfx);
    lay_trie(1, BX, BCR, BY, nbx);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int i = 0; i < 6; i++) run(cq[i], ct[i], cd[i]);
    checks += 4;
    if (m_spawn == 0) begin failures++; $display("never: spawn"); end
    if (m_back == 0)  begin failures++; $display("never: backtrack"); end
    if (m_hit == 0)   begin failures++; $display("never: cache hit"); end
    if (m_alloc == 0) begin failures++; $display("never: cache allocation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
