// cupid: full-join controller of the accelerator.
//
// Cupid walks the join variables in query order for every hardware thread.
// For the current variable it asks MatchMaker for the next value present in
// both of the variable's arrays. On a match it records the value and the
// positions in the thread store and moves to the next variable (the arrays of
// a child trie level are found by sending the parent position to Midwife k
// for slot k); after the last variable it sends the result to the write
// buffer. On "no match" it backtracks to the previous variable and asks for
// its next match there; a thread whose own first variable is exhausted ends.
// When every thread has ended, the DONE token is written (Fig. 10).
//
// Threads. `static_thr` threads start together, each owning an equal slice of
// the first variable's first array (static MT). With `dyn_en`, a match at a
// variable that is not the last one spawns a new thread if one is free: the
// new thread keeps searching the same variable after the match, the old one
// only explores below the match (its `root` becomes the next variable, and it
// ends when that variable is exhausted) (dynamic MT, Fig. 6).
//
// PJR caching. When the query enables it, the values of the cached variable
// c depend only on the key variables. On the step into c Cupid probes the
// cache with the key values: on a hit the thread takes the values of c, with
// their array positions, from the cache entry one by one instead of running
// MatchMaker; on a miss it opens an insertion-buffer entry (if possible) and
// becomes a member: each match it finds for c is appended. Members that
// spawn a thread below the key make the new thread a member too (thread
// counter +1); a member leaves when it backtracks out of c or ends below it
// (thread counter -1). The cache module commits an entry when its counter
// reaches zero.
//
// Timing: one event per cycle, taken in the order MatchDone queue, internal
// queue (continue / backtrack / cached values), spawn queue, thread start.
// An event is only taken when every queue it writes to has room. A thread
// sits in at most one queue at a time; the internal and spawn queues hold
// 2*NUM_THREADS entries, so even when every thread waits in the internal
// queue, the event that pops one can push it back in the same cycle.
//
// Follows the paper: the flow of Fig. 10, static+dynamic MT, cache probing,
// insertion buffer membership and thread counting, results through the ST
// unit. Own choices: the exact thread split and spawn rules, one cached
// variable per query, and that a variable is joined over exactly two arrays.
module cupid
  import tj_pkg::*;
#(
  parameter int unsigned NUM_THREADS = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  query_t              query,
  output logic                done,
  // MatchMaker job and answers
  output logic                mm_valid,
  input  logic                mm_ready,
  output mm_req_t             mm_req,
  input  logic                mmd_valid,
  output logic                mmd_ready,
  input  mm_done_t            mmd,
  // Midwife jobs (slot k -> Midwife k)
  output logic [NSLOT-1:0]    mw_valid,
  input  logic [NSLOT-1:0]    mw_ready,
  output mw_req_t [NSLOT-1:0] mw_req,
  // ST unit (write buffer)
  output logic                wb_valid,
  input  logic                wb_ready,
  output val_t [MAX_VARS-1:0] wb_rec,
  output logic                wb_finish,
  input  logic                wb_finished,
  // PJR cache
  output val_t [MAX_VARS-1:0] pc_key,
  input  logic                pc_hit,
  input  logic [31:0]         pc_hit_idx,
  input  logic [7:0]          pc_hit_cnt,
  input  logic                pc_alloc_ok,
  input  logic [7:0]          pc_alloc_slot,
  output logic                pc_alloc,
  output val_t [MAX_VARS-1:0] pc_path,
  output logic [31:0]         pc_rd_idx,
  output logic [7:0]          pc_rd_pos,
  input  pjr_rec_t            pc_rd_rec,
  output logic                pc_app_valid,
  output logic [7:0]          pc_app_slot,
  output pjr_rec_t            pc_app_rec,
  output logic                pc_inc_valid,
  output logic [7:0]          pc_inc_slot,
  output logic                pc_dec_valid,
  output logic [7:0]          pc_dec_slot,
  // event counters
  output logic [31:0]         n_results,
  output logic [31:0]         n_spawns,
  output logic [31:0]         n_backtracks,
  output logic [31:0]         n_cache_hits,
  output logic [31:0]         n_cache_allocs
);
  localparam int unsigned TW = $clog2(NUM_THREADS);

  typedef struct packed {
    logic [2:0]                       depth;
    logic [2:0]                       root;
    val_t  [MAX_VARS-1:0]             val;
    addr_t [MAX_VARS-1:0][NSLOT-1:0]  ind;
    addr_t [MAX_VARS-1:0][NSLOT-1:0]  hi;
    logic                             cmode;   // taking values of c from the cache
    logic [31:0]                      cidx;
    logic [7:0]                       cpos;
    logic [7:0]                       ccnt;
    logic                             member;  // member of an insertion-buffer entry
    logic [7:0]                       ib;
  } th_t;

  th_t                    ts [NUM_THREADS];   // thread store
  logic [NUM_THREADS-1:0] busy_thr;

  // ---------------- internal queues ----------------
  logic loopa_in_v, loopa_in_r, loopa_out_v, loopa_out_r;
  tid_t loopa_in_d, loopa_out_d;
  logic loopb_in_v, loopb_in_r, loopb_out_v, loopb_out_r;
  tid_t loopb_in_d, loopb_out_d;

  tj_fifo #(.T(tid_t), .DEPTH(2*NUM_THREADS)) u_loopa (
    .clk, .rst_n, .in_valid(loopa_in_v), .in_ready(loopa_in_r), .in_data(loopa_in_d),
    .out_valid(loopa_out_v), .out_ready(loopa_out_r), .out_data(loopa_out_d));
  tj_fifo #(.T(tid_t), .DEPTH(2*NUM_THREADS)) u_loopb (
    .clk, .rst_n, .in_valid(loopb_in_v), .in_ready(loopb_in_r), .in_data(loopb_in_d),
    .out_valid(loopb_out_v), .out_ready(loopb_out_r), .out_data(loopb_out_d));

  // ---------------- run control ----------------
  logic        running, started_all, fin_sent;
  logic [5:0]  nstart, start_cnt;
  addr_t       seg;
  logic [2:0]  last;
  assign last = query.hdr.num_vars - 1'b1;

  // ---------------- free thread ----------------
  logic       free_found;
  tid_t       free_tid;
  always_comb begin
    free_found = 1'b0;
    free_tid   = '0;
    for (int i = 0; i < NUM_THREADS; i++) begin
      if (!free_found && !busy_thr[i]) begin
        free_found = 1'b1;
        free_tid   = tid_t'(i);
      end
    end
  end

  // ---------------- event selection ----------------
  typedef enum logic [2:0] {EV_NONE, EV_DONE, EV_NEXT, EV_START} ev_e;
  ev_e  ev;
  tid_t tid;
  always_comb begin
    ev  = EV_NONE;
    tid = '0;
    if (running) begin
      if (mmd_valid)        begin ev = EV_DONE;  tid = mmd.tid;     end
      else if (loopa_out_v) begin ev = EV_NEXT;  tid = loopa_out_d; end
      else if (loopb_out_v) begin ev = EV_NEXT;  tid = loopb_out_d; end
      else if (!started_all && free_found) begin ev = EV_START; tid = free_tid; end
    end
  end

  // ---------------- cache key and path ----------------
  // Values of the variables before the cached one, with the value just
  // matched at the current variable: the probe key (masked) when stepping
  // into the cached variable, the path that validates appends at it.
  th_t   th;
  val_t [MAX_VARS-1:0] mval;
  assign th        = ts[tid[TW-1:0]];
  assign pc_rd_idx = th.cidx;
  assign pc_rd_pos = th.cpos;
  always_comb begin
    mval = th.val;
    if (ev == EV_DONE && mmd.matched) mval[th.depth] = mmd.val;
    pc_key  = '0;
    pc_path = '0;
    for (int v = 0; v < MAX_VARS; v++) begin
      if (v < int'(query.hdr.cache_var)) begin
        pc_path[v] = mval[v];
        if (query.hdr.key_mask[v]) pc_key[v] = mval[v];
      end
    end
  end

  // ---------------- event processing ----------------
  th_t   nth;
  logic  write_th, write_new, free_me, take_new;
  logic  w_mm, w_mw0, w_mw1, w_wb, w_la, w_lb;
  logic  is_match, from_cache;
  logic [2:0] d, n;
  addr_t pidx;
  logic  c_spawn, c_hit, c_alloc, c_back;
  logic  pc_alloc_w, pc_app_valid_w, pc_inc_valid_w, pc_dec_valid_w;

  always_comb begin
    nth       = th;
    d         = th.depth;
    n         = '0;
    write_th  = 1'b0;
    write_new = 1'b0;
    free_me   = 1'b0;
    take_new  = 1'b0;
    w_mm = 1'b0; w_mw0 = 1'b0; w_mw1 = 1'b0; w_wb = 1'b0; w_la = 1'b0; w_lb = 1'b0;
    is_match   = 1'b0;
    from_cache = 1'b0;
    pidx       = '0;
    c_spawn = 1'b0; c_hit = 1'b0; c_alloc = 1'b0; c_back = 1'b0;
    mm_req   = '{tid: tid, rdy: '0, rng: '0};
    mw_req   = '0;
    wb_rec   = '0;
    loopa_in_d = tid;
    loopb_in_d = free_tid;
    pc_alloc_w = 1'b0;
    pc_app_valid_w = 1'b0;
    pc_app_slot  = th.ib;
    pc_app_rec   = '0;
    pc_inc_valid_w = 1'b0;
    pc_inc_slot  = th.ib;
    pc_dec_valid_w = 1'b0;
    pc_dec_slot  = th.ib;

    unique case (ev)
      EV_START: begin
        // static MT: slice of the first variable's first array
        write_th  = 1'b1;
        nth       = '0;
        mm_req.rdy = '1;
        mm_req.rng[0].lo = query.slot[0][0].val_base + addr_t'(start_cnt) * seg;
        mm_req.rng[0].hi = mm_req.rng[0].lo + seg;
        if (mm_req.rng[0].hi > query.slot[0][0].val_base + query.slot[0][0].len)
          mm_req.rng[0].hi = query.slot[0][0].val_base + query.slot[0][0].len;
        if (mm_req.rng[0].lo > mm_req.rng[0].hi)
          mm_req.rng[0].lo = mm_req.rng[0].hi;
        mm_req.rng[1].lo = query.slot[0][1].val_base;
        mm_req.rng[1].hi = query.slot[0][1].val_base + query.slot[0][1].len;
        w_mm = 1'b1;
      end
      EV_DONE: begin
        write_th = 1'b1;
        if (mmd.matched) begin
          is_match = 1'b1;
          nth.val[d] = mmd.val;
          nth.ind[d] = mmd.ind;
          nth.hi[d]  = mmd.hi;
        end
      end
      EV_NEXT: begin
        write_th = 1'b1;
        if (th.cmode && d == 3'(query.hdr.cache_var)) begin
          if (th.cpos < th.ccnt) begin
            is_match      = 1'b1;
            from_cache    = 1'b1;
            nth.val[d]    = pc_rd_rec.val;
            nth.ind[d][0] = pc_rd_rec.ind0;
            nth.ind[d][1] = pc_rd_rec.ind1;
            nth.cpos      = th.cpos + 1'b1;
          end
          // else: the cached values are used up -> no match
        end else begin
          // find the next match after the current one
          mm_req.rdy = '1;
          for (int s = 0; s < NSLOT; s++) begin
            mm_req.rng[s].lo = th.ind[d][s] + 1'b1;
            mm_req.rng[s].hi = th.hi[d][s];
          end
          w_mm = 1'b1;
        end
      end
      default: ;
    endcase

    if (ev == EV_DONE || (ev == EV_NEXT && !w_mm)) begin
      if (is_match) begin
        // append a freshly found value of c to the insertion buffer
        if (!from_cache && th.member && d == 3'(query.hdr.cache_var)) begin
          pc_app_valid_w = 1'b1;
          pc_app_rec   = '{val: nth.val[d], ind1: nth.ind[d][1], ind0: nth.ind[d][0]};
        end
        if (d == last) begin
          // (4) last variable: store the result, then look for the next one
          w_wb = 1'b1;
          for (int v = 0; v < MAX_VARS; v++)
            if (v <= int'(last)) wb_rec[v] = nth.val[v];
          w_la = 1'b1;
        end else begin
          // dynamic MT: hand the rest of this variable to a new thread
          if (query.hdr.dyn_en && !from_cache && free_found) begin
            c_spawn   = 1'b1;
            take_new  = 1'b1;
            write_new = 1'b1;
            w_lb      = 1'b1;
            if (th.member) pc_inc_valid_w = 1'b1;
            nth.root  = d + 1'b1;
          end
          // (5) analyze the next attribute
          n         = d + 1'b1;
          nth.depth = n;
          if (query.hdr.cache_en && n == 3'(query.hdr.cache_var) && pc_hit) begin
            c_hit     = 1'b1;
            nth.cmode = 1'b1;
            nth.cidx  = pc_hit_idx;
            nth.ccnt  = pc_hit_cnt;
            nth.cpos  = '0;
            w_la      = 1'b1;
          end else begin
            if (query.hdr.cache_en && n == 3'(query.hdr.cache_var) && pc_alloc_ok && !th.member) begin
              c_alloc    = 1'b1;
              pc_alloc_w = 1'b1;
              nth.member = 1'b1;
              nth.ib     = pc_alloc_slot;
            end
            // (6) first-level slots go to MatchMaker, child slots to Midwife
            for (int s = 0; s < NSLOT; s++) begin
              if (query.slot[n][s].level0) begin
                mm_req.rdy[s]    = 1'b1;
                mm_req.rng[s].lo = query.slot[n][s].val_base;
                mm_req.rng[s].hi = query.slot[n][s].val_base + query.slot[n][s].len;
              end else begin
                pidx = nth.ind[query.slot[n][s].pvar][query.slot[n][s].pslot]
                     - query.slot[query.slot[n][s].pvar][query.slot[n][s].pslot].val_base;
                mw_req[s].tid      = tid;
                mw_req[s].cr_addr  = query.slot[n][s].cr_base + pidx;
                mw_req[s].val_base = query.slot[n][s].val_base;
              end
            end
            w_mm  = |mm_req.rdy;
            w_mw0 = !query.slot[n][0].level0;
            w_mw1 = !query.slot[n][1].level0;
          end
        end
      end else begin
        // no (more) matches for variable d
        c_back = 1'b1;
        if (d == 3'(query.hdr.cache_var)) nth.cmode = 1'b0;
        if (th.member && (d == 3'(query.hdr.cache_var) || d == th.root)) begin
          pc_dec_valid_w = 1'b1;        // leaves the entry's subtree
          nth.member   = 1'b0;
        end
        if (d == th.root) begin
          free_me  = 1'b1;            // (3) first variable of this thread: end
        end else begin
          nth.depth = d - 1'b1;       // (8) restore previous variable, (9) next match
          w_la      = 1'b1;
        end
      end
    end
  end

  logic fire;
  assign fire = (ev != EV_NONE)
             && (!w_mm  || mm_ready)
             && (!w_mw0 || mw_ready[0])
             && (!w_mw1 || mw_ready[1])
             && (!w_wb  || wb_ready)
             && (!w_la  || loopa_in_r)
             && (!w_lb  || loopb_in_r);

  assign mm_valid    = fire && w_mm;
  assign mw_valid[0] = fire && w_mw0;
  assign mw_valid[1] = fire && w_mw1;
  assign wb_valid    = fire && w_wb;
  assign loopa_in_v  = fire && w_la;
  assign loopb_in_v  = fire && w_lb;
  assign mmd_ready   = fire && ev == EV_DONE;
  assign pc_alloc     = fire && pc_alloc_w;
  assign pc_app_valid = fire && pc_app_valid_w;
  assign pc_inc_valid = fire && pc_inc_valid_w;
  assign pc_dec_valid = fire && pc_dec_valid_w;
  assign loopa_out_r = fire && ev == EV_NEXT && loopa_out_v;
  assign loopb_out_r = fire && ev == EV_NEXT && !loopa_out_v;

  // the spawned thread: same state, continues after the current match
  th_t spawn_th;
  always_comb begin
    spawn_th     = th;
    spawn_th.val = nth.val;
    spawn_th.ind = nth.ind;
    spawn_th.hi  = nth.hi;
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk) begin
    if (fire && write_th) ts[tid[TW-1:0]] <= nth;
    if (fire && write_new) ts[free_tid[TW-1:0]] <= spawn_th;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_thr    <= '0;
      running     <= 1'b0;
      started_all <= 1'b0;
      fin_sent    <= 1'b0;
      start_cnt   <= '0;
      nstart      <= '0;
      seg         <= '0;
      n_results <= '0; n_spawns <= '0; n_backtracks <= '0;
      n_cache_hits <= '0; n_cache_allocs <= '0;
    end else if (start) begin
      busy_thr    <= '0;
      running     <= 1'b1;
      started_all <= 1'b0;
      fin_sent    <= 1'b0;
      start_cnt   <= '0;
      nstart      <= (query.hdr.static_thr == 0) ? 6'd1 :
                     (int'(query.hdr.static_thr) > NUM_THREADS) ? 6'(NUM_THREADS) : query.hdr.static_thr;
      seg         <= (query.slot[0][0].len + addr_t'(
                        (query.hdr.static_thr == 0) ? 1 :
                        (int'(query.hdr.static_thr) > NUM_THREADS) ? NUM_THREADS : int'(query.hdr.static_thr)) - 1'b1)
                     / addr_t'((query.hdr.static_thr == 0) ? 1 :
                        (int'(query.hdr.static_thr) > NUM_THREADS) ? NUM_THREADS : int'(query.hdr.static_thr));
      n_results <= '0; n_spawns <= '0; n_backtracks <= '0;
      n_cache_hits <= '0; n_cache_allocs <= '0;
    end else begin
      if (fire) begin
        if (ev == EV_START) begin
          busy_thr[tid[TW-1:0]] <= 1'b1;
          start_cnt <= start_cnt + 1'b1;
          if (start_cnt + 1'b1 == nstart) started_all <= 1'b1;
        end
        if (free_me)  busy_thr[tid[TW-1:0]] <= 1'b0;
        if (take_new) busy_thr[free_tid[TW-1:0]] <= 1'b1;
        if (w_wb)     n_results <= n_results + 1'b1;
        if (c_spawn)  n_spawns <= n_spawns + 1'b1;
        if (c_back)   n_backtracks <= n_backtracks + 1'b1;
        if (c_hit)    n_cache_hits <= n_cache_hits + 1'b1;
        if (c_alloc)  n_cache_allocs <= n_cache_allocs + 1'b1;
      end
      // all threads ended: write the DONE token
      if (running && started_all && busy_thr == '0 && !fin_sent) fin_sent <= 1'b1;
      if (running && wb_finished) running <= 1'b0;
    end
  end

  assign wb_finish = fin_sent && !wb_finished;
  assign done      = fin_sent && wb_finished;

  // a spawned thread never takes the slot of the running one
  assert property (@(posedge clk) disable iff (!rst_n)
                   (fire && take_new) |-> free_tid != tid);
endmodule
