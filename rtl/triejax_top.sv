// triejax_top: the join accelerator core.
//
// A graph pattern query is a multi-way join of relations stored as tries
// (sorted value arrays plus child-range arrays, one level per attribute).
// The core evaluates it with a cached trie join: Cupid walks the join
// variables depth first for up to 32 hardware threads; MatchMaker finds the
// next value common to the two arrays of a variable by a leapfrog of LUB
// binary searches; Midwife turns a matched parent position into the range of
// its children; a partial-join-results (PJR) cache lets Cupid reuse the values
// of a variable that depend only on earlier key variables. Every unit keeps
// per-thread state in its own thread store and talks to the others through
// queues, so many threads are in flight and hide memory latency.
//
// Ports:
//   cfg_*      word writes of the compiled query (co-processor interface)
//   start      one-cycle pulse: clear the PJR cache and start the query
//   done       high once all results and the DONE token have been written
//   rd_*       read port to the read-only cache hierarchy; a request returns
//              the two words at addr and addr+1; responses may be reordered
//   wr_*       line writes of results to memory (bypassing the RO caches)
//   perf       event counters
//
// Queues between units hold NUM_THREADS entries each. Latency: one query
// takes from a few thousand cycles on small graphs upward; the core has no
// fixed per-result latency, as threads interleave freely.
//
// Follows the paper: the unit set and their connections (Cupid, MatchMaker,
// LUB, two Midwife units, PJR cache, ST unit, shared read path), 32 threads,
// static plus dynamic multithreading, results written to memory with a DONE
// token. Own choices: the query encoding, the word-addressed 32-bit data
// path, the two-word read response, queue depths and the perf counters.
//
// Lint note: rst_n is both an asynchronous reset and the `disable iff`
// condition of the handshake assertions inside the units; the assertions
// are not logic, so the mixed use stands.
module triejax_top
  import tj_pkg::*;
#(
  parameter int unsigned NUM_THREADS    = 32,
  parameter int unsigned PJR_ENTRIES    = 16384,
  parameter int unsigned PJR_ENTRY_SIZE = 20,
  parameter int unsigned IB_ENTRIES     = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [5:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic        start,
  output logic        done,
  output logic        rd_req_valid,
  input  logic        rd_req_ready,
  output rd_req_t     rd_req,
  input  logic        rd_resp_valid,
  output logic        rd_resp_ready,
  input  rd_resp_t    rd_resp,
  output logic        wr_valid,
  input  logic        wr_ready,
  output wr_req_t     wr_req,
  output perf_t       perf
);
  localparam int unsigned QD = NUM_THREADS;

  query_t query;
  query_store u_qs (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .query);

  // ---------------- Cupid <-> MatchMaker / Midwife ----------------
  logic mmq_iv, mmq_ir, mmq_ov, mmq_or;  mm_req_t  mmq_id, mmq_od;
  logic mdq_iv, mdq_ir, mdq_ov, mdq_or;  mm_done_t mdq_id, mdq_od;
  logic [NSLOT-1:0] mwq_iv, mwq_ir, mwq_ov, mwq_or;
  mw_req_t  [NSLOT-1:0] mwq_id, mwq_od;
  logic [NSLOT-1:0] mwr_iv, mwr_ir, mwr_ov, mwr_or;
  mw_resp_t [NSLOT-1:0] mwr_id, mwr_od;
  logic lbq_iv, lbq_ir, lbq_ov, lbq_or;  lub_req_t  lbq_id, lbq_od;
  logic ldq_iv, ldq_ir, ldq_ov, ldq_or;  lub_done_t ldq_id, ldq_od;

  tj_fifo #(.T(mm_req_t),  .DEPTH(QD)) u_q_mm   (.clk, .rst_n, .in_valid(mmq_iv), .in_ready(mmq_ir), .in_data(mmq_id), .out_valid(mmq_ov), .out_ready(mmq_or), .out_data(mmq_od));
  tj_fifo #(.T(mm_done_t), .DEPTH(QD)) u_q_mdone(.clk, .rst_n, .in_valid(mdq_iv), .in_ready(mdq_ir), .in_data(mdq_id), .out_valid(mdq_ov), .out_ready(mdq_or), .out_data(mdq_od));
  tj_fifo #(.T(lub_req_t), .DEPTH(QD)) u_q_lub  (.clk, .rst_n, .in_valid(lbq_iv), .in_ready(lbq_ir), .in_data(lbq_id), .out_valid(lbq_ov), .out_ready(lbq_or), .out_data(lbq_od));
  tj_fifo #(.T(lub_done_t),.DEPTH(QD)) u_q_lubd (.clk, .rst_n, .in_valid(ldq_iv), .in_ready(ldq_ir), .in_data(ldq_id), .out_valid(ldq_ov), .out_ready(ldq_or), .out_data(ldq_od));

  // ---------------- LD units and read port ----------------
  localparam int unsigned NLD = 1 + NSLOT;     // LUB, Midwife 0, Midwife 1
  logic    [NLD-1:0] ldr_v, ldr_r, mq_ov, mq_or;
  ld_req_t [NLD-1:0] ldr_d, mq_od;
  logic    [NLD-1:0] arb_rv, lq_ir, lq_ov, lq_or;
  ld_resp_t          arb_rd;
  ld_resp_t [NLD-1:0] lq_od;

  for (genvar k = 0; k < NLD; k++) begin : g_ldq
    // MemQueue: loads waiting for the read port
    tj_fifo #(.T(ld_req_t), .DEPTH(QD)) u_memq (
      .clk, .rst_n, .in_valid(ldr_v[k]), .in_ready(ldr_r[k]), .in_data(ldr_d[k]),
      .out_valid(mq_ov[k]), .out_ready(mq_or[k]), .out_data(mq_od[k]));
    // LdQueue: returned loads waiting for the unit
    tj_fifo #(.T(ld_resp_t), .DEPTH(QD)) u_ldq (
      .clk, .rst_n, .in_valid(arb_rv[k]), .in_ready(lq_ir[k]), .in_data(arb_rd),
      .out_valid(lq_ov[k]), .out_ready(lq_or[k]), .out_data(lq_od[k]));
  end

  rd_arbiter #(.N(NLD)) u_arb (
    .clk, .rst_n,
    .ld_req_valid(mq_ov), .ld_req_ready(mq_or), .ld_req(mq_od),
    .ld_resp_valid(arb_rv), .ld_resp_ready(lq_ir), .ld_resp(arb_rd),
    .rd_req_valid, .rd_req_ready, .rd_req,
    .rd_resp_valid, .rd_resp_ready, .rd_resp);

  // ---------------- units ----------------
  lub #(.NUM_THREADS(NUM_THREADS)) u_lub (
    .clk, .rst_n,
    .req_valid(lbq_ov), .req_ready(lbq_or), .req(lbq_od),
    .done_valid(ldq_iv), .done_ready(ldq_ir), .done(ldq_id),
    .ld_req_valid(ldr_v[0]), .ld_req_ready(ldr_r[0]), .ld_req(ldr_d[0]),
    .ld_resp_valid(lq_ov[0]), .ld_resp_ready(lq_or[0]), .ld_resp(lq_od[0]));

  for (genvar k = 0; k < NSLOT; k++) begin : g_mw
    tj_fifo #(.T(mw_req_t), .DEPTH(QD)) u_q_mw (
      .clk, .rst_n, .in_valid(mwq_iv[k]), .in_ready(mwq_ir[k]), .in_data(mwq_id[k]),
      .out_valid(mwq_ov[k]), .out_ready(mwq_or[k]), .out_data(mwq_od[k]));
    tj_fifo #(.T(mw_resp_t), .DEPTH(QD)) u_q_mwr (
      .clk, .rst_n, .in_valid(mwr_iv[k]), .in_ready(mwr_ir[k]), .in_data(mwr_id[k]),
      .out_valid(mwr_ov[k]), .out_ready(mwr_or[k]), .out_data(mwr_od[k]));
    midwife #(.NUM_THREADS(NUM_THREADS)) u_mw (
      .clk, .rst_n,
      .req_valid(mwq_ov[k]), .req_ready(mwq_or[k]), .req(mwq_od[k]),
      .resp_valid(mwr_iv[k]), .resp_ready(mwr_ir[k]), .resp(mwr_id[k]),
      .ld_req_valid(ldr_v[1+k]), .ld_req_ready(ldr_r[1+k]), .ld_req(ldr_d[1+k]),
      .ld_resp_valid(lq_ov[1+k]), .ld_resp_ready(lq_or[1+k]), .ld_resp(lq_od[1+k]));
  end

  matchmaker #(.NUM_THREADS(NUM_THREADS)) u_mm (
    .clk, .rst_n,
    .req_valid(mmq_ov), .req_ready(mmq_or), .req(mmq_od),
    .mw0_valid(mwr_ov[0]), .mw0_ready(mwr_or[0]), .mw0(mwr_od[0]),
    .mw1_valid(mwr_ov[1]), .mw1_ready(mwr_or[1]), .mw1(mwr_od[1]),
    .lubd_valid(ldq_ov), .lubd_ready(ldq_or), .lubd(ldq_od),
    .lub_valid(lbq_iv), .lub_ready(lbq_ir), .lub(lbq_id),
    .done_valid(mdq_iv), .done_ready(mdq_ir), .done(mdq_id));

  // ---------------- write buffer ----------------
  logic wb_v, wb_r, wb_fin, wb_fined;
  val_t [MAX_VARS-1:0] wb_rec;
  logic [31:0] lines;
  write_buffer u_wb (
    .clk, .rst_n, .start, .base(query.hdr.res_base),
    .push_valid(wb_v), .push_ready(wb_r), .push_rec(wb_rec),
    .finish(wb_fin), .finished(wb_fined),
    .wr_valid, .wr_ready, .wr_req, .lines_written(lines));

  // ---------------- PJR cache ----------------
  val_t [MAX_VARS-1:0] pc_key, pc_path;
  logic        pc_hit, pc_alloc_ok, pc_alloc, pc_app_valid, pc_inc_valid, pc_dec_valid;
  logic [31:0] pc_hit_idx, pc_rd_idx;
  logic [7:0]  pc_hit_cnt, pc_alloc_slot, pc_rd_pos, pc_app_slot, pc_inc_slot, pc_dec_slot;
  pjr_rec_t    pc_rd_rec, pc_app_rec;
  logic        ev_commit, ev_overflow, pc_busy;

  pjr_cache #(.NUM_ENTRIES(PJR_ENTRIES), .ENTRY_SIZE(PJR_ENTRY_SIZE),
              .IB_ENTRIES(IB_ENTRIES), .NBANKS(4)) u_pjr (
    .clk, .rst_n, .clear(start),
    .probe_key(pc_key), .hit(pc_hit), .hit_idx(pc_hit_idx), .hit_cnt(pc_hit_cnt),
    .alloc_ok(pc_alloc_ok), .alloc_slot(pc_alloc_slot),
    .alloc(pc_alloc), .alloc_path(pc_path),
    .rd_idx(pc_rd_idx), .rd_pos(pc_rd_pos), .rd_rec(pc_rd_rec),
    .app_valid(pc_app_valid), .app_slot(pc_app_slot), .app_path(pc_path), .app_rec(pc_app_rec),
    .inc_valid(pc_inc_valid), .inc_slot(pc_inc_slot),
    .dec_valid(pc_dec_valid), .dec_slot(pc_dec_slot),
    .ev_commit, .ev_overflow, .busy(pc_busy));

  // ---------------- Cupid ----------------
  logic [31:0] n_res, n_spawn, n_back, n_hit, n_alloc;
  cupid #(.NUM_THREADS(NUM_THREADS)) u_cupid (
    .clk, .rst_n, .start, .query, .done,
    .mm_valid(mmq_iv), .mm_ready(mmq_ir), .mm_req(mmq_id),
    .mmd_valid(mdq_ov), .mmd_ready(mdq_or), .mmd(mdq_od),
    .mw_valid(mwq_iv), .mw_ready(mwq_ir), .mw_req(mwq_id),
    .wb_valid(wb_v), .wb_ready(wb_r), .wb_rec, .wb_finish(wb_fin), .wb_finished(wb_fined),
    .pc_key, .pc_hit, .pc_hit_idx, .pc_hit_cnt, .pc_alloc_ok, .pc_alloc_slot,
    .pc_alloc, .pc_path, .pc_rd_idx, .pc_rd_pos, .pc_rd_rec,
    .pc_app_valid, .pc_app_slot, .pc_app_rec,
    .pc_inc_valid, .pc_inc_slot, .pc_dec_valid, .pc_dec_slot,
    .n_results(n_res), .n_spawns(n_spawn), .n_backtracks(n_back),
    .n_cache_hits(n_hit), .n_cache_allocs(n_alloc));

  // ---------------- counters ----------------
  logic [31:0] n_commit, n_ovf;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_commit <= '0;
      n_ovf    <= '0;
    end else if (start) begin
      n_commit <= '0;
      n_ovf    <= '0;
    end else begin
      if (ev_commit)   n_commit <= n_commit + 1'b1;
      if (ev_overflow) n_ovf    <= n_ovf + 1'b1;
    end
  end

  assign perf = '{results: n_res, spawns: n_spawn, backtracks: n_back,
                  cache_hits: n_hit, cache_allocs: n_alloc, cache_commits: n_commit,
                  cache_overflows: n_ovf, line_writes: lines};

  // pc_busy: the commit engine may still be copying when done rises; the
  // next start clears the cache, so nothing is lost.
  logic unused_busy;
  assign unused_busy = pc_busy;
endmodule
