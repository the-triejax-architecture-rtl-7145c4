// tb_triejax_top: end-to-end test of the accelerator core at its default
// parameters (32 threads, 16384 x 20 PJR cache).
//
// The testbench generates a random directed graph with one high-degree hub,
// lays it out in memory as two tries (edges by source and by destination),
// compiles the Path-3, Path-4, Cycle-3 and Cycle-4 queries into query words,
// runs each through the core under several thread configurations, reads the
// results back from memory and compares them with a brute-force evaluation
// over the adjacency matrix: every result must be expected, none repeated,
// none missing, and the last record must be the DONE token.
//
// It also counts how often each mechanism of the design happened over all
// runs (dynamic spawn, backtrack, PJR hit, insertion-buffer allocation,
// commit, overflow, read-port back-pressure, write-port stall, reordered
// memory answers, several static threads, static-only mode) and counts a
// failure for each one that never happened.
module tb_triejax_top;
  import tj_pkg::*;

  localparam int unsigned N     = 28;        // graph nodes
  localparam int unsigned WORDS = 65536;
  localparam addr_t FX = 32'd1000, FCR = 32'd1100, FY = 32'd1200;
  localparam addr_t BX = 32'd3000, BCR = 32'd3100, BY = 32'd3200;
  localparam addr_t RES = 32'd8192;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_we, start, done;
  logic [5:0]  cfg_addr;
  logic [31:0] cfg_wdata;
  logic        rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready, wr_valid, wr_ready;
  rd_req_t     rd_req;
  rd_resp_t    rd_resp;
  wr_req_t     wr_req;
  perf_t       perf;
  logic        rd_stall, wr_stall;

  triejax_top dut (.*);

  mem_model #(.WORDS(WORDS), .SLOTS(24), .LAT(6), .JIT(10)) mem (
    .clk, .rst_n, .rd_stall, .wr_stall,
    .rd_req_valid, .rd_req_ready, .rd_req, .rd_resp_valid, .rd_resp_ready, .rd_resp,
    .wr_valid, .wr_ready, .wr_req);

  int checks = 0, failures = 0;
  int unsigned cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int m_rd_bp = 0, m_wr_stall = 0, m_reorder = 0;
  int m_spawn = 0, m_back = 0, m_hit = 0, m_alloc = 0, m_commit = 0, m_ovf = 0;
  int m_static = 0, m_static_only = 0;
  logic [SRC_W+TID_W-1:0] last_tag;
  always @(posedge clk) begin
    if (rd_req_valid && !rd_req_ready) m_rd_bp++;
    if (wr_valid && !wr_ready) m_wr_stall++;
    if (rd_resp_valid && rd_resp_ready) begin
      last_tag <= rd_resp.tag;
    end
  end
  // answers out of request order: count responses whose address order differs
  int unsigned req_seq = 0, resp_seq_seen = 0;
  int unsigned seq_of [logic [SRC_W+TID_W-1:0]];
  always @(posedge clk) begin
    if (rd_req_valid && rd_req_ready) begin
      seq_of[rd_req.tag] = req_seq;
      req_seq++;
    end
    if (rd_resp_valid && rd_resp_ready) begin
      if (seq_of.exists(rd_resp.tag) && seq_of[rd_resp.tag] < resp_seq_seen) m_reorder++;
      if (seq_of.exists(rd_resp.tag) && seq_of[rd_resp.tag] > resp_seq_seen)
        resp_seq_seen = seq_of[rd_resp.tag];
    end
  end

  // ---------------- graph ----------------
  bit adj [N][N];
  int nn;   // = N, kept in a variable so loops over nodes stay loops
  function automatic val_t nv(int i); return val_t'(3*i + 2); endfunction

  task automatic make_graph();
    for (int a = 0; a < nn; a++)
      for (int b = 0; b < nn; b++)
        adj[a][b] = (a != b) && (($urandom % 100) < 11);
    // hub: node 5 points to 24 nodes, and a few nodes point to it
    for (int b = 0; b < 25; b++) if (b != 5) adj[5][b] = 1;
    adj[1][5] = 1; adj[9][5] = 1; adj[17][5] = 1;
  endtask

  // trie of edges (a -> b) if !rev, else (b -> a)
  task automatic lay_trie(bit rev, addr_t xb, addr_t crb, addr_t yb, output int nx);
    int off;
    nx = 0; off = 0;
    for (int a = 0; a < nn; a++) begin
      int deg;
      deg = 0;
      for (int b = 0; b < nn; b++) if (rev ? adj[b][a] : adj[a][b]) deg++;
      if (deg > 0) begin
        mem.mem[xb + nx]  = nv(a);
        mem.mem[crb + nx] = off;
        for (int b = 0; b < nn; b++)
          if (rev ? adj[b][a] : adj[a][b]) begin
            mem.mem[yb + off] = nv(b);
            off++;
          end
        nx++;
      end
    end
    mem.mem[crb + nx] = off;
  endtask

  int nfx, nbx;

  // ---------------- query compilation ----------------
  logic [31:0] qw [QWORDS];
  typedef enum {L0F, L0B, CF, CB} sk_e;
  task automatic slot(int v, int s, sk_e k, int pv = 0, int ps = 0);
    int b;
    b = 2 + 4*(2*v + s);
    qw[b]   = {28'd0, ps[0], pv[1:0], (k == L0F || k == L0B)};
    qw[b+1] = (k == L0F) ? FX : (k == L0B) ? BX : (k == CF) ? FY : BY;
    qw[b+2] = (k == L0F) ? nfx : (k == L0B) ? nbx : 0;
    qw[b+3] = (k == CF) ? FCR : (k == CB) ? BCR : 0;
  endtask

  task automatic compile(int q, int thr, bit dyn, bit cache);
    for (int i = 0; i < QWORDS; i++) qw[i] = '0;
    case (q)
      0: begin // path3(x,y,z) = R(x,y), S(y,z)
        slot(0,0,L0F); slot(0,1,L0F);
        slot(1,0,CF,0,0); slot(1,1,L0F);
        slot(2,0,CF,1,1); slot(2,1,CF,1,1);
        qw[0] = {15'd0, dyn, 6'(thr), 4'b0010, 2'd2, cache, 3'd3};
      end
      1: begin // path4(x,y,z,w) = R(x,y), S(y,z), T(z,w)
        slot(0,0,L0F); slot(0,1,L0F);
        slot(1,0,CF,0,0); slot(1,1,L0F);
        slot(2,0,CF,1,1); slot(2,1,L0F);
        slot(3,0,CF,2,1); slot(3,1,CF,2,1);
        qw[0] = {15'd0, dyn, 6'(thr), 4'b0010, 2'd2, cache, 3'd4};
      end
      2: begin // cycle3(x,y,z) = R(x,y), S(y,z), T(z,x)
        slot(0,0,L0F); slot(0,1,L0B);
        slot(1,0,CF,0,0); slot(1,1,L0F);
        slot(2,0,CF,1,1); slot(2,1,CB,0,1);
        qw[0] = {15'd0, dyn, 6'(thr), 4'b0000, 2'd0, 1'b0, 3'd3};
      end
      default: begin // cycle4(x,y,z,w) = R(x,y), S(y,z), T(z,w), U(w,x)
        slot(0,0,L0F); slot(0,1,L0B);
        slot(1,0,CF,0,0); slot(1,1,L0F);
        slot(2,0,CF,1,1); slot(2,1,L0F);
        slot(3,0,CF,2,1); slot(3,1,CB,0,1);
        qw[0] = {15'd0, dyn, 6'(thr), 4'b0101, 2'd3, cache, 3'd4};
      end
    endcase
    qw[1] = RES;
  endtask

  // ---------------- expected results ----------------
  function automatic logic [127:0] rkey(int x, int y, int z, int w);
    return {nv(x), nv(y), (z < 0) ? 32'd0 : nv(z), (w < 0) ? 32'd0 : nv(w)};
  endfunction

  int exp_set [logic [127:0]];
  task automatic expected(int q);
    exp_set.delete();
    for (int x = 0; x < nn; x++) for (int y = 0; y < nn; y++) if (adj[x][y])
      for (int z = 0; z < nn; z++) if (adj[y][z]) begin
        if (q == 0) exp_set[rkey(x,y,z,-1)] = 0;
        else if (q == 2) begin if (adj[z][x]) exp_set[rkey(x,y,z,-1)] = 0; end
        else for (int w = 0; w < nn; w++)
          if (adj[z][w] && (q == 1 || adj[w][x])) exp_set[rkey(x,y,z,w)] = 0;
      end
  endtask

  // ---------------- run one query ----------------
  task automatic run(int q, int thr, bit dyn, bit cache, bit stalls);
    int nres, bad, dup;
    int unsigned t0;
    bit fin;
    logic [127:0] k;
    compile(q, thr, dyn, cache);
    expected(q);
    for (int i = 0; i < 4*(exp_set.num() + 8); i++) mem.mem[RES + i] = 32'h1234_5678;
    @(negedge clk);
    for (int i = 0; i < QWORDS; i++) begin
      cfg_we = 1; cfg_addr = 6'(i); cfg_wdata = qw[i];
      @(negedge clk);
    end
    cfg_we = 0;
    start = 1; @(negedge clk); start = 0;
    t0 = cycles;
    wait (done);
    @(negedge clk);
    // decode results
    nres = 0; bad = 0; dup = 0; fin = 0;
    for (int i = 0; i < exp_set.num() + 8 && !fin; i++) begin
      k = {mem.mem[RES+4*i], mem.mem[RES+4*i+1], mem.mem[RES+4*i+2], mem.mem[RES+4*i+3]};
      if (k == '1) fin = 1;
      else if (!exp_set.exists(k)) bad++;
      else if (exp_set[k] != 0) begin dup++; $display("  duplicate %h", k); end
      else begin exp_set[k] = 1; nres++; end
    end
    checks += 4;
    if (!fin) begin failures++; $display("q%0d: no DONE token", q); end
    if (bad != 0) begin failures++; $display("q%0d: %0d unexpected results", q, bad); end
    if (dup != 0) begin failures++; $display("q%0d: %0d duplicate results", q, dup); end
    if (nres != exp_set.num()) begin
      failures++; $display("q%0d: %0d results, expected %0d", q, nres, exp_set.num());
    end
    checks++;
    if (perf.results != 32'(nres)) begin
      failures++; $display("q%0d: result counter %0d != %0d", q, perf.results, nres);
    end
    $display("query %0d thr=%0d dyn=%0d cache=%0d: %0d results in %0d cycles (spawn %0d back %0d hit %0d alloc %0d commit %0d ovf %0d lines %0d)",
             q, thr, dyn, cache, nres, cycles - t0, perf.spawns, perf.backtracks, perf.cache_hits,
             perf.cache_allocs, perf.cache_commits, perf.cache_overflows, perf.line_writes);
    m_spawn  += perf.spawns;       m_back   += perf.backtracks;
    m_hit    += perf.cache_hits;   m_alloc  += perf.cache_allocs;
    m_commit += perf.cache_commits; m_ovf   += perf.cache_overflows;
    if (thr > 1) m_static++;
    if (!dyn && thr > 1) m_static_only++;
  endtask

  // random back-pressure on the memory ports when enabled
  bit stall_en = 0;
  always @(negedge clk) begin
    rd_stall <= stall_en && ($urandom % 4 == 0);
    wr_stall <= stall_en && ($urandom % 3 == 0);
  end

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; start = 0;
    rd_stall = 0; wr_stall = 0;
    nn = N;
    make_graph();
    lay_trie(0, FX, FCR, FY, nfx);
    lay_trie(1, BX, BCR, BY, nbx);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // single thread, no cache
    run(0, 1, 0, 0, 0);
    // paper configuration: static + dynamic MT, PJR cache
    stall_en = 1;
    run(0, 4, 1, 1, 1);
    run(1, 4, 1, 1, 1);
    run(2, 4, 1, 0, 1);
    run(3, 4, 1, 1, 1);
    stall_en = 0;
    // static MT only
    run(1, 8, 0, 1, 0);
    run(3, 32, 0, 1, 0);
    // dynamic from one thread
    run(3, 1, 1, 1, 0);

    checks += 11;
    if (m_spawn == 0)       begin failures++; $display("never: dynamic spawn"); end
    if (m_back == 0)        begin failures++; $display("never: backtrack"); end
    if (m_hit == 0)         begin failures++; $display("never: PJR hit"); end
    if (m_alloc == 0)       begin failures++; $display("never: IB allocation"); end
    if (m_commit == 0)      begin failures++; $display("never: PJR commit"); end
    if (m_ovf == 0)         begin failures++; $display("never: PJR overflow"); end
    if (m_rd_bp == 0)       begin failures++; $display("never: read back-pressure"); end
    if (m_wr_stall == 0)    begin failures++; $display("never: write stall"); end
    if (m_reorder == 0)     begin failures++; $display("never: reordered memory answer"); end
    if (m_static == 0)      begin failures++; $display("never: static MT"); end
    if (m_static_only == 0) begin failures++; $display("never: static-only mode"); end
    $display("mechanisms: spawn=%0d back=%0d hit=%0d alloc=%0d commit=%0d ovf=%0d rd_bp=%0d wr_stall=%0d reorder=%0d",
             m_spawn, m_back, m_hit, m_alloc, m_commit, m_ovf, m_rd_bp, m_wr_stall, m_reorder);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
