// tb_pjr_cache: self-checking test of the PJR cache and its insertion buffer.
//
// A small instance (16 entries of 6 records, 4 insertion-buffer slots, 4
// banks) is driven with one random operation per cycle against a reference
// model: probe a key from a small pool (and open an insertion-buffer slot
// when allowed), append a record (with the right path, or a wrong one that
// must be refused), increment or decrement a slot's thread counter, or clear
// everything. The model predicts hit / miss, the cached record count and
// every cached record (read back through rd_idx/rd_pos), whether a slot may
// be opened and which one. When a slot's counter reaches zero the test
// waits for the commit engine and checks the outcome: an overflowed entry
// is dropped with an overflow event, an entry whose cache line is already
// taken is dropped silently, any other entry is committed with a commit
// event and becomes visible. Each of these outcomes must happen.
module tb_pjr_cache;
  import tj_pkg::*;
  localparam int unsigned NE = 16, ES = 6, IB = 4, NB = 4, NOPS = 20000, NKEYS = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                clear, hit, alloc_ok, alloc, app_valid, inc_valid, dec_valid;
  logic                ev_commit, ev_overflow, busy;
  val_t [MAX_VARS-1:0] probe_key, alloc_path, app_path;
  logic [31:0]         hit_idx, rd_idx;
  logic [7:0]          hit_cnt, alloc_slot, rd_pos, app_slot, inc_slot, dec_slot;
  pjr_rec_t            rd_rec, app_rec;

  pjr_cache #(.NUM_ENTRIES(NE), .ENTRY_SIZE(ES), .IB_ENTRIES(IB), .NBANKS(NB)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  bit                  c_valid [NE];
  val_t [MAX_VARS-1:0] c_key   [NE];
  pjr_rec_t            c_data  [NE][$];
  bit                  m_open  [IB];
  val_t [MAX_VARS-1:0] m_key   [IB], m_path [IB];
  int                  m_thr   [IB];
  bit                  m_ovf   [IB];
  pjr_rec_t            m_recs  [IB][$];
  val_t [MAX_VARS-1:0] pool    [NKEYS];

  int n_hit = 0, n_alloc = 0, n_refused = 0, n_commit = 0, n_ovf = 0, n_taken = 0, n_ibfull = 0;
  int ev_c = 0, ev_o = 0;
  always @(posedge clk) begin
    if (ev_commit)   ev_c++;
    if (ev_overflow) ev_o++;
  end

  function automatic int idx_of(val_t [MAX_VARS-1:0] k);
    return int'(key_hash(k) % NE);
  endfunction

  task automatic idle();
    clear = 0; alloc = 0; app_valid = 0; inc_valid = 0; dec_valid = 0;
  endtask

  task automatic fail(string s);
    failures++;
    $display("%0t: %s", $time, s);
  endtask

  // probe a key, compare with the model, maybe open a slot
  task automatic do_probe();
    int  k, ix, fs;
    bit  same, exp_hit;
    k = $urandom % NKEYS;
    probe_key = pool[k];
    ix = idx_of(pool[k]);
    #1;
    exp_hit = c_valid[ix] && c_key[ix] == pool[k];
    same = 0; fs = -1;
    for (int s = 0; s < IB; s++) begin
      if (m_open[s] && m_key[s] == pool[k]) same = 1;
      if (!m_open[s] && fs < 0) fs = s;
    end
    checks++;
    if (hit != exp_hit) fail($sformatf("key %0d: hit=%0d want %0d", k, hit, exp_hit));
    if (exp_hit) begin
      n_hit++;
      checks++;
      if (hit_cnt != 8'(c_data[ix].size()) || hit_idx != 32'(ix))
        fail($sformatf("key %0d: count %0d idx %0d, want %0d %0d", k, hit_cnt, hit_idx,
                       c_data[ix].size(), ix));
      rd_idx = hit_idx;
      for (int p = 0; p < c_data[ix].size(); p++) begin
        rd_pos = 8'(p);
        #1;
        checks++;
        if (rd_rec != c_data[ix][p]) fail($sformatf("key %0d record %0d differs", k, p));
      end
    end
    checks++;
    if (alloc_ok != (!exp_hit && !same && fs >= 0) || (alloc_ok && int'(alloc_slot) != fs))
      fail($sformatf("key %0d: alloc_ok=%0d slot %0d", k, alloc_ok, alloc_slot));
    if (!exp_hit && !same && fs < 0) n_ibfull++;
    // open a slot only when the unit and the model agree, so a mismatch
    // is reported once instead of upsetting the thread counters later
    if (alloc_ok && !exp_hit && !same && fs >= 0 && int'(alloc_slot) == fs && $urandom % 3 != 0) begin
      alloc = 1;
      alloc_path = {$urandom, $urandom, $urandom, $urandom};
      m_open[fs] = 1; m_key[fs] = pool[k]; m_path[fs] = alloc_path;
      m_thr[fs] = 1; m_ovf[fs] = 0; m_recs[fs].delete();
      n_alloc++;
    end
  endtask

  // wait for the commit engine after an entry completed, check the outcome
  task automatic finish_entry(int s);
    int ix, c0, o0;
    ix = idx_of(m_key[s]);
    c0 = ev_c; o0 = ev_o;
    @(negedge clk);
    idle();
    while (busy) @(negedge clk);
    @(negedge clk);
    checks++;
    if (m_ovf[s]) begin
      n_ovf++;
      if (ev_o != o0 + 1 || ev_c != c0) fail("overflowed entry not dropped with an event");
    end else if (c_valid[ix]) begin
      n_taken++;
      if (ev_o != o0 || ev_c != c0) fail("entry on a taken line not dropped silently");
    end else begin
      n_commit++;
      if (ev_c != c0 + 1 || ev_o != o0) fail("entry not committed");
      c_valid[ix] = 1; c_key[ix] = m_key[s]; c_data[ix] = m_recs[s];
    end
    m_open[s] = 0;
  endtask

  initial begin
    idle();
    probe_key = '0; alloc_path = '0; app_path = '0; app_rec = '0;
    app_slot = '0; inc_slot = '0; dec_slot = '0; rd_idx = '0; rd_pos = '0;
    for (int i = 0; i < NE; i++) c_valid[i] = 0;
    for (int s = 0; s < IB; s++) m_open[s] = 0;
    for (int k = 0; k < NKEYS; k++)
      pool[k] = {32'd0, 32'($urandom % 5), 32'd0, 32'($urandom % 9)};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int op = 0; op < NOPS; op++) begin
      int r, s;
      int done_slot;
      idle();
      done_slot = -1;
      r = $urandom % 100;
      s = $urandom % IB;
      if (r < 35) begin
        do_probe();
      end else if (r < 75) begin
        if (m_open[s]) begin
          app_valid = 1; app_slot = 8'(s);
          app_rec = '{val: $urandom, ind1: $urandom, ind0: $urandom};
          if ($urandom % 8 == 0) begin
            app_path = m_path[s]; app_path[$urandom % MAX_VARS] ^= 32'h10;
            n_refused++;
          end else begin
            app_path = m_path[s];
            if (m_recs[s].size() < ES) m_recs[s].push_back(app_rec);
            else m_ovf[s] = 1;
          end
        end
      end else if (r < 85) begin
        if (m_open[s] && m_thr[s] < 60) begin
          inc_valid = 1; inc_slot = 8'(s); m_thr[s]++;
        end
      end else if (r < 99) begin
        if (m_open[s]) begin
          dec_valid = 1; dec_slot = 8'(s); m_thr[s]--;
          if (m_thr[s] == 0) done_slot = s;
        end
      end else begin
        // clear: cache and buffer empty again
        clear = 1;
        for (int i = 0; i < NE; i++) c_valid[i] = 0;
        for (int i = 0; i < IB; i++) m_open[i] = 0;
      end
      if (done_slot >= 0) finish_entry(done_slot);
      else @(negedge clk);
    end
    idle();
    repeat (3) @(negedge clk);
    checks += 6;
    if (n_hit == 0)     fail("never: hit");
    if (n_commit == 0)  fail("never: commit");
    if (n_ovf == 0)     fail("never: overflow drop");
    if (n_taken == 0)   fail("never: drop on taken line");
    if (n_refused == 0) fail("never: append with wrong path");
    if (n_ibfull == 0)  fail("never: insertion buffer full");
    $display("hits=%0d allocs=%0d commits=%0d overflows=%0d taken=%0d refused=%0d ib_full=%0d",
             n_hit, n_alloc, n_commit, n_ovf, n_taken, n_refused, n_ibfull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
