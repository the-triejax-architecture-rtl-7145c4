// tb_matchmaker: self-checking test of MatchMaker with a LUB unit behind it.
//
// Two strictly increasing arrays (A at 0, B at 1000, with similar value
// steps so that nearby windows share values) sit in a behavioural
// memory with random out-of-order latency; queues connect MatchMaker and
// LUB as in the core. Each job intersects a random
// window of A with a random window of B. The two windows of a job are
// delivered in one of four ways, chosen at random: both from the job
// request, window 0 from Midwife 0, window 1 from Midwife 1, or both from
// Midwifes; the parts of a job arrive on their queues in random order and
// up to 32 jobs (one per thread id) are open at once. Each answer is checked
// against a reference: the smallest common value of the two windows, with
// its positions in A and B and the unchanged window ends, or "no match".
module tb_matchmaker;
  import tj_pkg::*;
  localparam int unsigned NT = 32, LEN = 900, NJOB = 3000;
  localparam addr_t BB = 1000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      req_valid, req_ready, mw0_valid, mw0_ready, mw1_valid, mw1_ready;
  mm_req_t   req;
  mw_resp_t  mw0, mw1;
  logic      lubd_valid, lubd_ready, lub_valid, lub_ready, done_valid, done_ready;
  lub_done_t lubd;
  lub_req_t  lub;
  mm_done_t  done;
  logic      ld_req_valid, ld_req_ready, ld_resp_valid, ld_resp_ready, stall;
  ld_req_t   ld_req;
  ld_resp_t  ld_resp;

  matchmaker #(.NUM_THREADS(NT)) dut (.*);
  // queues between the units, as in the core
  logic      lq_valid, lq_ready, dq_valid, dq_ready;
  lub_req_t  lq;
  lub_done_t dq;
  tj_fifo #(.T(lub_req_t), .DEPTH(NT)) u_lubq (
    .clk, .rst_n, .in_valid(lub_valid), .in_ready(lub_ready), .in_data(lub),
    .out_valid(lq_valid), .out_ready(lq_ready), .out_data(lq));
  tj_fifo #(.T(lub_done_t), .DEPTH(NT)) u_doneq (
    .clk, .rst_n, .in_valid(dq_valid), .in_ready(dq_ready), .in_data(dq),
    .out_valid(lubd_valid), .out_ready(lubd_ready), .out_data(lubd));
  lub #(.NUM_THREADS(NT)) u_lub (
    .clk, .rst_n, .req_valid(lq_valid), .req_ready(lq_ready), .req(lq),
    .done_valid(dq_valid), .done_ready(dq_ready), .done(dq),
    .ld_req_valid, .ld_req_ready, .ld_req, .ld_resp_valid, .ld_resp_ready, .ld_resp);
  ld_mem #(.WORDS(2048), .SLOTS(20), .LAT(2), .JIT(10)) mem (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired"); $display("started=%0d got=%0d", started, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-thread job
  bit       busy [NT];
  bit       p_req [NT], p_mw0 [NT], p_mw1 [NT];   // parts still to deliver
  bit       by_mw0 [NT], by_mw1 [NT];              // windows given by Midwife
  range_t   w0 [NT], w1 [NT];
  mm_done_t exp_d [NT];
  int       started = 0, got = 0, n_match = 0, n_nomatch = 0, n_mwfirst = 0;

  function automatic mm_done_t ref_mm(tid_t t, range_t a, range_t b);
    mm_done_t r;
    addr_t i, j;
    r = '{tid: t, matched: 1'b0, val: '0, ind: '0, hi: '0};
    r.hi[0] = a.hi; r.hi[1] = b.hi;
    i = a.lo; j = b.lo;
    while (i < a.hi && j < b.hi) begin
      if (mem.mem[i] == mem.mem[j]) begin
        r.matched = 1'b1; r.val = mem.mem[i]; r.ind[0] = i; r.ind[1] = j;
        break;
      end else if (mem.mem[i] < mem.mem[j]) i++;
      else j++;
    end
    return r;
  endfunction

  // drivers
  int pick_r, pick_0, pick_1;
  always @(negedge clk) begin
    if (rst_n) begin
      // open a new job on an idle thread
      if (started < NJOB) begin
        int c, mode;
        c = $urandom % NT;
        if (!busy[c]) begin
          w0[c].lo = $urandom % LEN;
          w0[c].hi = w0[c].lo + ($urandom % 60);
          if (w0[c].hi > LEN) w0[c].hi = LEN;
          w1[c].lo = ($urandom % 4 == 0) ? BB + ($urandom % LEN)
                                         : BB + ((w0[c].lo + LEN - 20 + ($urandom % 40)) % LEN);
          w1[c].hi = w1[c].lo + ($urandom % 60);
          if (w1[c].hi > BB + LEN) w1[c].hi = BB + LEN;
          mode = $urandom % 4;
          p_req[c] = (mode != 3);
          p_mw0[c] = (mode == 1 || mode == 3);
          p_mw1[c] = (mode == 2 || mode == 3);
          by_mw0[c] = p_mw0[c];
          by_mw1[c] = p_mw1[c];
          exp_d[c] = ref_mm(tid_t'(c), w0[c], w1[c]);
          busy[c]  = 1;
          started++;
        end
      end
      // offer one pending part per queue
      req_valid = 0; mw0_valid = 0; mw1_valid = 0;
      pick_r = $urandom % NT; pick_0 = $urandom % NT; pick_1 = $urandom % NT;
      if (busy[pick_r] && p_req[pick_r]) begin
        req.tid = tid_t'(pick_r);
        req.rdy = {!by_mw1[pick_r], !by_mw0[pick_r]};
        req.rng[0] = by_mw0[pick_r] ? '0 : w0[pick_r];
        req.rng[1] = by_mw1[pick_r] ? '0 : w1[pick_r];
        req_valid = 1;
      end
      if (busy[pick_0] && p_mw0[pick_0]) begin
        mw0.tid = tid_t'(pick_0); mw0.rng = w0[pick_0]; mw0_valid = 1;
      end
      if (busy[pick_1] && p_mw1[pick_1]) begin
        mw1.tid = tid_t'(pick_1); mw1.rng = w1[pick_1]; mw1_valid = 1;
      end
      done_ready = ($urandom % 4 != 0);
      stall      = ($urandom % 6 == 0);
    end
  end

  // acceptance and checking
  always @(posedge clk) begin
    if (rst_n) begin
      if (mw0_valid && mw0_ready) begin
        if (p_req[mw0.tid]) n_mwfirst++;
        p_mw0[mw0.tid] = 0;
      end
      if (mw1_valid && mw1_ready) begin
        if (p_req[mw1.tid]) n_mwfirst++;
        p_mw1[mw1.tid] = 0;
      end
      if (req_valid && req_ready) p_req[req.tid] = 0;
      if (done_valid && done_ready) begin
        mm_done_t e;
        e = exp_d[done.tid];
        checks++;
        got++;
        if (!busy[done.tid] || p_req[done.tid] || p_mw0[done.tid] || p_mw1[done.tid]) begin
          failures++; $display("answer for thread %0d before its job was complete", done.tid);
        end else if (done.matched != e.matched ||
                     (e.matched && (done.val != e.val || done.ind != e.ind || done.hi != e.hi))) begin
          failures++;
          $display("thread %0d: got m=%0d v=%0d ind=%0d/%0d, want m=%0d v=%0d ind=%0d/%0d",
                   done.tid, done.matched, done.val, done.ind[0], done.ind[1],
                   e.matched, e.val, e.ind[0], e.ind[1]);
        end
        if (e.matched) n_match++; else n_nomatch++;
        busy[done.tid] = 0;
      end
    end
  end

  initial begin
    val_t x, y;
    req_valid = 0; mw0_valid = 0; mw1_valid = 0; req = '0; mw0 = '0; mw1 = '0;
    done_ready = 0; stall = 0;
    for (int i = 0; i < NT; i++) begin
      busy[i] = 0; p_req[i] = 0; p_mw0[i] = 0; p_mw1[i] = 0;
    end
    x = 1; y = 1;
    for (int i = 0; i < 1000; i++) begin
      mem.mem[i]      = x; x += 1 + ($urandom % 6);
      mem.mem[BB + i] = y; y += 1 + ($urandom % 6);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (started == NJOB && got == NJOB);
    repeat (5) @(posedge clk);
    checks += 3;
    if (n_match == 0)   begin failures++; $display("never: match"); end
    if (n_nomatch == 0) begin failures++; $display("never: no match"); end
    if (n_mwfirst == 0) begin failures++; $display("never: Midwife range before request"); end
    $display("jobs=%0d match=%0d nomatch=%0d mw_first=%0d", got, n_match, n_nomatch, n_mwfirst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
