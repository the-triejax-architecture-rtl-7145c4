// tb_lub: self-checking test of the LUB search unit.
//
// A sorted, strictly increasing array of 1500 values is put in a behavioural
// memory that answers out of order with random latency and random request
// stalls. Up to 32 searches (one per thread id) are kept in flight; each
// has a random window [lo, hi) (empty windows included) and either a given
// search value or one loaded from a random position (ptr_mode). Every
// answer is compared with a linear-scan reference: position of the first
// value >= the search value, the exhausted flag, the search value and the
// value found. The done queue is randomly back-pressured.
module tb_lub;
  import tj_pkg::*;
  localparam int unsigned NT = 32, LEN = 1500, NREQ = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      req_valid, req_ready, done_valid, done_ready;
  lub_req_t  req;
  lub_done_t done;
  logic      ld_req_valid, ld_req_ready, ld_resp_valid, ld_resp_ready, stall;
  ld_req_t   ld_req;
  ld_resp_t  ld_resp;

  lub #(.NUM_THREADS(NT)) dut (.*);
  ld_mem #(.WORDS(2048), .SLOTS(20), .LAT(2), .JIT(12)) mem (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected answer per thread
  bit        busy [NT];
  lub_done_t exp_d [NT];
  int        sent = 0, got = 0, n_exh = 0, n_ptr = 0, n_found = 0;

  function automatic lub_done_t ref_lub(tid_t t, val_t sv, addr_t lo, addr_t hi);
    lub_done_t r;
    addr_t i;
    r = '{tid: t, ind: hi, sv: sv, ld: '0, exh: 1'b1};
    i = lo;
    while (i < hi) begin
      if (mem.mem[i] >= sv) begin
        r.ind = i; r.exh = 1'b0; r.ld = mem.mem[i];
        break;
      end
      i++;
    end
    return r;
  endfunction

  // request driver
  int cand;
  always @(negedge clk) begin
    if (rst_n) begin
      req_valid = 0;
      cand = $urandom % NT;
      if (sent < NREQ && !busy[cand] && ($urandom % 3 != 0)) begin
        addr_t lo, hi;
        val_t  sv;
        lo = $urandom % LEN;
        hi = lo + ($urandom % 200);
        if ($urandom % 10 == 0) hi = lo;
        if (hi > LEN) hi = LEN;
        req.tid      = tid_t'(cand);
        req.ptr_mode = ($urandom % 2);
        req.ptr      = $urandom % LEN;
        sv = (req.ptr_mode) ? mem.mem[req.ptr] :
             ($urandom % 2) ? mem.mem[$urandom % LEN] : val_t'($urandom % (mem.mem[LEN-1] + 50));
        req.sv  = req.ptr_mode ? val_t'($urandom) : sv;  // ignored in ptr_mode
        req.lo  = lo;
        req.hi  = hi;
        exp_d[cand] = ref_lub(tid_t'(cand), sv, lo, hi);
        // an empty window answers at once, without loading the value
        if (lo >= hi) exp_d[cand].sv = req.sv;
        req_valid = 1;
        if (req.ptr_mode) n_ptr++;
      end
      done_ready = ($urandom % 4 != 0);
      stall      = ($urandom % 5 == 0);
    end
  end

  // answer checker
  always @(posedge clk) begin
    if (rst_n && req_valid && req_ready) begin
      busy[req.tid] = 1;
      sent++;
    end
    if (rst_n && done_valid && done_ready) begin
      lub_done_t e;
      e = exp_d[done.tid];
      checks++;
      got++;
      if (!busy[done.tid]) begin
        failures++; $display("answer for idle thread %0d", done.tid);
      end else if (done.exh != e.exh || done.ind != e.ind || done.sv != e.sv ||
                   (!e.exh && done.ld != e.ld)) begin
        failures++;
        $display("thread %0d: got ind=%0d exh=%0d sv=%0d ld=%0d, want ind=%0d exh=%0d sv=%0d ld=%0d",
                 done.tid, done.ind, done.exh, done.sv, done.ld, e.ind, e.exh, e.sv, e.ld);
      end
      if (e.exh) n_exh++; else if (e.ld == e.sv) n_found++;
      busy[done.tid] = 0;
    end
  end

  initial begin
    val_t x;
    req_valid = 0; req = '0; done_ready = 0; stall = 0;
    for (int i = 0; i < NT; i++) busy[i] = 0;
    x = 5;
    for (int i = 0; i < 2048; i++) begin
      mem.mem[i] = x;
      x += 1 + ($urandom % 7);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (sent == NREQ && got == NREQ);
    repeat (5) @(posedge clk);
    checks += 3;
    if (n_exh == 0)   begin failures++; $display("never: exhausted search"); end
    if (n_ptr == 0)   begin failures++; $display("never: ptr_mode search"); end
    if (n_found == 0) begin failures++; $display("never: exact match"); end
    $display("searches=%0d exhausted=%0d exact=%0d ptr_mode=%0d", got, n_exh, n_found, n_ptr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
