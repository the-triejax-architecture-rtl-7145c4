// tb_midwife: self-checking test of the Midwife child-range unit.
//
// A child-ranges array of 600 non-decreasing offsets is put in a
// behavioural memory that answers out of order with random latency and
// stalls. Jobs for random parents are issued from up to 32 thread ids at
// once, each with its own random child value-array base. Every answer must
// name a thread that has a job open and carry the range
// [base + cr[i], base + cr[i+1]). The response queue is randomly
// back-pressured; the test also counts empty child ranges.
module tb_midwife;
  import tj_pkg::*;
  localparam int unsigned NT = 32, NPAR = 600, NREQ = 4000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     req_valid, req_ready, resp_valid, resp_ready;
  mw_req_t  req;
  mw_resp_t resp;
  logic     ld_req_valid, ld_req_ready, ld_resp_valid, ld_resp_ready, stall;
  ld_req_t  ld_req;
  ld_resp_t ld_resp;

  midwife #(.NUM_THREADS(NT)) dut (.*);
  ld_mem #(.WORDS(1024), .SLOTS(24), .LAT(2), .JIT(10)) mem (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit     busy [NT];
  range_t exp_r [NT];
  int     sent = 0, got = 0, n_empty = 0;
  mw_req_t nreq;

  always @(negedge clk) begin
    if (rst_n) begin
      int c;
      req_valid = 0;
      c = $urandom % NT;
      if (sent < NREQ && !busy[c] && ($urandom % 2 == 0)) begin
        int p;
        p = $urandom % NPAR;
        nreq.tid      = tid_t'(c);
        nreq.cr_addr  = addr_t'(p);
        nreq.val_base = addr_t'($urandom % 100000);
        req = nreq;
        req_valid = 1;
      end
      resp_ready = ($urandom % 3 != 0);
      stall      = ($urandom % 6 == 0);
    end
  end

  always @(posedge clk) begin
    if (rst_n && req_valid && req_ready) begin
      busy[req.tid] = 1;
      exp_r[req.tid].lo = req.val_base + mem.mem[req.cr_addr];
      exp_r[req.tid].hi = req.val_base + mem.mem[req.cr_addr + 1];
      sent++;
    end
    if (rst_n && resp_valid && resp_ready) begin
      checks++;
      got++;
      if (!busy[resp.tid]) begin
        failures++; $display("answer for idle thread %0d", resp.tid);
      end else if (resp.rng != exp_r[resp.tid]) begin
        failures++;
        $display("thread %0d: got [%0d,%0d) want [%0d,%0d)", resp.tid,
                 resp.rng.lo, resp.rng.hi, exp_r[resp.tid].lo, exp_r[resp.tid].hi);
      end
      if (resp.rng.lo == resp.rng.hi) n_empty++;
      busy[resp.tid] = 0;
    end
  end

  initial begin
    val_t x;
    req_valid = 0; req = '0; resp_ready = 0; stall = 0;
    for (int i = 0; i < NT; i++) busy[i] = 0;
    x = 0;
    for (int i = 0; i < 1024; i++) begin
      mem.mem[i] = x;
      if ($urandom % 4 != 0) x += $urandom % 9;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (sent == NREQ && got == NREQ);
    repeat (5) @(posedge clk);
    checks++;
    if (n_empty == 0) begin failures++; $display("never: empty child range"); end
    $display("jobs=%0d empty=%0d", got, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
