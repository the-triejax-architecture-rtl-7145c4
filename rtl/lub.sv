// lub: lowest-upper-bound search unit (binary search over a sorted array).
//
// A request asks for the first position in [lo, hi) whose value is >= sv.
// The search value is either given, or (ptr_mode) first loaded from memory
// at ptr: this is how MatchMaker starts a leapfrog step with "the first value
// of array 1" without reading it itself. Each probe reads memory through the
// LD port, so the unit is multithreaded: before a read is issued the thread's
// search window is written to the thread store (indexed by tid), and when the
// read returns the window is read back. The search ends early when a probe
// equals sv, or when the window is empty; the answer (tid, ind, sv, LdVal,
// exh) goes to the LUBDone queue. exh means every value in [lo, hi) is < sv.
//
// Interface: valid/ready on req, done, ld_req and ld_resp. One event per
// cycle; a returning load has priority over a new request. A search over n
// elements takes at most ceil(log2(n+1)) probes (+1 load in ptr_mode).
//
// Follows the paper: the decision "len(arr)=0 OR searchVal=LdVal", binary
// search, thread store and the queue names. Own choices: the explicit
// ptr_mode load and the 2-word read responses (only word 0 is used here).
module lub
  import tj_pkg::*;
#(
  parameter int unsigned NUM_THREADS = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  // requests from MatchMaker
  input  logic      req_valid,
  output logic      req_ready,
  input  lub_req_t  req,
  // answers to MatchMaker (LUBDone queue)
  output logic      done_valid,
  input  logic      done_ready,
  output lub_done_t done,
  // LD unit
  output logic      ld_req_valid,
  input  logic      ld_req_ready,
  output ld_req_t   ld_req,
  input  logic      ld_resp_valid,
  output logic      ld_resp_ready,
  input  ld_resp_t  ld_resp
);
  typedef struct packed {
    logic  loading;  // waiting for the search value (ptr_mode)
    addr_t lo;
    addr_t hi;
    addr_t orig_hi;
    addr_t mid;
    val_t  sv;
    val_t  hival;    // value at hi, valid when hi < orig_hi
  } lub_state_t;

  lub_state_t ts [NUM_THREADS];   // thread store

  // ---------------- working copy of one thread ----------------
  lub_state_t cur, nxt;
  tid_t       tid;
  logic       use_resp, use_req;
  logic       want_ld, want_done;
  logic       found;
  val_t       v;

  always_comb begin
    use_resp = ld_resp_valid;
    use_req  = !ld_resp_valid && req_valid;
    tid      = use_resp ? ld_resp.tid : req.tid;
    cur      = ts[tid[$clog2(NUM_THREADS)-1:0]];
    nxt      = cur;
    want_ld  = 1'b0;
    want_done = 1'b0;
    found    = 1'b0;
    v        = ld_resp.data[0];
    ld_req   = '{addr: '0, tid: tid};
    done     = '{tid: tid, ind: '0, sv: '0, ld: '0, exh: 1'b0};

    if (use_req) begin
      nxt.loading = req.ptr_mode;
      nxt.lo      = req.lo;
      nxt.hi      = req.hi;
      nxt.orig_hi = req.hi;
      nxt.sv      = req.sv;
      nxt.hival   = '0;
      if (req.ptr_mode && req.lo < req.hi) begin
        want_ld     = 1'b1;
        ld_req.addr = req.ptr;
      end
    end else if (use_resp) begin
      if (cur.loading) begin
        nxt.loading = 1'b0;
        nxt.sv      = v;
      end else if (v == cur.sv) begin
        found = 1'b1;
        nxt.lo = cur.mid;
        nxt.hi = cur.mid;
        nxt.hival = v;
      end else if (v < cur.sv) begin
        nxt.lo = cur.mid + 1'b1;
      end else begin
        nxt.hi    = cur.mid;
        nxt.hival = v;
      end
    end

    // next probe or answer
    if ((use_req || use_resp) && !want_ld) begin
      if (!found && nxt.lo < nxt.hi) begin
        want_ld     = 1'b1;
        nxt.mid     = nxt.lo + ((nxt.hi - nxt.lo) >> 1);
        ld_req.addr = nxt.mid;
      end else begin
        want_done = 1'b1;
        done.ind  = nxt.lo;
        done.sv   = nxt.sv;
        done.exh  = (nxt.lo >= nxt.orig_hi);
        done.ld   = nxt.hival;
      end
    end
  end

  logic fire;
  assign fire          = (use_req || use_resp) && (!want_ld || ld_req_ready) && (!want_done || done_ready);
  assign ld_req_valid  = (use_req || use_resp) && want_ld && (!want_done || done_ready);
  assign done_valid    = (use_req || use_resp) && want_done && (!want_ld || ld_req_ready);
  assign ld_resp_ready = use_resp && fire;
  assign req_ready     = use_req && fire;

  always_ff @(posedge clk) begin
    if (fire) ts[tid[$clog2(NUM_THREADS)-1:0]] <= nxt;
  end

  // a response can only arrive for a thread that is searching
  property p_no_done_and_ld;
    @(posedge clk) disable iff (!rst_n) !(want_ld && want_done);
  endproperty
  assert property (p_no_done_and_ld);
endmodule
