// matchmaker: leapfrog join of two sorted array ranges for one join variable.
//
// A job names two ranges, array 1 and array 2. Each range either comes with
// the job from Cupid (first trie level, or a continuation "find next match")
// or is produced by a Midwife unit (child level); slot k of a job waits for
// Midwife k. When both ranges are known the unit asks LUB to load the first
// value of array 1 and search it in array 2. Each LUB answer (Fig. 8):
//   1. searchVal = LdVal            -> match, report value and both indexes
//   3. searched array exhausted     -> no match (FALSE)
//   5. otherwise search LdVal in the other array, starting one past its
//      current position, and park the state in the thread store (6).
// The two arrays thus take turns as the searched array, which is the
// leapfrog join. Results go to Cupid's MatchDone queue with the final
// positions (ind) and ends (hi) of both ranges so Cupid can ask for the next
// match later.
//
// Interface: valid/ready queues; one event per cycle, priority LUB answers,
// Midwife 0, Midwife 1, then new jobs from Cupid. Latency is set by the LUB
// searches; the unit itself adds one cycle per step.
//
// A slot of a job from Cupid that is marked not ready is left alone, so a
// Midwife range that arrives before Cupid's part of the job is kept.
//
// Follows the paper: the leapfrog decision flow and thread store of Fig. 8,
// two-array joins, ranges from Cupid and Midwife. Own choices: the slot
// numbering that pairs Midwife k with array k, and that a variable held in one
// trie only is joined with a copy of its own range.
module matchmaker
  import tj_pkg::*;
#(
  parameter int unsigned NUM_THREADS = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  mm_req_t   req,
  input  logic      mw0_valid,
  output logic      mw0_ready,
  input  mw_resp_t  mw0,
  input  logic      mw1_valid,
  output logic      mw1_ready,
  input  mw_resp_t  mw1,
  input  logic      lubd_valid,
  output logic      lubd_ready,
  input  lub_done_t lubd,
  output logic      lub_valid,
  input  logic      lub_ready,
  output lub_req_t  lub,
  output logic      done_valid,
  input  logic      done_ready,
  output mm_done_t  done
);
  localparam int unsigned TW = $clog2(NUM_THREADS);

  typedef struct packed {
    logic   [NSLOT-1:0] rdy;
    range_t [NSLOT-1:0] rng;   // rng[k].lo is the current position in array k
    logic               side;  // array searched by the pending LUB request
  } mm_state_t;

  mm_state_t          ts    [NUM_THREADS];
  logic [NSLOT-1:0]   rdy_q [NUM_THREADS];   // reset: which ranges have arrived

  typedef enum logic [2:0] {EV_NONE, EV_LUB, EV_MW0, EV_MW1, EV_REQ} ev_e;
  ev_e       ev;
  tid_t      tid;
  mm_state_t cur, nxt;
  logic      want_lub, want_done, kick;
  logic      s, o;
  addr_t     newlo;

  always_comb begin
    if (lubd_valid)     ev = EV_LUB;
    else if (mw0_valid) ev = EV_MW0;
    else if (mw1_valid) ev = EV_MW1;
    else if (req_valid) ev = EV_REQ;
    else                ev = EV_NONE;
    unique case (ev)
      EV_LUB:  tid = lubd.tid;
      EV_MW0:  tid = mw0.tid;
      EV_MW1:  tid = mw1.tid;
      default: tid = req.tid;
    endcase
    cur       = ts[tid[TW-1:0]];
    cur.rdy   = rdy_q[tid[TW-1:0]];
    nxt       = cur;
    want_lub  = 1'b0;
    want_done = 1'b0;
    kick      = 1'b0;
    s         = cur.side;
    o         = ~cur.side;
    newlo     = '0;
    lub       = '{tid: tid, ptr_mode: 1'b0, ptr: '0, sv: '0, lo: '0, hi: '0};
    done      = '{tid: tid, matched: 1'b0, val: '0, ind: '0, hi: '0};

    unique case (ev)
      EV_LUB: begin
        nxt.rng[s].lo = lubd.ind;
        if (!lubd.exh && lubd.ld == lubd.sv) begin
          want_done    = 1'b1;               // (2) match found
          done.matched = 1'b1;
          done.val     = lubd.sv;
        end else if (lubd.exh) begin
          want_done = 1'b1;                  // (4) array exhausted
        end else begin
          newlo = cur.rng[o].lo + 1'b1;
          if (newlo >= cur.rng[o].hi) begin
            want_done = 1'b1;                // other array exhausted
          end else begin
            want_lub      = 1'b1;            // (5) leap into the other array
            nxt.rng[o].lo = newlo;
            nxt.side      = o;
            lub.sv        = lubd.ld;
            lub.lo        = newlo;
            lub.hi        = cur.rng[o].hi;
          end
        end
      end
      EV_MW0: begin
        nxt.rng[0] = mw0.rng;
        nxt.rdy[0] = 1'b1;
        kick       = cur.rdy[1];
      end
      EV_MW1: begin
        nxt.rng[1] = mw1.rng;
        nxt.rdy[1] = 1'b1;
        kick       = cur.rdy[0];
      end
      EV_REQ: begin
        for (int k = 0; k < NSLOT; k++) begin
          if (req.rdy[k]) begin
            nxt.rng[k] = req.rng[k];
            nxt.rdy[k] = 1'b1;
          end
        end
        kick = &nxt.rdy;
      end
      default: ;
    endcase

    if (kick) begin
      nxt.rdy = '0;
      if (nxt.rng[0].lo >= nxt.rng[0].hi || nxt.rng[1].lo >= nxt.rng[1].hi) begin
        want_done = 1'b1;                    // an empty range has no match
      end else begin
        want_lub     = 1'b1;                 // load array1[lo], search it in array 2
        nxt.side     = 1'b1;
        lub.ptr_mode = 1'b1;
        lub.ptr      = nxt.rng[0].lo;
        lub.lo       = nxt.rng[1].lo;
        lub.hi       = nxt.rng[1].hi;
      end
    end

    done.ind[0] = nxt.rng[0].lo;
    done.ind[1] = nxt.rng[1].lo;
    done.hi[0]  = nxt.rng[0].hi;
    done.hi[1]  = nxt.rng[1].hi;
  end

  logic fire;
  assign fire       = (ev != EV_NONE) && (!want_lub || lub_ready) && (!want_done || done_ready);
  assign lub_valid  = (ev != EV_NONE) && want_lub  && (!want_done || done_ready);
  assign done_valid = (ev != EV_NONE) && want_done && (!want_lub || lub_ready);
  assign lubd_ready = fire && ev == EV_LUB;
  assign mw0_ready  = fire && ev == EV_MW0;
  assign mw1_ready  = fire && ev == EV_MW1;
  assign req_ready  = fire && ev == EV_REQ;

  always_ff @(posedge clk) begin
    if (fire) ts[tid[TW-1:0]] <= nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_THREADS; i++) rdy_q[i] <= '0;
    end else if (fire) begin
      rdy_q[tid[TW-1:0]] <= nxt.rdy;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(want_lub && want_done));
endmodule
