// midwife: extracts the children of a trie node.
//
// The trie layout stores, for each level, a child-ranges array: entry i and
// entry i+1 are the start and end offsets (into the next level's value array)
// of the children of node i. A job carries the address of entry i of that
// array (cr_addr = child-ranges base + parent index) and the base address of
// the child value array. "Send Mem" issues one read that returns the two words
// at cr_addr and cr_addr+1 and parks val_base in the thread store; "Compute
// Range" adds val_base to both offsets when the read returns and sends the
// child range [val_base+start, val_base+end) to MatchMaker.
//
// Interface: valid/ready on req, resp, ld_req and ld_resp. One event per
// cycle, returning loads first. Latency = one memory read + 1 cycle.
//
// Follows the paper (Fig. 9 steps 1-5 and the thread store). Own choice: a
// single read returns both offsets, where the paper shows the pair
// childRangeArr[ind:ind+2] as one memory request as well.
module midwife
  import tj_pkg::*;
#(
  parameter int unsigned NUM_THREADS = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mw_req_t  req,
  output logic     resp_valid,
  input  logic     resp_ready,
  output mw_resp_t resp,
  output logic     ld_req_valid,
  input  logic     ld_req_ready,
  output ld_req_t  ld_req,
  input  logic     ld_resp_valid,
  output logic     ld_resp_ready,
  input  ld_resp_t ld_resp
);
  localparam int unsigned TW = $clog2(NUM_THREADS);
  addr_t ts_base [NUM_THREADS];   // thread store: val_base per thread

  // Compute Range (returning load)
  assign resp_valid    = ld_resp_valid;
  assign ld_resp_ready = resp_ready;
  always_comb begin
    resp.tid    = ld_resp.tid;
    resp.rng.lo = ts_base[ld_resp.tid[TW-1:0]] + ld_resp.data[0];
    resp.rng.hi = ts_base[ld_resp.tid[TW-1:0]] + ld_resp.data[1];
  end

  // Send Mem (new job), only when no load is returning this cycle
  assign ld_req_valid = req_valid && !ld_resp_valid;
  assign ld_req       = '{addr: req.cr_addr, tid: req.tid};
  assign req_ready    = ld_req_ready && !ld_resp_valid;

  always_ff @(posedge clk) begin
    if (req_valid && req_ready) ts_base[req.tid[TW-1:0]] <= req.val_base;
  end

  // an offset pair is a range: start <= end
  assert property (@(posedge clk) disable iff (!rst_n)
                   ld_resp_valid |-> ld_resp.data[0] <= ld_resp.data[1]);
endmodule
