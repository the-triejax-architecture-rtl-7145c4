// rd_arbiter: merges the LD units (LUB and the Midwife units) onto the core's
// single read port towards the read-only cache hierarchy.
//
// Requests are granted round-robin, one per cycle; the grant index is put in
// the upper bits of the request tag next to the thread id. A response carries
// the tag back and is steered to the unit named in it. Responses may return
// in any order. No buffering: a request is accepted in the cycle the read
// port accepts it.
//
// The paper shows the LD units of LUB and Midwife joining onto one RD path to
// the memory system; the round-robin policy and the tag format are this
// design's own choice.
module rd_arbiter
  import tj_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic    [N-1:0]   ld_req_valid,
  output logic    [N-1:0]   ld_req_ready,
  input  ld_req_t [N-1:0]   ld_req,
  output logic    [N-1:0]   ld_resp_valid,
  input  logic    [N-1:0]   ld_resp_ready,
  output ld_resp_t          ld_resp,
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output rd_req_t           rd_req,
  input  logic              rd_resp_valid,
  output logic              rd_resp_ready,
  input  rd_resp_t          rd_resp
);
  logic [SRC_W-1:0] last, gnt;
  logic             any;

  always_comb begin
    gnt = '0;
    any = 1'b0;
    for (int k = 1; k <= N; k++) begin
      logic [SRC_W-1:0] c;
      c = SRC_W'((int'(last) + k) % N);
      if (!any && ld_req_valid[c]) begin
        any = 1'b1;
        gnt = c;
      end
    end
  end

  assign rd_req_valid = any;
  assign rd_req       = '{addr: ld_req[gnt].addr, tag: {gnt, ld_req[gnt].tid}};
  always_comb begin
    ld_req_ready = '0;
    ld_req_ready[gnt] = any && rd_req_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= SRC_W'(N-1);
    else if (any && rd_req_ready) last <= gnt;
  end

  // responses
  logic [SRC_W-1:0] rsrc;
  assign rsrc    = rd_resp.tag[SRC_W+TID_W-1:TID_W];
  assign ld_resp = '{tid: rd_resp.tag[TID_W-1:0], data: rd_resp.data};
  always_comb begin
    ld_resp_valid = '0;
    ld_resp_valid[rsrc] = rd_resp_valid;
  end
  assign rd_resp_ready = ld_resp_ready[rsrc];

  assert property (@(posedge clk) disable iff (!rst_n) rd_resp_valid |-> int'(rsrc) < N);
endmodule
