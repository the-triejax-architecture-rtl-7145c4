// tb_rd_arbiter: self-checking test of the read-port arbiter.
//
// Three requesters issue reads with random addresses and thread ids; the
// read port is randomly stalled. A behavioural port keeps every accepted
// request (tag, addr) and answers them in random order with data derived
// from the address. Checks: each accepted request is the one its requester
// offered and carries the requester's index in its tag; each answer reaches
// exactly the requester named in the tag with the right thread id and data;
// round-robin fairness (with all three requesting, no requester waits more
// than two grants).
module tb_rd_arbiter;
  import tj_pkg::*;
  localparam int unsigned N = 3, NREQ = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    [N-1:0] ld_req_valid, ld_req_ready, ld_resp_valid, ld_resp_ready;
  ld_req_t [N-1:0] ld_req;
  ld_resp_t        ld_resp;
  logic            rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready;
  rd_req_t         rd_req;
  rd_resp_t        rd_resp;

  rd_arbiter #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired"); $display("sent=%0d pend=%0d answered=%0d", sent, pend.size(), answered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // outstanding reads at the port
  rd_req_t pend [$];
  int      sent = 0, answered = 0, max_wait = 0;
  int      waitc [N];
  int      n_resp_stall = 0;

  always @(negedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < N; k++) begin
        if (!ld_req_valid[k] && sent < NREQ && $urandom % 2 == 0) begin
          ld_req_valid[k]  = 1;
          ld_req[k].addr   = $urandom;
          ld_req[k].tid    = tid_t'($urandom);
        end
        ld_resp_ready[k] = ($urandom % 4 != 0);
      end
      rd_req_ready = ($urandom % 3 != 0);
      if (pend.size() > 0 && $urandom % 2 == 0) begin
        int i;
        i = $urandom % pend.size();
        rd_resp.tag     = pend[i].tag;
        rd_resp.data[0] = pend[i].addr ^ 32'h5a5a_0000;
        rd_resp.data[1] = pend[i].addr + 1;
        rd_resp_valid   = 1;
      end else if (!rd_resp_valid) begin
        rd_resp_valid = 0;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      // grants
      if (rd_req_valid && rd_req_ready) begin
        int src;
        src = int'(rd_req.tag[SRC_W+TID_W-1:TID_W]);
        checks++;
        if (src >= N || !ld_req_valid[src] || !ld_req_ready[src] ||
            rd_req.addr != ld_req[src].addr || rd_req.tag[TID_W-1:0] != ld_req[src].tid ||
            $countones(ld_req_ready) != 1) begin
          failures++; $display("bad grant: tag %h addr %h", rd_req.tag, rd_req.addr);
        end else begin
          pend.push_back(rd_req);
          ld_req_valid[src] = 0;
          sent++;
        end
      end
      // fairness: grants seen while a requester waits
      for (int k = 0; k < N; k++) begin
        if (ld_req_valid[k] && rd_req_valid && rd_req_ready && !ld_req_ready[k]) waitc[k]++;
        else if (!ld_req_valid[k]) waitc[k] = 0;
        if (waitc[k] > max_wait) max_wait = waitc[k];
      end
      // answers
      if (rd_resp_valid) begin
        int src;
        src = int'(rd_resp.tag[SRC_W+TID_W-1:TID_W]);
        if ($countones(ld_resp_valid) != 1 || !ld_resp_valid[src]) begin
          failures++; checks++; $display("answer %h not steered to requester %0d", rd_resp.tag, src);
        end
        if (!rd_resp_ready) n_resp_stall++;
        if (rd_resp_ready) begin
          checks++;
          if (rd_resp_ready != ld_resp_ready[src] || ld_resp.tid != rd_resp.tag[TID_W-1:0] ||
              ld_resp.data != rd_resp.data) begin
            failures++; $display("answer %h corrupted", rd_resp.tag);
          end
          for (int i = 0; i < pend.size(); i++)
            if (pend[i].tag == rd_resp.tag) begin pend.delete(i); break; end
          answered++;
          rd_resp_valid = 0;
        end
      end
    end
  end

  initial begin
    ld_req_valid = '0; ld_req = '0; ld_resp_ready = '0;
    rd_req_ready = 0; rd_resp_valid = 0; rd_resp = '0;
    for (int k = 0; k < N; k++) waitc[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!(sent >= NREQ && ld_req_valid == 0 && pend.size() == 0)) @(posedge clk);
    repeat (5) @(posedge clk);
    checks += 2;
    if (max_wait > N - 1) begin failures++; $display("unfair: a requester waited %0d grants", max_wait); end
    if (n_resp_stall == 0) begin failures++; $display("never: answer back-pressure"); end
    $display("grants=%0d answers=%0d max_wait=%0d", sent, answered, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
