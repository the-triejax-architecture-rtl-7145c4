// ld_mem: behavioural memory behind one LD port (unit testbenches only).
//
// Holds WORDS 32-bit words in `mem`, written directly by the testbench.
// Every accepted request (addr, tid) returns the two words at addr and
// addr+1 after LAT to LAT+JIT cycles, chosen at random per request, so
// answers come back out of request order. Up to SLOTS requests are in
// flight; when all slots are busy, or when `stall` is high, ld_req_ready is
// low. A returning answer waits while ld_resp_ready is low. Addresses wrap
// at WORDS.
module ld_mem
  import tj_pkg::*;
#(
  parameter int unsigned WORDS = 4096,
  parameter int unsigned SLOTS = 16,
  parameter int unsigned LAT   = 3,
  parameter int unsigned JIT   = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     stall,
  input  logic     ld_req_valid,
  output logic     ld_req_ready,
  input  ld_req_t  ld_req,
  output logic     ld_resp_valid,
  input  logic     ld_resp_ready,
  output ld_resp_t ld_resp
);
  val_t mem [WORDS];

  logic        busy [SLOTS];
  int unsigned due  [SLOTS];
  ld_resp_t    ans  [SLOTS];
  int unsigned now;

  int free_i, ready_i;
  always_comb begin
    free_i  = -1;
    ready_i = -1;
    for (int i = 0; i < SLOTS; i++) begin
      if (!busy[i] && free_i < 0) free_i = i;
      if (busy[i] && due[i] <= now && ready_i < 0) ready_i = i;
    end
  end

  assign ld_req_ready  = !stall && free_i >= 0;
  assign ld_resp_valid = ready_i >= 0;
  assign ld_resp       = (ready_i >= 0) ? ans[ready_i] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0;
      for (int i = 0; i < SLOTS; i++) begin
        busy[i] <= 1'b0;
        due[i]  <= 0;
        ans[i]  <= '0;
      end
    end else begin
      now <= now + 1;
      if (ld_resp_valid && ld_resp_ready) busy[ready_i] <= 1'b0;
      if (ld_req_valid && ld_req_ready) begin
        busy[free_i]        <= 1'b1;
        due[free_i]         <= now + LAT + ($urandom % (JIT + 1));
        ans[free_i].tid     <= ld_req.tid;
        ans[free_i].data[0] <= mem[ld_req.addr % WORDS];
        ans[free_i].data[1] <= mem[(ld_req.addr + 1) % WORDS];
      end
    end
  end
endmodule
