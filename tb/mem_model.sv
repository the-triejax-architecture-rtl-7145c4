// mem_model: behavioural model of the memory system seen by the core
// (read-only L1/L2 caches, LLC and DRAM lumped together). Not synthesizable.
//
// Read port: accepts a request in a cycle when a slot is free and
// `rd_stall` is low; answers after LAT..LAT+JIT cycles with mem[addr] and
// mem[addr+1]. Requests waiting longer are answered in slot order, so
// answers come back out of request order. Write port: stores a 16-word line;
// accepted only when `wr_stall` is low. The testbench reads and fills `mem`
// directly.
module mem_model
  import tj_pkg::*;
#(
  parameter int unsigned WORDS = 65536,
  parameter int unsigned SLOTS = 16,
  parameter int unsigned LAT   = 4,
  parameter int unsigned JIT   = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     rd_stall,
  input  logic     wr_stall,
  input  logic     rd_req_valid,
  output logic     rd_req_ready,
  input  rd_req_t  rd_req,
  output logic     rd_resp_valid,
  input  logic     rd_resp_ready,
  output rd_resp_t rd_resp,
  input  logic     wr_valid,
  output logic     wr_ready,
  input  wr_req_t  wr_req
);
  val_t mem [WORDS];

  logic                    sv  [SLOTS];
  rd_req_t                 sr  [SLOTS];
  int unsigned             due [SLOTS];
  int unsigned             now;

  int free_i, out_i;
  always_comb begin
    free_i = -1;
    out_i  = -1;
    for (int i = SLOTS-1; i >= 0; i--) begin
      if (!sv[i]) free_i = i;
      if (sv[i] && due[i] <= now) out_i = i;
    end
  end

  assign rd_req_ready  = (free_i >= 0) && !rd_stall;
  assign rd_resp_valid = (out_i >= 0);
  always_comb begin
    rd_resp = '0;
    if (out_i >= 0) begin
      rd_resp.tag     = sr[out_i].tag;
      rd_resp.data[0] = mem[sr[out_i].addr % WORDS];
      rd_resp.data[1] = mem[(sr[out_i].addr + 1) % WORDS];
    end
  end
  assign wr_ready = !wr_stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0;
      for (int i = 0; i < SLOTS; i++) begin
        sv[i]  <= 1'b0;
        sr[i]  <= '0;
        due[i] <= 0;
      end
    end else begin
      now <= now + 1;
      if (rd_resp_valid && rd_resp_ready) sv[out_i] <= 1'b0;
      if (rd_req_valid && rd_req_ready) begin
        sv[free_i]  <= 1'b1;
        sr[free_i]  <= rd_req;
        due[free_i] <= now + LAT + ($urandom % (JIT + 1));
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready)
      for (int i = 0; i < LINE_WORDS; i++) mem[(wr_req.addr + i) % WORDS] <= wr_req.data[i];
  end
endmodule
