// tj_fifo: synchronous FIFO used for every inter-unit queue
// (LdQueue, MemQueue, LUBDone queue, MatchDone queue, Midwife queue).
// Valid/ready on both sides; data appears on the output in the cycle after
// it is written (no fall-through). DEPTH must be a power of two. Queues in
// the core are sized to the thread count, so a queue never fills while each
// thread has at most one operation in flight; the handshake still stalls the
// producer if that ever stops being true.
module tj_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW:0] wp, rp;
  logic [AW:0] count;

  assign count     = wp - rp;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready) wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end
endmodule
