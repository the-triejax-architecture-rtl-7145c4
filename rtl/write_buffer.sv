// write_buffer: Cupid's ST unit. Collects join results and writes them to
// memory one cache line at a time.
//
// Each result is a record of MAX_VARS words (unused variables are 0), so a
// 16-word line holds 4 records. When a line is full it is offered on the write
// port; records pushed meanwhile wait (push_ready low) until the write is
// accepted. "finish" appends the DONE token, a record of all ones, and writes
// the last, possibly partial, line (unused words 0); finished goes high once
// that line is accepted. "start" clears the buffer and loads the result base
// address. Lines go to consecutive addresses from the base.
//
// The paper gives the function (a small buffer that sends results once they
// exceed a cache line, and a DONE token at the end); the record format, the
// token value and the line size are this design's own.
module write_buffer
  import tj_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  addr_t                   base,
  input  logic                    push_valid,
  output logic                    push_ready,
  input  val_t [MAX_VARS-1:0]     push_rec,
  input  logic                    finish,
  output logic                    finished,
  output logic                    wr_valid,
  input  logic                    wr_ready,
  output wr_req_t                 wr_req,
  output logic [31:0]             lines_written
);
  localparam int unsigned RPL = LINE_WORDS / MAX_VARS;   // records per line

  val_t [LINE_WORDS-1:0]  line;
  logic [$clog2(RPL):0]   cnt;
  addr_t                  waddr;
  logic                   full;      // line waiting for the write port
  logic                   fin_pend;  // DONE token written, last line pending

  assign wr_valid   = full;
  assign wr_req     = '{addr: waddr, data: line};
  assign push_ready = !full && !fin_pend && !finished;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line <= '0; cnt <= '0; waddr <= '0; full <= 1'b0;
      fin_pend <= 1'b0; finished <= 1'b0; lines_written <= '0;
    end else if (start) begin
      line <= '0; cnt <= '0; waddr <= base; full <= 1'b0;
      fin_pend <= 1'b0; finished <= 1'b0; lines_written <= '0;
    end else begin
      if (full && wr_ready) begin
        full          <= 1'b0;
        line          <= '0;
        cnt           <= '0;
        waddr         <= waddr + LINE_WORDS;
        lines_written <= lines_written + 1'b1;
        if (fin_pend) begin
          fin_pend <= 1'b0;
          finished <= 1'b1;
        end
      end else if (!full && !fin_pend && !finished) begin
        if (push_valid) begin
          line[int'(cnt)*MAX_VARS +: MAX_VARS] <= push_rec;
          cnt  <= cnt + 1'b1;
          full <= (int'(cnt) == RPL-1);
        end else if (finish) begin
          line[int'(cnt)*MAX_VARS +: MAX_VARS] <= '1;   // DONE token
          full     <= 1'b1;
          fin_pend <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) finished |-> !wr_valid);
endmodule
