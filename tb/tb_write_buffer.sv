// tb_write_buffer: self-checking test of the ST unit (result write buffer).
//
// Several runs push a random number of random 4-word records (0 to 60) with
// random gaps, then raise `finish`. The write port is randomly stalled. A
// behavioural port stores every written 16-word line in a word memory. At
// the end of each run the memory must hold, from the run's base address,
// every record in push order followed by one all-ones DONE record; the
// number of line writes must be ceil((records+1)/4); `finished` must rise
// and no write may come after it.
module tb_write_buffer;
  import tj_pkg::*;
  localparam int unsigned RUNS = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                start, push_valid, push_ready, finish, finished, wr_valid, wr_ready;
  addr_t               base;
  val_t [MAX_VARS-1:0] push_rec;
  wr_req_t             wr_req;
  logic [31:0]         lines_written;

  write_buffer dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  val_t mem [8192];
  int   n_stall = 0, late_writes = 0;
  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready) begin
      if (finished) late_writes++;
      for (int i = 0; i < LINE_WORDS; i++) mem[(wr_req.addr + i) % 8192] = wr_req.data[i];
    end
    if (rst_n && wr_valid && !wr_ready) n_stall++;
  end
  always @(negedge clk) wr_ready = ($urandom % 3 != 0);

  val_t recs [$];

  initial begin
    int nrec, nlines;
    start = 0; push_valid = 0; push_rec = '0; finish = 0; base = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < RUNS; r++) begin
      nrec = (r == 0) ? 0 : (r == 1) ? 3 : (r == 2) ? 4 : $urandom % 61;
      base = addr_t'(16 * ($urandom % 256));
      for (int i = 0; i < 400; i++) mem[(base + i) % 8192] = 32'h1357_9bdf;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      recs.delete();
      for (int i = 0; i < nrec; i++) begin
        val_t [MAX_VARS-1:0] rec;
        for (int w = 0; w < MAX_VARS; w++) begin
          rec[w] = $urandom;
          if (rec[w] == '1) rec[w] = 0;
          recs.push_back(rec[w]);
        end
        while ($urandom % 3 == 0) @(negedge clk);
        push_valid = 1; push_rec = rec;
        @(posedge clk);
        while (!push_ready) @(posedge clk);
        @(negedge clk); push_valid = 0;
      end
      finish = 1;
      while (!finished) @(negedge clk);
      finish = 0;
      repeat (3) @(negedge clk);
      // check memory
      checks += 3;
      for (int i = 0; i < 4 * nrec; i++)
        if (mem[(base + i) % 8192] != recs[i]) begin
          failures++; $display("run %0d: word %0d is %h, want %h", r, i, mem[(base + i) % 8192], recs[i]);
          break;
        end
      for (int w = 0; w < MAX_VARS; w++)
        if (mem[(base + 4*nrec + w) % 8192] != '1) begin
          failures++; $display("run %0d: DONE token missing", r); break;
        end
      nlines = (nrec + 1 + 3) / 4;
      if (lines_written != 32'(nlines)) begin
        failures++; $display("run %0d: %0d lines written, want %0d", r, lines_written, nlines);
      end
    end
    checks += 2;
    if (late_writes != 0) begin failures++; $display("write after finished"); end
    if (n_stall == 0)     begin failures++; $display("never: write stall"); end
    $display("runs=%0d stalls=%0d", RUNS, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
