// tb_query_store: self-checking test of the query store.
//
// Random query descriptions (header fields and the eight array slots) are
// encoded into words by the testbench's own copy of the word layout, written
// in random order through the configuration port (with writes to addresses
// past the store mixed in, which must be ignored), and the decoded `query`
// output is compared field by field with the description. A reset in the
// middle must clear every field.
module tb_query_store;
  import tj_pkg::*;
  localparam int unsigned ROUNDS = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_we;
  logic [5:0]  cfg_addr;
  logic [31:0] cfg_wdata;
  query_t      query;

  query_store dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  query_t      q;
  logic [31:0] w [QWORDS];
  int          order [QWORDS];

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROUNDS; r++) begin
      // random description
      q.hdr.num_vars   = 3'($urandom);
      q.hdr.cache_en   = 1'($urandom);
      q.hdr.cache_var  = 2'($urandom);
      q.hdr.key_mask   = 4'($urandom);
      q.hdr.static_thr = 6'($urandom);
      q.hdr.dyn_en     = 1'($urandom);
      q.hdr.res_base   = $urandom;
      for (int v = 0; v < MAX_VARS; v++)
        for (int s = 0; s < NSLOT; s++) begin
          q.slot[v][s].level0   = 1'($urandom);
          q.slot[v][s].pvar     = 2'($urandom);
          q.slot[v][s].pslot    = 1'($urandom);
          q.slot[v][s].val_base = $urandom;
          q.slot[v][s].len      = $urandom;
          q.slot[v][s].cr_base  = $urandom;
        end
      // encode
      w[0] = {15'($urandom), q.hdr.dyn_en, q.hdr.static_thr, q.hdr.key_mask,
              q.hdr.cache_var, q.hdr.cache_en, q.hdr.num_vars};
      w[1] = q.hdr.res_base;
      for (int v = 0; v < MAX_VARS; v++)
        for (int s = 0; s < NSLOT; s++) begin
          w[2 + 4*(2*v+s)]     = {28'($urandom), q.slot[v][s].pslot, q.slot[v][s].pvar,
                                  q.slot[v][s].level0};
          w[2 + 4*(2*v+s) + 1] = q.slot[v][s].val_base;
          w[2 + 4*(2*v+s) + 2] = q.slot[v][s].len;
          w[2 + 4*(2*v+s) + 3] = q.slot[v][s].cr_base;
        end
      // random write order
      for (int i = 0; i < QWORDS; i++) order[i] = i;
      for (int i = QWORDS - 1; i > 0; i--) begin
        int j, t;
        j = $urandom % (i + 1);
        t = order[i]; order[i] = order[j]; order[j] = t;
      end
      for (int i = 0; i < QWORDS; i++) begin
        cfg_we = 1; cfg_addr = 6'(order[i]); cfg_wdata = w[order[i]];
        @(negedge clk);
        if ($urandom % 4 == 0) begin
          cfg_addr = 6'(QWORDS + ($urandom % (64 - QWORDS))); cfg_wdata = $urandom;
          @(negedge clk);
        end
      end
      cfg_we = 0;
      @(negedge clk);
      checks++;
      if (query != q) begin
        failures++;
        $display("round %0d: decoded query differs (hdr %h vs %h)", r, query.hdr, q.hdr);
      end
      if (r == ROUNDS / 2) begin
        rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
        checks++;
        if (query != '0) begin failures++; $display("reset did not clear the store"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
