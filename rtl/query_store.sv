// query_store: Cupid's local read-only store for the compiled query.
//
// The host core writes the compiled query word by word through the
// co-processor interface (cfg_we/cfg_addr/cfg_wdata, one word per cycle,
// like a sequence of LDC transfers) before starting the core; during a join
// the store is only read. The decoded query is always visible on `query`.
//
// Word layout (own choice, the paper gives no encoding):
//   word 0 : [2:0] num_vars, [3] cache_en, [5:4] cache_var,
//            [9:6] key_mask, [15:10] static_thr, [16] dyn_en
//   word 1 : result base address
//   word 2+4*(2*v+s)+0 : [0] level0, [2:1] parent var, [3] parent slot
//   word 2+4*(2*v+s)+1 : value array base   (slot s of variable v)
//   word 2+4*(2*v+s)+2 : length (first-level arrays)
//   word 2+4*(2*v+s)+3 : child-ranges array base of the parent level
module query_store
  import tj_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [5:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  output query_t      query
);
  logic [31:0] words [QWORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < QWORDS; i++) words[i] <= '0;
    end else if (cfg_we && int'(cfg_addr) < QWORDS) begin
      words[cfg_addr] <= cfg_wdata;
    end
  end

  always_comb begin
    query.hdr.num_vars   = words[0][2:0];
    query.hdr.cache_en   = words[0][3];
    query.hdr.cache_var  = words[0][5:4];
    query.hdr.key_mask   = words[0][9:6];
    query.hdr.static_thr = words[0][15:10];
    query.hdr.dyn_en     = words[0][16];
    query.hdr.res_base   = words[1];
    for (int v = 0; v < MAX_VARS; v++) begin
      for (int s = 0; s < NSLOT; s++) begin
        query.slot[v][s].level0   = words[2 + 4*(2*v+s)][0];
        query.slot[v][s].pvar     = words[2 + 4*(2*v+s)][2:1];
        query.slot[v][s].pslot    = words[2 + 4*(2*v+s)][3];
        query.slot[v][s].val_base = words[2 + 4*(2*v+s) + 1];
        query.slot[v][s].len      = words[2 + 4*(2*v+s) + 2];
        query.slot[v][s].cr_base  = words[2 + 4*(2*v+s) + 3];
      end
    end
  end
endmodule
