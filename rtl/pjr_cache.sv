// pjr_cache: partial join results (PJR) cache with its insertion buffer.
//
// An entry holds, for one key (the values of the key variables), the list of
// values of the cached variable that the trie join found under that key,
// each with its positions in both of the variable's arrays so that Midwife
// can later expand their children. Entries are built in the insertion
// buffer (IB) and copied to the cache only when complete, so a reader never
// sees a half-filled entry.
//
//   probe   : hit/miss in the cache for a key; on a miss, alloc_ok says an
//             IB slot can be opened (no IB entry with the same key is open
//             and a slot is free).
//   alloc   : open IB slot alloc_slot for the key; the prefix of the join
//             path (values of all variables before the cached one) is kept
//             to validate later appends; thread counter = 1.
//   append  : add one value record to an IB slot, only if the writer's path
//             equals the stored one (a thread reaching the same key along
//             another path is refused). A full entry that gets one more
//             record is marked overflowed.
//   inc/dec : thread counter of an IB slot; a thread that spawns a helper
//             inside the entry's subtree increments, a thread that leaves
//             the subtree decrements. At zero the entry is fully analyzed.
//   commit  : a small engine copies a fully analyzed IB entry into the cache
//             one record per cycle and then sets its tag valid. Overflowed
//             entries are dropped. A cache slot that is already valid is
//             never replaced (no eviction), so entries being read by other
//             threads never change; the new entry is then dropped.
//
// The cache is direct mapped by a hash of the key and split into NBANKS
// banks by the low index bits. Reads (rd_idx/rd_pos) are combinational.
// Default size: 16384 entries of 20 records of 96 bits, about 3.75 MB of
// data plus tags and the IB, close to the 4 MB store of the paper.
//
// Follows the paper: keyed by a hash, values+indexes stored, per-entry
// count, overflow deallocation, insertion buffer with atomic copy, path
// validation, thread counters, 4 banks. Own choices: direct mapping, no
// eviction, entry size, IB size, one access per cycle.
//
// Lint notes: the clear of the 16384-bit valid vector is a wide replication
// by design (one flag per entry, cleared in one cycle); the upper bits of
// rd_idx and of the slot numbers are unused because the index ports are a
// fixed 32/8 bits wide for every cache and buffer size.
module pjr_cache
  import tj_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES = 16384,
  parameter int unsigned ENTRY_SIZE  = 20,
  parameter int unsigned IB_ENTRIES  = 16,
  parameter int unsigned NBANKS      = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  // probe
  input  val_t [MAX_VARS-1:0]  probe_key,
  output logic                 hit,
  output logic [31:0]          hit_idx,
  output logic [7:0]           hit_cnt,
  output logic                 alloc_ok,
  output logic [7:0]           alloc_slot,
  // allocate
  input  logic                 alloc,
  input  val_t [MAX_VARS-1:0]  alloc_path,
  // read a cached record
  input  logic [31:0]          rd_idx,
  input  logic [7:0]           rd_pos,
  output pjr_rec_t             rd_rec,
  // append
  input  logic                 app_valid,
  input  logic [7:0]           app_slot,
  input  val_t [MAX_VARS-1:0]  app_path,
  input  pjr_rec_t             app_rec,
  // thread counters
  input  logic                 inc_valid,
  input  logic [7:0]           inc_slot,
  input  logic                 dec_valid,
  input  logic [7:0]           dec_slot,
  // events
  output logic                 ev_commit,
  output logic                 ev_overflow,
  output logic                 busy
);
  localparam int unsigned IW   = $clog2(NUM_ENTRIES);
  localparam int unsigned BW   = $clog2(NBANKS);
  localparam int unsigned ROWS = NUM_ENTRIES / NBANKS;
  localparam int unsigned IBW  = $clog2(IB_ENTRIES);

  // ---------------- cache tags and banked data ----------------
  logic [NUM_ENTRIES-1:0]  tag_valid;
  val_t [MAX_VARS-1:0]     tag_key [NUM_ENTRIES];
  logic [7:0]              tag_cnt [NUM_ENTRIES];

  // ---------------- insertion buffer ----------------
  typedef enum logic [1:0] {IB_FREE, IB_OPEN, IB_DONE} ib_st_e;
  ib_st_e                  ib_st   [IB_ENTRIES];
  val_t [MAX_VARS-1:0]     ib_key  [IB_ENTRIES];
  val_t [MAX_VARS-1:0]     ib_path [IB_ENTRIES];
  logic [5:0]              ib_thr  [IB_ENTRIES];
  logic [7:0]              ib_n    [IB_ENTRIES];
  logic                    ib_ovf  [IB_ENTRIES];
  pjr_rec_t                ib_data [IB_ENTRIES*ENTRY_SIZE];

  // ---------------- probe ----------------
  logic [IW-1:0] pidx;
  logic          same_open, free_found;
  logic [IBW-1:0] free_slot;
  always_comb begin
    pidx     = IW'(key_hash(probe_key));
    hit      = tag_valid[pidx] && tag_key[pidx] == probe_key;
    hit_idx  = 32'(pidx);
    hit_cnt  = tag_cnt[pidx];
    same_open  = 1'b0;
    free_found = 1'b0;
    free_slot  = '0;
    for (int i = 0; i < IB_ENTRIES; i++) begin
      if (ib_st[i] != IB_FREE && ib_key[i] == probe_key) same_open = 1'b1;
      if (!free_found && ib_st[i] == IB_FREE) begin
        free_found = 1'b1;
        free_slot  = IBW'(i);
      end
    end
    alloc_ok   = !hit && !same_open && free_found;
    alloc_slot = 8'(free_slot);
  end

  // ---------------- read ----------------
  logic [IW-1:0] ridx;
  assign ridx   = rd_idx[IW-1:0];
  pjr_rec_t [NBANKS-1:0] bank_rd;
  assign rd_rec = bank_rd[ridx[BW-1:0]];

  // ---------------- commit engine ----------------
  logic           c_busy;
  logic [IBW-1:0] c_slot;
  logic [7:0]     c_pos;
  logic [IW-1:0]  c_idx;
  logic           pick;
  logic [IBW-1:0] pick_slot;
  always_comb begin
    pick = 1'b0;
    pick_slot = '0;
    for (int i = 0; i < IB_ENTRIES; i++) begin
      if (!pick && ib_st[i] == IB_DONE) begin
        pick = 1'b1;
        pick_slot = IBW'(i);
      end
    end
  end
  assign busy = c_busy || pick;


  // storage writes (no reset: only read where a valid flag or count says so)
  logic app_ok, app_fits, c_copy;
  assign app_ok   = app_valid && ib_st[app_slot[IBW-1:0]] == IB_OPEN &&
                    ib_path[app_slot[IBW-1:0]] == app_path;
  assign app_fits = int'(ib_n[app_slot[IBW-1:0]]) < ENTRY_SIZE;
  assign c_copy   = c_busy && c_pos < ib_n[c_slot];

  always_ff @(posedge clk) begin
    if (!clear && alloc && alloc_ok) begin
      ib_key[free_slot]  <= probe_key;
      ib_path[free_slot] <= alloc_path;
    end
    if (!clear && app_ok && app_fits)
      ib_data[int'(app_slot[IBW-1:0]) * ENTRY_SIZE + int'(ib_n[app_slot[IBW-1:0]])] <= app_rec;
    if (!clear && c_busy && !c_copy) begin
      tag_key[c_idx] <= ib_key[c_slot];
      tag_cnt[c_idx] <= ib_n[c_slot];
    end
  end

  // data banks: entry i lives in bank i % NBANKS, row i / NBANKS
  pjr_rec_t c_rec;
  assign c_rec = ib_data[int'(c_slot) * ENTRY_SIZE + int'(c_pos)];
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    pjr_rec_t data [ROWS*ENTRY_SIZE];
    always_ff @(posedge clk) begin
      if (!clear && c_copy && int'(c_idx[BW-1:0]) == b)
        data[int'(c_idx[IW-1:BW]) * ENTRY_SIZE + int'(c_pos)] <= c_rec;
    end
    assign bank_rd[b] = data[int'(ridx[IW-1:BW]) * ENTRY_SIZE + int'(rd_pos)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_valid   <= '0;
      c_busy      <= 1'b0;
      c_slot      <= '0;
      c_pos       <= '0;
      c_idx       <= '0;
      ev_commit   <= 1'b0;
      ev_overflow <= 1'b0;
      for (int i = 0; i < IB_ENTRIES; i++) begin
        ib_st[i]  <= IB_FREE;
        ib_thr[i] <= '0;
        ib_n[i]   <= '0;
        ib_ovf[i] <= 1'b0;
      end
    end else if (clear) begin
      tag_valid   <= '0;
      c_busy      <= 1'b0;
      ev_commit   <= 1'b0;
      ev_overflow <= 1'b0;
      for (int i = 0; i < IB_ENTRIES; i++) ib_st[i] <= IB_FREE;
    end else begin
      ev_commit   <= 1'b0;
      ev_overflow <= 1'b0;
      // allocate
      if (alloc && alloc_ok) begin
        ib_st[free_slot]   <= IB_OPEN;
        ib_thr[free_slot]  <= 6'd1;
        ib_n[free_slot]    <= '0;
        ib_ovf[free_slot]  <= 1'b0;
      end
      // append with path validation
      if (app_ok) begin
        if (app_fits) begin
          ib_n[app_slot[IBW-1:0]] <= ib_n[app_slot[IBW-1:0]] + 1'b1;
        end else begin
          ib_ovf[app_slot[IBW-1:0]] <= 1'b1;
        end
      end
      // thread counters
      if (inc_valid && !(dec_valid && dec_slot == inc_slot))
        ib_thr[inc_slot[IBW-1:0]] <= ib_thr[inc_slot[IBW-1:0]] + 1'b1;
      if (dec_valid && !(inc_valid && dec_slot == inc_slot)) begin
        ib_thr[dec_slot[IBW-1:0]] <= ib_thr[dec_slot[IBW-1:0]] - 1'b1;
        if (ib_thr[dec_slot[IBW-1:0]] == 6'd1 && ib_st[dec_slot[IBW-1:0]] == IB_OPEN)
          ib_st[dec_slot[IBW-1:0]] <= IB_DONE;
      end
      // commit engine
      if (!c_busy) begin
        if (pick) begin
          if (ib_ovf[pick_slot] || tag_valid[IW'(key_hash(ib_key[pick_slot]))]) begin
            ib_st[pick_slot] <= IB_FREE;          // overflowed or slot taken: drop
            ev_overflow      <= ib_ovf[pick_slot];
          end else begin
            c_busy <= 1'b1;
            c_slot <= pick_slot;
            c_pos  <= '0;
            c_idx  <= IW'(key_hash(ib_key[pick_slot]));
          end
        end
      end else begin
        if (c_copy) begin
          c_pos <= c_pos + 1'b1;
        end else begin
          tag_valid[c_idx] <= 1'b1;               // entry becomes visible at once
          ib_st[c_slot]    <= IB_FREE;
          c_busy           <= 1'b0;
          ev_commit        <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   dec_valid |-> ib_thr[dec_slot[IBW-1:0]] != 0);
endmodule
