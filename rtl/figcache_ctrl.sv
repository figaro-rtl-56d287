// figcache_ctrl -- memory-controller side of FIGCache for one channel.
//
// The controller takes one 64 B request at a time, looks its row segment up in
// the FIGCache tag store (FTS) portion of its bank and turns it into DRAM
// commands, including the RELOC sequences that move row segments between the
// slow subarrays and the in-DRAM cache rows.
//
//   FTS hit   : the request is redirected to the cache copy (fast subarray,
//               or reserved rows of one slow subarray); benefit += 1, dirty on
//               a write.
//   FTS miss  : insert-any-miss. The replacement names a slot. If that slot
//               holds a dirty segment it is first written back:
//                 PRE (if open), ACT cache row, wait tRAS, 16 x RELOC to the
//                 home subarray, ACT home row, wait tRCD, PRE.
//               Then the request is served from its home row, and while that
//               row is open the segment is copied into the cache:
//                 16 x RELOC (after tRAS of the home ACT), ACT cache row,
//                 wait tRCD, PRE; the FTS entry becomes valid.
//   uncacheable: with the cache in reserved slow rows (FAST_CACHE = 0), a
//               segment of the subarray holding those rows is never cached.
// Rows stay open after an ordinary access (open-page); a relocation ends with
// a precharge. A request to the open row is a row hit; to another row of the
// bank it first precharges (row conflict).
//
// Address map of a 64 B block address (most to least significant):
// {row[14:0], bank group[1:0], bank[1:0], column[6:0]} (one rank, one
// channel). row = {slow subarray[5:0], row in subarray[8:0]}, column =
// {segment[2:0], block[3:0]}. FTS tag = {0, row, segment}. Cache slot s is
// cache row s/8, position s%8; cache row r lies in fast subarray
// N_SLOW_SA + r/ROWS_FAST, row r%ROWS_FAST, or, for FAST_CACHE = 0, in row
// ROWS_SLOW - CACHE_ROWS + r of slow subarray RESV_SA.
//
// Timing: one command per clock at the DDR4-1600 command clock (1.25 ns).
// Every command waits until the gaps below have passed (in cycles):
//   ACT->RD/WR tRCD, ACT->RELOC tRAS, ACT->PRE tRAS, PRE->ACT tRP,
//   RELOC->RELOC/ACT tRELOC, RD->resp tCL+tBL, RD->PRE tRTP, RD->next tCCD,
//   WR->next tCWL+tBL, WR->PRE tCWL+tBL+tWR, destination ACT->PRE tRCD.
// Fast-subarray rows use the reduced tRCD/tRP/tRAS. Refresh is not modelled.
//
// Interface: req_valid/req_ready handshake (request taken when both high);
// resp_valid pulses once per request (reads carry resp_rdata) tCL+tBL after
// the READ, or tCWL+tBL after the WRITE. The FTS is a separate block wired
// to the fts_* ports. ev carries one-cycle event strobes.
//
// From the paper: FTS use, insert-any-miss, RowBenefit victim choice,
// dirty write-back by RELOC, insertion by RELOC while the missed row is open,
// the per-command sequence (two ACTs, RELOC, PRE) and its latencies (tRAS
// 35 ns, RELOC 1 ns, 63.5 ns in all), fast-subarray timing reductions, the
// reserved-row variant and its uncacheable subarray, the address interleaving.
// Own choices: one request at a time (no request queue or FR-FCFS), the
// DDR4-1600 values not printed in the paper, which rows are reserved, the
// order write-back -> demand access -> insertion, and the response timing.
module figcache_ctrl
  import figaro_pkg::*;
#(
  parameter int unsigned N_BANKS     = 16,
  parameter bit          FAST_CACHE  = 1'b1,
  parameter int unsigned N_SLOW_SA   = 64,
  parameter int unsigned ROWS_SLOW   = 512,
  parameter int unsigned ROWS_FAST   = 32,
  parameter int unsigned CACHE_ROWS  = 64,
  parameter int unsigned SEGS        = 8,
  parameter int unsigned BLKS        = 16,
  parameter int unsigned RESV_SA     = N_SLOW_SA - 1,
  parameter int unsigned DATA_W      = 512,
  // DRAM timing in command-clock cycles (1.25 ns)
  parameter int unsigned T_RCD   = 11,   // 13.75 ns
  parameter int unsigned T_RP    = 11,   // 13.75 ns
  parameter int unsigned T_RAS   = 28,   // 35 ns
  parameter int unsigned T_RCD_F = 6,    // -45.5 %
  parameter int unsigned T_RP_F  = 7,    // -38.2 %
  parameter int unsigned T_RAS_F = 11,   // -62.9 %
  parameter int unsigned T_RELOC = 1,    // 1 ns
  parameter int unsigned T_CL    = 11,
  parameter int unsigned T_CWL   = 9,
  parameter int unsigned T_BL    = 4,
  parameter int unsigned T_WR    = 12,
  parameter int unsigned T_RTP   = 6,
  parameter int unsigned T_CCD   = 4,
  localparam int unsigned ENTRIES = CACHE_ROWS * SEGS,
  localparam int unsigned SLOT_W  = $clog2(ENTRIES),
  localparam int unsigned BK_W    = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  localparam int unsigned SEG_W   = $clog2(SEGS),
  localparam int unsigned BLK_W   = $clog2(BLKS),
  localparam int unsigned A_W     = GROW_W + BK_W + COL_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // request / response
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [A_W-1:0]     req_addr,     // 64 B block address
  input  logic               req_write,
  input  logic [DATA_W-1:0]  req_wdata,
  output logic               resp_valid,
  output logic [DATA_W-1:0]  resp_rdata,
  // FTS
  output logic [BK_W-1:0]    fts_bank,
  output logic [TAG_W-1:0]   fts_tag,
  input  logic               fts_hit,
  input  logic [SLOT_W-1:0]  fts_slot,
  output logic               fts_upd_hit,
  output logic               fts_upd_write,
  output logic [SLOT_W-1:0]  fts_upd_slot,
  output logic               fts_ins,
  output logic [SLOT_W-1:0]  fts_ins_slot,
  output logic [TAG_W-1:0]   fts_ins_tag,
  input  logic [SLOT_W-1:0]  fts_vic_slot,
  input  logic               fts_vic_free,
  input  logic               fts_vic_new_row,
  input  fts_entry_t         fts_vic_entry,
  // DRAM command bus
  output logic               cmd_valid,
  output dram_cmd_t          cmd,
  output logic [DATA_W-1:0]  cmd_wdata,
  input  logic [DATA_W-1:0]  dram_rdata,   // GRB of the bank of the last RD, one cycle later
  output fig_events_t        ev
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_WB_PRE, S_WB_ACT, S_WB_RELOC, S_WB_ACTD, S_WB_PRE2,
    S_ACCESS, S_PRE, S_ACT, S_COL, S_INS_RELOC, S_INS_ACT, S_INS_PRE, S_DONE
  } state_e;

  typedef struct packed {
    logic [SA_W-1:0]   sa;
    logic [LROW_W-1:0] row;
    logic              fast;
  } loc_t;

  state_e             st_q;
  logic [31:0]        now_q, ready_q;
  logic [A_W-1:0]     addr_q;
  logic               write_q;
  logic [DATA_W-1:0]  wdata_q;
  logic               insert_q;
  logic [SLOT_W-1:0]  slot_q;       // cache slot of the hit / insertion
  logic [TAG_W-1:0]   vtag_q;       // tag of the dirty victim
  loc_t               tgt_q;        // row the demand access goes to
  logic [COL_W-1:0]   tcol_q;
  logic [BLK_W-1:0]   k_q;          // block index inside the segment

  // per-bank open-row state
  logic [N_BANKS-1:0]   open_v_q, open_fast_q;
  loc_t                 open_q   [N_BANKS];
  logic [31:0]          pre_ok_q [N_BANKS];   // earliest PRE
  logic [31:0]          src_ok_q [N_BANKS];   // earliest RELOC from the open row

  logic               resp_pend_q, cap_q, cap2_q;
  logic [31:0]        resp_at_q;
  logic [DATA_W-1:0]  rdata_q;

  // ---------------- request decode ----------------
  logic [COL_W-1:0]  a_col;
  logic [BK_W-1:0]   a_bank;
  logic [GROW_W-1:0] a_row;
  logic [SEG_W-1:0]  a_seg;
  logic [BLK_W-1:0]  a_blk;
  always_comb begin
    a_col  = addr_q[COL_W-1:0];
    a_bank = addr_q[COL_W +: BK_W];
    a_row  = addr_q[COL_W+BK_W +: GROW_W];
    a_seg  = a_col[COL_W-1 -: SEG_W];
    a_blk  = a_col[BLK_W-1:0];
  end

  function automatic loc_t home_loc(input logic [GROW_W-1:0] r);
    loc_t l;
    l.sa   = SA_W'(r / ROWS_SLOW);
    l.row  = LROW_W'(r % ROWS_SLOW);
    l.fast = 1'b0;
    return l;
  endfunction

  function automatic loc_t cache_loc(input logic [SLOT_W-1:0] s);
    loc_t l;
    int unsigned crow;
    crow = int'(s) / SEGS;
    if (FAST_CACHE) begin
      l.sa   = SA_W'(N_SLOW_SA + crow / ROWS_FAST);
      l.row  = LROW_W'(crow % ROWS_FAST);
      l.fast = 1'b1;
    end else begin
      l.sa   = SA_W'(RESV_SA);
      l.row  = LROW_W'(ROWS_SLOW - CACHE_ROWS + crow);
      l.fast = 1'b0;
    end
    return l;
  endfunction

  function automatic logic [COL_W-1:0] cache_col(input logic [SLOT_W-1:0] s,
                                                 input logic [BLK_W-1:0] b);
    return COL_W'((int'(s) % SEGS) * BLKS + int'(b));
  endfunction

  function automatic logic [31:0] t_rcd(input logic f); return f ? T_RCD_F : T_RCD; endfunction
  function automatic logic [31:0] t_rp (input logic f); return f ? T_RP_F  : T_RP;  endfunction
  function automatic logic [31:0] t_ras(input logic f); return f ? T_RAS_F : T_RAS; endfunction

  function automatic logic [31:0] max32(input logic [31:0] a, input logic [31:0] b);
    return (a > b) ? a : b;
  endfunction

  // victim's home location, from its tag {row, segment}
  logic [GROW_W-1:0] v_row;
  logic [SEG_W-1:0]  v_seg;
  always_comb begin
    v_row = vtag_q[SEG_W +: GROW_W];
    v_seg = vtag_q[SEG_W-1:0];
  end

  loc_t home, cloc, vhome;
  always_comb begin
    home  = home_loc(a_row);
    cloc  = cache_loc(slot_q);
    vhome = home_loc(v_row);
  end

  wire go        = now_q >= ready_q;
  wire cacheable = FAST_CACHE || (int'(home.sa) != RESV_SA);
  wire open_b    = open_v_q[a_bank];

  assign fts_bank  = a_bank;
  assign fts_tag   = TAG_W'({a_row, a_seg});
  assign req_ready = (st_q == S_IDLE);

  // ---------------- main sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= S_IDLE;
      now_q       <= '0;
      ready_q     <= '0;
      addr_q      <= '0;
      write_q     <= 1'b0;
      wdata_q     <= '0;
      insert_q    <= 1'b0;
      slot_q      <= '0;
      vtag_q      <= '0;
      tgt_q       <= '0;
      tcol_q      <= '0;
      k_q         <= '0;
      open_v_q    <= '0;
      open_fast_q <= '0;
      for (int b = 0; b < N_BANKS; b++) begin
        open_q[b]   <= '0;
        pre_ok_q[b] <= '0;
        src_ok_q[b] <= '0;
      end
      resp_pend_q <= 1'b0;
      resp_at_q   <= '0;
      cap_q       <= 1'b0;
      cap2_q      <= 1'b0;
      rdata_q     <= '0;
      cmd_valid   <= 1'b0;
      cmd         <= '0;
      cmd_wdata   <= '0;
      resp_valid  <= 1'b0;
      resp_rdata  <= '0;
      fts_upd_hit <= 1'b0;
      fts_upd_write <= 1'b0;
      fts_upd_slot <= '0;
      fts_ins     <= 1'b0;
      fts_ins_slot <= '0;
      fts_ins_tag <= '0;
      ev          <= '0;
    end else begin
      now_q       <= now_q + 1;
      cmd_valid   <= 1'b0;
      cmd         <= '0;
      cmd.bank    <= BANK_W'(a_bank);
      fts_upd_hit <= 1'b0;
      fts_ins     <= 1'b0;
      ev          <= '0;
      resp_valid  <= 1'b0;

      // read data capture and response timing
      cap_q  <= 1'b0;
      cap2_q <= cap_q;
      if (cap2_q) rdata_q <= dram_rdata;
      if (resp_pend_q && now_q >= resp_at_q && !cap_q && !cap2_q) begin
        resp_valid  <= 1'b1;
        resp_rdata  <= rdata_q;
        resp_pend_q <= 1'b0;
      end

      unique case (st_q)
        S_IDLE: if (req_valid) begin
          addr_q  <= req_addr;
          write_q <= req_write;
          wdata_q <= req_wdata;
          st_q    <= S_LOOKUP;
        end

        S_LOOKUP: begin
          k_q <= '0;
          if (fts_hit) begin
            ev.fts_hit    <= 1'b1;
            fts_upd_hit   <= 1'b1;
            fts_upd_write <= write_q;
            fts_upd_slot  <= fts_slot;
            slot_q        <= fts_slot;
            tgt_q         <= cache_loc(fts_slot);
            tcol_q        <= cache_col(fts_slot, a_blk);
            insert_q      <= 1'b0;
            st_q          <= S_ACCESS;
          end else begin
            ev.fts_miss <= 1'b1;
            tgt_q       <= home;
            tcol_q      <= a_col;
            slot_q      <= fts_vic_slot;
            vtag_q      <= fts_vic_entry.tag;
            insert_q    <= cacheable;
            if (!cacheable) begin
              ev.uncacheable <= 1'b1;
              st_q           <= S_ACCESS;
            end else begin
              ev.evict          <= fts_vic_entry.v && !fts_vic_free;
              ev.new_victim_row <= fts_vic_new_row;
              st_q <= (fts_vic_entry.v && fts_vic_entry.d && !fts_vic_free) ? S_WB_PRE : S_ACCESS;
            end
          end
        end

        // ---- write-back of a dirty victim: cache row -> home row ----
        S_WB_PRE: if (!open_b) begin
          st_q <= S_WB_ACT;
        end else if (go && now_q >= pre_ok_q[a_bank]) begin
          cmd_valid          <= 1'b1;
          cmd.cmd            <= CMD_PRE;
          open_v_q[a_bank]   <= 1'b0;
          ready_q            <= now_q + t_rp(open_fast_q[a_bank]);
          st_q               <= S_WB_ACT;
        end

        S_WB_ACT: if (go) begin
          cmd_valid <= 1'b1;
          cmd.cmd   <= CMD_ACT;
          cmd.sa    <= cloc.sa;
          cmd.row   <= cloc.row;
          ready_q   <= now_q + t_ras(cloc.fast);
          st_q      <= S_WB_RELOC;
        end

        S_WB_RELOC: if (go) begin
          cmd_valid    <= 1'b1;
          cmd.cmd      <= CMD_RELOC;
          cmd.col      <= cache_col(slot_q, k_q);
          cmd.dst_sa   <= vhome.sa;
          cmd.dst_col  <= COL_W'({v_seg, k_q});
          ev.reloc     <= 1'b1;
          ev.unaligned <= cache_col(slot_q, k_q) != COL_W'({v_seg, k_q});
          ready_q      <= now_q + T_RELOC;
          k_q          <= k_q + 1'b1;
          if (k_q == BLK_W'(BLKS - 1)) st_q <= S_WB_ACTD;
        end

        S_WB_ACTD: if (go) begin
          cmd_valid <= 1'b1;
          cmd.cmd   <= CMD_ACT;
          cmd.sa    <= vhome.sa;
          cmd.row   <= vhome.row;
          ready_q   <= now_q + T_RCD;
          st_q      <= S_WB_PRE2;
        end

        S_WB_PRE2: if (go) begin
          cmd_valid    <= 1'b1;
          cmd.cmd      <= CMD_PRE;
          ev.writeback <= 1'b1;
          ready_q      <= now_q + max32(T_RP, t_rp(cloc.fast));
          st_q         <= S_ACCESS;
        end

        // ---- demand access ----
        S_ACCESS: begin
          if (open_b && open_q[a_bank] == tgt_q) st_q <= S_COL;
          else if (open_b)                       st_q <= S_PRE;
          else                                   st_q <= S_ACT;
          ev.row_hit      <= open_b && open_q[a_bank] == tgt_q;
          ev.row_conflict <= open_b && open_q[a_bank] != tgt_q;
        end

        S_PRE: if (go && now_q >= pre_ok_q[a_bank]) begin
          cmd_valid        <= 1'b1;
          cmd.cmd          <= CMD_PRE;
          open_v_q[a_bank] <= 1'b0;
          ready_q          <= now_q + t_rp(open_fast_q[a_bank]);
          st_q             <= S_ACT;
        end

        S_ACT: if (go) begin
          cmd_valid           <= 1'b1;
          cmd.cmd             <= CMD_ACT;
          cmd.sa              <= tgt_q.sa;
          cmd.row             <= tgt_q.row;
          open_v_q[a_bank]    <= 1'b1;
          open_fast_q[a_bank] <= tgt_q.fast;
          open_q[a_bank]      <= tgt_q;
          pre_ok_q[a_bank]    <= now_q + t_ras(tgt_q.fast);
          src_ok_q[a_bank]    <= now_q + t_ras(tgt_q.fast);
          ready_q             <= now_q + t_rcd(tgt_q.fast);
          st_q                <= S_COL;
        end

        S_COL: if (go) begin
          cmd_valid   <= 1'b1;
          cmd.cmd     <= write_q ? CMD_WR : CMD_RD;
          cmd.col     <= tcol_q;
          cmd_wdata   <= wdata_q;
          resp_pend_q <= 1'b1;
          if (write_q) begin
            resp_at_q        <= now_q + T_CWL + T_BL;
            pre_ok_q[a_bank] <= max32(pre_ok_q[a_bank], now_q + T_CWL + T_BL + T_WR);
            ready_q          <= max32(now_q + T_CWL + T_BL,
                                      insert_q ? src_ok_q[a_bank] : '0);
          end else begin
            cap_q            <= 1'b1;
            resp_at_q        <= now_q + T_CL + T_BL;
            pre_ok_q[a_bank] <= max32(pre_ok_q[a_bank], now_q + T_RTP);
            ready_q          <= max32(now_q + T_CCD,
                                      insert_q ? src_ok_q[a_bank] : '0);
          end
          st_q <= insert_q ? S_INS_RELOC : S_DONE;
        end

        // ---- insertion: home row (open) -> cache row ----
        S_INS_RELOC: if (go) begin
          cmd_valid    <= 1'b1;
          cmd.cmd      <= CMD_RELOC;
          cmd.col      <= COL_W'({a_seg, k_q});
          cmd.dst_sa   <= cloc.sa;
          cmd.dst_col  <= cache_col(slot_q, k_q);
          ev.reloc     <= 1'b1;
          ev.unaligned <= cache_col(slot_q, k_q) != COL_W'({a_seg, k_q});
          ready_q      <= now_q + T_RELOC;
          k_q          <= k_q + 1'b1;
          if (k_q == BLK_W'(BLKS - 1)) st_q <= S_INS_ACT;
        end

        S_INS_ACT: if (go) begin
          cmd_valid <= 1'b1;
          cmd.cmd   <= CMD_ACT;
          cmd.sa    <= cloc.sa;
          cmd.row   <= cloc.row;
          ready_q   <= now_q + t_rcd(cloc.fast);
          st_q      <= S_INS_PRE;
        end

        S_INS_PRE: if (go && now_q >= pre_ok_q[a_bank]) begin
          cmd_valid        <= 1'b1;
          cmd.cmd          <= CMD_PRE;
          open_v_q[a_bank] <= 1'b0;
          fts_ins          <= 1'b1;
          fts_ins_slot     <= slot_q;
          fts_ins_tag      <= TAG_W'({a_row, a_seg});
          ev.insert        <= 1'b1;
          ready_q          <= now_q + max32(T_RP, t_rp(cloc.fast));
          st_q             <= S_DONE;
        end

        S_DONE: if (!resp_pend_q) st_q <= S_IDLE;

        default: st_q <= S_IDLE;
      endcase
    end
  end

  // a RELOC never targets the subarray it reads from
  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && cmd.cmd == CMD_RELOC |-> cmd.dst_sa != open_q[cmd.bank].sa
                   || !open_v_q[cmd.bank]);
endmodule
