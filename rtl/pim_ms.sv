// pim_ms -- One channel lane of the PIM-aware memory scheduler (PIM-MS).
//
// The software hands the engine every (source, destination) pair of a
// transfer at once, and copies to different PIM cores are independent, so the
// engine is free to choose the order of all memory requests.  PIM-MS uses
// that freedom to spread requests over the whole memory system: one lane runs
// per channel, all lanes in parallel, and each lane visits the banks of its
// channel in the order
//     for round: for bk: for ra: for bg: visit(ra, bg, bk)
// so that consecutive visits go to different bank groups first (short tCCD),
// then ranks, then banks.  This is the loop nest of the paper's scheduling
// algorithm; `round` is the common offset that every PIM core has reached.
//
// A visit moves 64 B for each of the 8 PIM cores of one bank unit (the 8 chips
// sharing the bank).  It allocates a tile in the lane's data buffer bank and
// issues 8 reads, one per cycle when the memory controller accepts them:
//   DRAM->PIM: line c from entry {unit, c}'s DRAM address + 64*round; cores
//              whose entry is not valid are skipped (no read);
//   PIM->DRAM: PIM bursts k = 0..7 of the bank unit.
// Read returns come back in any order, tagged {slot, line}; they are written
// into the tile and advance the entries' Offset counters (per line for
// DRAM->PIM, all cores of the unit at once when the tile completes for
// PIM->DRAM).  Tiles retire in allocation order: a complete tile is read,
// transposed by the preprocessing unit (one cycle) and written out with up to
// 8 write requests:
//   DRAM->PIM: PIM burst k with byte enables only on the lanes of valid cores;
//   PIM->DRAM: line c to entry {unit, c}'s DRAM address + 64*off, valid cores only.
// Issue stalls when the memory controller's read queue is full (rd_req_ready
// low) or when no tile is free (data buffer full).  done rises when every
// round has been issued and every tile written, and stays high until the next
// start.  Requests use valid/ready; a request held valid does not change
// until accepted.
// The loop order follows the paper; the tile-based buffering, in-order retire,
// byte masking and the PIM->DRAM progress update are this design's choices.
// Lint notes: the valid bit of the write-side entry read (ab_b) is unused
// because the tile already holds the valid mask captured at issue; rst_n
// appears both as the asynchronous reset and in the assertions' disable
// condition, which lint reports as a net used synchronously and
// asynchronously -- the assertions are not logic.
module pim_ms
  import pimmmu_pkg::*;
#(
  parameter int unsigned CH    = 0,
  parameter int unsigned SLOTS = SLOTS_PER_CH,
  localparam int unsigned SW   = $clog2(SLOTS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // operation
  input  logic                   start,
  input  dir_e                   dir,
  input  logic [OFF_W-1:0]       size_lines,    // 64 B lines per PIM core
  input  logic [HEAP_W-1:0]      heap,
  input  pa_t                    pim_base,
  output logic                   done,
  // address buffer bank
  output logic [LCORE_W-1:0]     ab_idx_a,
  input  ab_entry_t              ab_a,
  output logic [LCORE_W-1:0]     ab_idx_b,
  input  ab_entry_t              ab_b,
  output logic                   ab_inc_en,
  output logic [LUNIT_W-1:0]     ab_inc_unit,
  output logic [7:0]             ab_inc_mask,
  // data buffer bank
  output logic                   db_wr_en,
  output logic [SW-1:0]          db_wr_slot,
  output logic [2:0]             db_wr_idx,
  output line_t                  db_wr_data,
  output logic [SW-1:0]          db_rd_slot,
  // preprocessing unit
  output logic                   pp_in_valid,
  input  logic                   pp_out_valid,
  input  line_t                  pp_tile [TILE_LINES],
  // memory controller side (physical addresses)
  output logic                   rd_req_valid,
  input  logic                   rd_req_ready,
  output rd_req_t                rd_req,
  input  logic                   rd_rsp_valid,
  input  logic [TAG_W-1:0]       rd_rsp_tag,
  input  line_t                  rd_rsp_data,
  output logic                   wr_req_valid,
  input  logic                   wr_req_ready,
  output wr_req_t                wr_req,
  // activity, for monitoring
  output logic                   stall_full,
  output logic                   stall_rd
);
  // ---------------- issue side ----------------
  logic                 iss_active, in_tile;
  logic [OFF_W-1:0]     round;
  logic [3:0]           vis;        // {bk, ra, bg}: bg varies fastest
  logic [2:0]           iidx;
  logic [SW-1:0]        aptr, rptr;
  logic [LUNIT_W-1:0]   unit_l;     // get_pim_core_id order {ra, bg, bk}

  // ---------------- tile slots ----------------
  logic [SLOTS-1:0]     busy;
  logic [3:0]           cnt   [SLOTS];
  logic [LUNIT_W-1:0]   s_unit[SLOTS];
  logic [OFF_W-1:0]     s_off [SLOTS];
  logic [7:0]           s_vm  [SLOTS];

  assign unit_l   = {vis[2], vis[1:0], vis[3]};
  assign ab_idx_a = {unit_l, iidx};

  logic can_go, need_rd, fire_i, skip_i, alloc_i, last_vis;
  pa_t  i_dram_pa, i_pim_pa;

  agu u_agu_i (
    .pim_base (pim_base), .dram_base(ab_a.dram), .unit({2'(CH), unit_l}),
    .heap(heap), .off_lines(round), .k(iidx),
    .dram_pa(i_dram_pa), .pim_pa(i_pim_pa));

  always_comb begin
    can_go   = iss_active && (in_tile || !busy[aptr]);
    need_rd  = (dir == DIR_P2D) || ab_a.valid;
    rd_req_valid = can_go && need_rd;
    rd_req.pa    = (dir == DIR_D2P) ? i_dram_pa : i_pim_pa;
    rd_req.tag   = {aptr, iidx};
    fire_i   = can_go && (!need_rd || rd_req_ready);
    skip_i   = fire_i && !need_rd;
    alloc_i  = fire_i && !in_tile;
    last_vis = (vis == 4'hF);
    stall_full = iss_active && !in_tile && busy[aptr];
    stall_rd   = rd_req_valid && !rd_req_ready;
  end

  // ---------------- read returns ----------------
  logic [SW-1:0] rsp_slot;
  logic [2:0]    rsp_idx;
  assign {rsp_slot, rsp_idx} = rd_rsp_tag;

  assign db_wr_en   = rd_rsp_valid;
  assign db_wr_slot = rsp_slot;
  assign db_wr_idx  = rsp_idx;
  assign db_wr_data = rd_rsp_data;

  always_comb begin
    ab_inc_en   = 1'b0;
    ab_inc_unit = s_unit[rsp_slot];
    ab_inc_mask = '0;
    if (rd_rsp_valid) begin
      if (dir == DIR_D2P) begin
        ab_inc_en   = 1'b1;
        ab_inc_mask = 8'(1) << rsp_idx;
      end else if (cnt[rsp_slot] == 4'd7) begin
        ab_inc_en   = 1'b1;
        ab_inc_mask = s_vm[rsp_slot];
      end
    end
  end

  // ---------------- write-back side ----------------
  typedef enum logic [1:0] {W_IDLE, W_LOAD, W_ISSUE} wstate_e;
  wstate_e     wst;
  logic [2:0]  widx;
  logic        need_wr, fire_w;
  pa_t         w_dram_pa, w_pim_pa;
  logic [7:0]  vm_r;

  assign db_rd_slot  = rptr;
  assign ab_idx_b    = {s_unit[rptr], widx};
  assign vm_r        = s_vm[rptr];
  assign pp_in_valid = (wst == W_IDLE) && busy[rptr] && (cnt[rptr] == 4'd8);

  agu u_agu_w (
    .pim_base (pim_base), .dram_base(ab_b.dram), .unit({2'(CH), s_unit[rptr]}),
    .heap(heap), .off_lines(s_off[rptr]), .k(widx),
    .dram_pa(w_dram_pa), .pim_pa(w_pim_pa));

  always_comb begin
    need_wr = (dir == DIR_D2P) ? (|vm_r) : vm_r[widx];
    wr_req_valid = (wst == W_ISSUE) && need_wr;
    wr_req.pa    = (dir == DIR_D2P) ? w_pim_pa : w_dram_pa;
    wr_req.data  = pp_tile[widx];
    wr_req.be    = '1;
    if (dir == DIR_D2P)
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++)
          wr_req.be[8*r + 7 - c] = vm_r[c];
    fire_w = (wst == W_ISSUE) && (!need_wr || wr_req_ready);
  end

  // ---------------- state ----------------
  logic running;
  logic [3:0] cnt_inc [SLOTS];   // lines of each tile arriving this cycle

  always_comb begin
    for (int s = 0; s < SLOTS; s++)
      cnt_inc[s] = 4'(rd_rsp_valid && rsp_slot == SW'(s)) + 4'(skip_i && aptr == SW'(s));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss_active <= 1'b0; in_tile <= 1'b0; round <= '0; vis <= '0; iidx <= '0;
      aptr <= '0; rptr <= '0; busy <= '0; wst <= W_IDLE; widx <= '0;
      running <= 1'b0; done <= 1'b0;
      for (int s = 0; s < SLOTS; s++) begin
        cnt[s] <= '0; s_unit[s] <= '0; s_off[s] <= '0; s_vm[s] <= '0;
      end
    end else if (start) begin
      iss_active <= (size_lines != '0);
      in_tile <= 1'b0; round <= '0; vis <= '0; iidx <= '0;
      aptr <= '0; rptr <= '0; busy <= '0; wst <= W_IDLE; widx <= '0;
      running <= 1'b1; done <= 1'b0;
    end else begin
      // issue
      if (fire_i) begin
        iidx <= iidx + 1'b1;
        if (alloc_i) begin
          s_unit[aptr] <= unit_l;
          s_off[aptr]  <= round;
          s_vm[aptr]   <= 8'(ab_a.valid);
        end else begin
          s_vm[aptr][iidx] <= ab_a.valid;
        end
        if (iidx == 3'd7) begin
          in_tile <= 1'b0;
          aptr    <= aptr + 1'b1;
          vis     <= vis + 1'b1;
          if (last_vis) begin
            round <= round + 1'b1;
            if (round + 1'b1 == size_lines) iss_active <= 1'b0;
          end
        end else begin
          in_tile <= 1'b1;
        end
      end
      // per-slot line counters and busy flags
      for (int s = 0; s < SLOTS; s++) begin
        if (alloc_i && aptr == SW'(s)) cnt[s] <= cnt_inc[s];
        else                           cnt[s] <= cnt[s] + cnt_inc[s];
      end
      if (alloc_i) busy[aptr] <= 1'b1;
      // write-back
      case (wst)
        W_IDLE:  if (pp_in_valid) wst <= W_LOAD;
        W_LOAD:  if (pp_out_valid) begin wst <= W_ISSUE; widx <= '0; end
        default: if (fire_w) begin
                   widx <= widx + 1'b1;
                   if (widx == 3'd7) begin
                     busy[rptr] <= 1'b0;
                     rptr <= rptr + 1'b1;
                     wst  <= W_IDLE;
                   end
                 end
      endcase
      if (running && !iss_active && busy == '0 && wst == W_IDLE) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  // Handshake rules: a pending request stays put until accepted.
  property p_stable_rd;
    @(posedge clk) disable iff (!rst_n || start)
      rd_req_valid && !rd_req_ready |=> rd_req_valid && $stable(rd_req);
  endproperty
  property p_stable_wr;
    @(posedge clk) disable iff (!rst_n || start)
      wr_req_valid && !wr_req_ready |=> wr_req_valid && $stable(wr_req);
  endproperty
  a_stable_rd: assert property (p_stable_rd);
  a_stable_wr: assert property (p_stable_wr);
  // A read return must name a tile that is in use.
  a_rsp_busy: assert property (@(posedge clk) disable iff (!rst_n) rd_rsp_valid |-> busy[rsp_slot]);
endmodule
