// bicameral_cache - the Bicameral Cache: a Scalar Cache and a Vector Cache
// side by side, kept mutually exclusive, in front of one memory controller.
//
// Every reference from the core says whether it comes from a scalar or a
// vector memory instruction. It is first looked up in its own ("native")
// cache, then, on a miss, in the other one ("cross lookup"), and only then
// sent to memory. A sector is never held by both caches:
//   - scalar reference, native = Scalar Cache (SC) and its write buffer (WB).
//     A hit in the WB takes the line back into the SC. On a miss, a sector
//     found in the Vector Cache (VC) is used there and stays there.
//   - vector reference, native = VC (including lines flagged WB, which are
//     turned back into regular lines). On a miss, a sector found in the SC or
//     its WB is migrated: removed there and written into a VC line.
//   - both lookups missed: the sector is read from memory and placed in the
//     native cache.
// Victims: a dirty SC victim moves into the SC write buffer; a dirty VC victim
// is flagged WB in place. If the buffer is full, the controller waits until
// its oldest line has been written back (compulsory emptying). After each
// demand read, if the native cache's buffer holds at least its threshold (SC:
// 8 = full, VC: 5 = half plus one) lines, the write-back of its oldest line
// starts at once (eager emptying). Write-backs run in the background and share
// the memory request channel with demand reads, which go first.
// Prefetched sectors returned by the memory controller are written into the VC
// only if their line is present and regular, the sector is still missing, and
// the sector is neither in the SC or its WB nor the target of a scalar miss in
// progress; otherwise they are dropped.
//
// Core interface: req_valid/req_ready/req (core_req_t), one reference in
// flight. rsp_valid pulses for one cycle with the sector (after the write, for
// a store). Latency: a native hit answers 1 cycle after acceptance, a cross
// hit 2 cycles after, a miss when memory has answered and the line is placed.
// Memory interface: mreq (valid/ready) and mrsp (always accepted).
//
// Following the paper: the split by reference type, native and cross lookup
// of one cycle each, exclusivity with one-sided SC-to-VC migration, restore
// from the write buffers, the embedded VC write buffer, compulsory and eager
// emptying with their thresholds, prefetch fills that only fill existing
// lines. This design's own choices: references are whole sectors with a byte
// mask, one reference at a time (blocking), write-allocate on store misses,
// the eager check looks at the native cache's buffer only, a sector found in
// the VC by a scalar reference counts as a reference to that line (it
// restores a WB line), and the prefetch-fill checks above.
//
// Two output bits are constant by design: mrsp_ready (responses are always
// accepted) and the pf flag of mreq (the cache never issues prefetches).
module bicameral_cache
  import bc_pkg::*;
#(
  parameter int unsigned SC_SETS      = 256,
  parameter int unsigned SC_WAYS      = 4,
  parameter int unsigned SC_WB_LINES  = 8,
  parameter int unsigned SC_WB_THRESH = 8,
  parameter int unsigned VC_LINES     = 64,
  parameter int unsigned VC_SECTORS   = 16,
  parameter int unsigned VC_WB_LINES  = 8,
  parameter int unsigned VC_WB_THRESH = 5
) (
  input  logic       clk,
  input  logic       rst_n,
  // core
  input  logic       req_valid,
  output logic       req_ready,
  input  core_req_t  req,
  output logic       rsp_valid,
  output sector_t    rsp_data,
  // memory controller
  output logic       mreq_valid,
  input  logic       mreq_ready,
  output mem_req_t   mreq,
  input  logic       mrsp_valid,
  output logic       mrsp_ready,
  input  mem_rsp_t   mrsp,
  // statistics
  output bc_events_t ev
);
  localparam int unsigned SWAY_W = $clog2(SC_WAYS);
  localparam int unsigned VLIN_W = $clog2(VC_LINES);
  localparam int unsigned SWBI_W = $clog2(SC_WB_LINES);

  typedef enum logic [3:0] {
    S_IDLE,     // native lookup
    S_CROSS,    // cross lookup
    S_MEMREQ,   // send the demand read
    S_SALLOC,   // free a way in the SC set
    S_SWAIT,    // SC write buffer full: wait for its oldest line
    S_WAITMEM,  // wait for the demand data
    S_SFILL,    // write the sector into the SC
    S_VNEED,    // write the sector into its VC line, if present
    S_VALLOC,   // choose and allocate a VC line
    S_VWAIT,    // VC write buffer full: wait for its oldest line
    S_VFILL     // write the sector into a newly allocated VC line
  } state_e;

  state_e    state, state_n;
  core_req_t cur;
  logic      src_move;          // sector comes from the other cache / WB
  sector_t   mv_data;
  logic      mv_dirty;
  logic      dem_valid;
  sector_t   dem_data;
  logic [SWAY_W-1:0] s_way;
  logic [VLIN_W-1:0] v_line;

  // ---------------- lookup address
  logic  pf_take, accept;
  addr_t look_addr;
  assign pf_take   = mrsp_valid && mrsp.pf && (state == S_IDLE || state == S_WAITMEM);
  assign req_ready = (state == S_IDLE) && !pf_take;
  assign accept    = req_valid && req_ready;
  assign look_addr = pf_take ? mrsp.addr : (state == S_IDLE ? req.addr : cur.addr);
  assign mrsp_ready = 1'b1;

  // ---------------- Scalar Cache
  logic              sc_hit, sc_hit_dirty, sc_vic_valid, sc_vic_dirty;
  logic [SWAY_W-1:0] sc_hit_way, sc_vic_way;
  sector_t           sc_hit_data, sc_vic_data;
  addr_t             sc_vic_addr;
  logic              sc_acc, sc_inv, sc_vinv, sc_fill, sc_fill_dirty;
  sector_t           sc_fill_data;
  logic              acc_we;
  be_t               acc_be;
  sector_t           acc_wdata;

  scalar_cache #(.SETS(SC_SETS), .WAYS(SC_WAYS)) u_sc (
    .clk, .rst_n,
    .addr      (look_addr),
    .hit       (sc_hit),
    .hit_way   (sc_hit_way),
    .hit_data  (sc_hit_data),
    .hit_dirty (sc_hit_dirty),
    .acc_en    (sc_acc),
    .acc_we    (acc_we),
    .acc_be    (acc_be),
    .acc_wdata (acc_wdata),
    .inv_en    (sc_inv),
    .vic_way   (sc_vic_way),
    .vic_valid (sc_vic_valid),
    .vic_dirty (sc_vic_dirty),
    .vic_addr  (sc_vic_addr),
    .vic_data  (sc_vic_data),
    .vinv_en   (sc_vinv),
    .fill_en   (sc_fill),
    .fill_way  (s_way),
    .fill_data (sc_fill_data),
    .fill_dirty(sc_fill_dirty)
  );

  // ---------------- Scalar Cache write buffer
  logic              wb_hit, wb_push, wb_rm, wb_full, wb_drain, wb_draining;
  logic [SWBI_W-1:0] wb_idx;
  sector_t           wb_lk_data;
  logic [SWBI_W:0]   wb_count;
  logic              wb_req_valid, wb_req_ready;
  addr_t             wb_req_addr;
  sector_t           wb_req_data;

  sc_write_buffer #(.DEPTH(SC_WB_LINES)) u_scwb (
    .clk, .rst_n,
    .lk_addr    (look_addr),
    .lk_hit     (wb_hit),
    .lk_idx     (wb_idx),
    .lk_data    (wb_lk_data),
    .push_en    (wb_push),
    .push_addr  (sc_vic_addr),
    .push_data  (sc_vic_data),
    .rm_en      (wb_rm),
    .rm_idx     (wb_idx),
    .count      (wb_count),
    .full       (wb_full),
    .drain_start(wb_drain),
    .draining   (wb_draining),
    .wb_valid   (wb_req_valid),
    .wb_ready   (wb_req_ready),
    .wb_addr    (wb_req_addr),
    .wb_data    (wb_req_data)
  );

  // ---------------- Vector Cache
  logic              vc_line_hit, vc_line_wb, vc_hit, vc_hit_dirty;
  logic [VLIN_W-1:0] vc_line_idx, vc_vic_line, vc_fill_line;
  sector_t           vc_hit_data, vc_fill_data;
  logic              vc_acc, vc_fill, vc_fill_dirty, vc_fill_touch, vc_alloc, vc_flag;
  logic              vc_vic_free, vc_vic_dirty, vc_drain, vc_draining;
  logic [$clog2(VC_WB_LINES):0] vc_wb_count;
  logic              vc_req_valid, vc_req_ready;
  addr_t             vc_req_addr;
  sector_t           vc_req_data;

  vector_cache #(.LINES(VC_LINES), .SECTORS(VC_SECTORS), .WB_LINES(VC_WB_LINES)) u_vc (
    .clk, .rst_n,
    .addr       (look_addr),
    .line_hit   (vc_line_hit),
    .line_idx   (vc_line_idx),
    .line_wb    (vc_line_wb),
    .hit        (vc_hit),
    .hit_data   (vc_hit_data),
    .hit_dirty  (vc_hit_dirty),
    .acc_en     (vc_acc),
    .acc_we     (acc_we),
    .acc_be     (acc_be),
    .acc_wdata  (acc_wdata),
    .fill_en    (vc_fill),
    .fill_line  (vc_fill_line),
    .fill_data  (vc_fill_data),
    .fill_dirty (vc_fill_dirty),
    .fill_touch (vc_fill_touch),
    .alloc_en   (vc_alloc),
    .alloc_line (vc_vic_line),
    .flag_wb_en (vc_flag),
    .flag_line  (vc_vic_line),
    .vic_line   (vc_vic_line),
    .vic_free   (vc_vic_free),
    .vic_dirty  (vc_vic_dirty),
    .wb_count   (vc_wb_count),
    .drain_start(vc_drain),
    .draining   (vc_draining),
    .wb_valid   (vc_req_valid),
    .wb_ready   (vc_req_ready),
    .wb_addr    (vc_req_addr),
    .wb_data    (vc_req_data)
  );

  // ---------------- memory request channel: demand read, then SC WB, then VC WB
  logic dem_req;
  assign dem_req      = (state == S_MEMREQ);
  assign wb_req_ready = mreq_ready && !dem_req;
  assign vc_req_ready = mreq_ready && !dem_req && !wb_req_valid;
  assign mreq_valid   = dem_req || wb_req_valid || vc_req_valid;

  always_comb begin
    mreq = '0;
    if (dem_req) begin
      mreq.addr = {cur.addr[ADDR_W-1:OFF_W], OFF_W'(0)};
      mreq.vec  = cur.vec;
    end else if (wb_req_valid) begin
      mreq.addr = wb_req_addr;
      mreq.we   = 1'b1;
      mreq.data = wb_req_data;
    end else begin
      mreq.addr = vc_req_addr;
      mreq.we   = 1'b1;
      mreq.vec  = 1'b1;
      mreq.data = vc_req_data;
    end
  end

  // ---------------- prefetch fill check
  // (a scalar miss waiting for memory is about to place this very sector in
  // the SC, so a prefetch of it must not enter the VC)
  logic pf_ok, pf_own;
  assign pf_own = (state == S_WAITMEM) && !cur.vec &&
                  mrsp.addr[ADDR_W-1:OFF_W] == cur.addr[ADDR_W-1:OFF_W];
  assign pf_ok  = pf_take && !pf_own && !sc_hit && !wb_hit && vc_line_hit && !vc_line_wb && !vc_hit;

  // ---------------- controller
  sector_t base_data, new_data;
  assign base_data = src_move ? mv_data : dem_data;
  assign new_data  = cur.we ? merge_bytes(base_data, cur.wdata, cur.be) : base_data;

  always_comb begin
    state_n       = state;
    sc_acc        = 1'b0;
    sc_inv        = 1'b0;
    sc_vinv       = 1'b0;
    sc_fill       = 1'b0;
    sc_fill_data  = new_data;
    sc_fill_dirty = (src_move && mv_dirty) || cur.we;
    wb_push       = 1'b0;
    wb_rm         = 1'b0;
    wb_drain      = 1'b0;
    vc_acc        = 1'b0;
    vc_fill       = 1'b0;
    vc_fill_line  = v_line;
    vc_fill_data  = new_data;
    vc_fill_dirty = (src_move && mv_dirty) || cur.we;
    vc_fill_touch = 1'b1;
    vc_alloc      = 1'b0;
    vc_flag       = 1'b0;
    vc_drain      = 1'b0;
    acc_we        = (state == S_IDLE) ? req.we    : cur.we;
    acc_be        = (state == S_IDLE) ? req.be    : cur.be;
    acc_wdata     = (state == S_IDLE) ? req.wdata : cur.wdata;
    ev            = '0;

    if (pf_take) begin
      ev.pf_fill = pf_ok;
      ev.pf_drop = !pf_ok;
      if (pf_ok) begin
        vc_fill       = 1'b1;
        vc_fill_line  = vc_line_idx;
        vc_fill_data  = mrsp.data;
        vc_fill_dirty = 1'b0;
        vc_fill_touch = 1'b0;
      end
    end

    unique case (state)
      S_IDLE: if (accept) begin
        if (!req.vec) begin
          if (sc_hit) begin
            sc_acc    = 1'b1;
            ev.sc_hit = 1'b1;
          end else if (wb_hit) begin
            wb_rm            = 1'b1;
            ev.sc_wb_restore = 1'b1;
            state_n          = S_SALLOC;
          end else begin
            state_n = S_CROSS;
          end
        end else begin
          if (vc_hit) begin
            vc_acc           = 1'b1;
            ev.vc_hit        = 1'b1;
            ev.vc_wb_restore = vc_line_wb;
          end else begin
            state_n = S_CROSS;
          end
        end
      end

      S_CROSS: begin
        if (!cur.vec) begin
          if (vc_hit) begin
            vc_acc           = 1'b1;
            ev.scalar_xhit   = 1'b1;
            ev.vc_wb_restore = vc_line_wb;
            state_n          = S_IDLE;
          end else begin
            state_n = S_MEMREQ;
          end
        end else begin
          if (sc_hit) begin
            sc_inv         = 1'b1;
            ev.vector_xhit = 1'b1;
            state_n        = S_VNEED;
          end else if (wb_hit) begin
            wb_rm            = 1'b1;
            ev.vector_xhit   = 1'b1;
            ev.sc_wb_restore = 1'b1;
            state_n          = S_VNEED;
          end else begin
            state_n = S_MEMREQ;
          end
        end
      end

      S_MEMREQ: if (mreq_ready) begin
        ev.double_miss = 1'b1;
        if (!cur.vec) begin
          if (wb_count >= (SWBI_W+1)'(SC_WB_THRESH)) begin
            wb_drain    = 1'b1;
            ev.sc_eager = 1'b1;
          end
          state_n = S_SALLOC;
        end else begin
          if (int'(vc_wb_count) >= int'(VC_WB_THRESH)) begin
            vc_drain    = 1'b1;
            ev.vc_eager = 1'b1;
          end
          state_n = S_WAITMEM;
        end
      end

      S_SALLOC: begin
        if (sc_vic_valid && sc_vic_dirty && wb_full) begin
          ev.sc_forced = 1'b1;
          state_n      = S_SWAIT;
        end else begin
          if (sc_vic_valid && sc_vic_dirty) begin
            wb_push        = 1'b1;
            sc_vinv        = 1'b1;
            ev.sc_evict_wb = 1'b1;
          end
          state_n = src_move ? S_SFILL : S_WAITMEM;
        end
      end

      S_SWAIT: begin
        wb_drain = !wb_draining;
        if (!wb_full) state_n = S_SALLOC;
      end

      S_WAITMEM: if (dem_valid) state_n = cur.vec ? S_VNEED : S_SFILL;

      S_SFILL: begin
        sc_fill = 1'b1;
        state_n = S_IDLE;
      end

      // a present line (possibly WB-flagged) is filled at once, so the
      // write-back engine cannot free it in between
      S_VNEED: if (vc_line_hit) begin
        vc_fill      = 1'b1;
        vc_fill_line = vc_line_idx;
        ev.vc_wb_restore = vc_line_wb;
        state_n      = S_IDLE;
      end else begin
        state_n = S_VALLOC;
      end

      S_VALLOC: begin
        if (vc_vic_free || !vc_vic_dirty) begin
          vc_alloc = 1'b1;
          state_n  = S_VFILL;
        end else if (int'(vc_wb_count) < int'(VC_WB_LINES)) begin
          vc_flag       = 1'b1;
          ev.vc_flag_wb = 1'b1;
        end else begin
          ev.vc_forced = 1'b1;
          state_n      = S_VWAIT;
        end
      end

      S_VWAIT: begin
        vc_drain = !vc_draining;
        if (int'(vc_wb_count) < int'(VC_WB_LINES)) state_n = S_VNEED;
      end

      S_VFILL: begin
        vc_fill = 1'b1;
        state_n = S_IDLE;
      end

      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      src_move  <= 1'b0;
      mv_data   <= '0;
      mv_dirty  <= 1'b0;
      dem_valid <= 1'b0;
      dem_data  <= '0;
      s_way     <= '0;
      v_line    <= '0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      state     <= state_n;
      rsp_valid <= 1'b0;
      if (mrsp_valid && !mrsp.pf) begin
        dem_valid <= 1'b1;
        dem_data  <= mrsp.data;
      end
      unique case (state)
        S_IDLE: if (accept) begin
          cur      <= req;
          src_move <= 1'b0;
          if (!req.vec && sc_hit) begin
            rsp_valid <= 1'b1;
            rsp_data  <= req.we ? merge_bytes(sc_hit_data, req.wdata, req.be) : sc_hit_data;
          end else if (req.vec && vc_hit) begin
            rsp_valid <= 1'b1;
            rsp_data  <= req.we ? merge_bytes(vc_hit_data, req.wdata, req.be) : vc_hit_data;
          end else if (!req.vec && wb_hit) begin
            src_move <= 1'b1;
            mv_data  <= wb_lk_data;
            mv_dirty <= 1'b1;
          end
        end
        S_CROSS: begin
          if (!cur.vec && vc_hit) begin
            rsp_valid <= 1'b1;
            rsp_data  <= cur.we ? merge_bytes(vc_hit_data, cur.wdata, cur.be) : vc_hit_data;
          end else if (cur.vec && sc_hit) begin
            src_move <= 1'b1;
            mv_data  <= sc_hit_data;
            mv_dirty <= sc_hit_dirty;
          end else if (cur.vec && wb_hit) begin
            src_move <= 1'b1;
            mv_data  <= wb_lk_data;
            mv_dirty <= 1'b1;
          end
        end
        S_SALLOC: if (state_n != S_SWAIT) s_way <= sc_vic_way;
        S_VALLOC: v_line <= vc_vic_line;
        S_VNEED, S_SFILL, S_VFILL: if (state_n == S_IDLE) begin
          rsp_valid <= 1'b1;
          rsp_data  <= new_data;
          dem_valid <= 1'b0;
        end
        default: ;
      endcase
    end
  end

  // ---------------- checks
  // exclusivity: the probed sector is never in both caches
  assert property (@(posedge clk) disable iff (!rst_n) !(vc_hit && (sc_hit || wb_hit)));
  assert property (@(posedge clk) disable iff (!rst_n) !(sc_hit && wb_hit));
  // a demand response only arrives while one is outstanding
  assert property (@(posedge clk) disable iff (!rst_n)
                   (mrsp_valid && !mrsp.pf) |-> !dem_valid);

endmodule
