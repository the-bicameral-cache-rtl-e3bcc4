// vector_cache - the Vector Cache (VC) of the Bicameral Cache.
//
// Holds the data referenced by vector memory instructions. It is fully
// associative (default 64 lines of 1024 bytes), and each line is split into
// 16 sectors of 64 bytes with their own valid and dirty bits, so a line can be
// filled and written back sector by sector. Address fields, most to least
// significant: tag, sector, offset. Replacement is LRU over all lines, kept as
// per-line ages (0 = most recent); the update policy is write-back.
//
// Embedded write buffer: a dirty line chosen for eviction is not copied
// anywhere. It is only flagged WB and keeps its place. While flagged it is not
// a replacement candidate. It leaves the write buffer either when one of its
// sectors is referenced again (the flag is cleared and it is a regular line
// again) or when its write-back completes (the line is freed). So the number of
// lines usable for new data shrinks as the write buffer fills. At most WB_LINES
// lines are flagged; their order of entry is kept as a rank (0 = oldest).
//
// Write-back engine: drain_start (a pulse) latches the oldest WB line and sends
// its valid and dirty sectors, one per accepted request, over the wb_* port.
// Each sector sent is marked clean. When none is left the line is freed. If the
// line is referenced meanwhile, the write-back stops; sectors already sent stay
// clean. The engine does not act in a cycle in which the controller updates the
// cache.
//
// Interface: every controller operation works on `addr`.
//   - lookup (combinational): line_hit/line_idx/line_wb (the tag is present),
//     hit/hit_data/hit_dirty (the addressed sector is valid).
//   - acc_en: access the hit sector (write merges under acc_be, sets dirty);
//     restores a WB line; makes the line most recently used.
//   - fill_en: write fill_data into the addressed sector of fill_line, valid,
//     dirty = fill_dirty; restores a WB line; fill_touch updates LRU (a
//     prefetch fill leaves LRU alone).
//   - alloc_en: give line alloc_line the tag of addr with all sectors invalid.
//   - flag_wb_en: flag line flag_line as write-buffer line.
//   - victim (combinational): a free line if any, else the LRU regular line,
//     with vic_dirty telling whether it holds a dirty sector.
// All updates take effect at the rising clock edge.
//
// Following the paper: sizes, full associativity, sectors with v/d bits, LRU,
// write-back, the embedded write buffer, restore on reference, and sector-by-
// sector write-back of valid dirty sectors. This design's own choices: a
// written-back line is freed rather than kept clean, a free line is preferred
// to a victim, and the rank encoding of write-buffer order.
//
// wb_addr is sector aligned: its bits 5:0 are always zero.
module vector_cache
  import bc_pkg::*;
#(
  parameter int unsigned LINES    = 64,
  parameter int unsigned SECTORS  = 16,
  parameter int unsigned WB_LINES = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  addr_t                         addr,
  // lookup
  output logic                          line_hit,
  output logic [$clog2(LINES)-1:0]      line_idx,
  output logic                          line_wb,
  output logic                          hit,
  output sector_t                       hit_data,
  output logic                          hit_dirty,
  // access the hit sector
  input  logic                          acc_en,
  input  logic                          acc_we,
  input  be_t                           acc_be,
  input  sector_t                       acc_wdata,
  // fill one sector
  input  logic                          fill_en,
  input  logic [$clog2(LINES)-1:0]      fill_line,
  input  sector_t                       fill_data,
  input  logic                          fill_dirty,
  input  logic                          fill_touch,
  // allocate a line for addr
  input  logic                          alloc_en,
  input  logic [$clog2(LINES)-1:0]      alloc_line,
  // move a dirty victim into the write buffer
  input  logic                          flag_wb_en,
  input  logic [$clog2(LINES)-1:0]      flag_line,
  // victim
  output logic [$clog2(LINES)-1:0]      vic_line,
  output logic                          vic_free,
  output logic                          vic_dirty,
  // write buffer
  output logic [$clog2(WB_LINES):0]     wb_count,
  input  logic                          drain_start,
  output logic                          draining,
  output logic                          wb_valid,
  input  logic                          wb_ready,
  output addr_t                         wb_addr,
  output sector_t                       wb_data
);
  localparam int unsigned LINE_W = $clog2(LINES);
  localparam int unsigned SEC_W  = $clog2(SECTORS);
  localparam int unsigned RANK_W = $clog2(WB_LINES);
  localparam int unsigned TAG_W  = ADDR_W - SEC_W - OFF_W;

  typedef logic [TAG_W-1:0]   tag_t;
  typedef logic [SECTORS-1:0] secmask_t;
  typedef logic [LINE_W-1:0]  line_t;

  tag_t              tags  [LINES];
  logic              alloc [LINES];
  secmask_t          sv    [LINES];
  secmask_t          sd    [LINES];
  logic              wb    [LINES];
  logic [RANK_W-1:0] rank  [LINES];
  line_t             age   [LINES];
  sector_t           data  [LINES*SECTORS];
  logic [RANK_W:0]   wcnt;

  logic [SEC_W-1:0] sec_in;
  tag_t             tag_in;
  assign sec_in = addr[OFF_W +: SEC_W];
  assign tag_in = addr[ADDR_W-1 -: TAG_W];

  function automatic int unsigned didx(line_t l, logic [SEC_W-1:0] s);
    return int'(l) * SECTORS + int'(s);
  endfunction

  // ---------------- lookup
  always_comb begin
    line_hit = 1'b0;
    line_idx = '0;
    for (int unsigned l = 0; l < LINES; l++)
      if (alloc[l] && tags[l] == tag_in) begin
        line_hit = 1'b1;
        line_idx = line_t'(l);
      end
  end
  assign line_wb   = line_hit && wb[line_idx];
  assign hit       = line_hit && sv[line_idx][sec_in];
  assign hit_data  = data[didx(line_idx, sec_in)];
  assign hit_dirty = sd[line_idx][sec_in];

  // ---------------- victim: a free line, else the oldest regular line
  always_comb begin
    line_t best_age;
    vic_free = 1'b0;
    vic_line = '0;
    best_age = '0;
    for (int unsigned l = 0; l < LINES; l++)
      if (!vic_free && !alloc[l]) begin
        vic_free = 1'b1;
        vic_line = line_t'(l);
      end
    if (!vic_free)
      for (int unsigned l = 0; l < LINES; l++)
        if (!wb[l] && age[l] >= best_age) begin
          best_age = age[l];
          vic_line = line_t'(l);
        end
  end
  assign vic_dirty = !vic_free && (sd[vic_line] != '0);
  assign wb_count  = wcnt;

  // ---------------- write-back engine
  logic             d_active;
  line_t            d_line;
  logic             d_any;
  logic [SEC_W-1:0] d_sec;
  logic             ctrl_op;
  logic             oldest_ok;
  line_t            oldest;

  assign ctrl_op = acc_en || fill_en || alloc_en || flag_wb_en;

  always_comb begin
    oldest_ok = 1'b0;
    oldest    = '0;
    for (int unsigned l = 0; l < LINES; l++)
      if (wb[l] && rank[l] == '0) begin
        oldest_ok = 1'b1;
        oldest    = line_t'(l);
      end
  end

  always_comb begin
    d_any = 1'b0;
    d_sec = '0;
    for (int unsigned s = SECTORS; s > 0; s--)
      if (sv[d_line][s-1] && sd[d_line][s-1]) begin
        d_any = 1'b1;
        d_sec = SEC_W'(s-1);
      end
  end

  logic d_live, d_done;
  assign d_live   = d_active && wb[d_line];
  assign wb_valid = d_live && d_any && !ctrl_op;
  assign wb_addr  = {tags[d_line], d_sec, OFF_W'(0)};
  assign wb_data  = data[didx(d_line, d_sec)];
  assign d_done   = d_live && !d_any && !ctrl_op;
  assign draining = d_active;

  // ---------------- update
  logic  touch;
  line_t touch_line;
  logic  restore;
  line_t rm_line;
  logic  rm;

  always_comb begin
    touch      = 1'b0;
    touch_line = line_idx;
    restore    = 1'b0;
    if (acc_en && hit) begin
      touch   = 1'b1;
      restore = wb[line_idx];
    end
    if (fill_en) begin
      touch      = fill_touch;
      touch_line = fill_line;
      restore    = wb[fill_line];
    end
    if (alloc_en) begin
      touch      = 1'b1;
      touch_line = alloc_line;
    end
    rm      = restore || d_done;
    rm_line = d_done ? d_line : touch_line;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wcnt     <= '0;
      d_active <= 1'b0;
      d_line   <= '0;
      for (int unsigned l = 0; l < LINES; l++) begin
        alloc[l] <= 1'b0;
        wb[l]    <= 1'b0;
        sv[l]    <= '0;
        sd[l]    <= '0;
        rank[l]  <= '0;
        age[l]   <= line_t'(l);
      end
    end else begin
      // write-back engine
      if (wb_valid && wb_ready)
        sd[d_line][d_sec] <= 1'b0;
      if (!d_active) begin
        if (drain_start && oldest_ok) begin
          d_active <= 1'b1;
          d_line   <= oldest;
        end
      end else if (!wb[d_line] || d_done) begin
        d_active <= 1'b0;
      end
      if (d_done) begin
        alloc[d_line] <= 1'b0;
        sv[d_line]    <= '0;
      end

      // leaving the write buffer (restore or write-back done)
      if (rm) begin
        wb[rm_line] <= 1'b0;
        for (int unsigned l = 0; l < LINES; l++)
          if (wb[l] && rank[l] > rank[rm_line]) rank[l] <= rank[l] - 1'b1;
        wcnt <= wcnt - 1'b1;
      end

      // LRU
      if (touch) begin
        for (int unsigned l = 0; l < LINES; l++)
          if (age[l] < age[touch_line]) age[l] <= age[l] + 1'b1;
        age[touch_line] <= '0;
      end

      // controller operations
      if (acc_en && hit && acc_we) begin
        data[didx(line_idx, sec_in)] <= merge_bytes(hit_data, acc_wdata, acc_be);
        sd[line_idx][sec_in]         <= 1'b1;
      end
      if (fill_en) begin
        data[didx(fill_line, sec_in)] <= fill_data;
        sv[fill_line][sec_in]         <= 1'b1;
        sd[fill_line][sec_in]         <= fill_dirty;
      end
      if (alloc_en) begin
        tags[alloc_line]  <= tag_in;
        alloc[alloc_line] <= 1'b1;
        sv[alloc_line]    <= '0;
        sd[alloc_line]    <= '0;
        wb[alloc_line]    <= 1'b0;
      end
      if (flag_wb_en) begin
        wb[flag_line]   <= 1'b1;
        rank[flag_line] <= wcnt[RANK_W-1:0];
        wcnt            <= wcnt + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({acc_en, fill_en, alloc_en, flag_wb_en}));
  assert property (@(posedge clk) disable iff (!rst_n)
                   flag_wb_en |-> (wcnt < (RANK_W+1)'(WB_LINES)) && !wb[flag_line]);
  assert property (@(posedge clk) disable iff (!rst_n) alloc_en |-> !wb[alloc_line]);

endmodule
