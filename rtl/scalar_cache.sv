// scalar_cache - the Scalar Cache (SC) of the Bicameral Cache.
//
// Holds the data referenced by scalar memory instructions. It is
// set-associative (default 256 sets x 4 ways) with 64-byte lines, so each line
// is exactly one sector and carries one valid and one dirty bit. Address
// fields, most to least significant: tag, set, offset. Replacement is LRU,
// kept as a per-way age (0 = most recent); the update policy is write-back.
// Dirty victims are handed to the controller, which moves them into the SC
// write buffer (sc_write_buffer).
//
// Interface: every operation works on the line addressed by `addr`.
//   - lookup (combinational): hit, hit_way, hit_data, hit_dirty.
//   - acc_en: access the hit line; a write (acc_we) merges acc_wdata under
//     acc_be and sets the dirty bit. The way becomes most recently used.
//   - inv_en: invalidate the hit line (used when a sector migrates to the VC).
//   - victim outputs (combinational): the way a fill of this set would use, an
//     invalid way if there is one, otherwise the least recently used, with its
//     state, address and data. vinv_en invalidates that way.
//   - fill_en: write fill_data into way fill_way with dirty bit fill_dirty;
//     the way becomes most recently used.
// All updates take effect at the rising clock edge; lookups reflect the state
// before it. The controller asserts at most one update per cycle.
//
// Following the paper: set-associative organisation, sizes, sector lines with
// v/d bits, LRU and write-back. This design's own choices: the age-based LRU
// encoding, the single combinational lookup port and the reset that clears
// only the valid bits and ages.
//
// Outputs fixed by construction: vic_addr is sector aligned (bits 5:0 are
// zero) and its set field repeats the set bits of addr.
module scalar_cache
  import bc_pkg::*;
#(
  parameter int unsigned SETS = 256,
  parameter int unsigned WAYS = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  addr_t                   addr,
  // lookup
  output logic                    hit,
  output logic [$clog2(WAYS)-1:0] hit_way,
  output sector_t                 hit_data,
  output logic                    hit_dirty,
  // access / invalidate the hit line
  input  logic                    acc_en,
  input  logic                    acc_we,
  input  be_t                     acc_be,
  input  sector_t                 acc_wdata,
  input  logic                    inv_en,
  // victim of this set
  output logic [$clog2(WAYS)-1:0] vic_way,
  output logic                    vic_valid,
  output logic                    vic_dirty,
  output addr_t                   vic_addr,
  output sector_t                 vic_data,
  input  logic                    vinv_en,
  // fill
  input  logic                    fill_en,
  input  logic [$clog2(WAYS)-1:0] fill_way,
  input  sector_t                 fill_data,
  input  logic                    fill_dirty
);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_W = ADDR_W - SET_W - OFF_W;
  localparam int unsigned LINES = SETS * WAYS;

  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [WAY_W-1:0] age_t;

  tag_t    tags  [LINES];
  sector_t data  [LINES];
  logic    valid [LINES];
  logic    dirty [LINES];
  age_t    age   [LINES];

  logic [SET_W-1:0] set_idx;
  tag_t             tag_in;
  assign set_idx = addr[OFF_W +: SET_W];
  assign tag_in  = addr[ADDR_W-1 -: TAG_W];

  function automatic int unsigned line_of(logic [SET_W-1:0] s, int unsigned w);
    return int'(s) * WAYS + w;
  endfunction

  // ---------------- lookup
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (valid[line_of(set_idx, w)] && tags[line_of(set_idx, w)] == tag_in) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
  end
  assign hit_data  = data[line_of(set_idx, int'(hit_way))];
  assign hit_dirty = dirty[line_of(set_idx, int'(hit_way))];

  // ---------------- victim: an invalid way first, otherwise the oldest
  always_comb begin
    logic found_inv;
    found_inv = 1'b0;
    vic_way   = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (!found_inv && !valid[line_of(set_idx, w)]) begin
        found_inv = 1'b1;
        vic_way   = WAY_W'(w);
      end
    if (!found_inv)
      for (int unsigned w = 0; w < WAYS; w++)
        if (age[line_of(set_idx, w)] == age_t'(WAYS - 1)) vic_way = WAY_W'(w);
  end
  assign vic_valid = valid[line_of(set_idx, int'(vic_way))];
  assign vic_dirty = dirty[line_of(set_idx, int'(vic_way))];
  assign vic_data  = data[line_of(set_idx, int'(vic_way))];
  assign vic_addr  = {tags[line_of(set_idx, int'(vic_way))], set_idx, OFF_W'(0)};

  // ---------------- update
  logic             touch;
  logic [WAY_W-1:0] touch_way;
  assign touch     = (acc_en && hit) || fill_en;
  assign touch_way = fill_en ? fill_way : hit_way;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < LINES; i++) begin
        valid[i] <= 1'b0;
        dirty[i] <= 1'b0;
        age[i]   <= age_t'(i % WAYS);
      end
    end else begin
      if (touch) begin
        // LRU: ways younger than the touched one age by one
        for (int unsigned w = 0; w < WAYS; w++)
          if (age[line_of(set_idx, w)] < age[line_of(set_idx, int'(touch_way))])
            age[line_of(set_idx, w)] <= age[line_of(set_idx, w)] + 1'b1;
        age[line_of(set_idx, int'(touch_way))] <= '0;
      end
      if (acc_en && hit && acc_we) begin
        data[line_of(set_idx, int'(hit_way))]  <= merge_bytes(hit_data, acc_wdata, acc_be);
        dirty[line_of(set_idx, int'(hit_way))] <= 1'b1;
      end
      if (inv_en && hit)
        valid[line_of(set_idx, int'(hit_way))] <= 1'b0;
      if (vinv_en)
        valid[line_of(set_idx, int'(vic_way))] <= 1'b0;
      if (fill_en) begin
        tags[line_of(set_idx, int'(fill_way))]  <= tag_in;
        data[line_of(set_idx, int'(fill_way))]  <= fill_data;
        valid[line_of(set_idx, int'(fill_way))] <= 1'b1;
        dirty[line_of(set_idx, int'(fill_way))] <= fill_dirty;
      end
    end
  end

  // the controller issues one update at a time
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({acc_en, inv_en, vinv_en, fill_en}));

endmodule
