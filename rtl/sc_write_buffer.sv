// sc_write_buffer - the write buffer (WB) of the Scalar Cache.
//
// Dirty lines evicted from the Scalar Cache wait here before being written to
// main memory, so the processor does not stall on their write-back. A line
// leaves the buffer in one of two ways:
//   - it is referenced again: the controller finds it with the lookup port and
//     removes it (rm_en) to restore it into a cache; or
//   - it is written back: entry 0, the oldest, is offered on the wb_* request
//     port while an emptying is active and leaves when the request is taken.
// Entries are kept in age order, entry 0 the oldest; a removal shifts the
// younger entries down. Since an SC line is a single sector, writing a line
// back is one 512-bit write request.
//
// Emptying: drain_start (a pulse) arms the write-back of the oldest line; one
// line is written per arming. The controller arms it when a double miss finds
// the buffer at its threshold (eager emptying) and when a dirty victim finds
// the buffer full (compulsory emptying). The threshold itself is applied by
// the controller.
//
// Interface timing: lookup is combinational on lk_addr; push_en, rm_en and the
// wb handshake (wb_valid & wb_ready) take effect at the clock edge. The write
// request is not offered in a cycle with a push or removal, so only one entry
// moves per cycle.
//
// Following the paper: 8 lines, restore on reference, oldest-first write-back
// triggered by eager and compulsory emptying. This design's own choices: the
// shift-register ordering and one line written per arming.
//
// wb_addr is sector aligned: its bits 5:0 are always zero.
module sc_write_buffer
  import bc_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // lookup
  input  addr_t                    lk_addr,
  output logic                     lk_hit,
  output logic [$clog2(DEPTH)-1:0] lk_idx,
  output sector_t                  lk_data,
  // insert an evicted dirty line
  input  logic                     push_en,
  input  addr_t                    push_addr,
  input  sector_t                  push_data,
  // remove a referenced line
  input  logic                     rm_en,
  input  logic [$clog2(DEPTH)-1:0] rm_idx,
  // occupancy
  output logic [$clog2(DEPTH):0]   count,
  output logic                     full,
  // write-back of the oldest line
  input  logic                     drain_start,
  output logic                     draining,
  output logic                     wb_valid,
  input  logic                     wb_ready,
  output addr_t                    wb_addr,
  output sector_t                  wb_data
);
  localparam int unsigned IDX_W = $clog2(DEPTH);

  logic [SADDR_W-1:0] e_addr [DEPTH];
  sector_t            e_data [DEPTH];
  logic [IDX_W:0]     cnt;
  logic               active;

  assign count = cnt;
  assign full  = (cnt == (IDX_W+1)'(DEPTH));

  always_comb begin
    lk_hit = 1'b0;
    lk_idx = '0;
    for (int unsigned i = 0; i < DEPTH; i++)
      if (i < cnt && e_addr[i] == lk_addr[ADDR_W-1:OFF_W]) begin
        lk_hit = 1'b1;
        lk_idx = IDX_W'(i);
      end
  end
  assign lk_data = e_data[lk_idx];

  assign draining = active;
  assign wb_valid = active && (cnt != 0) && !push_en && !rm_en;
  assign wb_addr  = {e_addr[0], OFF_W'(0)};
  assign wb_data  = e_data[0];

  logic pop;
  assign pop = wb_valid && wb_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt    <= '0;
      active <= 1'b0;
    end else begin
      if (pop || rm_en) begin
        // remove one entry and close the gap
        for (int unsigned i = 0; i < DEPTH - 1; i++)
          if (i >= (pop ? 0 : int'(rm_idx))) begin
            e_addr[i] <= e_addr[i+1];
            e_data[i] <= e_data[i+1];
          end
        cnt <= cnt - 1'b1;
      end else if (push_en && !full) begin
        e_addr[cnt[IDX_W-1:0]] <= push_addr[ADDR_W-1:OFF_W];
        e_data[cnt[IDX_W-1:0]] <= push_data;
        cnt <= cnt + 1'b1;
      end
      if (drain_start)         active <= 1'b1;
      else if (pop || cnt == 0) active <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push_en && rm_en));
  assert property (@(posedge clk) disable iff (!rst_n) push_en |-> !full);
  assert property (@(posedge clk) disable iff (!rst_n) rm_en |-> ((IDX_W+1)'(rm_idx) < cnt));

endmodule
