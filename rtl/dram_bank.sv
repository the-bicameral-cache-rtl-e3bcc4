// dram_bank - timing model of one DRAM bank, as kept by the memory controller.
//
// The bank's row buffer has two states, CLOSED or OPEN (with the number of the
// open row). This is the whole state that decides an access's cost: an access
// to the open row needs only CAS; with no row open it needs RAS then CAS; with
// another row open it must first close it (PRE), then RAS and CAS. Rows stay
// open after an access (open-page policy) and only one row can be open.
//
// Interface and timing: `start` (allowed when `idle`) begins an access to row
// `start_row`. `done` rises exactly T cycles after the start cycle, T being
// T_CAS, T_RAS+T_CAS or T_PRE+T_RAS+T_CAS, and stays high until `grant`, the
// cycle in which the controller moves the sector over the data port; the bank
// is idle again in the next cycle. The ev_* outputs classify an access in its
// start cycle.
//
// Following the paper: the two-state model, one open row per bank and the
// latencies RAS 28, CAS 11, PRE 11 cycles. This design's own choices: the
// open-page policy (rows are never closed speculatively) and the done/grant
// handshake with the data port.
module dram_bank #(
  parameter int unsigned ROW_W = 15,
  parameter int unsigned T_RAS = 28,
  parameter int unsigned T_CAS = 11,
  parameter int unsigned T_PRE = 11
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [ROW_W-1:0] start_row,
  output logic             idle,
  output logic             done,
  input  logic             grant,
  output logic             ev_hit,
  output logic             ev_empty,
  output logic             ev_conflict
);
  typedef enum logic { CLOSED, OPEN } row_state_e;
  localparam int unsigned CNT_W = $clog2(T_PRE + T_RAS + T_CAS + 1);

  row_state_e       row_state;
  logic [ROW_W-1:0] open_row;
  logic             busy;
  logic [CNT_W-1:0] cnt;

  assign idle        = !busy;
  assign done        = busy && (cnt == '0);
  assign ev_hit      = start && row_state == OPEN && open_row == start_row;
  assign ev_empty    = start && row_state == CLOSED;
  assign ev_conflict = start && row_state == OPEN && open_row != start_row;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row_state <= CLOSED;
      open_row  <= '0;
      busy      <= 1'b0;
      cnt       <= '0;
    end else if (start && !busy) begin
      busy      <= 1'b1;
      row_state <= OPEN;
      open_row  <= start_row;
      if (ev_hit)        cnt <= CNT_W'(T_CAS - 1);
      else if (ev_empty) cnt <= CNT_W'(T_RAS + T_CAS - 1);
      else               cnt <= CNT_W'(T_PRE + T_RAS + T_CAS - 1);
    end else if (busy) begin
      if (cnt != '0)  cnt  <= cnt - 1'b1;
      else if (grant) busy <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> idle);
  assert property (@(posedge clk) disable iff (!rst_n) grant |-> done);

endmodule
