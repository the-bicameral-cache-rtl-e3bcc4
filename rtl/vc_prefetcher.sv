// vc_prefetcher - memory-side prefetch selection for Vector Cache lines.
//
// The memory controller fills Vector Cache lines ahead of use when it has
// nothing better to do. A prefetch is allowed only in a cycle in which no idle
// bank has a pending request. It then goes to the first idle bank (lowest
// index) whose last operation was a Vector Cache read of a sector that is not
// the last one of its 1 KB line, and it reads the next sector. That sector lies
// in the same DRAM row, which is still open, so the prefetch costs a CAS only.
// Because each prefetch becomes the bank's last read, one line is walked
// forward sector by sector while the bank stays otherwise idle. The prefetch
// never fetches beyond the end of the line.
//
// Interface: purely combinational. Per bank: idle, pending (queue not empty),
// last_vrd (last operation was a VC read) and last_saddr (its sector address).
// Output: pf_valid, the bank chosen and the byte address of the sector to read.
//
// Following the paper: the trigger, the bank choice and the "next sector of
// the line" rule. This design's own choices: "first available bank" is taken
// as the lowest-numbered one, and only reads made for the Vector Cache (demand
// or prefetch) count as a "last read".
//
// pf_addr is sector aligned: its bits 5:0 are always zero.
module vc_prefetcher
  import bc_pkg::*;
#(
  parameter int unsigned N_BANKS    = 8,
  parameter int unsigned VC_SECTORS = 16
) (
  input  logic                       enable,
  input  logic [N_BANKS-1:0]         idle,
  input  logic [N_BANKS-1:0]         pending,
  input  logic [N_BANKS-1:0]         last_vrd,
  input  logic [SADDR_W-1:0]         last_saddr [N_BANKS],
  output logic                       pf_valid,
  output logic [$clog2(N_BANKS)-1:0] pf_bank,
  output addr_t                      pf_addr
);
  localparam int unsigned SEC_W = $clog2(VC_SECTORS);

  logic trigger;
  assign trigger = enable && ((idle & pending) == '0);

  always_comb begin
    pf_valid = 1'b0;
    pf_bank  = '0;
    for (int unsigned b = N_BANKS; b > 0; b--)
      if (trigger && idle[b-1] && last_vrd[b-1] &&
          last_saddr[b-1][SEC_W-1:0] != SEC_W'(VC_SECTORS - 1)) begin
        pf_valid = 1'b1;
        pf_bank  = ($clog2(N_BANKS))'(b-1);
      end
  end

  assign pf_addr = {last_saddr[pf_bank] + 1'b1, OFF_W'(0)};

endmodule
