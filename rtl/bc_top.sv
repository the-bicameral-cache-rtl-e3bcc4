// bc_top - Bicameral Cache memory hierarchy: the split scalar/vector cache
// (bicameral_cache) connected to the memory controller (mem_ctrl) over the
// sector-wide (512-bit) request and response channels.
//
// Ports:
//   core side  : one sector reference at a time (core_req_t), tagged scalar or
//                vector by the instruction that issued it; rsp_valid pulses
//                with the sector once the reference is complete.
//   pf_enable  : turns the memory-side Vector Cache prefetch on (the main
//                configuration) or off.
//   DRAM side  : the memory controller's data port to the DRAM devices, one
//                sector per access, read data one cycle after the access.
//   bc_ev/mc_ev: one-cycle event strobes for performance counting.
//
// Default sizes are those of the evaluated configuration: 64 KB Scalar Cache
// (256 sets x 4 ways x 64 B), 64 KB Vector Cache (64 lines x 1 KB), 8-line
// write buffers, 8 DRAM banks with RAS/CAS/PRE of 28/11/11 cycles.
module bc_top
  import bc_pkg::*;
#(
  parameter int unsigned SC_SETS      = 256,
  parameter int unsigned SC_WAYS      = 4,
  parameter int unsigned SC_WB_LINES  = 8,
  parameter int unsigned SC_WB_THRESH = 8,
  parameter int unsigned VC_LINES     = 64,
  parameter int unsigned VC_SECTORS   = 16,
  parameter int unsigned VC_WB_LINES  = 8,
  parameter int unsigned VC_WB_THRESH = 5,
  parameter int unsigned N_BANKS      = 8,
  parameter int unsigned ROW_W        = 15,
  parameter int unsigned COL_W        = 8,
  parameter int unsigned QDEPTH       = 8,
  parameter int unsigned T_RAS        = 28,
  parameter int unsigned T_CAS        = 11,
  parameter int unsigned T_PRE        = 11
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pf_enable,
  // core
  input  logic       req_valid,
  output logic       req_ready,
  input  core_req_t  req,
  output logic       rsp_valid,
  output sector_t    rsp_data,
  // DRAM data port
  output logic       dram_en,
  output logic       dram_we,
  output addr_t      dram_addr,
  output sector_t    dram_wdata,
  input  sector_t    dram_rdata,
  // statistics
  output bc_events_t bc_ev,
  output mc_events_t mc_ev
);
  logic     mreq_valid, mreq_ready, mrsp_valid, mrsp_ready;
  mem_req_t mreq;
  mem_rsp_t mrsp;

  bicameral_cache #(
    .SC_SETS(SC_SETS), .SC_WAYS(SC_WAYS), .SC_WB_LINES(SC_WB_LINES),
    .SC_WB_THRESH(SC_WB_THRESH), .VC_LINES(VC_LINES), .VC_SECTORS(VC_SECTORS),
    .VC_WB_LINES(VC_WB_LINES), .VC_WB_THRESH(VC_WB_THRESH)
  ) u_bc (
    .clk, .rst_n,
    .req_valid, .req_ready, .req, .rsp_valid, .rsp_data,
    .mreq_valid, .mreq_ready, .mreq,
    .mrsp_valid, .mrsp_ready, .mrsp,
    .ev(bc_ev)
  );

  mem_ctrl #(
    .N_BANKS(N_BANKS), .ROW_W(ROW_W), .COL_W(COL_W), .QDEPTH(QDEPTH),
    .T_RAS(T_RAS), .T_CAS(T_CAS), .T_PRE(T_PRE), .VC_SECTORS(VC_SECTORS)
  ) u_mc (
    .clk, .rst_n, .pf_enable,
    .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .rsp_valid(mrsp_valid), .rsp_ready(mrsp_ready), .rsp(mrsp),
    .dram_en, .dram_we, .dram_addr, .dram_wdata, .dram_rdata,
    .ev(mc_ev)
  );

endmodule
