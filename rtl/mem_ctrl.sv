// mem_ctrl - memory controller between the Bicameral Cache and the DRAM.
//
// Accepts sector requests from the caches (demand reads and write-backs) over
// a 512-bit request channel, decodes each address Row-Bank-Column, and appends
// it to the queue of its bank. Every bank serves its own queue first-come-
// first-served, so two requests to the same sector never pass each other. A
// dram_bank timing model per bank decides how many cycles each access takes
// (CAS, RAS+CAS or PRE+RAS+CAS, depending on the open row). When the access is
// complete, the sector crosses the shared DRAM data port; for a read, the data
// comes back one cycle later and is returned on the response channel.
//
// The controller also runs the memory-side prefetcher (vc_prefetcher): when no
// idle bank has a pending request, an idle bank whose last read was for the
// Vector Cache reads the next sector of that line. The result is returned on
// the response channel with the pf flag set. If a write to the same sector is
// accepted while the prefetch is still inside the controller, the prefetched
// copy is stale and is dropped. If instead a demand read of that sector is
// accepted while the prefetch is in its bank or on the data port, the demand
// is not queued: the prefetch becomes the demand's response (pf flag cleared).
// Without this, a stride-1 vector stream that asks for the next sector just
// after its bank began prefetching it would wait for a second access.
//
// Interfaces (valid/ready, a transfer when both are high at a clock edge):
//   req_*  : mem_req_t from the cache; req_ready is low while the target
//            bank's queue is full.
//   rsp_*  : mem_rsp_t to the cache.
//   dram_* : one access per cycle; dram_rdata is valid the cycle after a read.
// Timing: with the bank idle, the response to a read is valid T + 3 cycles
// after the cycle in which the request was accepted, T being the bank's access
// time (queue write, bank start, T, one cycle on the data port).
//
// Following the paper: 8 banks, Row-Bank-Column mapping, per-bank FCFS
// queues, the RAS/CAS/PRE latencies, the sector-wide link, the prefetching
// rule. This design's own choices: the queue depth, the fixed-priority choice
// among banks for the data port, one read in flight on the data port, the
// dropping of stale prefetches and the merging of a demand read into the
// prefetch of the same sector.
module mem_ctrl
  import bc_pkg::*;
#(
  parameter int unsigned N_BANKS    = 8,
  parameter int unsigned ROW_W      = 15,
  parameter int unsigned COL_W      = 8,
  parameter int unsigned QDEPTH     = 8,
  parameter int unsigned T_RAS      = 28,
  parameter int unsigned T_CAS      = 11,
  parameter int unsigned T_PRE      = 11,
  parameter int unsigned VC_SECTORS = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pf_enable,
  // from the caches
  input  logic       req_valid,
  output logic       req_ready,
  input  mem_req_t   req,
  // to the caches
  output logic       rsp_valid,
  input  logic       rsp_ready,
  output mem_rsp_t   rsp,
  // DRAM data port
  output logic       dram_en,
  output logic       dram_we,
  output addr_t      dram_addr,
  output sector_t    dram_wdata,
  input  sector_t    dram_rdata,
  // statistics
  output mc_events_t ev
);
  localparam int unsigned BANK_W = $clog2(N_BANKS);
  localparam int unsigned Q_W    = $clog2(QDEPTH);
  localparam int unsigned ROW_LSB = OFF_W + COL_W + BANK_W;

  function automatic logic [BANK_W-1:0] bank_of(addr_t a);
    return a[OFF_W + COL_W +: BANK_W];
  endfunction
  function automatic logic [ROW_W-1:0] row_of(addr_t a);
    return a[ROW_LSB +: ROW_W];
  endfunction

  // ---------------- per-bank queues
  mem_req_t         q     [N_BANKS*QDEPTH];
  logic [Q_W-1:0]   q_head[N_BANKS];
  logic [Q_W-1:0]   q_tail[N_BANKS];
  logic [Q_W:0]     q_cnt [N_BANKS];

  logic [BANK_W-1:0] req_bank;
  logic              req_fire;
  assign req_bank  = bank_of(req.addr);
  assign req_ready = (q_cnt[req_bank] != (Q_W+1)'(QDEPTH));
  assign req_fire  = req_valid && req_ready;

  // ---------------- banks
  logic [N_BANKS-1:0] b_idle, b_done, b_start, b_grant, b_pending;
  logic [N_BANKS-1:0] b_hit, b_empty, b_conf;
  logic [N_BANKS-1:0] b_pop;
  mem_req_t           cur      [N_BANKS];
  logic               cur_kill [N_BANKS];
  mem_req_t           start_req[N_BANKS];
  logic [N_BANKS-1:0] last_vrd;
  logic [SADDR_W-1:0] last_saddr [N_BANKS];

  logic               pf_valid;
  logic [BANK_W-1:0]  pf_bank;
  addr_t              pf_addr;

  vc_prefetcher #(.N_BANKS(N_BANKS), .VC_SECTORS(VC_SECTORS)) u_pf (
    .enable    (pf_enable),
    .idle      (b_idle),
    .pending   (b_pending),
    .last_vrd  (last_vrd),
    .last_saddr(last_saddr),
    .pf_valid  (pf_valid),
    .pf_bank   (pf_bank),
    .pf_addr   (pf_addr)
  );

  always_comb
    for (int unsigned b = 0; b < N_BANKS; b++) b_pending[b] = (q_cnt[b] != '0);

  always_comb begin
    for (int unsigned b = 0; b < N_BANKS; b++) begin
      b_pop[b]     = b_idle[b] && b_pending[b];
      b_start[b]   = b_pop[b] || (pf_valid && pf_bank == BANK_W'(b));
      start_req[b] = q[b*QDEPTH + int'(q_head[b])];
      if (!b_pop[b]) begin
        start_req[b]      = '0;
        start_req[b].addr = pf_addr;
        start_req[b].vec  = 1'b1;
        start_req[b].pf   = 1'b1;
      end
    end
  end

  for (genvar gb = 0; gb < N_BANKS; gb++) begin : g_bank
    dram_bank #(.ROW_W(ROW_W), .T_RAS(T_RAS), .T_CAS(T_CAS), .T_PRE(T_PRE)) u_bank (
      .clk        (clk),
      .rst_n      (rst_n),
      .start      (b_start[gb]),
      .start_row  (row_of(start_req[gb].addr)),
      .idle       (b_idle[gb]),
      .done       (b_done[gb]),
      .grant      (b_grant[gb]),
      .ev_hit     (b_hit[gb]),
      .ev_empty   (b_empty[gb]),
      .ev_conflict(b_conf[gb])
    );
  end

  // ---------------- data port
  logic     rd_pend;
  addr_t    rd_addr;
  logic     rd_pf;
  logic     rd_kill;
  logic     rsp_v;
  mem_rsp_t rsp_q;
  logic     read_ok;
  logic     gnt_any;
  logic [BANK_W-1:0] gnt_bank;

  assign read_ok = !rd_pend && (!rsp_v || rsp_ready);

  always_comb begin
    b_grant  = '0;
    gnt_any  = 1'b0;
    gnt_bank = '0;
    for (int unsigned b = N_BANKS; b > 0; b--)
      if (b_done[b-1] && (cur[b-1].we || read_ok)) begin
        gnt_any  = 1'b1;
        gnt_bank = BANK_W'(b-1);
      end
    if (gnt_any) b_grant[gnt_bank] = 1'b1;
  end

  assign dram_en    = gnt_any;
  assign dram_we    = cur[gnt_bank].we;
  assign dram_addr  = cur[gnt_bank].addr;
  assign dram_wdata = cur[gnt_bank].data;

  assign rsp_valid = rsp_v;
  assign rsp       = rsp_q;

  // a write accepted now makes older prefetched copies of that sector stale
  function automatic logic stale(addr_t a, logic is_pf);
    return req_fire && req.we && is_pf &&
           a[ADDR_W-1:OFF_W] == req.addr[ADDR_W-1:OFF_W];
  endfunction

  // a demand read of a sector whose prefetch is already in service takes that
  // prefetch over instead of queueing behind it
  function automatic logic same_sector(addr_t a, addr_t b);
    return a[ADDR_W-1:OFF_W] == b[ADDR_W-1:OFF_W];
  endfunction
  logic [N_BANKS-1:0] merge_cur;
  logic               merge_rd;
  logic               merge;
  always_comb begin
    for (int unsigned b = 0; b < N_BANKS; b++)
      merge_cur[b] = req_fire && !req.we && !b_idle[b] && cur[b].pf && !cur_kill[b] &&
                     same_sector(cur[b].addr, req.addr);
    merge_rd = req_fire && !req.we && rd_pend && rd_pf && !rd_kill &&
               same_sector(rd_addr, req.addr);
    merge    = (|merge_cur) || merge_rd;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned b = 0; b < N_BANKS; b++) begin
        q_head[b]     <= '0;
        q_tail[b]     <= '0;
        q_cnt[b]      <= '0;
        last_vrd[b]   <= 1'b0;
        last_saddr[b] <= '0;
        cur[b]        <= '0;
        cur_kill[b]   <= 1'b0;
      end
      rd_pend <= 1'b0;
      rd_addr <= '0;
      rd_pf   <= 1'b0;
      rd_kill <= 1'b0;
      rsp_v   <= 1'b0;
      rsp_q   <= '0;
    end else begin
      for (int unsigned b = 0; b < N_BANKS; b++) begin
        logic push;
        push = req_fire && !merge && req_bank == BANK_W'(b);
        if (push) begin
          q[b*QDEPTH + int'(q_tail[b])] <= req;
          q_tail[b] <= q_tail[b] + 1'b1;
        end
        if (b_pop[b]) q_head[b] <= q_head[b] + 1'b1;
        q_cnt[b] <= q_cnt[b] + (Q_W+1)'(push) - (Q_W+1)'(b_pop[b]);

        if (b_start[b]) begin
          cur[b]        <= start_req[b];
          cur_kill[b]   <= stale(start_req[b].addr, start_req[b].pf);
          last_vrd[b]   <= !start_req[b].we && start_req[b].vec;
          last_saddr[b] <= start_req[b].addr[ADDR_W-1:OFF_W];
        end else if (stale(cur[b].addr, cur[b].pf)) begin
          cur_kill[b] <= 1'b1;
        end else if (merge_cur[b]) begin
          cur[b].pf <= 1'b0;
        end
      end

      // read in flight on the data port
      rd_pend <= gnt_any && !cur[gnt_bank].we;
      if (gnt_any) begin
        rd_addr <= cur[gnt_bank].addr;
        rd_pf   <= cur[gnt_bank].pf && !merge_cur[gnt_bank];
        rd_kill <= cur_kill[gnt_bank] || stale(cur[gnt_bank].addr, cur[gnt_bank].pf);
      end

      // response register
      if (rd_pend) begin
        rsp_v      <= !(rd_kill || stale(rd_addr, rd_pf));
        rsp_q.addr <= rd_addr;
        rsp_q.pf   <= rd_pf && !merge_rd;
        rsp_q.data <= dram_rdata;
      end else if (rsp_v && rsp_ready) begin
        rsp_v <= 1'b0;
      end else if (rsp_v && stale(rsp_q.addr, rsp_q.pf)) begin
        rsp_v <= 1'b0;
      end
    end
  end

  always_comb begin
    ev.row_hit      = |b_hit;
    ev.row_empty    = |b_empty;
    ev.row_conflict = |b_conf;
    ev.pf_issue     = pf_valid;
  end

  // a read enters the response register only when it is free
  assert property (@(posedge clk) disable iff (!rst_n)
                   rd_pend |-> (!rsp_v || rsp_ready));

endmodule
