// dram_model - behavioural stand-in for the DRAM devices, for simulation only.
//
// Stores sectors in a sparse associative array keyed by sector address, so the
// whole 4 GB space can be addressed without allocating it. A sector never
// written reads as its own byte address repeated 16 times (see init_sector),
// which lets a testbench predict any read without a copy of memory. Timing
// belongs to the memory controller: this model performs one access per cycle
// when `en` is high and returns read data on the next cycle.
module dram_model
  import bc_pkg::*;
(
  input  logic    clk,
  input  logic    en,
  input  logic    we,
  input  addr_t   addr,
  input  sector_t wdata,
  output sector_t rdata
);
  sector_t mem [logic [SADDR_W-1:0]];

  function automatic sector_t init_sector(addr_t a);
    return {16{a[ADDR_W-1:OFF_W], OFF_W'(0)}};
  endfunction

  always @(posedge clk) begin
    if (en) begin
      if (we) mem[addr[ADDR_W-1:OFF_W]] = wdata;
      else    rdata <= mem.exists(addr[ADDR_W-1:OFF_W]) ? mem[addr[ADDR_W-1:OFF_W]]
                                                        : init_sector(addr);
    end
  end

endmodule
