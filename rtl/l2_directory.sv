// l2_directory: per-tile directory consulted after a cache miss (Fig. 4).
//
// A few address bits, at a position software sets (shift), index a small
// table. Each entry names the tile responsible for caching those addresses
// (an L2 tile, or the memory controller at coordinate (0,0)) and holds
// replacement bits that are substituted for the index bits in the forwarded
// address, a simple form of virtual memory. Using low bits spreads lines over
// L2 tiles; using high bits keeps contiguous data together.
// Lookup is combinational; writes (shift or an entry) take one cycle.
// After reset every entry points at the memory controller with identity
// replacement bits, so an unconfigured tile reaches main memory.
// The table size (16 entries, 4 index bits) and reset contents are this
// design's choices; the paper says only "a few bits".
module l2_directory
  import loki_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_shift_wr,
  input  logic [4:0]                 cfg_shift,
  input  logic                       cfg_entry_wr,
  input  logic [$clog2(ENTRIES)-1:0] cfg_idx,
  input  logic [$clog2(ENTRIES)-1:0] cfg_repl,
  input  coord_t                     cfg_tile,
  input  logic [ADDR_W-1:0]          addr,
  output logic [ADDR_W-1:0]          out_addr,
  output coord_t                     out_tile
);
  localparam int unsigned IW = $clog2(ENTRIES);

  logic [4:0]    shift_q;
  logic [IW-1:0] repl_q [ENTRIES];
  coord_t        tile_q [ENTRIES];
  logic [IW-1:0] idx;
  logic [ADDR_W-1:0] field_mask;

  always_comb begin
    idx        = IW'(addr >> shift_q);
    field_mask = ADDR_W'(ENTRIES - 1) << shift_q;
    out_addr   = (addr & ~field_mask) | ((ADDR_W'(repl_q[idx]) << shift_q) & field_mask);
    out_tile   = tile_q[idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shift_q <= 5'(LINE_OFF_W);
      for (int i = 0; i < ENTRIES; i++) begin
        repl_q[i] <= IW'(i);
        tile_q[i] <= '0;
      end
    end else begin
      if (cfg_shift_wr) shift_q <= cfg_shift;
      if (cfg_entry_wr) begin
        repl_q[cfg_idx] <= cfg_repl;
        tile_q[cfg_idx] <= cfg_tile;
      end
    end
  end
endmodule
