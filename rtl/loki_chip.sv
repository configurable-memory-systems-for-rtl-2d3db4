// loki_chip: a grid of Loki tiles joined by five mesh networks.
//
// The chip is TILES_X x TILES_Y tiles (4 x 4 = 16 tiles, 128 cores and
// 128 banks by default). Tile (c, r) sits at mesh coordinate (c+1, r): the
// mesh column x = 0 is kept for the off-chip memory controller, which is at
// (0, 0) and is reached through the west ports of the tile at (1, 0). Each of
// the five networks (core-to-core, credits, memory responses, memory request
// 1 for L1->L2 traffic, memory request 2 for traffic to main memory) is a 2D
// mesh: a tile's north output drives the south input of the tile above it,
// its east output the west input of the tile to its right, and so on. Ports at
// the grid edge are tied off (no input, never ready), apart from the two
// memory-controller ports. Routing is dimension ordered (Y first, then X), so
// every packet for (0, 0) first travels to row 0 and then west along it, and
// leaves the chip at the west edge of tile (1, 0).
// Interface: per tile, its L2 mode bit and directory configuration; per tile
// and core, the core-side ports of loki_tile (sends, CMT writes, instruction
// fetch and stream, data input buffers), indexed [tile][core] with
// tile = r*TILES_X + c; and the memory controller link: request flits out
// (net_mem_req_t, wormhole, end-of-packet on the last) and response flits in
// (net_mem_resp_t, each addressed to a tile coordinate). Every mesh hop adds
// one cycle (registered router outputs).
// The tile count, the 8 cores and 8 banks per tile and the use of separate
// networks follow the paper; the coordinate plan, the memory controller's
// position and the edge tie-offs are this design's choices.
// The Verilator lint reports circular logic (UNOPTFLAT) on the packed per-tile
// link vectors: each tile's router outputs feed neighbouring tiles' inputs
// within the same vectors. Each router's ready depends only on registered
// state and its own buffer, so the loop exists only between different bits
// of a vector, not through any single signal, and the warning stands.
module loki_chip
  import loki_pkg::*;
#(
  parameter int unsigned TILES_X = 4,
  parameter int unsigned TILES_Y = 4,
  localparam int unsigned TILES  = TILES_X * TILES_Y
) (
  input  logic clk,
  input  logic rst_n,
  // per-tile configuration
  input  logic [TILES-1:0] l2_mode,
  input  logic [TILES-1:0] dir_shift_wr,
  input  logic [4:0]       dir_shift   [TILES],
  input  logic [TILES-1:0] dir_entry_wr,
  input  logic [3:0]       dir_idx     [TILES],
  input  logic [3:0]       dir_repl    [TILES],
  input  coord_t           dir_tile    [TILES],
  // per-core ports
  input  logic [CORES-1:0]     core_out_valid [TILES],
  output logic [CORES-1:0]     core_out_ready [TILES],
  input  core_out_t            core_out       [TILES][CORES],
  input  logic [CORES-1:0]     cmt_wr_en      [TILES],
  input  logic [CMT_IDX_W-1:0] cmt_wr_idx     [TILES][CORES],
  input  cmt_entry_t           cmt_wr_entry   [TILES][CORES],
  input  logic [CORES-1:0]     fetch_valid    [TILES],
  output logic [CORES-1:0]     fetch_ready    [TILES],
  input  logic [ADDR_W-1:0]    fetch_addr     [TILES][CORES],
  output logic [CORES-1:0]     fetch_hit      [TILES],
  output logic [CORES-1:0]     fetch_miss     [TILES],
  output logic [CORES-1:0]     instr_valid    [TILES],
  input  logic [CORES-1:0]     instr_ready    [TILES],
  output logic [WORD_W-1:0]    instr_data     [TILES][CORES],
  output logic [CORES-1:0]     instr_eop      [TILES],
  output logic [CORES-1:0]     instr_from_sec [TILES],
  output logic [DATA_CHANNELS-1:0] din_valid  [TILES][CORES],
  input  logic [DATA_CHANNELS-1:0] din_ready  [TILES][CORES],
  output logic [WORD_W-1:0]        din_data   [TILES][CORES][DATA_CHANNELS],
  // memory controller link
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output net_mem_req_t  mem_req,
  output logic          mem_req_eop,
  input  logic          mem_resp_valid,
  output logic          mem_resp_ready,
  input  coord_t        mem_resp_dst,
  input  net_mem_resp_t mem_resp,
  input  logic          mem_resp_eop
);
  // mesh directions as seen by a tile: 0 north, 1 east, 2 south, 3 west
  localparam int unsigned N = 0, E = 1, S = 2, W = 3;

  // per tile, per direction, for every network: what the tile sends out
  logic [3:0]    cn_ov [TILES], cn_or [TILES], cn_oe [TILES];
  coord_t        cn_od [TILES][4];
  core_net_t     cn_o  [TILES][4];
  logic [3:0]    cr_ov [TILES], cr_or [TILES], cr_oe [TILES];
  coord_t        cr_od [TILES][4];
  credit_t       cr_o  [TILES][4];
  logic [3:0]    rs_ov [TILES], rs_or [TILES], rs_oe [TILES];
  coord_t        rs_od [TILES][4];
  net_mem_resp_t rs_o  [TILES][4];
  logic [3:0]    q1_ov [TILES], q1_or [TILES], q1_oe [TILES];
  coord_t        q1_od [TILES][4];
  net_mem_req_t  q1_o  [TILES][4];
  logic [3:0]    q2_ov [TILES], q2_or [TILES], q2_oe [TILES];
  coord_t        q2_od [TILES][4];
  net_mem_req_t  q2_o  [TILES][4];
  // and what it receives
  logic [3:0]    cn_iv [TILES], cn_ir [TILES], cn_ie [TILES];
  coord_t        cn_id [TILES][4];
  core_net_t     cn_i  [TILES][4];
  logic [3:0]    cr_iv [TILES], cr_ir [TILES], cr_ie [TILES];
  coord_t        cr_id [TILES][4];
  credit_t       cr_i  [TILES][4];
  logic [3:0]    rs_iv [TILES], rs_ir [TILES], rs_ie [TILES];
  coord_t        rs_id [TILES][4];
  net_mem_resp_t rs_i  [TILES][4];
  logic [3:0]    q1_iv [TILES], q1_ir [TILES], q1_ie [TILES];
  coord_t        q1_id [TILES][4];
  net_mem_req_t  q1_i  [TILES][4];
  logic [3:0]    q2_iv [TILES], q2_ir [TILES], q2_ie [TILES];
  coord_t        q2_id [TILES][4];
  net_mem_req_t  q2_i  [TILES][4];

  for (genvar r = 0; r < TILES_Y; r++) begin : g_row
    for (genvar c = 0; c < TILES_X; c++) begin : g_col
      localparam int unsigned T = r * TILES_X + c;
      coord_t my_coord;
      assign my_coord = '{x: COORD_W'(c + 1), y: COORD_W'(r)};

      loki_tile u_tile (
        .clk, .rst_n, .my_coord, .l2_mode(l2_mode[T]),
        .dir_shift_wr(dir_shift_wr[T]), .dir_shift(dir_shift[T]),
        .dir_entry_wr(dir_entry_wr[T]), .dir_idx(dir_idx[T]), .dir_repl(dir_repl[T]),
        .dir_tile(dir_tile[T]),
        .core_out_valid(core_out_valid[T]), .core_out_ready(core_out_ready[T]),
        .core_out(core_out[T]),
        .cmt_wr_en(cmt_wr_en[T]), .cmt_wr_idx(cmt_wr_idx[T]), .cmt_wr_entry(cmt_wr_entry[T]),
        .fetch_valid(fetch_valid[T]), .fetch_ready(fetch_ready[T]), .fetch_addr(fetch_addr[T]),
        .fetch_hit(fetch_hit[T]), .fetch_miss(fetch_miss[T]),
        .instr_valid(instr_valid[T]), .instr_ready(instr_ready[T]), .instr_data(instr_data[T]),
        .instr_eop(instr_eop[T]), .instr_from_sec(instr_from_sec[T]),
        .din_valid(din_valid[T]), .din_ready(din_ready[T]), .din_data(din_data[T]),
        .cn_in_valid(cn_iv[T]), .cn_in_ready(cn_ir[T]), .cn_in_dst(cn_id[T]),
        .cn_in_data(cn_i[T]), .cn_in_eop(cn_ie[T]),
        .cn_out_valid(cn_ov[T]), .cn_out_ready(cn_or[T]), .cn_out_dst(cn_od[T]),
        .cn_out_data(cn_o[T]), .cn_out_eop(cn_oe[T]),
        .cr_in_valid(cr_iv[T]), .cr_in_ready(cr_ir[T]), .cr_in_dst(cr_id[T]),
        .cr_in_data(cr_i[T]), .cr_in_eop(cr_ie[T]),
        .cr_out_valid(cr_ov[T]), .cr_out_ready(cr_or[T]), .cr_out_dst(cr_od[T]),
        .cr_out_data(cr_o[T]), .cr_out_eop(cr_oe[T]),
        .rs_in_valid(rs_iv[T]), .rs_in_ready(rs_ir[T]), .rs_in_dst(rs_id[T]),
        .rs_in_data(rs_i[T]), .rs_in_eop(rs_ie[T]),
        .rs_out_valid(rs_ov[T]), .rs_out_ready(rs_or[T]), .rs_out_dst(rs_od[T]),
        .rs_out_data(rs_o[T]), .rs_out_eop(rs_oe[T]),
        .q1_in_valid(q1_iv[T]), .q1_in_ready(q1_ir[T]), .q1_in_dst(q1_id[T]),
        .q1_in_data(q1_i[T]), .q1_in_eop(q1_ie[T]),
        .q1_out_valid(q1_ov[T]), .q1_out_ready(q1_or[T]), .q1_out_dst(q1_od[T]),
        .q1_out_data(q1_o[T]), .q1_out_eop(q1_oe[T]),
        .q2_in_valid(q2_iv[T]), .q2_in_ready(q2_ir[T]), .q2_in_dst(q2_id[T]),
        .q2_in_data(q2_i[T]), .q2_in_eop(q2_ie[T]),
        .q2_out_valid(q2_ov[T]), .q2_out_ready(q2_or[T]), .q2_out_dst(q2_od[T]),
        .q2_out_data(q2_o[T]), .q2_out_eop(q2_oe[T])
      );

      // Input side of direction d comes from the neighbour's opposite output.
      for (genvar d = 0; d < 4; d++) begin : g_dir
        localparam int NR = (d == N) ? r + 1 : (d == S) ? r - 1 : r;
        localparam int NC = (d == E) ? c + 1 : (d == W) ? c - 1 : c;
        localparam int unsigned OPP = (d + 2) % 4;
        localparam bit INSIDE = NR >= 0 && NR < int'(TILES_Y) && NC >= 0 && NC < int'(TILES_X);
        localparam bit MEM_PORT = (d == W) && (c == 0) && (r == 0);
        localparam int unsigned NT = INSIDE ? NR * TILES_X + NC : 0;
        if (INSIDE) begin : g_link
          assign cn_iv[T][d] = cn_ov[NT][OPP]; assign cn_id[T][d] = cn_od[NT][OPP];
          assign cn_i[T][d]  = cn_o[NT][OPP];  assign cn_ie[T][d] = cn_oe[NT][OPP];
          assign cn_or[T][d] = cn_ir[NT][OPP];
          assign cr_iv[T][d] = cr_ov[NT][OPP]; assign cr_id[T][d] = cr_od[NT][OPP];
          assign cr_i[T][d]  = cr_o[NT][OPP];  assign cr_ie[T][d] = cr_oe[NT][OPP];
          assign cr_or[T][d] = cr_ir[NT][OPP];
          assign rs_iv[T][d] = rs_ov[NT][OPP]; assign rs_id[T][d] = rs_od[NT][OPP];
          assign rs_i[T][d]  = rs_o[NT][OPP];  assign rs_ie[T][d] = rs_oe[NT][OPP];
          assign rs_or[T][d] = rs_ir[NT][OPP];
          assign q1_iv[T][d] = q1_ov[NT][OPP]; assign q1_id[T][d] = q1_od[NT][OPP];
          assign q1_i[T][d]  = q1_o[NT][OPP];  assign q1_ie[T][d] = q1_oe[NT][OPP];
          assign q1_or[T][d] = q1_ir[NT][OPP];
          assign q2_iv[T][d] = q2_ov[NT][OPP]; assign q2_id[T][d] = q2_od[NT][OPP];
          assign q2_i[T][d]  = q2_o[NT][OPP];  assign q2_ie[T][d] = q2_oe[NT][OPP];
          assign q2_or[T][d] = q2_ir[NT][OPP];
        end else if (MEM_PORT) begin : g_mem
          // memory controller: takes request-2 flits, injects responses
          assign mem_req_valid  = q2_ov[T][d];
          assign mem_req        = q2_o[T][d];
          assign mem_req_eop    = q2_oe[T][d];
          assign q2_or[T][d]    = mem_req_ready;
          assign rs_iv[T][d]    = mem_resp_valid;
          assign rs_id[T][d]    = mem_resp_dst;
          assign rs_i[T][d]     = mem_resp;
          assign rs_ie[T][d]    = mem_resp_eop;
          assign mem_resp_ready = rs_ir[T][d];
          // the memory controller sends nothing else and takes nothing else
          assign cn_iv[T][d] = 1'b0; assign cn_id[T][d] = '0; assign cn_i[T][d] = '0;
          assign cn_ie[T][d] = 1'b0; assign cn_or[T][d] = 1'b0;
          assign cr_iv[T][d] = 1'b0; assign cr_id[T][d] = '0; assign cr_i[T][d] = '0;
          assign cr_ie[T][d] = 1'b0; assign cr_or[T][d] = 1'b0;
          assign rs_or[T][d] = 1'b0;
          assign q1_iv[T][d] = 1'b0; assign q1_id[T][d] = '0; assign q1_i[T][d] = '0;
          assign q1_ie[T][d] = 1'b0; assign q1_or[T][d] = 1'b0;
          assign q2_iv[T][d] = 1'b0; assign q2_id[T][d] = '0; assign q2_i[T][d] = '0;
          assign q2_ie[T][d] = 1'b0;
        end else begin : g_edge
          assign cn_iv[T][d] = 1'b0; assign cn_id[T][d] = '0; assign cn_i[T][d] = '0;
          assign cn_ie[T][d] = 1'b0; assign cn_or[T][d] = 1'b0;
          assign cr_iv[T][d] = 1'b0; assign cr_id[T][d] = '0; assign cr_i[T][d] = '0;
          assign cr_ie[T][d] = 1'b0; assign cr_or[T][d] = 1'b0;
          assign rs_iv[T][d] = 1'b0; assign rs_id[T][d] = '0; assign rs_i[T][d] = '0;
          assign rs_ie[T][d] = 1'b0; assign rs_or[T][d] = 1'b0;
          assign q1_iv[T][d] = 1'b0; assign q1_id[T][d] = '0; assign q1_i[T][d] = '0;
          assign q1_ie[T][d] = 1'b0; assign q1_or[T][d] = 1'b0;
          assign q2_iv[T][d] = 1'b0; assign q2_id[T][d] = '0; assign q2_i[T][d] = '0;
          assign q2_ie[T][d] = 1'b0; assign q2_or[T][d] = 1'b0;
        end
      end
    end
  end

  // mesh coordinates must fit the coordinate fields (x = TILES_X is the largest)
  if (TILES_X + 1 > (1 << COORD_W) || TILES_Y > (1 << COORD_W)) begin : g_size_check
    $error("loki_chip: grid does not fit COORD_W-bit coordinates");
  end
endmodule
