// intertile_comm_unit: delivers core-to-core flits from other tiles and
// returns their end-to-end credits.
//
// Connections between cores on different tiles use credit-based flow
// control: the sender's channel map table holds a credit count (by default
// the number of spaces in the target buffer) and spends one per flit. This
// unit takes flits arriving from the core-to-core router, records for each
// local (core, input channel) which remote sender is using it (tile, core and
// the sender's table entry), and injects the flit into the tile's local
// core-to-core network marked as remote. Whenever a core reads a remote-marked
// word from one of its input buffers (pop_remote), a credit is owed to that
// channel's sender; owed credits are counted per channel and sent back one per
// cycle over the credit network, scanning channels round-robin.
// One remote connection per input channel at a time is assumed (the paper
// mentions connection set-up and tear-down but not its mechanism); the
// credit message format and scanning order are this design's choices.
module intertile_comm_unit
  import loki_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // from the core-to-core router (local output port)
  input  logic        net_valid,
  output logic        net_ready,
  input  core_net_t   net_data,
  input  logic        net_eop,
  // into the local core-to-core network
  output logic        c2c_valid,
  input  logic        c2c_ready,
  output c2c_flit_t   c2c_flit,
  // words read by cores from remote-marked buffer entries
  input  logic [IN_CHANNELS-1:0] pop_remote [CORES],
  // credits to the credit router (local input port)
  output logic        cr_valid,
  input  logic        cr_ready,
  output coord_t      cr_dst,
  output credit_t     cr_data
);
  localparam int unsigned NCH = CORES * IN_CHANNELS;
  localparam int unsigned CW  = $clog2(NCH);

  coord_t               conn_tile  [NCH];
  logic [CORE_W-1:0]    conn_core  [NCH];
  logic [CMT_IDX_W-1:0] conn_entry [NCH];
  logic [CREDIT_W-1:0]  owed       [NCH];
  logic [CW-1:0]        scan_q, pick;
  logic                 found;
  logic [CW-1:0]        in_slot;

  always_comb begin
    in_slot   = CW'(net_data.dst_core * IN_CHANNELS + net_data.dst_channel);
    c2c_valid = net_valid;
    c2c_flit  = '{mask: CORES'(1) << net_data.dst_core, channel: net_data.dst_channel,
                  data: net_data.data, remote: 1'b1, eop: net_eop};
    net_ready = c2c_ready;

    found = 1'b0;
    pick  = scan_q;
    for (int k = 0; k < NCH; k++) begin
      if (!found && owed[(32'(scan_q) + k) % NCH] != '0) begin
        found = 1'b1;
        pick  = CW'((32'(scan_q) + k) % NCH);
      end
    end
    cr_valid = found;
    cr_dst   = conn_tile[pick];
    cr_data  = '{core: conn_core[pick], entry: conn_entry[pick]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scan_q <= '0;
      for (int i = 0; i < NCH; i++) begin
        owed[i]       <= '0;
        conn_tile[i]  <= '0;
        conn_core[i]  <= '0;
        conn_entry[i] <= '0;
      end
    end else begin
      if (net_valid && net_ready) begin
        conn_tile[in_slot]  <= net_data.src;
        conn_core[in_slot]  <= net_data.src_core;
        conn_entry[in_slot] <= net_data.src_entry;
      end
      for (int c = 0; c < CORES; c++)
        for (int ch = 0; ch < IN_CHANNELS; ch++)
          owed[c*IN_CHANNELS+ch] <= owed[c*IN_CHANNELS+ch]
              + (pop_remote[c][ch] ? 1'b1 : 1'b0)
              - ((cr_valid && cr_ready && pick == CW'(c*IN_CHANNELS+ch)) ? 1'b1 : 1'b0);
      if (cr_valid && cr_ready)
        scan_q <= (pick == CW'(NCH-1)) ? '0 : pick + 1'b1;
    end
  end
endmodule
