// c2c_bus: local core-to-core network of a tile, with multicast.
//
// Every source (the 8 cores, plus the inter-tile unit delivering flits from
// other tiles) drives its own bus; a flit carries a bitmask of the local cores
// it is for and the input channel it goes to. As in the paper, the network is
// non-blocking: a flit is only admitted when every core in its mask can
// buffer it, and then it reaches all of them in the same cycle.
// Each receiving core grants one source per cycle. All receivers share one
// rotating priority order, so the highest-priority requesting source always
// wins at all of its targets and a multicast can never be half-granted
// forever. A receiver that has accepted the start of a multi-flit packet only
// grants that source until end-of-packet (wormhole).
// Interface: valid/ready per source; per receiver a write strobe and flit that
// feed the core's input buffers directly (the buffer makes the flit readable
// one cycle later); dst_ready gives each receiver's per-channel space.
// Arbitration order and the lock are this design's choices.
module c2c_bus
  import loki_pkg::*;
#(
  parameter int unsigned N_SRC = CORES + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N_SRC-1:0]      src_valid,
  output logic [N_SRC-1:0]      src_ready,
  input  c2c_flit_t             src_flit [N_SRC],
  input  logic [IN_CHANNELS-1:0] dst_ready [CORES],
  output logic [CORES-1:0]      dst_valid,
  output c2c_flit_t             dst_flit [CORES]
);
  localparam int unsigned SW = $clog2(N_SRC);

  logic [SW-1:0]    ptr_q;
  logic [CORES-1:0] locked_q;
  logic [SW-1:0]    lock_src_q [CORES];
  logic [SW-1:0]    grant [CORES];
  logic [CORES-1:0] gvalid;
  logic [31:0]      req [CORES];
  logic             ok;

  always_comb begin
    for (int r = 0; r < CORES; r++) begin
      req[r] = '0;
      for (int s = 0; s < N_SRC; s++)
        req[r][s] = src_valid[s] && src_flit[s].mask[r];
      if (locked_q[r]) grant[r] = lock_src_q[r];
      else             grant[r] = SW'(rr_pick(req[r], N_SRC, 32'(ptr_q)));
      gvalid[r] = req[r][grant[r]];
    end
    for (int s = 0; s < N_SRC; s++) begin
      ok = src_valid[s] && (src_flit[s].mask != '0);
      for (int r = 0; r < CORES; r++)
        if (src_flit[s].mask[r])
          ok = ok && gvalid[r] && (grant[r] == SW'(s)) &&
               dst_ready[r][src_flit[s].channel];
      src_ready[s] = ok;
    end
    for (int r = 0; r < CORES; r++) begin
      dst_valid[r] = gvalid[r] && src_ready[grant[r]];
      dst_flit[r]  = src_flit[grant[r]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q    <= '0;
      locked_q <= '0;
      for (int r = 0; r < CORES; r++) lock_src_q[r] <= '0;
    end else begin
      ptr_q <= (ptr_q == SW'(N_SRC-1)) ? '0 : ptr_q + 1'b1;
      for (int r = 0; r < CORES; r++)
        if (dst_valid[r]) begin
          locked_q[r]   <= !dst_flit[r].eop;
          lock_src_q[r] <= grant[r];
        end
    end
  end

  // A multicast flit reaches all of its targets at once or none of them.
  for (genvar s = 0; s < N_SRC; s++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     (src_valid[s] && src_ready[s]) |-> src_flit[s].mask != '0);
  end
endmodule
