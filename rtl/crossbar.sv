// crossbar: intra-tile wormhole crossbar (request, data and instruction nets).
//
// Each of N_IN inputs presents a flit with a destination output and an
// end-of-packet bit. Each of N_OUT outputs has a round-robin arbiter; once it
// grants an input, it stays locked to that input until the flit marked
// end-of-packet has passed (wormhole routing, so a packet such as a locked
// load-compute-store sequence is never interleaved with others). Every output
// has one register stage, so a flit crosses the tile in one clock cycle, as in
// the paper. A flit is only admitted if its output register can take it, so
// nothing is ever dropped (valid/ready on both sides).
// With REGISTERED = 0 the output register is left out and the destination's
// own buffer (a core input buffer) takes the flit in the same cycle; the tile
// uses this on the response paths so that a load takes the paper's 3 cycles.
// The arbitration policy is this design's choice; the paper gives only the
// single-cycle latency and wormhole routing.
module crossbar
  import loki_pkg::*;
#(
  parameter int unsigned N_IN  = 8,
  parameter int unsigned N_OUT = 8,
  parameter type         T     = logic [31:0],
  parameter bit          REGISTERED = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_IN-1:0]          in_valid,
  output logic [N_IN-1:0]          in_ready,
  input  T                         in_data [N_IN],
  input  logic [$clog2(N_OUT > 1 ? N_OUT : 2)-1:0] in_dest [N_IN],
  input  logic [N_IN-1:0]          in_eop,
  output logic [N_OUT-1:0]         out_valid,
  input  logic [N_OUT-1:0]         out_ready,
  output T                         out_data [N_OUT],
  output logic [N_OUT-1:0]         out_eop,
  output logic [$clog2(N_IN > 1 ? N_IN : 2)-1:0] out_src [N_OUT]
);
  localparam int unsigned SW = $clog2(N_IN > 1 ? N_IN : 2);
  localparam int unsigned DW = $clog2(N_OUT > 1 ? N_OUT : 2);

  logic [SW-1:0]   ptr_q  [N_OUT];
  logic [SW-1:0]   lock_src_q [N_OUT];
  logic [N_OUT-1:0] locked_q;
  logic [SW-1:0]   grant  [N_OUT];
  logic [N_OUT-1:0] gvalid, accept;
  logic [31:0]     req [N_OUT];
  logic [N_OUT-1:0] out_valid_q, out_eop_q;
  logic [SW-1:0]   out_src_q [N_OUT];
  T                out_data_q [N_OUT];

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      if (REGISTERED) begin
        out_valid[o] = out_valid_q[o];
        out_eop[o]   = out_eop_q[o];
        out_src[o]   = out_src_q[o];
        out_data[o]  = out_data_q[o];
      end else begin
        out_valid[o] = gvalid[o];
        out_eop[o]   = in_eop[grant[o]];
        out_src[o]   = grant[o];
        out_data[o]  = in_data[grant[o]];
      end
    end
  end

  always_comb begin
    in_ready = '0;
    for (int o = 0; o < N_OUT; o++) begin
      req[o] = '0;
      for (int i = 0; i < N_IN; i++)
        req[o][i] = in_valid[i] && (in_dest[i] == DW'(o));
      if (locked_q[o]) grant[o] = lock_src_q[o];
      else             grant[o] = SW'(rr_pick(req[o], N_IN, 32'(ptr_q[o])));
      gvalid[o] = req[o][grant[o]];
      accept[o] = gvalid[o] && (REGISTERED ? (!out_valid_q[o] || out_ready[o]) : out_ready[o]);
      if (accept[o]) in_ready[grant[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid_q <= '0;
      out_eop_q   <= '0;
      locked_q    <= '0;
      for (int o = 0; o < N_OUT; o++) begin
        ptr_q[o]      <= '0;
        lock_src_q[o] <= '0;
        out_src_q[o]  <= '0;
      end
    end else begin
      for (int o = 0; o < N_OUT; o++) begin
        if (accept[o]) begin
          out_valid_q[o] <= 1'b1;
          out_eop_q[o]   <= in_eop[grant[o]];
          out_src_q[o]   <= grant[o];
          locked_q[o]   <= !in_eop[grant[o]];
          lock_src_q[o] <= grant[o];
          if (in_eop[grant[o]])
            ptr_q[o] <= (grant[o] == SW'(N_IN-1)) ? '0 : grant[o] + 1'b1;
        end else if (out_ready[o]) begin
          out_valid_q[o] <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < N_OUT; o++)
      if (accept[o]) out_data_q[o] <= in_data[grant[o]];
  end
endmodule
