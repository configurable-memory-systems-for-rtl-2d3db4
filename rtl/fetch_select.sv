// fetch_select: chooses which instruction channel feeds the decode stage.
//
// A core has two instruction channels: the primary one, served by the IPK
// cache, and an uncached secondary one used by other cores to send
// instructions. Following the paper, the choice is made only at packet
// boundaries: once the first instruction of a packet has gone to decode, the
// same channel is used until the instruction carrying end-of-packet has gone.
// At a boundary the secondary channel wins if it holds an instruction,
// otherwise whichever channel has one is used.
// Interface: two valid/ready instruction streams in, one out; the selection is
// combinational, the packet lock is a register. `from_secondary` tells decode
// which channel the current instruction came from.
module fetch_select
  import loki_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pri_valid,
  output logic              pri_ready,
  input  logic [WORD_W-1:0] pri_data,
  input  logic              pri_eop,
  input  logic              sec_valid,
  output logic              sec_ready,
  input  logic [WORD_W-1:0] sec_data,
  input  logic              sec_eop,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WORD_W-1:0] out_data,
  output logic              out_eop,
  output logic              from_secondary
);
  logic in_packet_q, src_sec_q;   // lock held inside a packet
  logic use_sec;

  always_comb begin
    if (in_packet_q) use_sec = src_sec_q;
    else             use_sec = sec_valid;   // secondary has priority at a boundary
    out_valid      = use_sec ? sec_valid : pri_valid;
    out_data       = use_sec ? sec_data  : pri_data;
    out_eop        = use_sec ? sec_eop   : pri_eop;
    pri_ready      = !use_sec && out_ready;
    sec_ready      =  use_sec && out_ready;
    from_secondary = use_sec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_packet_q <= 1'b0;
      src_sec_q   <= 1'b0;
    end else if (out_valid && out_ready) begin
      in_packet_q <= !out_eop;
      src_sec_q   <= use_sec;
    end
  end
endmodule
