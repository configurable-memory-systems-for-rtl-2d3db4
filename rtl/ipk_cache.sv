// ipk_cache: level-0 instruction packet (IPK) cache of a core.
//
// Cores fetch instructions in packets, roughly basic blocks, that always run
// to their end. The primary instruction channel feeds this small cache
// (64 instructions, as in the case study) with FIFO replacement: new
// instructions are written at a circular write pointer, overwriting the oldest.
// Each entry keeps the instruction, its end-of-packet bit and the start index
// of the packet it belongs to; a tag (the packet's address) is kept at the
// packet's first entry. Overwriting a packet's first entry (always the first
// of its entries to go, as replacement is in order) invalidates its tag, so
// a hit always finds the whole packet.
// Interface: a fetch request (address) is accepted when the cache is idle.
// On a hit the packet streams out of the cache from the next cycle; on a miss
// `miss` pulses with the address (the core then asks memory for it) and the
// packet arriving on the fill port is written into the cache and passed
// straight on to the output in the same cycle. Output is valid/ready.
// Packets longer than the cache are not supported (assertion).
module ipk_cache
  import loki_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fetch_valid,
  output logic              fetch_ready,
  input  logic [ADDR_W-1:0] fetch_addr,
  output logic              hit,        // pulses with an accepted fetch that hits
  output logic              miss,       // pulses with an accepted fetch that misses
  // instructions arriving from memory (primary channel)
  input  logic              fill_valid,
  output logic              fill_ready,
  input  logic [WORD_W-1:0] fill_data,
  input  logic              fill_eop,
  // instruction stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WORD_W-1:0] out_data,
  output logic              out_eop
);
  localparam int unsigned IW = $clog2(ENTRIES);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_FILL} state_e;
  state_e state;

  logic [WORD_W-1:0] instr_q [ENTRIES];
  logic              eop_q   [ENTRIES];
  logic [IW-1:0]     owner_q [ENTRIES];
  logic [ADDR_W-1:0] tag_q   [ENTRIES];
  logic [ENTRIES-1:0] tag_valid_q;
  logic [ENTRIES-1:0] written_q;

  logic [IW-1:0] wr_ptr, rd_ptr, fill_start;
  logic [IW:0]   fill_len;
  logic          lookup_hit;
  logic [IW-1:0] lookup_idx;

  always_comb begin
    lookup_hit = 1'b0;
    lookup_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (tag_valid_q[i] && tag_q[i] == fetch_addr && !lookup_hit) begin
        lookup_hit = 1'b1;
        lookup_idx = IW'(i);
      end
  end

  assign fetch_ready = (state == S_IDLE);
  assign hit  = fetch_valid && fetch_ready && lookup_hit;
  assign miss = fetch_valid && fetch_ready && !lookup_hit;

  always_comb begin
    out_valid  = 1'b0;
    out_data   = '0;
    out_eop    = 1'b0;
    fill_ready = 1'b0;
    case (state)
      S_READ: begin
        out_valid = 1'b1;
        out_data  = instr_q[rd_ptr];
        out_eop   = eop_q[rd_ptr];
      end
      S_FILL: begin
        out_valid  = fill_valid;
        out_data   = fill_data;
        out_eop    = fill_eop;
        fill_ready = out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      wr_ptr      <= '0;
      rd_ptr      <= '0;
      fill_start  <= '0;
      fill_len    <= '0;
      tag_valid_q <= '0;
      written_q   <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (hit) begin
            rd_ptr <= lookup_idx;
            state  <= S_READ;
          end else if (miss) begin
            fill_start <= wr_ptr;
            fill_len   <= '0;
            tag_q[wr_ptr] <= fetch_addr;
            state      <= S_FILL;
          end
        end
        S_READ: begin
          if (out_ready) begin
            rd_ptr <= rd_ptr + 1'b1;
            if (eop_q[rd_ptr]) state <= S_IDLE;
          end
        end
        S_FILL: begin
          if (fill_valid && fill_ready) begin
            // Replacement is strictly in order, so the first entry of a packet
            // is always the first of its entries to be overwritten: clearing
            // the tag then (it lives at that entry) is enough, and later
            // entries of the same old packet, whose owner index may by now
            // be the start of a newer packet, are ignored.
            if (written_q[wr_ptr] && owner_q[wr_ptr] == wr_ptr) tag_valid_q[wr_ptr] <= 1'b0;
            written_q[wr_ptr] <= 1'b1;
            instr_q[wr_ptr] <= fill_data;
            eop_q[wr_ptr]   <= fill_eop;
            owner_q[wr_ptr] <= fill_start;
            wr_ptr          <= wr_ptr + 1'b1;
            fill_len        <= fill_len + 1'b1;
            if (fill_eop) begin
              tag_valid_q[fill_start] <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_FILL && fill_valid) |-> fill_len < (IW+1)'(ENTRIES));
endmodule
