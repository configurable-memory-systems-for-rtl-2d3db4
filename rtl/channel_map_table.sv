// channel_map_table: per-core table mapping logical channels to destinations.
//
// An instruction names a logical output channel; the table, read in the decode
// stage alongside the register file, says where the result goes (Fig. 3):
//   remote core : tile, core, input channel and an end-to-end credit count;
//   local cores : a core bitmask (multicast) and an input channel;
//   memory      : a virtual group of banks, the return address (core and
//                 channel), bypass-L1/L2 and scratchpad-mode flags.
// A group is 2^group_log2 banks starting at bank_base; consecutive cache
// lines go to consecutive banks of the group, so the bank for an address is
// bank_base + (line number mod group size). Group sizes are restricted to
// powers of two as in the paper; the aligned-base rule (bank_base is added
// modulo 8) is this design's choice.
// Writing an entry takes one cycle (wr_en). Reading is combinational.
// Credits: writing a remote entry loads its counter with the entry's credits
// field, or with IN_BUF_DEPTH (the spaces of the target buffer, the paper's
// default) when that field is 0. send_remote takes one credit, credit_in
// gives one back; rd_can_send is low for a remote entry with no credits left.
// Table size (16 entries) and field widths are this design's choices.
module channel_map_table
  import loki_pkg::*;
#(
  parameter int unsigned ENTRIES = CMT_ENTRIES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // write port (one instruction, one cycle)
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  cmt_entry_t                 wr_entry,
  // read port (decode stage)
  input  logic [$clog2(ENTRIES)-1:0] rd_idx,
  input  logic [ADDR_W-1:0]          rd_addr,
  output cmt_entry_t                 rd_entry,
  output logic [BANK_W-1:0]          rd_bank,
  output logic                       rd_can_send,
  output logic [CREDIT_W-1:0]        rd_credits,
  // credit accounting
  input  logic                       send_remote,     // a flit left on rd_idx
  input  logic                       credit_in,
  input  logic [$clog2(ENTRIES)-1:0] credit_idx
);
  localparam int unsigned IW = $clog2(ENTRIES);

  cmt_entry_t          table_q  [ENTRIES];
  logic [CREDIT_W-1:0] credit_q [ENTRIES];

  logic [BANK_W-1:0] line_sel, group_mask;

  always_comb begin
    rd_entry    = table_q[rd_idx];
    rd_credits  = credit_q[rd_idx];
    group_mask  = BANK_W'((1 << rd_entry.group_log2) - 1);
    line_sel    = BANK_W'(rd_addr >> LINE_OFF_W) & group_mask;
    rd_bank     = rd_entry.bank_base + line_sel;
    rd_can_send = (rd_entry.kind != DEST_NONE) &&
                  ((rd_entry.kind != DEST_REMOTE) || (credit_q[rd_idx] != '0));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        table_q[i]  <= '0;
        credit_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        if (wr_en && wr_idx == IW'(i)) begin
          table_q[i]  <= wr_entry;
          credit_q[i] <= (wr_entry.credits == '0) ? CREDIT_W'(IN_BUF_DEPTH) : wr_entry.credits;
        end else begin
          credit_q[i] <= credit_q[i]
                         - ((send_remote && rd_idx == IW'(i) && table_q[i].kind == DEST_REMOTE) ? 1'b1 : 1'b0)
                         + ((credit_in && credit_idx == IW'(i)) ? 1'b1 : 1'b0);
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (send_remote && rd_entry.kind == DEST_REMOTE) |-> rd_credits != '0);
endmodule
