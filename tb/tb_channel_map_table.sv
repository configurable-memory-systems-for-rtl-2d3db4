// tb_channel_map_table: writes random entries into the channel map table and
// checks, against a model, the entry read back, the bank chosen for an address
// in a virtual memory group (base + line-index bits), the credit count of a
// remote connection (spent per send, returned per credit) and the stall rule:
// a remote channel with no credits cannot send, a local or memory one always can.
module tb_channel_map_table;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, stalls = 0;

  logic wr_en, send_remote, credit_in, rd_can_send;
  logic [3:0] wr_idx, rd_idx, credit_idx;
  cmt_entry_t wr_entry, rd_entry;
  logic [31:0] rd_addr;
  logic [BANK_W-1:0] rd_bank;
  logic [CREDIT_W-1:0] rd_credits;
  cmt_entry_t m_e [16];
  int         m_cr [16];

  channel_map_table #(.ENTRIES(16)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; send_remote = 0; credit_in = 0; wr_idx = 0; rd_idx = 0; credit_idx = 0;
    wr_entry = '0; rd_addr = 0;
    for (int i = 0; i < 16; i++) begin m_e[i] = '0; m_cr[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      wr_en = ($urandom % 8) == 0;
      wr_idx = 4'($urandom);
      wr_entry = cmt_entry_t'({$urandom, $urandom});
      wr_entry.kind = dest_kind_e'($urandom_range(1, 3));
      wr_entry.credits = ($urandom % 2) ? '0 : CREDIT_W'($urandom_range(1, 3));
      rd_idx = 4'($urandom);
      rd_addr = $urandom;
      credit_in = ($urandom % 4) == 0;
      credit_idx = 4'($urandom);
      // never return more credits than were spent
      if (m_e[credit_idx].kind != DEST_REMOTE || m_cr[credit_idx] >= 4) credit_in = 0;
      #1;
      check(rd_entry == m_e[rd_idx], "entry read back");
      check(rd_bank == BANK_W'(m_e[rd_idx].bank_base +
                      ((rd_addr >> 5) & ((1 << m_e[rd_idx].group_log2) - 1))), "bank of group");
      if (m_e[rd_idx].kind == DEST_REMOTE) check(int'(rd_credits) == m_cr[rd_idx], $sformatf("credits idx %0d dut %0d model %0d", rd_idx, rd_credits, m_cr[rd_idx]));
      check(rd_can_send == (m_e[rd_idx].kind != DEST_NONE &&
                            (m_e[rd_idx].kind != DEST_REMOTE || m_cr[rd_idx] != 0)), "can_send");
      if (m_e[rd_idx].kind == DEST_REMOTE && m_cr[rd_idx] == 0) stalls++;
      send_remote = rd_can_send && m_e[rd_idx].kind == DEST_REMOTE && ($urandom % 2);
      @(posedge clk); #1;
      for (int i = 0; i < 16; i++) begin
        if (wr_en && wr_idx == 4'(i)) begin
          m_e[i] = wr_entry;
          m_cr[i] = (wr_entry.credits == 0) ? IN_BUF_DEPTH : int'(wr_entry.credits);
        end else begin
          if (send_remote && rd_idx == 4'(i)) m_cr[i]--;
          if (credit_in && credit_idx == 4'(i)) m_cr[i]++;
        end
      end

    end
    check(stalls > 0, "a remote channel ran out of credits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
