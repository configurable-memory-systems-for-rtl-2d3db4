// tb_l2_directory: programs random shift and entries and checks the
// translated address (index bits replaced) and the responsible tile against
// a model, plus the reset contents (all to memory, identity bits).
module tb_l2_directory;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_shift_wr, cfg_entry_wr;
  logic [4:0] cfg_shift;
  logic [3:0] cfg_idx, cfg_repl;
  coord_t cfg_tile, out_tile;
  logic [31:0] addr, out_addr;
  logic [4:0] m_shift;
  logic [3:0] m_repl [16];
  coord_t     m_tile [16];

  l2_directory #(.ENTRIES(16)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [31:0] xlat(input logic [31:0] a);
    logic [3:0] i = 4'(a >> m_shift);
    logic [31:0] m = 32'hF << m_shift;
    return (a & ~m) | ((32'(m_repl[i]) << m_shift) & m);
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_shift_wr = 0; cfg_entry_wr = 0; cfg_shift = 0; cfg_idx = 0; cfg_repl = 0;
    cfg_tile = '0; addr = 0;
    m_shift = 5;
    for (int i = 0; i < 16; i++) begin m_repl[i] = 4'(i); m_tile[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 50; k++) begin
      @(negedge clk); addr = $urandom; #1;
      check(out_addr == addr && out_tile == '0, "reset: identity, memory controller");
    end
    for (int round = 0; round < 40; round++) begin
      @(negedge clk);
      cfg_shift_wr = 1; cfg_shift = 5'($urandom_range(5, 27));
      @(negedge clk); cfg_shift_wr = 0; m_shift = cfg_shift;
      for (int e = 0; e < 6; e++) begin
        cfg_entry_wr = 1; cfg_idx = 4'($urandom); cfg_repl = 4'($urandom);
        cfg_tile = '{x: 3'($urandom), y: 3'($urandom)};
        @(negedge clk);
        m_repl[cfg_idx] = cfg_repl; m_tile[cfg_idx] = cfg_tile;
      end
      cfg_entry_wr = 0;
      for (int k = 0; k < 30; k++) begin
        addr = $urandom; #1;
        check(out_addr == xlat(addr), "translated address");
        check(out_tile == m_tile[4'(addr >> m_shift)], "responsible tile");
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
