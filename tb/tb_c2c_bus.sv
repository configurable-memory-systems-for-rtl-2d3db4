// tb_c2c_bus: nine sources send random unicast and multicast packets to
// random sets of the eight cores while the cores' buffers are randomly full.
// Checks that a flit is taken only when every core in its mask receives it in
// that same cycle (all or nothing), that each receiver gets the flit of the
// source it is granted, that packets are not interleaved at a receiver and
// that every flit reaches every core of its mask.
module tb_c2c_bus;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, multicasts = 0, s;

  logic [8:0] src_valid, src_ready;
  c2c_flit_t  src_flit [9];
  logic [IN_CHANNELS-1:0] dst_ready [CORES];
  logic [CORES-1:0] dst_valid;
  c2c_flit_t dst_flit [CORES];

  c2c_bus #(.N_SRC(9)) dut (.*);

  int seq [9], pos [9], plen [9], lock [8];
  int expected = 0, delivered = 0;
  bit acc [9];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic new_packet(input int s);
    src_flit[s].mask    = 8'($urandom) & 8'($urandom);
    if (src_flit[s].mask == '0) src_flit[s].mask = 8'(1) << $urandom_range(0, 7);
    src_flit[s].channel = 3'($urandom_range(1, 5));
    plen[s] = $urandom_range(1, 3); pos[s] = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    src_valid = '0;
    for (int c = 0; c < 8; c++) begin dst_ready[c] = '0; lock[c] = -1; end
    for (int s = 0; s < 9; s++) begin src_flit[s] = '0; seq[s] = 0; new_packet(s); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int s = 0; s < 9; s++) begin
        src_valid[s] = (cyc < 3900) && ($urandom % 2);
        src_flit[s].data = {4'(s), 28'(seq[s])};
        src_flit[s].eop  = (pos[s] == plen[s] - 1);
        src_flit[s].remote = (s == 8);
      end
      for (int c = 0; c < 8; c++)
        dst_ready[c] = (cyc < 3900) ? (6'($urandom) | 6'($urandom)) : '1;
      #1;
      for (int s = 0; s < 9; s++)
        if (src_valid[s] && src_ready[s]) begin
          expected += $countones(src_flit[s].mask);
          if ($countones(src_flit[s].mask) > 1) multicasts++;
          for (int c = 0; c < 8; c++)
            if (src_flit[s].mask[c])
              check(dst_valid[c] && dst_flit[c] == src_flit[s], "all targets in the same cycle");
        end
      for (int c = 0; c < 8; c++)
        if (dst_valid[c]) begin
          s = int'(dst_flit[c].data[31:28]);
          delivered++;
          check(src_valid[s] && src_ready[s] && dst_flit[c].mask[c], $sformatf("granted source accepted c%0d s%0d sv%b sr%b mask%b", c, s, src_valid, src_ready, dst_flit[c].mask));
          check(dst_ready[c][dst_flit[c].channel], "target buffer had space");
          if (lock[c] != -1) check(lock[c] == s, "packet not interleaved");
          lock[c] = dst_flit[c].eop ? -1 : s;
        end
      for (int s = 0; s < 9; s++) acc[s] = src_valid[s] && src_ready[s];
      @(posedge clk); #1;
      for (int s = 0; s < 9; s++)
        if (acc[s]) begin
          seq[s]++;
          if (pos[s] == plen[s] - 1) new_packet(s); else pos[s]++;
        end
    end
    check(expected == delivered && delivered > 300, "every flit reached its targets");
    check(multicasts > 20, "multicast exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
