// tb_fetch_select: two random instruction packet streams (primary and
// secondary) are merged. Checks that packets are never interleaved, that each
// stream keeps its order, that the source flag is right, and that a waiting
// secondary packet wins at every packet boundary.
module tb_fetch_select;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, sec_wins = 0;

  logic pri_valid, pri_ready, pri_eop, sec_valid, sec_ready, sec_eop;
  logic out_valid, out_ready, out_eop, from_secondary;
  logic [WORD_W-1:0] pri_data, sec_data, out_data;
  int pri_n = 0, sec_n = 0, pri_exp = 0, sec_exp = 0;
  bit in_pkt = 0, cur_sec = 0, pa, sa;

  fetch_select dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // word k of a stream: bit 31 = stream, eop every 3rd (pri) / 2nd (sec) word
  always_comb begin
    pri_data = {1'b0, 31'(pri_n)}; pri_eop = (pri_n % 3) == 2;
    sec_data = {1'b1, 31'(sec_n)}; sec_eop = (sec_n % 2) == 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pri_valid = 0; sec_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      pri_valid = ($urandom % 4) != 0;
      sec_valid = ($urandom % 5) == 0;
      out_ready = ($urandom % 4) != 0;
      #1;
      if (!in_pkt && sec_valid) begin
        check(from_secondary && out_valid, $sformatf("secondary first at a boundary fs=%0d ov=%0d inq=%0d", from_secondary, out_valid, dut.in_packet_q));
        sec_wins += (pri_valid ? 1 : 0);
      end
      if (in_pkt) check(from_secondary == cur_sec, "no interleaving inside a packet");
      if (out_valid && out_ready) begin
        check(out_data[31] == from_secondary, "source flag");
        if (from_secondary) begin
          check(out_data[30:0] == 31'(sec_exp), "secondary order"); sec_exp++;
        end else begin
          check(out_data[30:0] == 31'(pri_exp), "primary order"); pri_exp++;
        end
        in_pkt  = !out_eop;
        cur_sec = from_secondary;
      end
      pa = pri_valid && pri_ready;
      sa = sec_valid && sec_ready;
      @(posedge clk);
      if (pa) pri_n <= pri_n + 1;
      if (sa) sec_n <= sec_n + 1;
    end
    check(sec_wins > 10, "secondary priority exercised against a waiting primary");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
