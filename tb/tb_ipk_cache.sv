// tb_ipk_cache: fetches instruction packets from a pool of 12 addresses
// (packet at address a has a%12+1 instructions, word i = a*256+i). A model of
// the 64-entry circular cache says whether each fetch must hit (the packet was
// loaded and none of its entries has been overwritten since). Checks the
// hit/miss pulses, that a miss streams the fill words through unchanged, that
// a hit replays the same words with end-of-packet on the last, and that a hit
// starts streaming the cycle after the fetch is accepted.
module tb_ipk_cache;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, hits = 0, misses = 0;

  logic fetch_valid, fetch_ready, hit, miss, fill_valid, fill_ready, fill_eop;
  logic out_valid, out_ready, out_eop;
  logic [31:0] fetch_addr, fill_data, out_data;

  ipk_cache #(.ENTRIES(64)) dut (.*);

  longint written = 0;       // instructions written so far
  longint start [12];        // where each packet's copy starts (-1: none)
  int len, a, k;
  bit exp_hit;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fetch_valid = 0; fetch_addr = 0; fill_valid = 0; fill_data = 0; fill_eop = 0; out_ready = 0;
    for (int i = 0; i < 12; i++) start[i] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 400; f++) begin
      @(negedge clk);
      a = $urandom_range(0, 11);
      len = a % 12 + 1;
      exp_hit = start[a] >= 0 && written <= start[a] + 64;
      fetch_valid = 1; fetch_addr = 32'(a * 64);
      #1;
      check(fetch_ready, "idle cache takes a fetch");
      check(hit == exp_hit && miss == !exp_hit, "hit/miss as the model says");
      @(negedge clk); fetch_valid = 0;
      if (exp_hit) begin
        hits++;
        k = 0;
        while (k < len) begin
          out_ready = ($urandom % 4) != 0;
          #1;
          if (k == 0) check(out_valid, "hit streams the next cycle");
          if (out_valid && out_ready) begin
            check(out_data == 32'(a * 256 + k), "cached word");
            check(out_eop == (k == len - 1), "cached end-of-packet");
            k++;
          end
          @(negedge clk);
        end
      end else begin
        misses++;
        start[a] = written;
        k = 0;
        while (k < len) begin
          fill_valid = ($urandom % 3) != 0;
          fill_data = 32'(a * 256 + k); fill_eop = (k == len - 1);
          out_ready = ($urandom % 4) != 0;
          #1;
          check(out_valid == fill_valid && (!out_valid || out_data == fill_data), "fill passes through");
          if (fill_valid && fill_ready) begin k++; written++; end
          @(negedge clk);
        end
        fill_valid = 0;
      end
      out_ready = 0;
      #1 check(!out_valid, "no extra words");
    end
    check(hits > 50 && misses > 50, "both hits and misses exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
