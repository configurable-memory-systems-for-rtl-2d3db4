// tb_memory_bank: one bank as an L1 cache in front of a behavioural next
// level (a word array that answers line fetches and bypassed loads after a
// random delay), and as a scratchpad. Random loads, stores, line fetches,
// whole-line stores, flushes, invalidates and prefetches to an 8 kB range
// (four times the bank) are checked against a flat reference memory: every
// load must return the last value stored. Also checked: a hit answers in the
// cycle after it is accepted (one-cycle access), a line fetch returns 8 words
// with end-of-packet on the last, a flush writes a dirty line back, a bypassed
// access reaches the next level and not the cache, and scratchpad accesses
// never touch the next level. Runs the cache with group sizes 1 and 4.
module tb_memory_bank;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0, n_byp = 0, n_flush_wb = 0;

  logic l2_mode, req_valid, req_ready, l2_hit, l2_any_hit, l2_victim;
  logic resp_valid, resp_ready, nl_valid, nl_ready, fill_valid, fill_ready;
  mem_req_t req;
  mem_resp_t resp;
  nl_req_t nl_req;
  logic [31:0] fill_data;

  memory_bank dut (.*);

  localparam int RANGE = 2048;                 // words in the cached range
  logic [31:0] refm [RANGE];                   // what loads must return
  logic [31:0] nlm  [RANGE + 512];             // the next level (+ bypass area)
  logic [1:0]  k;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- behavioural next level ----
  logic [31:0] nl_addr;
  int  nl_left, nl_n;
  initial begin
    fill_valid = 0; fill_data = 0; nl_ready = 0;
    forever begin
      @(negedge clk);
      nl_ready = ($urandom % 2);
      #1;
      if (nl_valid && nl_ready) begin
        nl_addr = nl_req.addr;
        case (nl_req.op)
          NL_WRITEBACK: begin
            nlm[nl_req.addr[31:2] % (RANGE + 512)] = nl_req.data;
            if (nl_req.eop) n_wb++;
          end
          NL_STORE: begin nlm[nl_req.addr[31:2] % (RANGE + 512)] = nl_req.data; n_byp++; end
          default: begin
            // fetch (8 words) or bypassed load (1 word), after a delay
            nl_left = (nl_req.op == NL_FETCH) ? 8 : 1;
            nl_n = nl_left;
            if (nl_req.op == NL_LOAD) n_byp++;
            @(negedge clk);
            nl_ready = 0;
            repeat ($urandom_range(0, 6)) @(negedge clk);
            while (nl_left > 0) begin
              fill_valid = ($urandom % 4) != 0;
              fill_data  = nlm[(nl_addr[31:2] + 32'(nl_n - nl_left)) % (RANGE + 512)];
              #1;
              if (fill_valid && fill_ready) nl_left--;
              @(negedge clk);
            end
            fill_valid = 0;
          end
        endcase
      end
    end
  end

  function automatic logic [31:0] word_addr(input int w);
    return 32'(w) << 2;
  endfunction

  // send one request; returns when the bank accepted it
  task automatic send(input mem_op_e op, input logic [31:0] addr, input logic [31:0] data,
                      input bit scratch, input bit byp);
    req = '0;
    req.op = op; req.addr = addr; req.data = data; req.group_log2 = k;
    req.scratchpad = scratch; req.bypass_l1 = byp;
    req.ret_core = 3'($urandom); req.ret_channel = 3'($urandom_range(2, 5));
    req.eop = 1'b1;
    req_valid = 1;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
  endtask

  // collect n response words and compare them with exp[]
  task automatic collect(input int n, input logic [31:0] first_addr, input bit line, input string what);
    int got = 0;
    resp_ready = 1;
    while (got < n) begin
      #1;
      if (resp_valid) begin
        check(resp.data == refm[(first_addr[31:2] + 32'(line ? got : 0)) % RANGE] ||
              (what == "scratch"), {what, " data"});
        check(resp.eop == (got == n - 1), {what, " end-of-packet"});
        check(resp.ret_core == req.ret_core && resp.ret_channel == req.ret_channel, {what, " return address"});
        got++;
      end
      @(negedge clk);
    end
  endtask

  int w, op, m;
  logic [31:0] a, d, line_base;
  logic [31:0] spm [BANK_WORDS];
  bit was_hit;

  task automatic cache_phase(input int ops);
    for (int i = 0; i < ops; i++) begin
      // a group of 2^k banks: this bank only sees lines whose low k bits are 0
      w = $urandom_range(0, RANGE - 1);
      w = (w >> (3 + k) << (3 + k)) | (w & 7);
      a = word_addr(w);
      op = $urandom % 16;
      d = $urandom;
      was_hit = dut.valid_q[dut.idx] && dut.tag_q[dut.idx] == dut.tag;
      if (op < 6) begin
        // word load; a hit must answer the next cycle
        req = '0; req.addr = a; req.group_log2 = k; #1;
        was_hit = dut.hit;
        send(MEM_LOAD, a, 0, 0, 0);
        if (was_hit) begin
          n_hit++;
          #1 check(resp_valid, "hit answers in one cycle");
        end else n_miss++;
        collect(1, a, 0, "load");
      end else if (op < 11) begin
        send(MEM_STORE, a, d, 0, 0);
        refm[w % RANGE] = d;
      end else if (op == 11) begin
        line_base = a & ~32'h1F;
        send(MEM_FETCH_LINE, line_base, 0, 0, 0);
        collect(8, line_base, 1, "line");
      end else if (op == 12) begin
        // whole-line store: write all 8 words of a line, no fetch needed
        line_base = a & ~32'h1F;
        for (int j = 0; j < 8; j++) begin
          d = $urandom;
          send(MEM_STORE_LINE, line_base + 32'(j * 4), d, 0, 0);
          refm[(line_base[31:2] + 32'(j)) % RANGE] = d;
        end
      end else if (op == 13) begin
        // flush: the next level must then hold the line
        line_base = a & ~32'h1F;
        m = n_wb;
        send(MEM_FLUSH_LINE, line_base, 0, 0, 0);
        repeat (40) @(negedge clk);
        for (int j = 0; j < 8; j++)
          check(nlm[(line_base[31:2] + 32'(j))] == refm[(line_base[31:2] + 32'(j)) % RANGE] ||
                !(dut.valid_q[dut.idx]), "flushed line is in the next level");
        if (n_wb > m) n_flush_wb++;
      end else if (op == 14) begin
        send(MEM_PREFETCH, a & ~32'h1F, 0, 0, 0);
      end else begin
        // flush then invalidate keeps memory consistent
        line_base = a & ~32'h1F;
        send(MEM_FLUSH_LINE, line_base, 0, 0, 0);
        send(MEM_INV_LINE, line_base, 0, 0, 0);
      end
      // bypassed word accesses to a region the cache never holds
      if ((i % 25) == 0) begin
        a = word_addr(RANGE + $urandom_range(0, 511));
        d = $urandom;
        send(MEM_STORE, a, d, 0, 1);
        repeat (12) @(negedge clk);
        check(nlm[a[31:2]] == d, "bypassed store reached the next level");
        send(MEM_LOAD, a, 0, 0, 1);
        resp_ready = 1;
        while (!resp_valid) @(negedge clk);
        check(resp.data == d, "bypassed load");
        @(negedge clk);
      end
    end
  endtask

  initial begin
    req_valid = 0; req = '0; resp_ready = 1; l2_mode = 0; l2_any_hit = 0; l2_victim = 0; k = 0;
    for (int i = 0; i < RANGE + 512; i++) nlm[i] = $urandom;
    for (int i = 0; i < RANGE; i++) refm[i] = nlm[i];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    k = 0; cache_phase(1500);
    // flush everything so the next level is up to date, then reset with k = 2
    for (int l = 0; l < BANK_LINES; l++)
      if (dut.valid_q[l] && dut.dirty_q[l]) begin
        a = {dut.tag_q[l], 6'(l), 5'b0};
        send(MEM_FLUSH_LINE, a, 0, 0, 0);
        repeat (40) @(negedge clk);
      end
    for (int i = 0; i < RANGE; i++) check(nlm[i] == refm[i], "memory up to date after flushes");
    rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
    k = 2; cache_phase(1500);
    // scratchpad: direct array access, no next-level traffic
    rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
    k = 0;
    m = n_wb + n_byp;
    for (int i = 0; i < BANK_WORDS; i++) begin
      spm[i] = $urandom;
      send(MEM_STORE, word_addr(i), spm[i], 1, 0);
    end
    for (int i = 0; i < 300; i++) begin
      w = $urandom_range(0, BANK_WORDS - 1);
      send(MEM_LOAD, word_addr(w), 0, 1, 0);
      #1 check(resp_valid && resp.data == spm[w], "scratchpad load in one cycle");
      @(negedge clk);
    end
    check(n_wb + n_byp == m && !nl_valid, "scratchpad never uses the next level");
    check(n_hit > 100 && n_miss > 100 && n_wb > 20 && n_byp > 20 && n_flush_wb > 0,
          $sformatf("mechanisms: hit %0d miss %0d wb %0d bypass %0d flush-wb %0d",
                    n_hit, n_miss, n_wb, n_byp, n_flush_wb));
    $display("bank: hits %0d misses %0d writebacks %0d bypassed %0d", n_hit, n_miss, n_wb, n_byp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
