// tb_miss_handling_logic: drives the block from both sides.
// Miss path: random banks raise line fetches, write-backs and bypassed
// word accesses. The directory is programmed so that some address ranges
// belong to L2 tiles and some to the memory controller. Checks that each
// packet leaves whole on the right request network (1 for an L2 tile, 2 for
// memory or when L2 is bypassed), to the right tile, with the directory's
// replacement bits in the address, and that the response words go back as
// refill data to the bank that asked. Serve path (l2_mode): requests from
// other tiles are broadcast to the banks; the hitting bank, or the round-robin
// victim when none hits, takes it; its response words are sent back to the
// requesting tile with end-of-packet.
module tb_miss_handling_logic;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, to_l2 = 0, to_mem = 0, served = 0, victims = 0;

  logic l2_mode;
  coord_t my_coord;
  logic dir_shift_wr, dir_entry_wr;
  logic [4:0] dir_shift;
  logic [3:0] dir_idx, dir_repl;
  coord_t dir_tile;
  logic [7:0] nl_valid, nl_ready, fill_valid, fill_ready;
  nl_req_t nl_req [8];
  logic [31:0] fill_data;
  logic l2_req_valid;
  mem_req_t l2_req;
  logic [7:0] l2_req_accept, l2_hit, l2_victim, bank_resp_valid, bank_resp_ready;
  logic l2_any_hit;
  mem_resp_t bank_resp [8];
  logic rq1_out_valid, rq1_out_ready, rq1_out_eop, rq1_in_valid, rq1_in_ready, rq1_in_eop;
  coord_t rq1_out_dst, rq2_out_dst, rsp_out_dst;
  net_mem_req_t rq1_out_data, rq1_in_data, rq2_out_data;
  logic rq2_out_valid, rq2_out_ready, rq2_out_eop;
  logic rsp_in_valid, rsp_in_ready, rsp_in_eop, rsp_out_valid, rsp_out_ready, rsp_out_eop;
  net_mem_resp_t rsp_in_data, rsp_out_data;

  miss_handling_logic dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // directory model: shift 10, entries 0..7 -> L2 tile (e+1, 1) with repl 15-e,
  // entries 8..15 -> memory controller, identity
  function automatic coord_t tile_of(logic [31:0] a);
    int e = int'(a[13:10]);
    return (e < 8) ? '{x: 3'(e % 4 + 1), y: 3'd1} : '{x: 3'd0, y: 3'd0};
  endfunction
  function automatic logic [31:0] xlat(logic [31:0] a);
    int e = int'(a[13:10]);
    return (e < 8) ? {a[31:14], 4'(15 - e), a[9:0]} : a;
  endfunction

  int b, nflits;
  nl_op_e op;
  logic [31:0] addr;
  bit byp;

  task automatic miss_path(input int n);
    for (int i = 0; i < n; i++) begin
      b = $urandom_range(0, 7);
      op = nl_op_e'($urandom_range(0, 3));
      addr = $urandom & ~32'h1F;
      byp = ($urandom % 4) == 0;
      nflits = (op == NL_WRITEBACK) ? 8 : 1;
      // a second bank asks at the same time; it must wait its turn
      for (int f = 0; f < nflits; f++) begin
        @(negedge clk);
        nl_valid = 8'(1) << b;
        nl_req[b] = '{op: op, addr: addr + 32'(f * 4), data: 32'(i * 16 + f), bypass_l2: byp,
                      eop: (f == nflits - 1)};
        rq1_out_ready = $urandom % 2; rq2_out_ready = $urandom % 2;
        #1;
        while (!nl_ready[b]) begin
          check(!(rq1_out_valid && rq2_out_valid), "one network at a time");
          @(negedge clk);
          rq1_out_ready = $urandom % 2; rq2_out_ready = $urandom % 2;
          #1;
        end
        if (byp || tile_of(addr) == '0) begin
          check(rq2_out_valid && !rq1_out_valid && rq2_out_dst == '0, "to memory on network 2");
          check(rq2_out_data.addr == xlat(addr) + 32'(f * 4), "memory address (translated)");
          check(rq2_out_data.src == my_coord && rq2_out_data.op == op &&
                rq2_out_data.data == 32'(i * 16 + f) && rq2_out_eop == (f == nflits - 1), "memory flit");
          if (f == 0) to_mem++;
        end else begin
          check(rq1_out_valid && !rq2_out_valid && rq1_out_dst == tile_of(addr), "to L2 tile on network 1");
          check(rq1_out_data.addr == xlat(addr) + 32'(f * 4), "directory replaced address bits");
          check(rq1_out_data.src == my_coord && rq1_out_eop == (f == nflits - 1), "L2 flit");
          if (f == 0) to_l2++;
        end
      end
      @(negedge clk);
      nl_valid = '0;
      if (op == NL_FETCH || op == NL_LOAD) begin
        nflits = (op == NL_FETCH) ? 8 : 1;
        for (int f = 0; f < nflits; f++) begin
          rsp_in_valid = 1; rsp_in_data = '{data: 32'hA000 + 32'(f)}; rsp_in_eop = (f == nflits - 1);
          fill_ready = 8'($urandom) | 8'(1) << ($urandom % 8);
          #1;
          while (!rsp_in_ready) begin
            check(fill_valid == 8'(1) << b && fill_data == 32'hA000 + 32'(f) || !fill_ready[b], "refill to the asking bank");
            @(negedge clk); fill_ready = 8'($urandom); #1;
          end
          check(fill_valid == 8'(1) << b && fill_data == 32'hA000 + 32'(f), "refill to the asking bank");
          @(negedge clk);
        end
        rsp_in_valid = 0;
      end
    end
  endtask

  coord_t req_from;
  int hit_bank, took;
  logic [7:0] exp_victim;

  task automatic serve_path(input int n);
    l2_mode = 1;
    exp_victim = 8'h01;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      req_from = '{x: 3'($urandom_range(1, 4)), y: 3'($urandom_range(0, 3))};
      op = ($urandom % 2) ? NL_FETCH : NL_STORE;
      rq1_in_valid = 1; rq1_in_eop = 1;
      rq1_in_data = '{op: op, src: req_from, addr: $urandom, data: $urandom};
      hit_bank = ($urandom % 2) ? $urandom_range(0, 7) : -1;
      l2_hit = (hit_bank >= 0) ? 8'(1) << hit_bank : '0;
      #1;
      check(l2_req_valid && l2_req.addr == rq1_in_data.addr, "request broadcast to the banks");
      check(l2_req.op == ((op == NL_FETCH) ? MEM_FETCH_LINE : MEM_STORE), "operation mapped");
      check(l2_any_hit == (hit_bank >= 0), "any-hit");
      if (hit_bank < 0) begin
        check(l2_victim == exp_victim, "round-robin victim");
        took = $clog2(l2_victim); victims++;
        exp_victim = {exp_victim[6:0], exp_victim[7]};
      end else took = hit_bank;
      l2_req_accept = 8'(1) << took;
      #1 check(rq1_in_ready, "request taken by one bank");
      @(negedge clk);
      rq1_in_valid = 0; l2_req_accept = '0; l2_hit = '0;
      if (op == NL_FETCH) begin
        for (int f = 0; f < 8; f++) begin
          bank_resp_valid = 8'(1) << took;
          bank_resp[took] = '{data: 32'(f * 3), ret_core: '0, ret_channel: '0, eop: (f == 7)};
          rsp_out_ready = $urandom % 2;
          #1;
          check(rsp_out_valid && rsp_out_dst == req_from && rsp_out_data.data == 32'(f * 3) &&
                rsp_out_eop == (f == 7), "response word to the requester");
          if (!rsp_out_ready) begin f--; @(negedge clk); continue; end
          check(bank_resp_ready[took], "bank response consumed");
          @(negedge clk);
        end
        bank_resp_valid = '0;
      end
      served++;
    end
    l2_mode = 0;
  endtask

  initial begin
    l2_mode = 0; my_coord = '{x: 3'd2, y: 3'd3};
    dir_shift_wr = 0; dir_entry_wr = 0; dir_shift = 0; dir_idx = 0; dir_repl = 0; dir_tile = '0;
    nl_valid = '0; fill_ready = '0; l2_req_accept = '0; l2_hit = '0; bank_resp_valid = '0;
    for (int i = 0; i < 8; i++) begin nl_req[i] = '0; bank_resp[i] = '0; end
    rq1_out_ready = 0; rq2_out_ready = 0; rq1_in_valid = 0; rq1_in_data = '0; rq1_in_eop = 0;
    rsp_in_valid = 0; rsp_in_data = '0; rsp_in_eop = 0; rsp_out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    dir_shift_wr = 1; dir_shift = 5'd10;
    @(negedge clk); dir_shift_wr = 0;
    for (int e = 0; e < 16; e++) begin
      dir_entry_wr = 1; dir_idx = 4'(e);
      dir_repl = (e < 8) ? 4'(15 - e) : 4'(e);
      dir_tile = (e < 8) ? '{x: 3'(e % 4 + 1), y: 3'd1} : '{x: 3'd0, y: 3'd0};
      @(negedge clk);
    end
    dir_entry_wr = 0;
    miss_path(300);
    serve_path(100);
    check(to_l2 > 50 && to_mem > 50 && served == 100 && victims > 20, "both paths exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
