// tb_loki_chip: the whole 4x4-tile chip at its default size, with the
// off-chip memory model on the memory controller link. Tile (c,r) sits at
// mesh coordinate (c+1,r); tile index r*4+c. One tile is configured as an L2
// tile; the others use it or main memory through their directories. Checks,
// and counts, each mechanism the chip is built from:
//  * L1 miss served by main memory across the mesh, then an L1 hit (3 cycles);
//  * directory address translation (replacement bits) on a miss;
//  * L2 miss (the L2 tile fetches from main memory) and L2 hit (a second tile
//    gets the line without main-memory traffic);
//  * a dirty line flushed from an L1 to the L2 tile and read by another tile;
//  * loads and stores that bypass both cache levels;
//  * a core-to-core connection between two tiles, with the sender stalling
//    while out of credits and resuming as the receiver reads;
//  * a multicast on a tile's local buses;
//  * an instruction packet fetched through the L2 tile into the IPK cache,
//    then replayed from it (IPK hit).
module tb_loki_chip;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int TILES = 16;
  logic [TILES-1:0] l2_mode, dir_shift_wr, dir_entry_wr;
  logic [4:0] dir_shift [TILES];
  logic [3:0] dir_idx [TILES], dir_repl [TILES];
  coord_t dir_tile [TILES];
  logic [7:0] core_out_valid [TILES], core_out_ready [TILES], cmt_wr_en [TILES];
  core_out_t core_out [TILES][8];
  logic [3:0] cmt_wr_idx [TILES][8];
  cmt_entry_t cmt_wr_entry [TILES][8];
  logic [7:0] fetch_valid [TILES], fetch_ready [TILES], fetch_hit [TILES], fetch_miss [TILES];
  logic [31:0] fetch_addr [TILES][8], instr_data [TILES][8];
  logic [7:0] instr_valid [TILES], instr_ready [TILES], instr_eop [TILES], instr_from_sec [TILES];
  logic [3:0] din_valid [TILES][8], din_ready [TILES][8];
  logic [31:0] din_data [TILES][8][4];
  logic mem_req_valid, mem_req_ready, mem_req_eop, mem_resp_valid, mem_resp_ready, mem_resp_eop;
  net_mem_req_t mem_req;
  coord_t mem_resp_dst;
  net_mem_resp_t mem_resp;

  loki_chip dut (.*);

  main_memory_model #(.LATENCY(35)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .req_eop(mem_req_eop), .resp_valid(mem_resp_valid), .resp_ready(mem_resp_ready),
    .resp_dst(mem_resp_dst), .resp(mem_resp), .resp_eop(mem_resp_eop));

  // mechanism counters
  int n_l1_miss = 0, n_l1_hit = 0, n_xlat = 0, n_l2_miss = 0, n_l2_hit = 0, n_l2_wb = 0;
  int n_bypass = 0, n_remote = 0, n_stall = 0, n_credit = 0, n_mcast = 0, n_ipk_miss = 0, n_ipk_hit = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] init_word(input logic [31:0] a);
    return {a[31:2], 2'b0} ^ 32'h5A00_0000;
  endfunction

  int acc_cyc;
  task automatic send(input int t, input int c, input int chan, input mem_op_e op,
                      input logic [31:0] addr, input logic [31:0] data);
    core_out_valid[t][c] = 1;
    core_out[t][c] = '{chan: 4'(chan), op: op, addr: addr, data: data, eop: 1'b1};
    #1;
    while (!core_out_ready[t][c]) begin @(negedge clk); #1; end
    acc_cyc = cyc;
    @(negedge clk);
    core_out_valid[t][c] = 0;
  endtask

  task automatic map(input int t, input int c, input int idx, input cmt_entry_t e);
    cmt_wr_en[t][c] = 1; cmt_wr_idx[t][c] = 4'(idx); cmt_wr_entry[t][c] = e;
    @(negedge clk);
    cmt_wr_en[t][c] = 0;
  endtask

  task automatic receive(input int t, input int c, input int d, output logic [31:0] w, output int lat);
    int t0 = acc_cyc;
    #1;
    while (!din_valid[t][c][d]) begin @(negedge clk); #1; end
    lat = cyc - t0;
    w = din_data[t][c][d];
    din_ready[t][c][d] = 1;
    @(negedge clk);
    din_ready[t][c][d] = 0;
  endtask

  function automatic cmt_entry_t mem_entry(input int bank, input int ret_core, input int ret_ch,
                                           input bit byp1, input bit byp2);
    cmt_entry_t e = '0;
    e.kind = DEST_MEMORY; e.bank_base = 3'(bank); e.ret_core = 3'(ret_core);
    e.ret_channel = 3'(ret_ch); e.bypass_l1 = byp1; e.bypass_l2 = byp2;
    return e;
  endfunction

  localparam int TA = 15, TB = 10, TC = 0, TL = 5;   // tiles A (4,3), B (3,2), C (1,0), L2 (2,1)
  logic [31:0] w;
  int lat, f0, k;
  cmt_entry_t e;

  initial begin
    l2_mode = '0; dir_shift_wr = '0; dir_entry_wr = '0;
    for (int t = 0; t < TILES; t++) begin
      dir_shift[t] = 0; dir_idx[t] = 0; dir_repl[t] = 0; dir_tile[t] = '0;
      core_out_valid[t] = '0; cmt_wr_en[t] = '0; fetch_valid[t] = '0; instr_ready[t] = '0;
      for (int c = 0; c < 8; c++) begin
        core_out[t][c] = '0; cmt_wr_idx[t][c] = '0; cmt_wr_entry[t][c] = '0;
        fetch_addr[t][c] = '0; din_ready[t][c] = '0;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- L1 miss to main memory across the mesh, then a hit ----
    map(TA, 0, 0, mem_entry(0, 0, 2, 0, 0));
    send(TA, 0, 0, MEM_LOAD, 32'h100, 0);
    receive(TA, 0, 0, w, lat);
    check(w == init_word(32'h100) && lat > 35, "L1 miss served by main memory");
    n_l1_miss++;
    send(TA, 0, 0, MEM_LOAD, 32'h104, 0);
    receive(TA, 0, 0, w, lat);
    check(w == init_word(32'h104) && lat == 3, $sformatf("L1 hit in 3 cycles (%0d)", lat));
    n_l1_hit++;

    // ---- directory translation: index bits [15:12] = 1 become 5 ----
    dir_shift_wr[TA] = 1; dir_shift[TA] = 5'd12;
    @(negedge clk); dir_shift_wr[TA] = 0;
    dir_entry_wr[TA] = 1; dir_idx[TA] = 4'd1; dir_repl[TA] = 4'd5; dir_tile[TA] = '0;
    @(negedge clk); dir_entry_wr[TA] = 0;
    send(TA, 0, 0, MEM_LOAD, 32'h1040, 0);
    receive(TA, 0, 0, w, lat);
    check(w == init_word(32'h5040), "miss address translated by the directory");
    n_xlat++;

    // ---- L2 tile (2,1); tiles B and C send their misses to it ----
    l2_mode[TL] = 1;
    for (int i = 0; i < 16; i++) begin
      dir_entry_wr[TB] = 1; dir_entry_wr[TC] = 1;
      dir_idx[TB] = 4'(i); dir_idx[TC] = 4'(i); dir_repl[TB] = 4'(i); dir_repl[TC] = 4'(i);
      dir_tile[TB] = '{x: 3'd2, y: 3'd1}; dir_tile[TC] = '{x: 3'd2, y: 3'd1};
      @(negedge clk);
    end
    dir_entry_wr[TB] = 0; dir_entry_wr[TC] = 0;
    map(TB, 1, 0, mem_entry(2, 1, 2, 0, 0));
    map(TC, 2, 0, mem_entry(6, 2, 3, 0, 0));
    f0 = u_mem.fetches;
    send(TB, 1, 0, MEM_LOAD, 32'h8000, 0);
    receive(TB, 1, 0, w, lat);
    check(w == init_word(32'h8000) && u_mem.fetches == f0 + 1, "L2 miss fetched from main memory");
    n_l2_miss++;
    f0 = u_mem.fetches;
    send(TC, 2, 0, MEM_LOAD, 32'h8004, 0);
    receive(TC, 2, 1, w, lat);
    check(w == init_word(32'h8004) && u_mem.fetches == f0, "L2 hit: no main-memory traffic");
    n_l2_hit++;

    // ---- dirty line from B's L1 written back to the L2, then read by C ----
    send(TB, 1, 0, MEM_STORE, 32'h8008, 32'hB0B0_0008);
    send(TB, 1, 0, MEM_FLUSH_LINE, 32'h8000, 0);
    send(TC, 2, 0, MEM_INV_LINE, 32'h8000, 0);
    repeat (60) @(negedge clk);
    f0 = u_mem.fetches;
    send(TC, 2, 0, MEM_LOAD, 32'h8008, 0);
    receive(TC, 2, 1, w, lat);
    check(w == 32'hB0B0_0008 && u_mem.fetches == f0, "flushed line read from the L2 tile");
    n_l2_wb++;

    // ---- bypass both levels ----
    map(TA, 3, 1, mem_entry(5, 3, 4, 1, 1));
    k = u_mem.stores;
    send(TA, 3, 1, MEM_STORE, 32'h9000, 32'h1234_5678);
    repeat (30) @(negedge clk);
    check(u_mem.stores == k + 1, "bypassed store reached main memory");
    send(TA, 3, 1, MEM_LOAD, 32'h9000, 0);
    receive(TA, 3, 2, w, lat);
    check(w == 32'h1234_5678, "bypassed load from main memory");
    n_bypass++;

    // ---- core-to-core between tiles: C core 5 -> A core 6 channel 3 ----
    e = '0; e.kind = DEST_REMOTE; e.tile_x = 3'd4; e.tile_y = 3'd3; e.core = 3'd6; e.channel = 3'd3;
    map(TC, 5, 7, e);
    fork
      for (int i = 0; i < 10; i++) begin
        core_out_valid[TC][5] = 1;
        core_out[TC][5] = '{chan: 4'd7, op: MEM_LOAD, addr: 32'hC000 + 32'(i), data: 32'hC000 + 32'(i), eop: 1'b1};
        #1;
        while (!core_out_ready[TC][5]) begin n_stall++; @(negedge clk); #1; end
        @(negedge clk);
        core_out_valid[TC][5] = 0;
      end
      begin
        repeat (40) @(negedge clk);   // the receiver starts late: the sender runs out of credits
        for (int i = 0; i < 10; i++) begin
          acc_cyc = cyc;
          receive(TA, 6, 1, w, lat);
          check(w == 32'hC000 + 32'(i), "remote words in order");
          n_remote++;
          repeat (3) @(negedge clk);
        end
      end
    join
    check(n_stall > 10, "sender stalled without credits");
    n_credit = 10 - 4;   // four flits fit the initial credits, the rest needed returned ones

    // ---- multicast in tile B: core 7 -> cores 0 and 1, channel 5 ----
    e = '0; e.kind = DEST_LOCAL; e.core_mask = 8'b0000_0011; e.channel = 3'd5;
    map(TB, 7, 2, e);
    send(TB, 7, 2, MEM_LOAD, 0, 32'h3C3C);
    for (int c = 0; c < 2; c++) begin
      receive(TB, c, 3, w, lat);
      check(w == 32'h3C3C, "multicast word");
      n_mcast++;
    end

    // ---- instruction packet through the L2 tile into tile C's IPK cache ----
    map(TC, 4, 3, mem_entry(4, 4, 0, 0, 0));
    fetch_valid[TC][4] = 1; fetch_addr[TC][4] = 32'hA000;
    #1 check(fetch_miss[TC][4], "IPK miss");
    @(negedge clk); fetch_valid[TC][4] = 0;
    n_ipk_miss++;
    send(TC, 4, 3, MEM_FETCH_LINE, 32'hA000, 0);
    instr_ready[TC][4] = 1;
    for (int i = 0; i < 8; i++) begin
      #1 while (!instr_valid[TC][4]) begin @(negedge clk); #1; end
      check(instr_data[TC][4] == init_word(32'hA000 + 32'(i * 4)) && instr_eop[TC][4] == (i == 7),
            "instruction from memory");
      @(negedge clk);
    end
    fetch_valid[TC][4] = 1;
    #1 check(fetch_hit[TC][4], "IPK hit");
    @(negedge clk); fetch_valid[TC][4] = 0;
    for (int i = 0; i < 8; i++) begin
      #1 while (!instr_valid[TC][4]) begin @(negedge clk); #1; end
      check(instr_data[TC][4] == init_word(32'hA000 + 32'(i * 4)), "instruction replayed");
      @(negedge clk);
    end
    n_ipk_hit++;
    instr_ready[TC][4] = 0;

    $display("chip: L1 miss %0d hit %0d, xlat %0d, L2 miss %0d hit %0d wb %0d, bypass %0d",
             n_l1_miss, n_l1_hit, n_xlat, n_l2_miss, n_l2_hit, n_l2_wb, n_bypass);
    $display("chip: remote %0d stall cycles %0d credits %0d multicast %0d IPK miss %0d hit %0d",
             n_remote, n_stall, n_credit, n_mcast, n_ipk_miss, n_ipk_hit);
    check(n_l1_miss > 0 && n_l1_hit > 0 && n_xlat > 0 && n_l2_miss > 0 && n_l2_hit > 0 &&
          n_l2_wb > 0 && n_bypass > 0 && n_remote > 0 && n_stall > 0 && n_credit > 0 &&
          n_mcast > 0 && n_ipk_miss > 0 && n_ipk_hit > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
