// tb_loki_tile: one tile at mesh coordinate (1,0), with the off-chip memory
// model on its west ports (the memory controller at (0,0)) and the other mesh
// ports driven by the testbench. Each part of the tile is exercised through
// the core ports:
//  * scratchpad bank: store then load; the load must be readable in the
//    core's input buffer exactly 3 cycles after it is sent;
//  * a 4-bank virtual L1 cache: random loads and stores checked against a
//    reference; misses go to main memory, hits take 3 cycles; each request
//    must go to bank base + line bits;
//  * multicast: one send on a local channel reaches three cores;
//  * instruction fetch: an IPK miss, filled by a line fetch on the primary
//    channel, then a hit replaying the same packet from the IPK cache;
//  * the secondary instruction channel wins at a packet boundary;
//  * a remote connection: flits leave on the core-to-core network, the sender
//    stalls when its 4 credits are spent and resumes when a credit returns;
//  * a flit arriving from another tile is delivered and, once read, a credit
//    goes back to its sender.
module tb_loki_tile;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  coord_t my_coord;
  logic l2_mode, dir_shift_wr, dir_entry_wr;
  logic [4:0] dir_shift;
  logic [3:0] dir_idx, dir_repl;
  coord_t dir_tile;
  logic [7:0] core_out_valid, core_out_ready, cmt_wr_en, fetch_valid, fetch_ready, fetch_hit, fetch_miss;
  core_out_t core_out [8];
  logic [3:0] cmt_wr_idx [8];
  cmt_entry_t cmt_wr_entry [8];
  logic [31:0] fetch_addr [8], instr_data [8];
  logic [7:0] instr_valid, instr_ready, instr_eop, instr_from_sec;
  logic [3:0] din_valid [8], din_ready [8];
  logic [31:0] din_data [8][4];
  logic [3:0] cn_in_valid, cn_in_ready, cn_in_eop, cn_out_valid, cn_out_ready, cn_out_eop;
  coord_t cn_in_dst [4], cn_out_dst [4];
  core_net_t cn_in_data [4], cn_out_data [4];
  logic [3:0] cr_in_valid, cr_in_ready, cr_in_eop, cr_out_valid, cr_out_ready, cr_out_eop;
  coord_t cr_in_dst [4], cr_out_dst [4];
  credit_t cr_in_data [4], cr_out_data [4];
  logic [3:0] rs_in_valid, rs_in_ready, rs_in_eop, rs_out_valid, rs_out_ready, rs_out_eop;
  coord_t rs_in_dst [4], rs_out_dst [4];
  net_mem_resp_t rs_in_data [4], rs_out_data [4];
  logic [3:0] q1_in_valid, q1_in_ready, q1_in_eop, q1_out_valid, q1_out_ready, q1_out_eop;
  coord_t q1_in_dst [4], q1_out_dst [4];
  net_mem_req_t q1_in_data [4], q1_out_data [4];
  logic [3:0] q2_in_valid, q2_in_ready, q2_in_eop, q2_out_valid, q2_out_ready, q2_out_eop;
  coord_t q2_in_dst [4], q2_out_dst [4];
  net_mem_req_t q2_in_data [4], q2_out_data [4];

  // memory model on the west side (index 3)
  logic m_req_valid, m_req_ready, m_resp_valid, m_resp_ready, m_resp_eop;
  coord_t m_resp_dst;
  net_mem_resp_t m_resp;
  logic cn_w_ready, cr_w_ready;

  loki_tile dut (.*);

  main_memory_model #(.LATENCY(35)) u_mem (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req(q2_out_data[3]),
    .req_eop(q2_out_eop[3]), .resp_valid(m_resp_valid), .resp_ready(m_resp_ready),
    .resp_dst(m_resp_dst), .resp(m_resp), .resp_eop(m_resp_eop));

  always_comb begin
    m_req_valid = q2_out_valid[3];
    q2_out_ready = {m_req_ready, 3'b000};
    rs_in_valid = {m_resp_valid, 3'b000};
    m_resp_ready = rs_in_ready[3];
    for (int d = 0; d < 4; d++) begin
      rs_in_dst[d] = m_resp_dst; rs_in_data[d] = m_resp;
    end
    rs_in_eop = {m_resp_eop, 3'b000};
    q1_in_valid = '0; q2_in_valid = '0; q1_in_eop = '0; q2_in_eop = '0;
    rs_out_ready = '0; q1_out_ready = '0;
    for (int d = 0; d < 4; d++) begin
      q1_in_dst[d] = '0; q1_in_data[d] = '0; q2_in_dst[d] = '0; q2_in_data[d] = '0;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int acc_cyc, stalls;

  task automatic send(input int c, input int chan, input mem_op_e op, input logic [31:0] addr,
                      input logic [31:0] data, input bit eop);
    core_out_valid[c] = 1;
    core_out[c] = '{chan: 4'(chan), op: op, addr: addr, data: data, eop: eop};
    #1;
    while (!core_out_ready[c]) begin stalls++; @(negedge clk); #1; end
    acc_cyc = cyc;   // the cycle in which the send is made
    @(negedge clk);
    core_out_valid[c] = 0;
  endtask

  task automatic map(input int c, input int idx, input cmt_entry_t e);
    cmt_wr_en[c] = 1; cmt_wr_idx[c] = 4'(idx); cmt_wr_entry[c] = e;
    @(negedge clk);
    cmt_wr_en[c] = 0;
  endtask

  // read one word from data channel d of core c, return it and the wait
  task automatic receive(input int c, input int d, output logic [31:0] w, output int lat);
    int t0 = acc_cyc;
    #1;
    while (!din_valid[c][d]) begin @(negedge clk); #1; end
    lat = cyc - t0;
    w = din_data[c][d];
    din_ready[c][d] = 1;
    @(negedge clk);
    din_ready[c][d] = 0;
  endtask

  function automatic logic [31:0] init_word(input logic [31:0] a);
    return {a[31:2], 2'b0} ^ 32'h5A00_0000;
  endfunction

  cmt_entry_t e;
  logic [31:0] w, a, refm [logic [29:0]];
  int lat, n_hit, n_miss, bank_ok;
  int found, credits_back = 0;

  initial begin
    my_coord = '{x: 3'd1, y: 3'd0};
    l2_mode = 0; dir_shift_wr = 0; dir_entry_wr = 0; dir_shift = 0; dir_idx = 0; dir_repl = 0;
    dir_tile = '0;
    core_out_valid = '0; cmt_wr_en = '0; fetch_valid = '0; instr_ready = '0;
    for (int c = 0; c < 8; c++) begin
      core_out[c] = '0; cmt_wr_idx[c] = '0; cmt_wr_entry[c] = '0; fetch_addr[c] = '0;
      din_ready[c] = '0;
    end
    cn_in_valid = '0; cn_in_eop = '0; cn_out_ready = '0; cr_in_valid = '0; cr_in_eop = '0;
    cr_out_ready = '0;
    for (int d = 0; d < 4; d++) begin
      cn_in_dst[d] = '0; cn_in_data[d] = '0; cr_in_dst[d] = '0; cr_in_data[d] = '0;
    end
    stalls = 0; n_hit = 0; n_miss = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- scratchpad and the 3-cycle load ----
    e = '0; e.kind = DEST_MEMORY; e.bank_base = 3'd7; e.scratchpad = 1; e.ret_core = 3'd0;
    e.ret_channel = 3'd3;
    map(0, 1, e);
    send(0, 1, MEM_STORE, 32'h40, 32'hDEAD_BEEF, 1);
    send(0, 1, MEM_LOAD, 32'h40, 0, 1);
    receive(0, 1, w, lat);
    check(w == 32'hDEAD_BEEF, "scratchpad load data");
    check(lat == 3, $sformatf("load readable 3 cycles after the send (got %0d)", lat));

    // ---- a virtual L1 cache of 4 banks (0..3) ----
    e = '0; e.kind = DEST_MEMORY; e.bank_base = 3'd0; e.group_log2 = 2'd2; e.ret_core = 3'd1;
    e.ret_channel = 3'd2;
    map(1, 0, e);
    for (int i = 0; i < 300; i++) begin
      // mostly a 1 kB working set, sometimes anywhere in 16 kB (2x the group)
      a = 32'(($urandom % 4) != 0 ? $urandom_range(0, 255) : $urandom_range(0, 4095)) << 2;
      if ($urandom % 3 == 0) begin
        w = $urandom;
        send(1, 0, MEM_STORE, a, w, 1);
        refm[a[31:2]] = w;
        check(dut.xb_req_valid[(a >> 5) & 3] && dut.xb_req[(a >> 5) & 3].addr == a, "request steered to base + line bits");
      end else begin
        send(1, 0, MEM_LOAD, a, 0, 1);
        check(dut.xb_req_valid[(a >> 5) & 3] && dut.xb_req[(a >> 5) & 3].addr == a, "request steered to base + line bits");
        receive(1, 0, w, lat);
        check(w == (refm.exists(a[31:2]) ? refm[a[31:2]] : init_word(a)), "cached load data");
        if (lat == 3) n_hit++; else if (lat > 35) n_miss++;
        check(lat >= 3, "no load faster than 3 cycles");
      end
    end
    check(n_hit > 50 && n_miss > 20, $sformatf("hits %0d misses %0d", n_hit, n_miss));
    check(u_mem.writebacks > 0 && u_mem.fetches > 20, "line fetches and write-backs reached main memory");

    // ---- multicast on the local core-to-core buses ----
    e = '0; e.kind = DEST_LOCAL; e.core_mask = 8'b1110_0000; e.channel = 3'd4;
    map(2, 2, e);
    for (int i = 0; i < 3; i++) send(2, 2, MEM_LOAD, 0, 32'h1000 + 32'(i), i == 2);
    for (int i = 0; i < 3; i++)
      for (int c = 5; c < 8; c++) begin
        receive(c, 2, w, lat);
        check(w == 32'h1000 + 32'(i), "multicast word at every target");
      end

    // ---- instruction fetch through the IPK cache ----
    e = '0; e.kind = DEST_MEMORY; e.bank_base = 3'd4; e.ret_core = 3'd3; e.ret_channel = 3'd0;
    map(3, 3, e);
    fetch_valid[3] = 1; fetch_addr[3] = 32'h2000;
    #1 check(fetch_miss[3] && !fetch_hit[3], "first fetch misses");
    @(negedge clk); fetch_valid[3] = 0;
    send(3, 3, MEM_FETCH_LINE, 32'h2000, 0, 1);
    instr_ready[3] = 1;
    for (int i = 0; i < 8; i++) begin
      #1;
      while (!instr_valid[3]) begin @(negedge clk); #1; end
      check(instr_data[3] == init_word(32'h2000 + 32'(i * 4)) && instr_eop[3] == (i == 7) &&
            !instr_from_sec[3], "packet from memory");
      @(negedge clk);
    end
    instr_ready[3] = 0;
    // secondary channel: core 4 sends a 2-instruction packet to core 3 channel 1
    e = '0; e.kind = DEST_LOCAL; e.core_mask = 8'b0000_1000; e.channel = 3'd1;
    map(4, 4, e);
    send(4, 4, MEM_LOAD, 0, 32'h5EC0_0000, 0);
    send(4, 4, MEM_LOAD, 0, 32'h5EC0_0001, 1);
    fetch_valid[3] = 1; fetch_addr[3] = 32'h2000;
    #1 check(fetch_hit[3] && !fetch_miss[3], "second fetch hits in the IPK cache");
    @(negedge clk); fetch_valid[3] = 0;
    instr_ready[3] = 1;
    for (int i = 0; i < 10; i++) begin
      #1;
      while (!instr_valid[3]) begin @(negedge clk); #1; end
      if (i < 2) check(instr_from_sec[3] && instr_data[3] == 32'h5EC0_0000 + 32'(i),
                       "secondary packet first at the boundary");
      else check(!instr_from_sec[3] && instr_data[3] == init_word(32'h2000 + 32'((i - 2) * 4)),
                 "packet replayed from the IPK cache");
      @(negedge clk);
    end
    instr_ready[3] = 0;

    // ---- remote connection with credits: core 5 -> tile (2,0) core 6 channel 2 ----
    e = '0; e.kind = DEST_REMOTE; e.tile_x = 3'd2; e.tile_y = 3'd0; e.core = 3'd6; e.channel = 3'd2;
    map(5, 5, e);
    cn_out_ready = 4'b0010;   // east
    fork
      for (int i = 0; i < 6; i++) send(5, 5, MEM_LOAD, 0, 32'h7700 + 32'(i), 1);
      begin
        found = 0;
        repeat (60) begin
          @(negedge clk); #1;
          if (cn_out_valid[1]) begin
            check(cn_out_dst[1] == '{x: 3'd2, y: 3'd0} && cn_out_data[1].src == my_coord &&
                  cn_out_data[1].src_core == 3'd5 && cn_out_data[1].src_entry == 4'd5 &&
                  cn_out_data[1].dst_core == 3'd6 && cn_out_data[1].dst_channel == 3'd2 &&
                  cn_out_data[1].data == 32'h7700 + 32'(found), "remote flit");
            found++;
          end
          if (cr_in_valid[1] && cr_in_ready[1]) begin
            credits_back++;
            if (credits_back == 2) cr_in_valid[1] = 0;
          end
          if (found == 4 && credits_back == 0 && !cr_in_valid[1]) begin
            // the sender has stalled: return two credits from (2,0)
            cr_in_valid[1] = 1; cr_in_dst[1] = my_coord; cr_in_data[1] = '{core: 3'd5, entry: 4'd5};
            cr_in_eop[1] = 1;
          end
        end
        check(found == 6, $sformatf("all remote flits left after credits returned (%0d)", found));
      end
    join
    check(stalls > 10, "sender stalled without credits");
    check(credits_back == 2, "credits returned over the credit network");

    // ---- a flit from another tile, and the credit it earns ----
    @(negedge clk);
    cn_in_valid[1] = 1; cn_in_eop[1] = 1; cn_in_dst[1] = my_coord;
    cn_in_data[1] = '{src: '{x: 3'd2, y: 3'd0}, src_core: 3'd1, src_entry: 4'd7, dst_core: 3'd2,
                      dst_channel: 3'd3, data: 32'hFEED_0001};
    #1 while (!cn_in_ready[1]) begin @(negedge clk); #1; end
    @(negedge clk); cn_in_valid[1] = 0;
    acc_cyc = cyc;
    receive(2, 1, w, lat);
    check(w == 32'hFEED_0001, "remote flit delivered to core 2 channel 3");
    cr_out_ready = 4'b0010;
    found = 0;
    repeat (10) begin
      #1;
      if (cr_out_valid[1]) begin
        check(cr_out_dst[1] == '{x: 3'd2, y: 3'd0} && cr_out_data[1].core == 3'd1 &&
              cr_out_data[1].entry == 4'd7, "credit to the sender");
        found++;
      end
      @(negedge clk);
    end
    check(found == 1, "exactly one credit returned");

    $display("tile: hits %0d misses %0d stall cycles %0d", n_hit, n_miss, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
