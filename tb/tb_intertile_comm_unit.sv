// tb_intertile_comm_unit: flits from other tiles arrive for random local
// (core, channel) slots; each must be passed to the local core-to-core bus as
// a remote flit for exactly that core and channel. Reads of remote words
// (pop_remote) are then signalled at random, and the credits coming back out
// must match them one for one, each addressed to the sender recorded for that
// slot (tile, core, table entry).
module tb_intertile_comm_unit;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic net_valid, net_ready, net_eop, c2c_valid, c2c_ready, cr_valid, cr_ready;
  core_net_t net_data;
  c2c_flit_t c2c_flit;
  logic [IN_CHANNELS-1:0] pop_remote [CORES];
  coord_t cr_dst;
  credit_t cr_data;

  intertile_comm_unit dut (.*);

  // each slot's sender is a fixed function of the slot, so credits can be checked
  function automatic core_net_t flit_for(int core, int ch, int n);
    core_net_t f;
    f.src       = '{x: 3'((core + ch) % 5), y: 3'(ch % 4)};
    f.src_core  = 3'(7 - core);
    f.src_entry = 4'(core * 2 + ch);
    f.dst_core  = 3'(core);
    f.dst_channel = 3'(ch);
    f.data      = 32'(n);
    return f;
  endfunction

  int owed [CORES][IN_CHANNELS];
  int sent_credits = 0, popped = 0, core, ch, slot;
  bit acc;

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

  initial begin
    net_valid = 0; net_eop = 1; net_data = '0; c2c_ready = 0; cr_ready = 0;
    for (int c = 0; c < CORES; c++) begin
      pop_remote[c] = '0;
      for (int h = 0; h < IN_CHANNELS; h++) owed[c][h] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: deliver one flit to every slot
    for (int n = 0; n < CORES * IN_CHANNELS; n++) begin
      @(negedge clk);
      core = n / IN_CHANNELS; ch = n % IN_CHANNELS;
      net_valid = 1; net_data = flit_for(core, ch, n); net_eop = 1;
      c2c_ready = 0;
      #1 check(c2c_valid && !net_ready, "back-pressure from the bus");
      @(negedge clk);
      c2c_ready = 1;
      #1;
      check(net_ready && c2c_valid && c2c_flit.mask == 8'(1) << core &&
            c2c_flit.channel == 3'(ch) && c2c_flit.data == 32'(n) && c2c_flit.remote &&
            c2c_flit.eop, "flit steered to its core and channel as remote");
    end
    @(negedge clk); net_valid = 0; c2c_ready = 0;
    // phase 2: random pops, random credit back-pressure
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int c = 0; c < CORES; c++)
        pop_remote[c] = (cyc < 2500 && ($urandom % 16) == 0) ? 6'(1) << $urandom_range(0, 5) : '0;
      cr_ready = ($urandom % 2);
      #1;
      acc = cr_valid && cr_ready;
      if (acc) begin
        slot = -1;
        for (int c = 0; c < CORES; c++)
          for (int h = 0; h < IN_CHANNELS; h++)
            if (flit_for(c, h, 0).src_core == cr_data.core &&
                flit_for(c, h, 0).src_entry == cr_data.entry) slot = c * IN_CHANNELS + h;
        check(slot >= 0, "credit names a recorded sender");
        if (slot >= 0) begin
          core = slot / IN_CHANNELS; ch = slot % IN_CHANNELS;
          check(cr_dst == flit_for(core, ch, 0).src, "credit goes to the sender's tile");
          check(owed[core][ch] > 0, "credit was owed");
          owed[core][ch]--;
        end
        sent_credits++;
      end
      @(posedge clk); #1;
      for (int c = 0; c < CORES; c++)
        for (int h = 0; h < IN_CHANNELS; h++)
          if (pop_remote[c][h]) begin owed[c][h]++; popped++; end
    end
    check(sent_credits == popped && popped > 100, "one credit per remote word read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
