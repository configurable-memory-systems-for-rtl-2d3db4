// tb_crossbar: random multi-flit packets from 8 inputs to 8 outputs, with
// random back-pressure, through both the registered and the unregistered
// crossbar. Each output must see whole packets (no interleaving, wormhole),
// in per-source order, with nothing lost or duplicated. The registered
// crossbar must deliver a flit one cycle after it is offered to an idle output.
module tb_crossbar;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, s;

  // flit: [31:28] src, [27:24] dst, [23:0] sequence number of the source
  logic [7:0] in_valid, in_ready, in_eop;
  logic [31:0] in_data [8];
  logic [2:0]  in_dest [8];
  logic [7:0] out_ready;
  logic [7:0] ov_r, oe_r, ov_u, oe_u;
  logic [31:0] od_r [8], od_u [8];
  logic [2:0]  os_r [8], os_u [8];
  logic [7:0]  ir_r, ir_u;
  bit sel;   // 0: registered crossbar under test, 1: unregistered
  logic [7:0] iv_r, iv_u;

  assign iv_r = sel ? '0 : in_valid;
  assign iv_u = sel ? in_valid : '0;
  assign in_ready = sel ? ir_u : ir_r;

  crossbar #(.N_IN(8), .N_OUT(8), .T(logic [31:0]), .REGISTERED(1'b1)) u_reg (
    .clk, .rst_n, .in_valid(iv_r), .in_ready(ir_r), .in_data, .in_dest, .in_eop,
    .out_valid(ov_r), .out_ready, .out_data(od_r), .out_eop(oe_r), .out_src(os_r));
  crossbar #(.N_IN(8), .N_OUT(8), .T(logic [31:0]), .REGISTERED(1'b0)) u_unr (
    .clk, .rst_n, .in_valid(iv_u), .in_ready(ir_u), .in_data, .in_dest, .in_eop,
    .out_valid(ov_u), .out_ready, .out_data(od_u), .out_eop(oe_u), .out_src(os_u));

  int seq [8], plen [8], pos [8];
  int exp_seq [8][8];   // [dst][src] next expected sequence
  int lock [8];         // source owning an output mid-packet, -1 if none
  int sent = 0, got = 0;

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

  task automatic run(input int cycles);
    bit ov [8], oe [8];
    logic [31:0] od [8];
    bit acc [8];
    for (int i = 0; i < 8; i++) begin
      seq[i] = 0; pos[i] = 0; plen[i] = $urandom_range(1, 4); lock[i] = -1;
      in_dest[i] = 3'($urandom);
      for (int j = 0; j < 8; j++) exp_seq[i][j] = 0;
    end
    for (int cyc = 0; cyc < cycles; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < 8; i++) begin
        in_valid[i] = (cyc < cycles - 60) && (($urandom % 3) != 0);
        in_data[i]  = {4'(i), 4'(in_dest[i]), 24'(seq[i])};
        in_eop[i]   = (pos[i] == plen[i] - 1);
      end
      out_ready = 8'($urandom) | 8'($urandom);
      if (cyc >= cycles - 60) out_ready = '1;
      #1;
      for (int o = 0; o < 8; o++) begin
        ov[o] = sel ? ov_u[o] : ov_r[o];
        oe[o] = sel ? oe_u[o] : oe_r[o];
        od[o] = sel ? od_u[o] : od_r[o];
        if (ov[o] && out_ready[o]) begin
          s = int'(od[o][31:28]);
          got++;
          check(int'(od[o][27:24]) == o, "flit at its destination");
          check(int'(od[o][23:0]) >= exp_seq[o][s], "per-source order");
          exp_seq[o][s] = int'(od[o][23:0]) + 1;
          if (lock[o] != -1) check(lock[o] == s, "packet not interleaved");
          lock[o] = oe[o] ? -1 : s;
        end
      end
      for (int i = 0; i < 8; i++) acc[i] = in_valid[i] && in_ready[i];
      @(posedge clk); #1;
      for (int i = 0; i < 8; i++)
        if (acc[i]) begin
          sent++;
          seq[i]++;
          if (pos[i] == plen[i] - 1) begin
            pos[i] = 0; plen[i] = $urandom_range(1, 4); in_dest[i] = 3'($urandom);
          end else pos[i]++;
        end
    end
    check(sent == got && sent > 100, "every flit delivered");
  endtask

  initial begin
    in_valid = '0; in_eop = '0; out_ready = '0; sel = 0;
    for (int i = 0; i < 8; i++) begin in_data[i] = '0; in_dest[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    sel = 0; run(3000);
    sent = 0; got = 0;
    sel = 1; run(3000);
    // latency of the registered crossbar: offered at t, visible at t+1
    sel = 0;
    @(negedge clk);
    out_ready = '1;
    for (int i = 0; i < 8; i++) in_valid[i] = 0;
    repeat (3) @(negedge clk);
    in_valid[2] = 1; in_dest[2] = 3'd5; in_eop[2] = 1; in_data[2] = 32'h2500_0042;
    #1 check(ov_r[5] == 0, "not yet at the output");
    @(negedge clk); in_valid[2] = 0;
    check(ov_r[5] && od_r[5] == 32'h2500_0042 && os_r[5] == 3'd2, "one-cycle crossing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
