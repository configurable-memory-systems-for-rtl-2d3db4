// tb_mesh_router: a router at (2,2) gets random packets on all five ports for
// random destinations in a 5x5 mesh, with random back-pressure. Checks that
// each flit leaves by the port Y-then-X routing gives (north for larger y,
// south for smaller, then east/west, else local), that packets are not
// interleaved, that nothing is lost, and that a hop takes one cycle.
module tb_mesh_router;
  import loki_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, s;

  coord_t my_coord;
  logic [4:0] in_valid, in_ready, in_eop, out_valid, out_ready, out_eop;
  coord_t in_dst [5], out_dst [5];
  logic [31:0] in_data [5], out_data [5];

  mesh_router #(.T(logic [31:0])) dut (.*);

  int seq [5], pos [5], plen [5], lock [5], last [5][5];
  int sent = 0, got = 0;
  bit acc [5];

  function automatic int port_for(coord_t d);
    if (d.y > my_coord.y) return 1;
    if (d.y < my_coord.y) return 3;
    if (d.x > my_coord.x) return 2;
    if (d.x < my_coord.x) return 4;
    return 0;
  endfunction

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
    my_coord = '{x: 3'd2, y: 3'd2};
    in_valid = '0; in_eop = '0; out_ready = '0;
    for (int p = 0; p < 5; p++) begin
      in_dst[p] = '{x: 3'($urandom_range(0, 4)), y: 3'($urandom_range(0, 4))};
      in_data[p] = '0; seq[p] = 0; pos[p] = 0; plen[p] = $urandom_range(1, 3); lock[p] = -1;
      for (int q = 0; q < 5; q++) last[p][q] = -1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int p = 0; p < 5; p++) begin
        in_valid[p] = (cyc < 3900) && ($urandom % 2);
        in_data[p]  = {4'(p), 28'(seq[p])};
        in_eop[p]   = (pos[p] == plen[p] - 1);
      end
      out_ready = (cyc < 3900) ? 5'($urandom) : '1;
      #1;
      for (int o = 0; o < 5; o++)
        if (out_valid[o] && out_ready[o]) begin
          s = int'(out_data[o][31:28]);
          got++;
          check(port_for(out_dst[o]) == o, "Y-then-X output port");
          check(int'(out_data[o][27:0]) > last[o][s], $sformatf("per-source order o%0d s%0d got %0d last %0d", o, s, out_data[o][27:0], last[o][s]));
          last[o][s] = int'(out_data[o][27:0]);
          if (lock[o] != -1) check(lock[o] == s, "packet not interleaved");
          lock[o] = out_eop[o] ? -1 : s;
        end
      for (int p = 0; p < 5; p++) acc[p] = in_valid[p] && in_ready[p];
      @(posedge clk); #1;
      for (int p = 0; p < 5; p++)
        if (acc[p]) begin
          sent++; seq[p]++;
          if (pos[p] == plen[p] - 1) begin
            pos[p] = 0; plen[p] = $urandom_range(1, 3);
            in_dst[p] = '{x: 3'($urandom_range(0, 4)), y: 3'($urandom_range(0, 4))};
          end else pos[p]++;
        end
    end
    check(sent == got && sent > 500, "every flit delivered");
    // one hop takes one cycle: offered to an idle router at t, out at t+1
    @(negedge clk);
    in_valid = 5'b00001; in_dst[0] = '{x: 3'd4, y: 3'd2}; in_eop = 5'b00001;
    in_data[0] = 32'h0ABC_DEF0; out_ready = '1;
    @(negedge clk); in_valid = '0;
    check(out_valid[2] && out_data[2] == 32'h0ABC_DEF0, "east in one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
