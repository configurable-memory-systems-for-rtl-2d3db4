// tb_network_fifo: random traffic through a 4-deep network buffer, checked
// against a queue model: order of words, occupancy count, stall when full
// (no write accepted without a read) and one-cycle write-to-read latency.
module tb_network_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  logic [2:0] count;
  logic [31:0] model[$];
  bit pop_ok, push_ok;

  network_fifo #(.T(logic [31:0]), .DEPTH(4)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      out_ready = (cyc < 200) ? 1'b0 : (($urandom % 2) == 0);
      in_data   = $urandom;
      #1;
      check(count == 3'(model.size()), "count matches model");
      check(out_valid == (model.size() != 0), "out_valid when not empty");
      if (out_valid) check(out_data == model[0], "data order");
      check(in_ready == (model.size() < 4 || out_ready), "in_ready only when space");
      pop_ok  = out_valid && out_ready;
      push_ok = in_valid && in_ready;
      @(posedge clk);
      if (pop_ok) void'(model.pop_front());
      if (push_ok) model.push_back(in_data);
    end
    // latency: an empty buffer shows a word one cycle after it is written
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (6) @(negedge clk);
    model.delete();
    in_valid = 1; in_data = 32'hCAFE_0001; out_ready = 0;
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 32'hCAFE_0001, "readable the cycle after the write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
