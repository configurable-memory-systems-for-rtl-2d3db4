// main_memory_model: behavioural off-chip memory behind the memory controller
// at mesh coordinate (0,0). Not synthesizable; used by the tile and chip
// testbenches only.
// It takes request packets (net_mem_req_t flits, end-of-packet on the last)
// one at a time: a line fetch is answered with the 8 words of the line, a
// word load with one word, after LATENCY cycles (35 by default, the
// main-memory latency assumed for the evaluation); a line write-back (8
// flits) or a word store just updates the contents. Responses are addressed
// to the requesting tile. Words never written read as init_word(address),
// so a testbench can predict every value. Counters report the traffic.
module main_memory_model
  import loki_pkg::*;
#(
  parameter int unsigned LATENCY = 35
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  net_mem_req_t  req,
  input  logic          req_eop,
  output logic          resp_valid,
  input  logic          resp_ready,
  output coord_t        resp_dst,
  output net_mem_resp_t resp,
  output logic          resp_eop
);
  logic [31:0] mem [logic [29:0]];
  int fetches = 0, loads = 0, writebacks = 0, stores = 0;

  function automatic logic [31:0] init_word(input logic [31:0] byte_addr);
    return {byte_addr[31:2], 2'b0} ^ 32'h5A00_0000;
  endfunction

  function automatic logic [31:0] read_word(input logic [31:0] byte_addr);
    if (mem.exists(byte_addr[31:2])) return mem[byte_addr[31:2]];
    return init_word(byte_addr);
  endfunction

  net_mem_req_t head;
  int n;

  initial begin
    req_ready = 0; resp_valid = 0; resp_dst = '0; resp = '0; resp_eop = 0;
    forever begin
      @(negedge clk);
      if (!rst_n) continue;
      req_ready = 1;
      #1;
      if (req_valid) begin
        head = req;
        case (req.op)
          NL_STORE: begin mem[req.addr[31:2]] = req.data; stores++; end
          NL_WRITEBACK: begin
            mem[req.addr[31:2]] = req.data;
            if (req_eop) writebacks++;
          end
          default: begin
            @(negedge clk);
            req_ready = 0;
            repeat (LATENCY - 1) @(negedge clk);
            n = (head.op == NL_FETCH) ? 8 : 1;
            if (head.op == NL_FETCH) fetches++; else loads++;
            for (int i = 0; i < n; i++) begin
              resp_valid = 1;
              resp_dst   = head.src;
              resp       = '{data: read_word(head.addr + 32'(i * 4))};
              resp_eop   = (i == n - 1);
              #1;
              while (!resp_ready) begin @(negedge clk); #1; end
              @(negedge clk);
            end
            resp_valid = 0; resp_eop = 0;
          end
        endcase
      end
    end
  end
endmodule
