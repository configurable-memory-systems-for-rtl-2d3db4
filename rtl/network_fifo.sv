// network_fifo: blocking first-in first-out buffer for network channels.
//
// Loki maps network buffers to registers: a reader of an empty buffer and a
// writer to a full buffer both stall. This FIFO gives that behaviour with a
// valid/ready handshake on both sides (in_ready low when full, out_valid low
// when empty). A word written in cycle t can be read in cycle t+1; a full
// buffer accepts a write in the same cycle as a read. Depth and element type
// are parameters; the paper gives neither, the default depth of 4 is this
// design's choice.
module network_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                 mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic             push, pop;

  assign out_valid = (count != 0);
  assign in_ready  = (count < DEPTH) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // A full buffer must never be written without a simultaneous read.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (in_valid && count == DEPTH && !out_ready) |-> !in_ready);
endmodule
