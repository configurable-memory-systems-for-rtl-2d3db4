// memory_bank: one 2 kB Loki memory bank (512 words, 64 lines of 8 words).
//
// The same bank serves three roles, chosen per request or per tile:
//  * scratchpad  : the address indexes the array directly, no tag check;
//  * L1 cache    : direct mapped, write-back, write-allocate. The bank can be
//                  one member of a virtual group of 2^group_log2 banks over
//                  which consecutive lines are spread, so the line index and
//                  tag are taken from the address above the bank-select bits;
//  * L2 cache way: when the tile is an L2 tile (l2_mode) all 8 banks see each
//                  request; each checks its own tag and raises l2_hit. The hit
//                  bank serves it; if no bank hits, the bank marked l2_victim
//                  replaces a line. Together the 8 banks form an 8-way cache.
// Operations (the sendconfig memory-operation field): load/store word,
// fetch a whole line (8 response flits), store one word of a whole line
// (allocates on a miss without fetching the line first), flush, invalidate
// and prefetch a line. With bypass_l1 set a word load/store goes straight to
// the next level. Misses, write-backs and bypassed accesses go through the
// nl_req port to the miss handling logic; line data comes back on fill.
// Timing: a request accepted in cycle t has its (first) response word valid
// in the response register in cycle t+1, one cycle of memory access as in the
// paper. One request at a time; a miss stalls the bank until the refill.
// Direct mapping in L1 follows the paper ("Loki does not support a
// set-associative L1 cache"); line size, write-back/allocate policy, the
// operation encodings and the single-outstanding-miss design are this
// design's own choices.
module memory_bank
  import loki_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      l2_mode,
  // requests
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  // L2 way selection
  output logic      l2_hit,
  input  logic      l2_any_hit,
  input  logic      l2_victim,
  // responses
  output logic      resp_valid,
  input  logic      resp_ready,
  output mem_resp_t resp,
  // next level
  output logic      nl_valid,
  input  logic      nl_ready,
  output nl_req_t   nl_req,
  input  logic      fill_valid,
  output logic      fill_ready,
  input  logic [WORD_W-1:0] fill_data
);
  localparam int unsigned TAG_W = ADDR_W - LINE_OFF_W - LINE_IDX_W;
  localparam int unsigned AW    = LINE_IDX_W + 3;

  typedef enum logic [2:0] {
    S_IDLE, S_RESP_LINE, S_WB, S_FETCH_REQ, S_FILL, S_REPLAY, S_BYP_REQ, S_BYP_WAIT
  } state_e;
  state_e state;

  logic [WORD_W-1:0]     data_q  [BANK_WORDS];
  logic [TAG_W-1:0]      tag_q   [BANK_LINES];
  logic [BANK_LINES-1:0] valid_q, dirty_q;

  mem_req_t              cur;          // request being served across cycles
  logic [2:0]            cnt;

  // request under execution this cycle and its address fields
  mem_req_t              r;
  logic [1:0]            k;
  logic [ADDR_W-1:0]     line_num, local_line, victim_line;
  logic [LINE_IDX_W-1:0] idx;
  logic [TAG_W-1:0]      tag;
  logic [2:0]            word;
  logic [AW-1:0]         aidx;
  logic                  hit, resp_free, responsible, exec;

  always_comb begin
    r          = (state == S_IDLE) ? req : cur;
    k          = l2_mode ? 2'd0 : r.group_log2;
    line_num   = r.addr >> LINE_OFF_W;
    local_line = line_num >> k;
    idx        = local_line[LINE_IDX_W-1:0];
    tag        = TAG_W'(local_line >> LINE_IDX_W);
    word       = r.addr[4:2];
    aidx       = {idx, word};
    hit        = valid_q[idx] && tag_q[idx] == tag;
    victim_line = ((ADDR_W'({tag_q[idx], idx})) << k) |
                  (line_num & ADDR_W'((1 << k) - 1));
    resp_free  = !resp_valid || resp_ready;
    l2_hit     = l2_mode && req_valid && hit && state == S_IDLE;
    responsible = !l2_mode || hit || (!l2_any_hit && l2_victim);
    req_ready  = (state == S_IDLE) && resp_free && responsible;
    exec       = (state == S_IDLE && req_valid && req_ready) ||
                 (state == S_REPLAY && resp_free);
  end

  // next-level requests and refill handshake
  always_comb begin
    nl_valid   = 1'b0;
    nl_req     = '0;
    fill_ready = 1'b0;
    case (state)
      S_WB: begin
        nl_valid       = 1'b1;
        nl_req.op      = NL_WRITEBACK;
        nl_req.addr    = {victim_line[ADDR_W-LINE_OFF_W-1:0], cnt, 2'b00};
        nl_req.data    = data_q[{idx, cnt}];
        nl_req.bypass_l2 = cur.bypass_l2;
        nl_req.eop     = (cnt == 3'd7);
      end
      S_FETCH_REQ: begin
        nl_valid       = 1'b1;
        nl_req.op      = NL_FETCH;
        nl_req.addr    = {cur.addr[ADDR_W-1:LINE_OFF_W], {LINE_OFF_W{1'b0}}};
        nl_req.bypass_l2 = cur.bypass_l2;
        nl_req.eop     = 1'b1;
      end
      S_BYP_REQ: begin
        nl_valid       = 1'b1;
        nl_req.op      = (cur.op == MEM_LOAD) ? NL_LOAD : NL_STORE;
        nl_req.addr    = cur.addr;
        nl_req.data    = cur.data;
        nl_req.bypass_l2 = cur.bypass_l2;
        nl_req.eop     = 1'b1;
      end
      S_FILL:     fill_ready = 1'b1;
      S_BYP_WAIT: fill_ready = resp_free;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      valid_q    <= '0;
      dirty_q    <= '0;
      resp_valid <= 1'b0;
      resp       <= '0;
      cnt        <= '0;
      cur        <= '0;
    end else begin
      if (resp_valid && resp_ready) resp_valid <= 1'b0;

      if (exec) begin
        cur <= r;
        if (state == S_REPLAY) state <= S_IDLE;
        if (r.scratchpad && !l2_mode) begin
          unique case (r.op)
            MEM_LOAD: begin
              resp_valid <= 1'b1;
              resp <= '{data: data_q[aidx], ret_core: r.ret_core,
                        ret_channel: r.ret_channel, eop: 1'b1};
            end
            MEM_STORE, MEM_STORE_LINE: data_q[aidx] <= r.data;
            MEM_FETCH_LINE: begin
              cnt   <= '0;
              state <= S_RESP_LINE;
            end
            default: ;
          endcase
        end else if (r.bypass_l1 && !l2_mode && (r.op == MEM_LOAD || r.op == MEM_STORE)) begin
          state <= S_BYP_REQ;
        end else if (hit) begin
          unique case (r.op)
            MEM_LOAD: begin
              resp_valid <= 1'b1;
              resp <= '{data: data_q[aidx], ret_core: r.ret_core,
                        ret_channel: r.ret_channel, eop: 1'b1};
            end
            MEM_STORE, MEM_STORE_LINE: begin
              data_q[aidx] <= r.data;
              dirty_q[idx] <= 1'b1;
            end
            MEM_FETCH_LINE: begin
              cnt   <= '0;
              state <= S_RESP_LINE;
            end
            MEM_FLUSH_LINE: begin
              if (dirty_q[idx]) begin
                cnt   <= '0;
                state <= S_WB;
              end
            end
            MEM_INV_LINE: valid_q[idx] <= 1'b0;
            default: ;   // prefetch of a present line
          endcase
        end else begin
          // miss
          if (r.op != MEM_FLUSH_LINE && r.op != MEM_INV_LINE) begin
            cnt <= '0;
            if (valid_q[idx] && dirty_q[idx]) state <= S_WB;
            else if (r.op == MEM_STORE_LINE) begin
              tag_q[idx]   <= tag;
              valid_q[idx] <= 1'b1;
              dirty_q[idx] <= 1'b1;
              data_q[aidx] <= r.data;
            end else state <= S_FETCH_REQ;
          end
        end
      end

      case (state)
        S_RESP_LINE: if (resp_free) begin
          resp_valid <= 1'b1;
          resp <= '{data: data_q[{idx, cnt}], ret_core: cur.ret_core,
                    ret_channel: cur.ret_channel, eop: (cnt == 3'd7)};
          cnt <= cnt + 1'b1;
          if (cnt == 3'd7) state <= S_IDLE;
        end
        S_WB: if (nl_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt == 3'd7) begin
            dirty_q[idx] <= 1'b0;
            cnt <= '0;
            if (cur.op == MEM_FLUSH_LINE) state <= S_IDLE;
            else if (cur.op == MEM_STORE_LINE) begin
              tag_q[idx]   <= tag;
              valid_q[idx] <= 1'b1;
              dirty_q[idx] <= 1'b1;
              data_q[aidx] <= cur.data;
              state        <= S_IDLE;
            end else begin
              valid_q[idx] <= 1'b0;
              state        <= S_FETCH_REQ;
            end
          end
        end
        S_FETCH_REQ: if (nl_ready) begin
          valid_q[idx] <= 1'b0;
          cnt   <= '0;
          state <= S_FILL;
        end
        S_FILL: if (fill_valid) begin
          data_q[{idx, cnt}] <= fill_data;
          cnt <= cnt + 1'b1;
          if (cnt == 3'd7) begin
            tag_q[idx]   <= tag;
            valid_q[idx] <= 1'b1;
            dirty_q[idx] <= 1'b0;
            state <= (cur.op == MEM_PREFETCH) ? S_IDLE : S_REPLAY;
          end
        end
        S_BYP_REQ: if (nl_ready) state <= (cur.op == MEM_LOAD) ? S_BYP_WAIT : S_IDLE;
        S_BYP_WAIT: if (fill_valid && fill_ready) begin
          resp_valid <= 1'b1;
          resp <= '{data: fill_data, ret_core: cur.ret_core,
                    ret_channel: cur.ret_channel, eop: 1'b1};
          state <= S_IDLE;
        end
        default: ;
      endcase
    end
  end

  // In an L2 tile at most one way may hold a line.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (l2_hit |-> l2_any_hit));
endmodule
