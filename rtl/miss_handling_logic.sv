// miss_handling_logic: a tile's link between its 8 banks and the other tiles.
//
// Two independent paths:
//  * Miss path (every tile). Banks raise next-level requests: line fetches,
//    line write-backs, and word loads/stores that bypass L1. A round-robin
//    arbiter takes one bank's packet at a time, looks the address up in the
//    tile's directory (instantiated here), substitutes the directory's
//    address bits and sends the packet to the responsible tile: on request
//    network 1 if that is an L2 tile, on request network 2 if it is the
//    memory controller (coordinate (0,0)) or the bank asked to bypass L2.
//    For fetches and loads it then waits for the response flits (8 or 1) from
//    the response network and hands them to the waiting bank as refill data.
//  * Serve path (L2 tiles only, l2_mode). Requests arriving on request
//    network 1 are broadcast to all 8 banks as cache requests; the bank that
//    hits, or if none does the victim chosen by a round-robin pointer, takes
//    it. Response words from that bank are sent back over the response
//    network to the requesting tile until end-of-packet.
// One miss packet and one served request are in flight at a time. The paper
// names this block and says what the directory does; the arbitration, the
// one-at-a-time policy, the victim choice and the network selection are this
// design's choices (the paper's figure shows two request routers and one
// response router per tile, and separate networks for L1->L2 and L2->memory).
module miss_handling_logic
  import loki_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              l2_mode,
  input  coord_t            my_coord,
  // directory configuration
  input  logic              dir_shift_wr,
  input  logic [4:0]        dir_shift,
  input  logic              dir_entry_wr,
  input  logic [3:0]        dir_idx,
  input  logic [3:0]        dir_repl,
  input  coord_t            dir_tile,
  // banks: miss path
  input  logic [BANKS-1:0]  nl_valid,
  output logic [BANKS-1:0]  nl_ready,
  input  nl_req_t           nl_req [BANKS],
  output logic [BANKS-1:0]  fill_valid,
  input  logic [BANKS-1:0]  fill_ready,
  output logic [WORD_W-1:0] fill_data,
  // banks: serve path (L2 mode)
  output logic              l2_req_valid,
  output mem_req_t          l2_req,
  input  logic [BANKS-1:0]  l2_req_accept,
  input  logic [BANKS-1:0]  l2_hit,
  output logic              l2_any_hit,
  output logic [BANKS-1:0]  l2_victim,
  input  logic [BANKS-1:0]  bank_resp_valid,
  output logic [BANKS-1:0]  bank_resp_ready,
  input  mem_resp_t         bank_resp [BANKS],
  // request network 1 (to L2 tiles) out, and in (served when l2_mode)
  output logic              rq1_out_valid,
  input  logic              rq1_out_ready,
  output coord_t            rq1_out_dst,
  output net_mem_req_t      rq1_out_data,
  output logic              rq1_out_eop,
  input  logic              rq1_in_valid,
  output logic              rq1_in_ready,
  input  net_mem_req_t      rq1_in_data,
  input  logic              rq1_in_eop,
  // request network 2 (to the memory controller) out
  output logic              rq2_out_valid,
  input  logic              rq2_out_ready,
  output coord_t            rq2_out_dst,
  output net_mem_req_t      rq2_out_data,
  output logic              rq2_out_eop,
  // response network in (refills) and out (L2 responses)
  input  logic              rsp_in_valid,
  output logic              rsp_in_ready,
  input  net_mem_resp_t     rsp_in_data,
  input  logic              rsp_in_eop,
  output logic              rsp_out_valid,
  input  logic              rsp_out_ready,
  output coord_t            rsp_out_dst,
  output net_mem_resp_t     rsp_out_data,
  output logic              rsp_out_eop
);
  // ---------------- miss path ----------------
  typedef enum logic [1:0] {M_IDLE, M_SEND, M_WAIT} mstate_e;
  mstate_e mstate;
  logic [BANK_W-1:0] owner, pick_b, rr_ptr;
  logic [31:0]       nl_req_vec;
  nl_req_t           cur;
  logic [ADDR_W-1:0] xlat_addr;
  coord_t            xlat_tile;
  logic              to_mem, send_ok;

  assign cur = nl_req[owner];

  l2_directory #(.ENTRIES(16)) u_dir (
    .clk, .rst_n,
    .cfg_shift_wr(dir_shift_wr), .cfg_shift(dir_shift),
    .cfg_entry_wr(dir_entry_wr), .cfg_idx(dir_idx), .cfg_repl(dir_repl), .cfg_tile(dir_tile),
    .addr(cur.addr), .out_addr(xlat_addr), .out_tile(xlat_tile)
  );

  always_comb begin
    nl_req_vec = 32'(nl_valid);
    pick_b     = BANK_W'(rr_pick(nl_req_vec, BANKS, 32'(rr_ptr)));
    to_mem     = cur.bypass_l2 || (xlat_tile == coord_t'('0));

    rq1_out_valid = 1'b0;
    rq2_out_valid = 1'b0;
    rq1_out_dst   = xlat_tile;
    rq2_out_dst   = '0;
    rq1_out_data  = '{op: cur.op, src: my_coord, addr: xlat_addr, data: cur.data};
    rq2_out_data  = rq1_out_data;
    rq1_out_eop   = cur.eop;
    rq2_out_eop   = cur.eop;
    nl_ready      = '0;
    send_ok       = 1'b0;
    if (mstate == M_SEND && nl_valid[owner]) begin
      if (to_mem) begin
        rq2_out_valid = 1'b1;
        send_ok       = rq2_out_ready;
      end else begin
        rq1_out_valid = 1'b1;
        send_ok       = rq1_out_ready;
      end
      nl_ready[owner] = send_ok;
    end

    fill_valid   = '0;
    fill_data    = rsp_in_data.data;
    rsp_in_ready = 1'b0;
    if (mstate == M_WAIT) begin
      fill_valid[owner] = rsp_in_valid;
      rsp_in_ready      = fill_ready[owner];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mstate        <= M_IDLE;
      owner         <= '0;
      rr_ptr        <= '0;
    end else begin
      case (mstate)
        M_IDLE: if (nl_valid != '0) begin
          owner  <= pick_b;
          rr_ptr <= pick_b + 1'b1;
          mstate <= M_SEND;
        end
        M_SEND: if (send_ok) begin
          if (cur.eop)
            mstate <= (cur.op == NL_FETCH || cur.op == NL_LOAD) ? M_WAIT : M_IDLE;
        end
        M_WAIT: if (rsp_in_valid && rsp_in_ready && rsp_in_eop) mstate <= M_IDLE;
        default: mstate <= M_IDLE;
      endcase
    end
  end

  // ---------------- serve path (L2 tile) ----------------
  typedef enum logic [0:0] {V_IDLE, V_RESP} vstate_e;
  vstate_e vstate;
  coord_t  requester;
  logic [BANK_W-1:0] victim_ptr, resp_b;
  logic    resp_any;

  always_comb begin
    l2_req          = '0;
    l2_req.addr     = rq1_in_data.addr;
    l2_req.data     = rq1_in_data.data;
    l2_req.eop      = rq1_in_eop;
    unique case (rq1_in_data.op)
      NL_FETCH:     l2_req.op = MEM_FETCH_LINE;
      NL_WRITEBACK: l2_req.op = MEM_STORE_LINE;
      NL_LOAD:      l2_req.op = MEM_LOAD;
      default:      l2_req.op = MEM_STORE;
    endcase
    l2_req_valid = l2_mode && rq1_in_valid && vstate == V_IDLE;
    rq1_in_ready = l2_mode && vstate == V_IDLE && (l2_req_accept != '0);
    l2_any_hit   = (l2_hit != '0);
    l2_victim    = BANKS'(1) << victim_ptr;

    resp_any = 1'b0;
    resp_b   = '0;
    for (int b = BANKS-1; b >= 0; b--)
      if (bank_resp_valid[b]) begin
        resp_any = 1'b1;
        resp_b   = BANK_W'(b);
      end
    rsp_out_valid   = l2_mode && vstate == V_RESP && resp_any;
    rsp_out_dst     = requester;
    rsp_out_data    = '{data: bank_resp[resp_b].data};
    rsp_out_eop     = bank_resp[resp_b].eop;
    bank_resp_ready = '0;
    if (rsp_out_valid) bank_resp_ready[resp_b] = rsp_out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vstate     <= V_IDLE;
      requester  <= '0;
      victim_ptr <= '0;
    end else begin
      case (vstate)
        V_IDLE: if (rq1_in_valid && rq1_in_ready) begin
          requester <= rq1_in_data.src;
          if (!l2_any_hit) victim_ptr <= victim_ptr + 1'b1;
          if (rq1_in_data.op == NL_FETCH || rq1_in_data.op == NL_LOAD) vstate <= V_RESP;
        end
        V_RESP: if (rsp_out_valid && rsp_out_ready && rsp_out_eop) vstate <= V_IDLE;
        default: vstate <= V_IDLE;
      endcase
    end
  end

  // exactly one bank takes a broadcast L2 request
  assert property (@(posedge clk) disable iff (!rst_n)
                   l2_req_valid |-> $onehot0(l2_req_accept));
endmodule
