// loki_tile: one Loki tile, the memory and network side of 8 cores and 8 banks.
//
// What is here (Fig. 1 of the architecture): for every core its channel map
// table, its input buffers (secondary instruction channel and 4 data
// channels), its level-0 instruction packet cache and the fetch selection
// between the two instruction channels; the 8 memory banks; the three
// intra-tile crossbars (requests core->bank, data bank->core, instructions
// bank->core); the local core-to-core buses; the inter-tile communication
// unit; the miss handling logic with its directory; and five mesh routers
// (core-to-core, credit, memory response and two memory request networks).
// The core pipelines themselves (decode, registers, ALU) are outside: each
// core's port is a stream of network sends (core_out: logical channel, memory
// operation, address/payload, store data, end-of-packet), a CMT write port,
// a fetch request port, the instruction stream to decode and the read side of
// its data input buffers.
// A send is steered by its CMT entry: to a bank of the entry's virtual group
// over the request crossbar, to a set of local cores over the core-to-core
// buses, or, if a credit is left, to a core on another tile over the
// core-to-core network. Bank responses go to the instruction crossbar when
// the return channel is 0 (the IPK cache) and to the data crossbar otherwise;
// in an L2 tile (l2_mode) they go to the miss handling logic instead, which
// also feeds the banks with requests from other tiles.
// Timing: a load sent in cycle t is in the core's input buffer and readable
// in cycle t+3 (request crossbar, bank access, data crossbar), as in the
// paper. Mesh ports: index 0 north, 1 east, 2 south, 3 west.
// The Verilator lint reports circular logic (UNOPTFLAT) on some packed valid/ready
// vectors here. The loop is only through the vector as a whole: one bit of
// a ready vector depends on another bit's valid, never on itself (for
// example a bank's ready depends on other requests), so there is no real
// combinational loop and the warning stands.
module loki_tile
  import loki_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  coord_t      my_coord,
  input  logic        l2_mode,
  // directory configuration
  input  logic        dir_shift_wr,
  input  logic [4:0]  dir_shift,
  input  logic        dir_entry_wr,
  input  logic [3:0]  dir_idx,
  input  logic [3:0]  dir_repl,
  input  coord_t      dir_tile,
  // cores: network sends
  input  logic [CORES-1:0] core_out_valid,
  output logic [CORES-1:0] core_out_ready,
  input  core_out_t        core_out [CORES],
  // cores: channel map table writes
  input  logic [CORES-1:0] cmt_wr_en,
  input  logic [CMT_IDX_W-1:0] cmt_wr_idx [CORES],
  input  cmt_entry_t       cmt_wr_entry [CORES],
  // cores: instruction fetch
  input  logic [CORES-1:0] fetch_valid,
  output logic [CORES-1:0] fetch_ready,
  input  logic [ADDR_W-1:0] fetch_addr [CORES],
  output logic [CORES-1:0] fetch_hit,
  output logic [CORES-1:0] fetch_miss,
  output logic [CORES-1:0] instr_valid,
  input  logic [CORES-1:0] instr_ready,
  output logic [WORD_W-1:0] instr_data [CORES],
  output logic [CORES-1:0] instr_eop,
  output logic [CORES-1:0] instr_from_sec,
  // cores: data input buffers (read side)
  output logic [DATA_CHANNELS-1:0] din_valid [CORES],
  input  logic [DATA_CHANNELS-1:0] din_ready [CORES],
  output logic [WORD_W-1:0]        din_data  [CORES][DATA_CHANNELS],
  // core-to-core network
  input  logic [3:0] cn_in_valid,  output logic [3:0] cn_in_ready,
  input  coord_t     cn_in_dst [4], input  core_net_t cn_in_data [4], input logic [3:0] cn_in_eop,
  output logic [3:0] cn_out_valid, input  logic [3:0] cn_out_ready,
  output coord_t     cn_out_dst [4], output core_net_t cn_out_data [4], output logic [3:0] cn_out_eop,
  // credit network
  input  logic [3:0] cr_in_valid,  output logic [3:0] cr_in_ready,
  input  coord_t     cr_in_dst [4], input  credit_t cr_in_data [4], input logic [3:0] cr_in_eop,
  output logic [3:0] cr_out_valid, input  logic [3:0] cr_out_ready,
  output coord_t     cr_out_dst [4], output credit_t cr_out_data [4], output logic [3:0] cr_out_eop,
  // memory response network
  input  logic [3:0] rs_in_valid,  output logic [3:0] rs_in_ready,
  input  coord_t     rs_in_dst [4], input  net_mem_resp_t rs_in_data [4], input logic [3:0] rs_in_eop,
  output logic [3:0] rs_out_valid, input  logic [3:0] rs_out_ready,
  output coord_t     rs_out_dst [4], output net_mem_resp_t rs_out_data [4], output logic [3:0] rs_out_eop,
  // memory request network 1 (L1 -> L2)
  input  logic [3:0] q1_in_valid,  output logic [3:0] q1_in_ready,
  input  coord_t     q1_in_dst [4], input  net_mem_req_t q1_in_data [4], input logic [3:0] q1_in_eop,
  output logic [3:0] q1_out_valid, input  logic [3:0] q1_out_ready,
  output coord_t     q1_out_dst [4], output net_mem_req_t q1_out_data [4], output logic [3:0] q1_out_eop,
  // memory request network 2 (to the memory controller)
  input  logic [3:0] q2_in_valid,  output logic [3:0] q2_in_ready,
  input  coord_t     q2_in_dst [4], input  net_mem_req_t q2_in_data [4], input logic [3:0] q2_in_eop,
  output logic [3:0] q2_out_valid, input  logic [3:0] q2_out_ready,
  output coord_t     q2_out_dst [4], output net_mem_req_t q2_out_data [4], output logic [3:0] q2_out_eop
);
  typedef struct packed {
    logic [WORD_W-1:0] data;
    logic              eop;
    logic              remote;
  } inbuf_t;

  typedef struct packed {
    coord_t    dst;
    core_net_t flit;
  } cn_flit_t;

  // ---------------- channel map tables and send steering ----------------
  cmt_entry_t          cmt_e      [CORES];
  logic [BANK_W-1:0]   cmt_bank   [CORES];
  logic [CORES-1:0]    cmt_can_send, send_remote, credit_in;
  logic [CREDIT_W-1:0] cmt_credits [CORES];
  logic [CMT_IDX_W-1:0] credit_idx [CORES];

  logic [CORES-1:0]  rq_in_valid, rq_in_ready;
  mem_req_t          rq_in_data [CORES];
  logic [BANK_W-1:0] rq_in_dest [CORES];
  logic [CORES-1:0]  rq_in_eop;

  logic [CORES:0]    c2c_src_valid, c2c_src_ready;
  c2c_flit_t         c2c_src_flit [CORES+1];

  logic [CORES-1:0]  cna_in_valid, cna_in_ready, cna_in_eop;
  cn_flit_t          cna_in_data [CORES];
  logic              cna_in_dest [CORES];

  for (genvar c = 0; c < CORES; c++) begin : g_cmt
    channel_map_table #(.ENTRIES(CMT_ENTRIES)) u_cmt (
      .clk, .rst_n,
      .wr_en(cmt_wr_en[c]), .wr_idx(cmt_wr_idx[c]), .wr_entry(cmt_wr_entry[c]),
      .rd_idx(core_out[c].chan), .rd_addr(core_out[c].addr),
      .rd_entry(cmt_e[c]), .rd_bank(cmt_bank[c]), .rd_can_send(cmt_can_send[c]),
      .rd_credits(cmt_credits[c]),
      .send_remote(send_remote[c]),
      .credit_in(credit_in[c]), .credit_idx(credit_idx[c])
    );
  end

  always_comb begin
    for (int c = 0; c < CORES; c++) begin
      rq_in_valid[c] = core_out_valid[c] && cmt_e[c].kind == DEST_MEMORY;
      rq_in_dest[c]  = cmt_bank[c];
      rq_in_eop[c]   = core_out[c].eop;
      rq_in_data[c]  = '{op: core_out[c].op, addr: core_out[c].addr, data: core_out[c].data,
                         group_log2: cmt_e[c].group_log2, scratchpad: cmt_e[c].scratchpad,
                         bypass_l1: cmt_e[c].bypass_l1, bypass_l2: cmt_e[c].bypass_l2,
                         ret_core: cmt_e[c].ret_core, ret_channel: cmt_e[c].ret_channel,
                         eop: core_out[c].eop};

      c2c_src_valid[c] = core_out_valid[c] && cmt_e[c].kind == DEST_LOCAL;
      c2c_src_flit[c]  = '{mask: cmt_e[c].core_mask, channel: cmt_e[c].channel,
                           data: core_out[c].data, remote: 1'b0, eop: core_out[c].eop};

      cna_in_valid[c] = core_out_valid[c] && cmt_e[c].kind == DEST_REMOTE && cmt_can_send[c];
      cna_in_dest[c]  = 1'b0;
      cna_in_eop[c]   = core_out[c].eop;
      cna_in_data[c]  = '{dst: '{x: cmt_e[c].tile_x, y: cmt_e[c].tile_y},
                          flit: '{src: my_coord, src_core: CORE_W'(c), src_entry: core_out[c].chan,
                                  dst_core: cmt_e[c].core, dst_channel: cmt_e[c].channel,
                                  data: core_out[c].data}};

      unique case (cmt_e[c].kind)
        DEST_MEMORY: core_out_ready[c] = rq_in_ready[c];
        DEST_LOCAL:  core_out_ready[c] = c2c_src_ready[c];
        DEST_REMOTE: core_out_ready[c] = cna_in_ready[c];
        default:     core_out_ready[c] = 1'b1;   // unmapped channel: send is dropped
      endcase
      send_remote[c] = core_out_valid[c] && core_out_ready[c] && cmt_e[c].kind == DEST_REMOTE;
    end
  end

  // ---------------- request crossbar and banks ----------------
  logic [BANKS-1:0]  xb_req_valid, xb_req_ready, xb_req_eop;
  mem_req_t          xb_req [BANKS];
  logic [CORE_W-1:0] xb_req_src [BANKS];

  crossbar #(.N_IN(CORES), .N_OUT(BANKS), .T(mem_req_t), .REGISTERED(1'b1)) u_req_xbar (
    .clk, .rst_n,
    .in_valid(rq_in_valid), .in_ready(rq_in_ready), .in_data(rq_in_data),
    .in_dest(rq_in_dest), .in_eop(rq_in_eop),
    .out_valid(xb_req_valid), .out_ready(xb_req_ready), .out_data(xb_req),
    .out_eop(xb_req_eop), .out_src(xb_req_src)
  );

  logic              l2_req_valid, l2_any_hit;
  mem_req_t          l2_req;
  logic [BANKS-1:0]  l2_hit, l2_victim;
  logic [BANKS-1:0]  bk_req_valid, bk_req_ready;
  mem_req_t          bk_req [BANKS];
  logic [BANKS-1:0]  bk_resp_valid, bk_resp_ready;
  mem_resp_t         bk_resp [BANKS];
  logic [BANKS-1:0]  nl_valid, nl_ready, fill_valid, fill_ready;
  nl_req_t           nl_req [BANKS];
  logic [WORD_W-1:0] fill_data;
  logic [BANKS-1:0]  mhl_resp_ready;

  logic [BANKS-1:0]  dx_in_valid, dx_in_ready, ix_in_valid, ix_in_ready;
  logic [CORE_W-1:0] resp_dest [BANKS];
  logic [BANKS-1:0]  resp_eop;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    memory_bank u_bank (
      .clk, .rst_n, .l2_mode,
      .req_valid(bk_req_valid[b]), .req_ready(bk_req_ready[b]), .req(bk_req[b]),
      .l2_hit(l2_hit[b]), .l2_any_hit(l2_any_hit), .l2_victim(l2_victim[b]),
      .resp_valid(bk_resp_valid[b]), .resp_ready(bk_resp_ready[b]), .resp(bk_resp[b]),
      .nl_valid(nl_valid[b]), .nl_ready(nl_ready[b]), .nl_req(nl_req[b]),
      .fill_valid(fill_valid[b]), .fill_ready(fill_ready[b]), .fill_data(fill_data)
    );
  end

  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      bk_req_valid[b] = l2_mode ? l2_req_valid : xb_req_valid[b];
      bk_req[b]       = l2_mode ? l2_req       : xb_req[b];
      xb_req_ready[b] = !l2_mode && bk_req_ready[b];
      resp_dest[b]    = bk_resp[b].ret_core;
      resp_eop[b]     = bk_resp[b].eop;
      dx_in_valid[b]  = !l2_mode && bk_resp_valid[b] && bk_resp[b].ret_channel != '0;
      ix_in_valid[b]  = !l2_mode && bk_resp_valid[b] && bk_resp[b].ret_channel == '0;
      if (l2_mode)                         bk_resp_ready[b] = mhl_resp_ready[b];
      else if (bk_resp[b].ret_channel == '0) bk_resp_ready[b] = ix_in_ready[b];
      else                                 bk_resp_ready[b] = dx_in_ready[b];
    end
  end

  // ---------------- response crossbars ----------------
  logic [CORES-1:0]  dx_out_valid, dx_out_ready, dx_out_eop;
  mem_resp_t         dx_out [CORES];
  logic [BANK_W-1:0] dx_out_src [CORES];
  logic [CORES-1:0]  ix_out_valid, ix_out_ready, ix_out_eop;
  mem_resp_t         ix_out [CORES];
  logic [BANK_W-1:0] ix_out_src [CORES];

  crossbar #(.N_IN(BANKS), .N_OUT(CORES), .T(mem_resp_t), .REGISTERED(1'b0)) u_data_xbar (
    .clk, .rst_n,
    .in_valid(dx_in_valid), .in_ready(dx_in_ready), .in_data(bk_resp),
    .in_dest(resp_dest), .in_eop(resp_eop),
    .out_valid(dx_out_valid), .out_ready(dx_out_ready), .out_data(dx_out),
    .out_eop(dx_out_eop), .out_src(dx_out_src)
  );

  crossbar #(.N_IN(BANKS), .N_OUT(CORES), .T(mem_resp_t), .REGISTERED(1'b0)) u_instr_xbar (
    .clk, .rst_n,
    .in_valid(ix_in_valid), .in_ready(ix_in_ready), .in_data(bk_resp),
    .in_dest(resp_dest), .in_eop(resp_eop),
    .out_valid(ix_out_valid), .out_ready(ix_out_ready), .out_data(ix_out),
    .out_eop(ix_out_eop), .out_src(ix_out_src)
  );

  // ---------------- core-to-core buses ----------------
  logic [CORES-1:0]       c2c_dst_valid;
  c2c_flit_t              c2c_dst_flit [CORES];
  logic [IN_CHANNELS-1:0] c2c_dst_ready [CORES];

  c2c_bus #(.N_SRC(CORES+1)) u_c2c (
    .clk, .rst_n,
    .src_valid(c2c_src_valid), .src_ready(c2c_src_ready), .src_flit(c2c_src_flit),
    .dst_ready(c2c_dst_ready), .dst_valid(c2c_dst_valid), .dst_flit(c2c_dst_flit)
  );

  // ---------------- per-core input buffers and fetch ----------------
  logic [IN_CHANNELS-1:0] buf_in_valid [CORES];
  logic [IN_CHANNELS-1:0] buf_in_ready [CORES];
  inbuf_t                 buf_in_data  [CORES][IN_CHANNELS];
  logic [IN_CHANNELS-1:0] buf_out_valid [CORES];
  logic [IN_CHANNELS-1:0] buf_out_ready [CORES];
  inbuf_t                 buf_out_data  [CORES][IN_CHANNELS];
  logic [IN_CHANNELS-1:0] pop_remote [CORES];
  logic [CORES-1:0]       ipk_fill_ready, ipk_out_valid, ipk_out_ready, ipk_out_eop;
  logic [WORD_W-1:0]      ipk_out_data [CORES];

  for (genvar c = 0; c < CORES; c++) begin : g_core
    for (genvar ch = 1; ch < IN_CHANNELS; ch++) begin : g_buf
      logic [$clog2(IN_BUF_DEPTH+1)-1:0] unused_count;
      network_fifo #(.T(inbuf_t), .DEPTH(IN_BUF_DEPTH)) u_buf (
        .clk, .rst_n,
        .in_valid(buf_in_valid[c][ch]), .in_ready(buf_in_ready[c][ch]),
        .in_data(buf_in_data[c][ch]),
        .out_valid(buf_out_valid[c][ch]), .out_ready(buf_out_ready[c][ch]),
        .out_data(buf_out_data[c][ch]), .count(unused_count)
      );
    end

    ipk_cache #(.ENTRIES(64)) u_ipk (
      .clk, .rst_n,
      .fetch_valid(fetch_valid[c]), .fetch_ready(fetch_ready[c]), .fetch_addr(fetch_addr[c]),
      .hit(fetch_hit[c]), .miss(fetch_miss[c]),
      .fill_valid(ix_out_valid[c]), .fill_ready(ipk_fill_ready[c]),
      .fill_data(ix_out[c].data), .fill_eop(ix_out_eop[c]),
      .out_valid(ipk_out_valid[c]), .out_ready(ipk_out_ready[c]),
      .out_data(ipk_out_data[c]), .out_eop(ipk_out_eop[c])
    );

    fetch_select u_fsel (
      .clk, .rst_n,
      .pri_valid(ipk_out_valid[c]), .pri_ready(ipk_out_ready[c]),
      .pri_data(ipk_out_data[c]), .pri_eop(ipk_out_eop[c]),
      .sec_valid(buf_out_valid[c][1]), .sec_ready(buf_out_ready[c][1]),
      .sec_data(buf_out_data[c][1].data), .sec_eop(buf_out_data[c][1].eop),
      .out_valid(instr_valid[c]), .out_ready(instr_ready[c]),
      .out_data(instr_data[c]), .out_eop(instr_eop[c]), .from_secondary(instr_from_sec[c])
    );
  end

  always_comb begin
    for (int c = 0; c < CORES; c++) begin
      ix_out_ready[c] = ipk_fill_ready[c];
      dx_out_ready[c] = 1'b0;
      buf_in_valid[c] = '0;
      buf_out_valid[c][0] = 1'b0;
      buf_in_ready[c][0]  = 1'b0;
      buf_out_data[c][0]  = '0;
      buf_out_ready[c][0] = 1'b0;
      for (int ch = 0; ch < IN_CHANNELS; ch++) begin
        buf_in_data[c][ch] = '0;
        // memory responses first, the core-to-core buses take what is left
        c2c_dst_ready[c][ch] = (ch != 0) && buf_in_ready[c][ch] &&
                               !(dx_out_valid[c] && dx_out[c].ret_channel == CHAN_W'(ch));
        if (ch != 0) begin
          if (dx_out_valid[c] && dx_out[c].ret_channel == CHAN_W'(ch)) begin
            buf_in_valid[c][ch] = 1'b1;
            buf_in_data[c][ch]  = '{data: dx_out[c].data, eop: dx_out_eop[c], remote: 1'b0};
            dx_out_ready[c]     = buf_in_ready[c][ch];
          end else if (c2c_dst_valid[c] && c2c_dst_flit[c].channel == CHAN_W'(ch)) begin
            buf_in_valid[c][ch] = 1'b1;
            buf_in_data[c][ch]  = '{data: c2c_dst_flit[c].data, eop: c2c_dst_flit[c].eop,
                                    remote: c2c_dst_flit[c].remote};
          end
        end
      end
      for (int d = 0; d < DATA_CHANNELS; d++) begin
        din_valid[c][d]         = buf_out_valid[c][d+2];
        din_data[c][d]          = buf_out_data[c][d+2].data;
        buf_out_ready[c][d+2]   = din_ready[c][d];
      end
      for (int ch = 0; ch < IN_CHANNELS; ch++)
        pop_remote[c][ch] = buf_out_valid[c][ch] && buf_out_ready[c][ch] && buf_out_data[c][ch].remote;
    end
  end

  // ---------------- inter-tile core-to-core traffic ----------------
  logic      cna_out_valid, cna_out_ready, cna_out_eop;
  cn_flit_t  cna_out [1];
  logic [CORE_W-1:0] cna_out_src_unused [1];
  logic      itcu_net_valid, itcu_net_ready, itcu_cr_valid, itcu_cr_ready;
  core_net_t itcu_net_data;
  logic      itcu_net_eop;
  coord_t    itcu_cr_dst;
  credit_t   itcu_cr_data;

  crossbar #(.N_IN(CORES), .N_OUT(1), .T(cn_flit_t), .REGISTERED(1'b1)) u_cn_arb (
    .clk, .rst_n,
    .in_valid(cna_in_valid), .in_ready(cna_in_ready), .in_data(cna_in_data),
    .in_dest(cna_in_dest), .in_eop(cna_in_eop),
    .out_valid(cna_out_valid), .out_ready(cna_out_ready), .out_data(cna_out),
    .out_eop(cna_out_eop), .out_src(cna_out_src_unused)
  );

  intertile_comm_unit u_itcu (
    .clk, .rst_n,
    .net_valid(itcu_net_valid), .net_ready(itcu_net_ready),
    .net_data(itcu_net_data), .net_eop(itcu_net_eop),
    .c2c_valid(c2c_src_valid[CORES]), .c2c_ready(c2c_src_ready[CORES]),
    .c2c_flit(c2c_src_flit[CORES]),
    .pop_remote(pop_remote),
    .cr_valid(itcu_cr_valid), .cr_ready(itcu_cr_ready),
    .cr_dst(itcu_cr_dst), .cr_data(itcu_cr_data)
  );

  // ---------------- miss handling logic ----------------
  logic          mq1_valid, mq1_ready, mq1_eop, mq1i_valid, mq1i_ready, mq1i_eop;
  coord_t        mq1_dst, mq2_dst, mrs_dst;
  net_mem_req_t  mq1_data, mq1i_data, mq2_data;
  logic          mq2_valid, mq2_ready, mq2_eop;
  logic          mrsi_valid, mrsi_ready, mrsi_eop, mrs_valid, mrs_ready, mrs_eop;
  net_mem_resp_t mrsi_data, mrs_data;
  logic [BANKS-1:0] l2_req_accept;

  always_comb l2_req_accept = bk_req_ready & {BANKS{l2_req_valid}};

  miss_handling_logic u_mhl (
    .clk, .rst_n, .l2_mode, .my_coord,
    .dir_shift_wr, .dir_shift, .dir_entry_wr, .dir_idx, .dir_repl, .dir_tile,
    .nl_valid, .nl_ready, .nl_req, .fill_valid, .fill_ready, .fill_data,
    .l2_req_valid, .l2_req, .l2_req_accept, .l2_hit, .l2_any_hit, .l2_victim,
    .bank_resp_valid(bk_resp_valid), .bank_resp_ready(mhl_resp_ready), .bank_resp(bk_resp),
    .rq1_out_valid(mq1_valid), .rq1_out_ready(mq1_ready), .rq1_out_dst(mq1_dst),
    .rq1_out_data(mq1_data), .rq1_out_eop(mq1_eop),
    .rq1_in_valid(mq1i_valid), .rq1_in_ready(mq1i_ready), .rq1_in_data(mq1i_data),
    .rq1_in_eop(mq1i_eop),
    .rq2_out_valid(mq2_valid), .rq2_out_ready(mq2_ready), .rq2_out_dst(mq2_dst),
    .rq2_out_data(mq2_data), .rq2_out_eop(mq2_eop),
    .rsp_in_valid(mrsi_valid), .rsp_in_ready(mrsi_ready), .rsp_in_data(mrsi_data),
    .rsp_in_eop(mrsi_eop),
    .rsp_out_valid(mrs_valid), .rsp_out_ready(mrs_ready), .rsp_out_dst(mrs_dst),
    .rsp_out_data(mrs_data), .rsp_out_eop(mrs_eop)
  );

  // ---------------- routers ----------------
  // core-to-core
  logic [4:0] cn_rin_valid, cn_rin_ready, cn_rin_eop, cn_rout_valid, cn_rout_ready, cn_rout_eop;
  coord_t     cn_rin_dst [5], cn_rout_dst [5];
  core_net_t  cn_rin_data [5], cn_rout_data [5];
  // credits
  logic [4:0] cr_rin_valid, cr_rin_ready, cr_rin_eop, cr_rout_valid, cr_rout_ready, cr_rout_eop;
  coord_t     cr_rin_dst [5], cr_rout_dst [5];
  credit_t    cr_rin_data [5], cr_rout_data [5];
  // responses
  logic [4:0]    rs_rin_valid, rs_rin_ready, rs_rin_eop, rs_rout_valid, rs_rout_ready, rs_rout_eop;
  coord_t        rs_rin_dst [5], rs_rout_dst [5];
  net_mem_resp_t rs_rin_data [5], rs_rout_data [5];
  // requests 1 and 2
  logic [4:0]    q1_rin_valid, q1_rin_ready, q1_rin_eop, q1_rout_valid, q1_rout_ready, q1_rout_eop;
  coord_t        q1_rin_dst [5], q1_rout_dst [5];
  net_mem_req_t  q1_rin_data [5], q1_rout_data [5];
  logic [4:0]    q2_rin_valid, q2_rin_ready, q2_rin_eop, q2_rout_valid, q2_rout_ready, q2_rout_eop;
  coord_t        q2_rin_dst [5], q2_rout_dst [5];
  net_mem_req_t  q2_rin_data [5], q2_rout_data [5];

  always_comb begin
    // local ports (index 0)
    cn_rin_valid[0] = cna_out_valid;  cn_rin_dst[0] = cna_out[0].dst;
    cn_rin_data[0]  = cna_out[0].flit; cn_rin_eop[0] = cna_out_eop;
    cna_out_ready   = cn_rin_ready[0];
    itcu_net_valid  = cn_rout_valid[0]; itcu_net_data = cn_rout_data[0];
    itcu_net_eop    = cn_rout_eop[0];   cn_rout_ready[0] = itcu_net_ready;

    cr_rin_valid[0] = itcu_cr_valid; cr_rin_dst[0] = itcu_cr_dst;
    cr_rin_data[0]  = itcu_cr_data;  cr_rin_eop[0] = 1'b1;
    itcu_cr_ready   = cr_rin_ready[0];
    cr_rout_ready[0] = 1'b1;         // credits are always accepted by the tables

    rs_rin_valid[0] = mrs_valid; rs_rin_dst[0] = mrs_dst; rs_rin_data[0] = mrs_data;
    rs_rin_eop[0]   = mrs_eop;   mrs_ready = rs_rin_ready[0];
    mrsi_valid = rs_rout_valid[0]; mrsi_data = rs_rout_data[0]; mrsi_eop = rs_rout_eop[0];
    rs_rout_ready[0] = mrsi_ready;

    q1_rin_valid[0] = mq1_valid; q1_rin_dst[0] = mq1_dst; q1_rin_data[0] = mq1_data;
    q1_rin_eop[0]   = mq1_eop;   mq1_ready = q1_rin_ready[0];
    mq1i_valid = q1_rout_valid[0]; mq1i_data = q1_rout_data[0]; mq1i_eop = q1_rout_eop[0];
    q1_rout_ready[0] = mq1i_ready;

    q2_rin_valid[0] = mq2_valid; q2_rin_dst[0] = mq2_dst; q2_rin_data[0] = mq2_data;
    q2_rin_eop[0]   = mq2_eop;   mq2_ready = q2_rin_ready[0];
    q2_rout_ready[0] = 1'b1;     // every request-2 flit is for the memory controller

    // mesh ports 1..4 = north, east, south, west
    for (int d = 0; d < 4; d++) begin
      cn_rin_valid[d+1] = cn_in_valid[d]; cn_rin_dst[d+1] = cn_in_dst[d];
      cn_rin_data[d+1]  = cn_in_data[d];  cn_rin_eop[d+1] = cn_in_eop[d];
      cn_in_ready[d]    = cn_rin_ready[d+1];
      cn_out_valid[d]   = cn_rout_valid[d+1]; cn_out_dst[d] = cn_rout_dst[d+1];
      cn_out_data[d]    = cn_rout_data[d+1];  cn_out_eop[d] = cn_rout_eop[d+1];
      cn_rout_ready[d+1] = cn_out_ready[d];

      cr_rin_valid[d+1] = cr_in_valid[d]; cr_rin_dst[d+1] = cr_in_dst[d];
      cr_rin_data[d+1]  = cr_in_data[d];  cr_rin_eop[d+1] = cr_in_eop[d];
      cr_in_ready[d]    = cr_rin_ready[d+1];
      cr_out_valid[d]   = cr_rout_valid[d+1]; cr_out_dst[d] = cr_rout_dst[d+1];
      cr_out_data[d]    = cr_rout_data[d+1];  cr_out_eop[d] = cr_rout_eop[d+1];
      cr_rout_ready[d+1] = cr_out_ready[d];

      rs_rin_valid[d+1] = rs_in_valid[d]; rs_rin_dst[d+1] = rs_in_dst[d];
      rs_rin_data[d+1]  = rs_in_data[d];  rs_rin_eop[d+1] = rs_in_eop[d];
      rs_in_ready[d]    = rs_rin_ready[d+1];
      rs_out_valid[d]   = rs_rout_valid[d+1]; rs_out_dst[d] = rs_rout_dst[d+1];
      rs_out_data[d]    = rs_rout_data[d+1];  rs_out_eop[d] = rs_rout_eop[d+1];
      rs_rout_ready[d+1] = rs_out_ready[d];

      q1_rin_valid[d+1] = q1_in_valid[d]; q1_rin_dst[d+1] = q1_in_dst[d];
      q1_rin_data[d+1]  = q1_in_data[d];  q1_rin_eop[d+1] = q1_in_eop[d];
      q1_in_ready[d]    = q1_rin_ready[d+1];
      q1_out_valid[d]   = q1_rout_valid[d+1]; q1_out_dst[d] = q1_rout_dst[d+1];
      q1_out_data[d]    = q1_rout_data[d+1];  q1_out_eop[d] = q1_rout_eop[d+1];
      q1_rout_ready[d+1] = q1_out_ready[d];

      q2_rin_valid[d+1] = q2_in_valid[d]; q2_rin_dst[d+1] = q2_in_dst[d];
      q2_rin_data[d+1]  = q2_in_data[d];  q2_rin_eop[d+1] = q2_in_eop[d];
      q2_in_ready[d]    = q2_rin_ready[d+1];
      q2_out_valid[d]   = q2_rout_valid[d+1]; q2_out_dst[d] = q2_rout_dst[d+1];
      q2_out_data[d]    = q2_rout_data[d+1];  q2_out_eop[d] = q2_rout_eop[d+1];
      q2_rout_ready[d+1] = q2_out_ready[d];
    end

    for (int c = 0; c < CORES; c++) begin
      credit_in[c]  = cr_rout_valid[0] && cr_rout_data[0].core == CORE_W'(c);
      credit_idx[c] = cr_rout_data[0].entry;
    end
  end

  mesh_router #(.T(core_net_t)) u_core_router (
    .clk, .rst_n, .my_coord,
    .in_valid(cn_rin_valid), .in_ready(cn_rin_ready), .in_dst(cn_rin_dst),
    .in_data(cn_rin_data), .in_eop(cn_rin_eop),
    .out_valid(cn_rout_valid), .out_ready(cn_rout_ready), .out_dst(cn_rout_dst),
    .out_data(cn_rout_data), .out_eop(cn_rout_eop)
  );
  mesh_router #(.T(credit_t)) u_credit_router (
    .clk, .rst_n, .my_coord,
    .in_valid(cr_rin_valid), .in_ready(cr_rin_ready), .in_dst(cr_rin_dst),
    .in_data(cr_rin_data), .in_eop(cr_rin_eop),
    .out_valid(cr_rout_valid), .out_ready(cr_rout_ready), .out_dst(cr_rout_dst),
    .out_data(cr_rout_data), .out_eop(cr_rout_eop)
  );
  mesh_router #(.T(net_mem_resp_t)) u_response_router (
    .clk, .rst_n, .my_coord,
    .in_valid(rs_rin_valid), .in_ready(rs_rin_ready), .in_dst(rs_rin_dst),
    .in_data(rs_rin_data), .in_eop(rs_rin_eop),
    .out_valid(rs_rout_valid), .out_ready(rs_rout_ready), .out_dst(rs_rout_dst),
    .out_data(rs_rout_data), .out_eop(rs_rout_eop)
  );
  mesh_router #(.T(net_mem_req_t)) u_request_router1 (
    .clk, .rst_n, .my_coord,
    .in_valid(q1_rin_valid), .in_ready(q1_rin_ready), .in_dst(q1_rin_dst),
    .in_data(q1_rin_data), .in_eop(q1_rin_eop),
    .out_valid(q1_rout_valid), .out_ready(q1_rout_ready), .out_dst(q1_rout_dst),
    .out_data(q1_rout_data), .out_eop(q1_rout_eop)
  );
  mesh_router #(.T(net_mem_req_t)) u_request_router2 (
    .clk, .rst_n, .my_coord,
    .in_valid(q2_rin_valid), .in_ready(q2_rin_ready), .in_dst(q2_rin_dst),
    .in_data(q2_rin_data), .in_eop(q2_rin_eop),
    .out_valid(q2_rout_valid), .out_ready(q2_rout_ready), .out_dst(q2_rout_dst),
    .out_data(q2_rout_data), .out_eop(q2_rout_eop)
  );
endmodule
