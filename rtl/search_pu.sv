// search_pu: a Search PU, the producer stage of the genomics pipeline.
//
// N_PE Search PEs share the PU's bank-group. After start the PU streams
// num_reads reads out of DRAM (one 1024-bit beat per read from row read_row
// on: bits [511:0] bases, [527:512] read id, [543:528] length) and hands them
// round-robin to the PEs' read queues. The PEs' 64-bit PTR/CAL lookups go
// through a round-robin arbiter to the same DRAM controller, one at a time;
// word w of the tables is word w%16 of beat w/16, which puts tables with small
// word addresses in the lowest rows, i.e. in tier 0, where the paper pins the
// PTR and CAL tables. Candidates the PEs emit are packed with their read into
// an FK_CAND flit and sent over the ring to the Compute PUs in turn
// (DST_BASE .. DST_BASE+N_DST-1), the producer-to-consumer hand-off of the
// paper's heterogeneous pipeline. busy stays high until every read has been
// seeded and every candidate sent.
// Follows the paper: Search PEs, PTR/CAL tables in the fastest tier, candidate
// hand-off over the interconnect. This design's choices: read record layout,
// table word layout, arbitration and the round-robin destination.
module search_pu
  import gendram_pkg::*;
#(
  parameter int N_PE     = 16,
  parameter int N_RING   = 32,
  parameter int N_DST    = 24,
  parameter int DST_BASE = 8,
  parameter int K        = 12,
  parameter int STRIDE   = 12,
  parameter int QDEPTH   = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PU_ID_W-1:0] my_id,
  input  logic               start,
  input  logic [15:0]        num_reads,
  input  logic [ROW_W-1:0]   read_row,
  input  logic [31:0]        ptr_base,
  input  logic [31:0]        cal_base,
  input  logic [7:0]         min_votes,
  output logic               busy,
  // ring
  input  logic               ring_in_valid,
  input  flit_hdr_t          ring_in_hdr,
  input  logic [IO_W-1:0]    ring_in_data,
  output logic               ring_out_valid,
  output flit_hdr_t          ring_out_hdr,
  output logic [IO_W-1:0]    ring_out_data,
  // DRAM bank-group
  output dram_cmd_e          dram_cmd,
  output logic [3:0]         dram_bank,
  output logic [ROW_W-1:0]   dram_row,
  output logic [COL_W-1:0]   dram_col,
  output logic [IO_W-1:0]    dram_wdata,
  input  logic               dram_rvalid,
  input  logic [IO_W-1:0]    dram_rdata,
  // tiering table configuration
  input  logic               tt_we,
  input  logic [2:0]         tt_idx,
  input  logic [31:0]        tt_wdata,
  // statistics
  output logic [31:0]        cands_sent,
  output logic [31:0]        act_count,
  output logic [31:0]        hit_count
);

  localparam int NR = N_PE + 1;            // requesters: PEs + read fetcher
  localparam int GW = $clog2(NR);
  localparam int PW = $clog2(N_PE);

  // ---------------- Search PEs ----------------
  logic [N_PE-1:0]              pe_rd_valid, pe_rd_ready;
  logic [N_PE-1:0]              pe_req_valid, pe_req_ready, pe_rsp_valid;
  logic [N_PE-1:0][31:0]        pe_req_addr;
  logic [63:0]                  rsp_word;
  logic [N_PE-1:0]              pe_out_valid, pe_out_ready, pe_idle;
  logic [N_PE-1:0][15:0]        pe_out_id, pe_out_len;
  logic [N_PE-1:0][31:0]        pe_out_loc;
  logic [N_PE-1:0][7:0]         pe_out_votes;
  logic [N_PE-1:0][2*MAX_READ-1:0] pe_out_bases;
  logic [IO_W-1:0]              rd_beat;

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    search_pe #(.K(K), .STRIDE(STRIDE), .QDEPTH(QDEPTH)) u_pe (
      .clk, .rst_n, .ptr_base, .cal_base, .min_votes,
      .rd_valid(pe_rd_valid[p]), .rd_ready(pe_rd_ready[p]),
      .rd_id(rd_beat[2*MAX_READ +: 16]), .rd_len(rd_beat[2*MAX_READ+16 +: 16]),
      .rd_bases(rd_beat[2*MAX_READ-1:0]),
      .mem_req_valid(pe_req_valid[p]), .mem_req_ready(pe_req_ready[p]),
      .mem_req_addr(pe_req_addr[p]), .mem_rsp_valid(pe_rsp_valid[p]), .mem_rsp_data(rsp_word),
      .out_valid(pe_out_valid[p]), .out_ready(pe_out_ready[p]), .out_id(pe_out_id[p]),
      .out_len(pe_out_len[p]), .out_loc(pe_out_loc[p]), .out_votes(pe_out_votes[p]),
      .out_bases(pe_out_bases[p]), .idle(pe_idle[p])
    );
  end

  // ---------------- DRAM controller + tiering table ----------------
  logic             mc_req_valid, mc_req_ready, mc_rsp_valid;
  logic [ROW_W-1:0] mc_req_row, tt_row;
  logic [COL_W-1:0] mc_req_col;
  logic [IO_W-1:0]  mc_rsp_data;
  logic [7:0]       t_rcd, t_ras, t_rp;
  logic [2:0]       tt_tier;
  logic [31:0]      tt_rdata;

  tiering_table u_tt (
    .clk, .rst_n, .cfg_we(tt_we), .cfg_idx(tt_idx), .cfg_wdata(tt_wdata), .cfg_rdata(tt_rdata),
    .row(tt_row), .tier(tt_tier), .t_rcd, .t_ras, .t_rp
  );

  bank_ctrl u_mc (
    .clk, .rst_n,
    .req_valid(mc_req_valid), .req_ready(mc_req_ready), .req_we(1'b0),
    .req_bank(4'd0), .req_row(mc_req_row), .req_col(mc_req_col), .req_wdata('0),
    .rsp_valid(mc_rsp_valid), .rsp_data(mc_rsp_data),
    .tt_row, .t_rcd, .t_ras, .t_rp,
    .dram_cmd, .dram_bank, .dram_row, .dram_col, .dram_wdata, .dram_rvalid, .dram_rdata,
    .act_count, .hit_count
  );

  // ---------------- request arbiter ----------------
  logic [15:0]   reads_left, reads_fetched;
  logic          rd_hold;                  // fetched read waiting for its PE
  logic [PW-1:0] rd_pe;                    // PE receiving the next read
  logic          outstanding;
  logic [GW-1:0] grant, rr;
  logic [3:0]    word_sel;
  logic          fetch_req;
  logic [NR-1:0] reqs;
  logic          any_req;
  logic [GW-1:0] pick;

  assign fetch_req = (reads_left != '0) && !rd_hold;

  always_comb begin
    reqs = {fetch_req, pe_req_valid};
    any_req = 1'b0;
    pick = '0;
    for (int n = 0; n < NR; n++) begin
      int c;
      c = (int'(rr) + n) % NR;
      if (!any_req && reqs[c]) begin any_req = 1'b1; pick = GW'(c); end
    end
  end

  always_comb begin
    logic [31:0] w;
    logic [31:0] lin;
    w = pe_req_addr[PW'(pick)];
    if (32'(pick) == N_PE) begin
      lin        = 32'(reads_fetched);
      mc_req_row = read_row + ROW_W'(lin >> COL_W);
    end else begin
      lin        = w >> 4;
      mc_req_row = ROW_W'(lin >> COL_W);
    end
    mc_req_col   = COL_W'(lin);
    mc_req_valid = !outstanding && any_req;
    pe_req_ready = '0;
    if (!outstanding && any_req && mc_req_ready && 32'(pick) < N_PE) pe_req_ready[PW'(pick)] = 1'b1;
    rsp_word     = mc_rsp_data[word_sel*64 +: 64];
    pe_rsp_valid = '0;
    if (mc_rsp_valid && 32'(grant) < N_PE) pe_rsp_valid[PW'(grant)] = 1'b1;
    pe_rd_valid  = '0;
    if (rd_hold) pe_rd_valid[rd_pe] = 1'b1;
  end

  // ---------------- candidate sender ----------------
  logic            inj_valid, inj_ready, ej_valid;
  flit_hdr_t       inj_hdr, ej_hdr;
  logic [IO_W-1:0] inj_data, ej_data;
  logic            osel_found;
  logic [PW-1:0]   osel;
  logic [PU_ID_W-1:0] dst;
  cand_payload_t   cp;

  always_comb begin
    osel_found = 1'b0; osel = '0;
    for (int p = N_PE-1; p >= 0; p--) if (pe_out_valid[p]) begin osel_found = 1'b1; osel = PW'(p); end
    pe_out_ready = '0;
    if (osel_found && inj_ready) pe_out_ready[osel] = 1'b1;
    cp          = '0;
    cp.read_id  = pe_out_id[osel];
    cp.read_len = pe_out_len[osel];
    cp.loc      = pe_out_loc[osel];
    cp.bases    = pe_out_bases[osel];
  end
  assign inj_valid = osel_found;

  // transmit framing through the fusion unit; a Search PU takes no tiles
  logic dfu_a_we, dfu_b_we, dfu_cand_valid;
  logic [10:0] dfu_a_addr;
  logic [7:0]  dfu_b_row;
  logic [2:0]  dfu_b_beat;
  logic [IO_W-1:0] dfu_payload;
  cand_payload_t   dfu_cand;

  data_fusion_unit #(.BPR(8), .AW(11)) u_dfu (
    .my_id, .ti('1), .tj('1), .k('1),
    .tx_cand(1'b1), .tx_dst(dst), .tx_row('0), .tx_beat('0), .tx_payload(IO_W'(cp)),
    .tx_hdr(inj_hdr), .tx_data(inj_data),
    .rx_valid(1'b0), .rx_hdr(ej_hdr), .rx_data(ej_data),
    .a_we(dfu_a_we), .a_addr(dfu_a_addr), .b_we(dfu_b_we), .b_row(dfu_b_row),
    .b_beat(dfu_b_beat), .rx_payload(dfu_payload), .cand_valid(dfu_cand_valid), .cand(dfu_cand)
  );

  ring_switch #(.N(N_RING)) u_sw (
    .clk, .rst_n, .my_id,
    .in_valid(ring_in_valid), .in_hdr(ring_in_hdr), .in_data(ring_in_data),
    .out_valid(ring_out_valid), .out_hdr(ring_out_hdr), .out_data(ring_out_data),
    .inj_valid, .inj_ready, .inj_hdr, .inj_data,
    .ej_valid, .ej_hdr, .ej_data
  );

  assign busy = (reads_left != '0) || rd_hold || outstanding || !(&pe_idle) || osel_found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reads_left <= '0; reads_fetched <= '0; rd_hold <= 1'b0; rd_pe <= '0; rd_beat <= '0;
      outstanding <= 1'b0; grant <= '0; rr <= '0; word_sel <= '0;
      dst <= PU_ID_W'(DST_BASE); cands_sent <= '0;
    end else begin
      if (start) begin reads_left <= num_reads; reads_fetched <= '0; end
      if (mc_req_valid && mc_req_ready) begin
        outstanding <= 1'b1;
        grant       <= pick;
        rr          <= (32'(pick) == NR-1) ? '0 : pick + 1'b1;
        word_sel    <= pe_req_addr[PW'(pick)][3:0];
        if (32'(pick) == N_PE) begin
          reads_left    <= reads_left - 16'd1;
          reads_fetched <= reads_fetched + 16'd1;
        end
      end
      if (mc_rsp_valid) begin
        outstanding <= 1'b0;
        if (32'(grant) == N_PE) begin rd_beat <= mc_rsp_data; rd_hold <= 1'b1; end
      end
      if (rd_hold && pe_rd_ready[rd_pe]) begin
        rd_hold <= 1'b0;
        rd_pe   <= (32'(rd_pe) == N_PE-1) ? '0 : rd_pe + 1'b1;
      end
      if (inj_valid && inj_ready) begin
        cands_sent <= cands_sent + 32'd1;
        dst <= (32'(dst) == DST_BASE + N_DST - 1) ? PU_ID_W'(DST_BASE) : dst + 1'b1;
      end
    end
  end

endmodule
