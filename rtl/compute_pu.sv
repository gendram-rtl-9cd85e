// compute_pu: a Compute PU, the near-bank cluster that runs APSP tiles and
// banded alignments.
//
// Contents (the paper's PU figure): N_PE Compute PEs, the shared memory, the
// combiner, the max/min engine, the data fusion unit and the ring switch, plus
// the PU's DRAM controller and tiering table for its bank-group.
//
// The PU owns one B x B tile of the distance matrix, B = N_PE * LANES
// (256 by default); PE p holds columns p*LANES .. p*LANES+LANES-1. Commands
// from the central controller (cmd_valid, cmd_ready = idle):
//   PC_LOAD   read the tile from DRAM (B*B/32 beats from row cmd_row, bank
//             cmd_bank) into the PEs' C banks; also latches the tile
//             coordinates (cmd_ti, cmd_tj)
//   PC_SEND   broadcast the tile on the ring, one 1024-bit beat per flit
//   PC_UPDATE run Block_Update(C, A, B) for pivot index cmd_k:
//               for k2 in 0..B-1, for i in 0..B-1:
//                 C[i][:] = min(C[i][:], A[i][k2] + B[k2][:])
//             one row per cycle on all PEs, B*B cycles. A is the shared
//             memory (tile (ti,k) received from the ring) unless tj == k, when
//             it is the tile itself; B is the PE B banks (tile (k,tj) received)
//             unless ti == k, when it is the tile itself. This covers the
//             pivot self-update, the pivot row/column update and the internal
//             update of blocked Floyd-Warshall.
//   PC_STORE  write the tile back to DRAM; done pulses when the last beat is
//             handed to the bank controller (a posted write: it reaches the
//             array a few cycles later, in order with any later request)
// done pulses when a command ends. Tile beats arriving on the ring are
// placed by the data fusion unit at any time, against the pivot index on
// cmd_k, which the controller holds for the whole super-step (cmd_valid
// or not), so tiles can arrive before this PU gets its own command.
//
// Genomics: candidate flits from the Search PUs wait in a CQ_DEPTH FIFO
// (cand_drops counts flits lost to a full FIFO). When no command is pending the
// PU takes one, fetches two reference beats (1024 bases) from DRAM around the
// candidate (row ref_row, reference stored 2 bits per base), runs the banded
// alignment on PE0 one read base per cycle, and lets the max/min engine pick
// the best score of the last row, which leaves through res_*.
//
// Follows the paper: PE count, slice width, shared memory as the A-tile store,
// ring broadcast of pivot data, banded max-plus alignment and the engine's
// max selection. This design's choices: command set, one alignment at a time
// on PE0, the candidate FIFO, reference layout and band placement
// (lane d <-> reference position loc - LANES/2 + i + d).
module compute_pu
  import gendram_pkg::*;
#(
  parameter int N_PE     = 16,
  parameter int LANES    = 16,
  parameter int N_RING   = 32,
  parameter int CQ_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PU_ID_W-1:0] my_id,
  // controller command
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  pu_cmd_e            cmd,
  input  logic [TILE_IDX_W-1:0] cmd_ti,
  input  logic [TILE_IDX_W-1:0] cmd_tj,
  input  logic [TILE_IDX_W-1:0] cmd_k,         // current pivot index, held for the super-step
  input  logic [3:0]         cmd_bank,
  input  logic [ROW_W-1:0]   cmd_row,
  input  logic [ROW_W-1:0]   ref_row,
  output logic               done,
  output logic               busy,          // command, alignment or queued candidate pending
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
  // alignment results
  output logic               res_valid,
  input  logic               res_ready,
  output logic [15:0]        res_id,
  output logic [31:0]        res_loc,
  output logic signed [ELEM_W-1:0] res_score,
  // statistics
  output logic [31:0]        act_count,
  output logic [31:0]        hit_count,
  output logic [31:0]        cand_drops
);

  localparam int B     = N_PE * LANES;          // tile edge
  localparam int BPR   = B / EPB;               // beats per tile row
  localparam int PPB   = EPB / LANES;           // PEs per beat
  localparam int TOT   = B * BPR;               // beats per tile
  localparam int RW    = $clog2(B);
  localparam int SAW   = $clog2(TOT);
  localparam int SLW   = LANES * ELEM_W;
  localparam int OFF   = LANES / 2;

  // ---------------- state ----------------
  typedef enum logic [3:0] {
    P_IDLE, P_LOAD, P_UPD, P_UPD_END, P_ROWRD, P_ROWWAIT, P_BEATS,
    P_FETCH, P_ALN, P_ALN_END, P_RED, P_RES
  } state_e;
  state_e st;

  logic [TILE_IDX_W-1:0] ti, tj, kk;
  logic [3:0]            bank_q;
  logic [ROW_W-1:0]      row_q;
  logic                  to_ring;
  logic [31:0]           t_req, t_rsp, i_cnt, k_cnt;
  logic                  outstanding;

  // ---------------- PEs ----------------
  logic [N_PE-1:0]            pe_ld_en;
  logic                       pe_ld_sel;
  logic [RW-1:0]              pe_ld_row;
  logic [N_PE-1:0][SLW-1:0]   pe_ld_data;
  logic                       pe_st_en;
  logic [RW-1:0]              pe_st_row;
  logic [N_PE-1:0][SLW-1:0]   pe_st_data;
  logic [N_PE-1:0]            pe_op_valid;
  logic                       pe_op_aln, pe_op_bsel, pe_op_init;
  logic [RW-1:0]              pe_op_i, pe_op_k;
  logic [1:0]                 pe_qbase;
  logic [LANES-1:0][1:0]      pe_rbases;
  logic [N_PE-1:0]            pe_s2_valid;
  logic [N_PE-1:0][SLW-1:0]   pe_s2_crow;
  logic [N_PE-1:0][SLW-1:0]   pe_hrow;
  logic signed [ELEM_W-1:0]   a_in;

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    compute_pe #(.LANES(LANES), .ROWS(B)) u_pe (
      .clk, .rst_n, .prec(PREC_INT32),
      .ld_en(pe_ld_en[p]), .ld_sel(pe_ld_sel), .ld_row(pe_ld_row), .ld_data(pe_ld_data[p]),
      .st_en(pe_st_en), .st_row(pe_st_row), .st_data(pe_st_data[p]),
      .op_valid(pe_op_valid[p]), .op_aln(pe_op_aln), .op_bsel(pe_op_bsel),
      .op_i(pe_op_i), .op_k(pe_op_k), .op_qbase(pe_qbase), .op_rbases(pe_rbases),
      .op_init(pe_op_init),
      .s2_valid(pe_s2_valid[p]), .s2_crow(pe_s2_crow[p]), .a_in(a_in), .hrow(pe_hrow[p])
    );
  end

  // ---------------- shared memory (A operand) ----------------
  logic            sm_we, sm_re;
  logic [SAW-1:0]  sm_waddr, sm_raddr;
  logic [IO_W-1:0] sm_wdata, sm_rdata;

  shared_memory #(.WIDTH(IO_W), .DEPTH(TOT)) u_smem (
    .clk, .wr_en(sm_we), .wr_addr(sm_waddr), .wr_data(sm_wdata),
    .rd_en(sm_re), .rd_addr(sm_raddr), .rd_data(sm_rdata)
  );

  // ---------------- ring switch + data fusion ----------------
  logic            inj_valid, inj_ready, ej_valid;
  flit_hdr_t       inj_hdr, ej_hdr;
  logic [IO_W-1:0] inj_data, ej_data;

  ring_switch #(.N(N_RING)) u_sw (
    .clk, .rst_n, .my_id,
    .in_valid(ring_in_valid), .in_hdr(ring_in_hdr), .in_data(ring_in_data),
    .out_valid(ring_out_valid), .out_hdr(ring_out_hdr), .out_data(ring_out_data),
    .inj_valid, .inj_ready, .inj_hdr, .inj_data,
    .ej_valid, .ej_hdr, .ej_data
  );

  logic            cb_row_valid, cb_row_ready, cb_beat_valid, cb_beat_ready, cb_beat_last;
  logic [IO_W-1:0] cb_beat_data;
  logic [2:0]      cb_beat_idx;
  logic            rx_a_we, rx_b_we, rx_cand_valid;
  logic [SAW-1:0]  rx_a_addr;
  logic [7:0]      rx_b_row;
  logic [2:0]      rx_b_beat;
  logic [IO_W-1:0] rx_payload;
  cand_payload_t   rx_cand;
  logic [31:0]     send_row;

  data_fusion_unit #(.BPR(BPR), .AW(SAW)) u_dfu (
    .my_id, .ti, .tj, .k(cmd_k),
    .tx_cand(1'b0), .tx_dst('0), .tx_row(8'(send_row)), .tx_beat(cb_beat_idx),
    .tx_payload(cb_beat_data), .tx_hdr(inj_hdr), .tx_data(inj_data),
    .rx_valid(ej_valid), .rx_hdr(ej_hdr), .rx_data(ej_data),
    .a_we(rx_a_we), .a_addr(rx_a_addr), .b_we(rx_b_we), .b_row(rx_b_row),
    .b_beat(rx_b_beat), .rx_payload(rx_payload),
    .cand_valid(rx_cand_valid), .cand(rx_cand)
  );

  assign sm_we    = rx_a_we;
  assign sm_waddr = rx_a_addr;
  assign sm_wdata = rx_payload;

  // ---------------- combiner (tile rows -> beats) ----------------
  combiner #(.N_PE(N_PE), .LANES(LANES)) u_comb (
    .clk, .rst_n,
    .row_valid(cb_row_valid), .row_ready(cb_row_ready), .row_data(pe_st_data),
    .beat_valid(cb_beat_valid), .beat_ready(cb_beat_ready), .beat_data(cb_beat_data),
    .beat_idx(cb_beat_idx), .beat_last(cb_beat_last)
  );

  // ---------------- DRAM controller + tiering table ----------------
  logic             mc_req_valid, mc_req_ready, mc_req_we, mc_rsp_valid;
  logic [ROW_W-1:0] mc_req_row, tt_row;
  logic [COL_W-1:0] mc_req_col;
  logic [IO_W-1:0]  mc_rsp_data;
  logic [7:0]       t_rcd, t_ras, t_rp;
  logic [2:0]       tt_tier;
  logic [31:0]      tt_rdata;
  logic [31:0]      mc_lin;

  tiering_table u_tt (
    .clk, .rst_n, .cfg_we(tt_we), .cfg_idx(tt_idx), .cfg_wdata(tt_wdata), .cfg_rdata(tt_rdata),
    .row(tt_row), .tier(tt_tier), .t_rcd, .t_ras, .t_rp
  );

  bank_ctrl u_mc (
    .clk, .rst_n,
    .req_valid(mc_req_valid), .req_ready(mc_req_ready), .req_we(mc_req_we),
    .req_bank(bank_q), .req_row(mc_req_row), .req_col(mc_req_col), .req_wdata(cb_beat_data),
    .rsp_valid(mc_rsp_valid), .rsp_data(mc_rsp_data),
    .tt_row, .t_rcd, .t_ras, .t_rp,
    .dram_cmd, .dram_bank, .dram_row, .dram_col, .dram_wdata, .dram_rvalid, .dram_rdata,
    .act_count, .hit_count
  );

  // ---------------- max/min engine (best alignment score) ----------------
  logic                               eng_in_valid, eng_out_valid, eng_changed;
  logic signed [EPB-1:0][ELEM_W-1:0]  eng_a, eng_y;
  logic signed [ELEM_W-1:0]           eng_red;
  logic [$clog2(EPB)-1:0]             eng_idx;

  max_min_engine #(.LANES(EPB)) u_eng (
    .clk, .rst_n, .in_valid(eng_in_valid), .op(2'd2), .mask(EPB'((64'd1 << LANES) - 1)),
    .a(eng_a), .b('0), .out_valid(eng_out_valid), .y(eng_y), .changed(eng_changed),
    .red(eng_red), .red_idx(eng_idx)
  );

  always_comb begin
    eng_a = '0;
    for (int l = 0; l < LANES; l++) eng_a[l] = pe_hrow[0][l*ELEM_W +: ELEM_W];
  end

  // ---------------- candidate FIFO ----------------
  localparam int CQW = $clog2(CQ_DEPTH);
  cand_payload_t     cq [CQ_DEPTH];
  logic [CQW:0]      cq_cnt;
  logic [CQW-1:0]    cq_wp, cq_rp;
  cand_payload_t     cur;
  logic [2*IO_W-1:0] refwin;
  logic [31:0]       win_start, woff;
  logic              cq_pop;

  always_ff @(posedge clk) if (rx_cand_valid && cq_cnt != (CQW+1)'(CQ_DEPTH)) cq[cq_wp] <= rx_cand;

  // ---------------- datapath control ----------------
  logic [31:0] k2_s2;       // pivot column index of the op in stage 2
  logic        a_self;      // A operand taken from the tile itself

  always_comb begin
    // A[i][k2]: from the tile's own C row (self) or from the shared memory
    logic [SLW-1:0] sl;
    sl   = pe_s2_crow[k2_s2 / LANES];
    a_in = a_self ? sl[(k2_s2 % LANES)*ELEM_W +: ELEM_W]
                  : sm_rdata[(k2_s2 % EPB)*ELEM_W +: ELEM_W];
  end

  always_comb begin
    // PE load port: ring B-operand beats, else DRAM tile beats
    pe_ld_en   = '0;
    pe_ld_sel  = 1'b0;
    pe_ld_row  = RW'(t_rsp / BPR);
    pe_ld_data = '0;
    for (int p = 0; p < N_PE; p++) begin
      if (rx_b_we) begin
        pe_ld_data[p] = rx_payload[(p % PPB)*SLW +: SLW];
      end else begin
        pe_ld_data[p] = mc_rsp_data[(p % PPB)*SLW +: SLW];
      end
    end
    if (rx_b_we) begin
      pe_ld_sel = 1'b1;
      pe_ld_row = RW'(rx_b_row);
      for (int p = 0; p < N_PE; p++) pe_ld_en[p] = (32'(p / PPB) == 32'(rx_b_beat));
    end else if (st == P_LOAD && mc_rsp_valid) begin
      for (int p = 0; p < N_PE; p++) pe_ld_en[p] = (32'(p / PPB) == t_rsp % BPR);
    end
  end

  // operation issue
  always_comb begin
    pe_op_valid = '0;
    pe_op_aln   = (st == P_ALN);
    pe_op_bsel  = (ti == kk);
    pe_op_i     = RW'(i_cnt);
    pe_op_k     = RW'(k_cnt);
    pe_op_init  = (i_cnt == 0);
    pe_qbase    = cur.bases[2*i_cnt[7:0] +: 2];
    pe_rbases   = '0;
    for (int d = 0; d < LANES; d++) pe_rbases[d] = refwin[2*(woff + i_cnt + 32'(d)) +: 2];
    sm_re       = 1'b0;
    sm_raddr    = SAW'(i_cnt * BPR + k_cnt / EPB);
    if (st == P_UPD) begin
      pe_op_valid = '1;
      sm_re       = 1'b1;
    end else if (st == P_ALN) begin
      pe_op_valid[0] = 1'b1;
    end
  end

  // DRAM requests
  always_comb begin
    mc_req_valid = 1'b0;
    mc_req_we    = 1'b0;
    mc_lin       = t_req;
    if (st == P_LOAD)  mc_req_valid = !outstanding && t_req < TOT;
    if (st == P_FETCH) begin
      mc_req_valid = !outstanding && t_req < 2;
      mc_lin       = (win_start / (IO_W/2)) + t_req;
    end
    if (st == P_BEATS && !to_ring) begin
      mc_req_valid = cb_beat_valid;
      mc_req_we    = 1'b1;
      mc_lin       = send_row * BPR + 32'(cb_beat_idx);
    end
    mc_req_row = (st == P_FETCH) ? ref_row + ROW_W'(mc_lin >> COL_W)
                                 : row_q + ROW_W'(mc_lin >> COL_W);
    mc_req_col = COL_W'(mc_lin);
  end

  assign cb_beat_ready = to_ring ? inj_ready : mc_req_ready;
  assign inj_valid     = (st == P_BEATS) && to_ring && cb_beat_valid;
  assign pe_st_en      = (st == P_ROWRD);
  assign pe_st_row     = RW'(send_row);
  assign cb_row_valid  = (st == P_ROWWAIT);
  assign cmd_ready     = (st == P_IDLE);
  assign busy          = (st != P_IDLE) || (cq_cnt != '0) || res_valid;
  assign eng_in_valid  = (st == P_RED);
  assign cq_pop        = (st == P_IDLE) && !cmd_valid && cq_cnt != '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; ti <= '0; tj <= '0; kk <= '0; bank_q <= '0; row_q <= '0; to_ring <= 1'b0;
      t_req <= '0; t_rsp <= '0; i_cnt <= '0; k_cnt <= '0; outstanding <= 1'b0;
      k2_s2 <= '0; a_self <= 1'b0; send_row <= '0; done <= 1'b0;
      cq_cnt <= '0; cq_wp <= '0; cq_rp <= '0; cur <= '0; refwin <= '0; win_start <= '0; woff <= '0;
      res_valid <= 1'b0; res_id <= '0; res_loc <= '0; res_score <= '0; cand_drops <= '0;
    end else begin
      done <= 1'b0;
      // candidate FIFO
      if (rx_cand_valid) begin
        if (cq_cnt != (CQW+1)'(CQ_DEPTH)) cq_wp <= cq_wp + 1'b1;
        else                              cand_drops <= cand_drops + 32'd1;
      end
      cq_cnt <= cq_cnt + (CQW+1)'(rx_cand_valid && cq_cnt != (CQW+1)'(CQ_DEPTH)) - (CQW+1)'(cq_pop);
      if (st == P_UPD) k2_s2 <= k_cnt;
      if (res_valid && res_ready) res_valid <= 1'b0;

      unique case (st)
        P_IDLE: begin
          if (cmd_valid) begin
            kk <= cmd_k;
            unique case (cmd)
              PC_LOAD: begin
                ti <= cmd_ti; tj <= cmd_tj; bank_q <= cmd_bank; row_q <= cmd_row;
                t_req <= '0; t_rsp <= '0; outstanding <= 1'b0; st <= P_LOAD;
              end
              PC_UPDATE: begin
                i_cnt <= '0; k_cnt <= '0; a_self <= (tj == cmd_k); st <= P_UPD;
              end
              PC_SEND:  begin to_ring <= 1'b1; send_row <= '0; st <= P_ROWRD; end
              PC_STORE: begin to_ring <= 1'b0; send_row <= '0; st <= P_ROWRD; end
              default:  done <= 1'b1;
            endcase
          end else if (cq_pop) begin
            cur <= cq[cq_rp];
            cq_rp <= cq_rp + 1'b1;
            win_start <= cq[cq_rp].loc - 32'(OFF);
            woff <= (cq[cq_rp].loc - 32'(OFF)) % (IO_W/2);
            t_req <= '0; t_rsp <= '0; outstanding <= 1'b0;
            st <= P_FETCH;
          end
        end
        P_LOAD, P_FETCH: begin
          if (mc_req_valid && mc_req_ready) begin outstanding <= 1'b1; t_req <= t_req + 1; end
          if (mc_rsp_valid) begin
            outstanding <= 1'b0;
            t_rsp <= t_rsp + 1;
            if (st == P_FETCH) refwin[t_rsp[0]*IO_W +: IO_W] <= mc_rsp_data;
            if (st == P_LOAD && t_rsp + 1 == TOT) begin done <= 1'b1; st <= P_IDLE; end
            if (st == P_FETCH && t_rsp == 1) begin i_cnt <= '0; st <= P_ALN; end
          end
        end
        P_UPD: begin
          if (i_cnt == B-1) begin
            i_cnt <= '0;
            if (k_cnt == B-1) st <= P_UPD_END;
            else              k_cnt <= k_cnt + 1;
          end else i_cnt <= i_cnt + 1;
        end
        P_UPD_END: begin done <= 1'b1; st <= P_IDLE; end
        P_ROWRD:   st <= P_ROWWAIT;
        P_ROWWAIT: st <= P_BEATS;
        P_BEATS: if (cb_beat_valid && cb_beat_ready && cb_beat_last) begin
          if (send_row == B-1) begin done <= 1'b1; st <= P_IDLE; end
          else begin send_row <= send_row + 1; st <= P_ROWRD; end
        end
        P_ALN: begin
          if (i_cnt + 1 >= 32'(cur.read_len)) st <= P_ALN_END;
          i_cnt <= i_cnt + 1;
        end
        P_ALN_END: st <= P_RED;     // last row lands in hrow
        P_RED:     if (!res_valid || res_ready) st <= P_RES;
        P_RES: if (eng_out_valid) begin
          res_valid <= 1'b1; res_id <= cur.read_id; res_loc <= cur.loc; res_score <= eng_red;
          st <= P_IDLE;
        end
        default: st <= P_IDLE;
      endcase
    end
  end

endmodule
