// gendram_top: the GenDRAM logic die.
//
// N_SRCH Search PUs (ring stops 0 .. N_SRCH-1) and N_CMP Compute PUs (stops
// N_SRCH ..), each coupled 1:1 to one DRAM bank-group through its own DRAM
// controller, are joined by a unidirectional ring and driven by the central
// controller. The DRAM stack itself sits above the die: every PU's bank-group
// command/data bus is a port of this module (dram_*[p] for ring stop p).
//
// Host side: host_start with host_mode = 0 runs blocked Floyd-Warshall APSP on
// an m x m grid of B x B tiles (B = N_PE * LANES) held at row tile_row of the
// Compute PUs' bank-groups, tile (i,j) on Compute PU (i*m + j) mod N_CMP;
// host_mode = 1 runs the genomics pipeline: each Search PU seeds num_reads
// reads stored at read_row of its bank-group against PTR/CAL tables at word
// addresses ptr_base/cal_base, and the Compute PUs align the candidates
// against the reference stored at ref_row. Alignment results leave through
// res_* (lowest-numbered Compute PU first). host_done pulses at the end.
// The tiering table write port reaches every PU's table at once.
//
// Default sizes are the paper's: 8 + 24 PUs, 16 PEs per PU, 1024-bit I/O per
// PU. Stops per ring = N_SRCH + N_CMP.
module gendram_top
  import gendram_pkg::*;
#(
  parameter int N_SRCH = 8,
  parameter int N_CMP  = 24,
  parameter int N_PE   = 16,
  parameter int LANES  = 16,
  parameter int K      = 12,
  parameter int STRIDE = 12,
  parameter int QDEPTH = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host
  input  logic                    host_start,
  input  logic                    host_mode,
  input  logic [TILE_IDX_W:0]     m,
  input  logic [ROW_W-1:0]        tile_row,
  input  logic [15:0]             num_reads,
  input  logic [ROW_W-1:0]        read_row,
  input  logic [ROW_W-1:0]        ref_row,
  input  logic [31:0]             ptr_base,
  input  logic [31:0]             cal_base,
  input  logic [7:0]              min_votes,
  output logic                    host_done,
  output logic                    host_busy,
  input  logic                    tt_we,
  input  logic [2:0]              tt_idx,
  input  logic [31:0]             tt_wdata,
  // alignment results
  output logic                    res_valid,
  input  logic                    res_ready,
  output logic [15:0]             res_id,
  output logic [31:0]             res_loc,
  output logic signed [ELEM_W-1:0] res_score,
  // DRAM bank-groups, one per ring stop
  output dram_cmd_e               dram_cmd   [N_SRCH+N_CMP],
  output logic [3:0]              dram_bank  [N_SRCH+N_CMP],
  output logic [ROW_W-1:0]        dram_row   [N_SRCH+N_CMP],
  output logic [COL_W-1:0]        dram_col   [N_SRCH+N_CMP],
  output logic [IO_W-1:0]         dram_wdata [N_SRCH+N_CMP],
  input  logic                    dram_rvalid[N_SRCH+N_CMP],
  input  logic [IO_W-1:0]         dram_rdata [N_SRCH+N_CMP],
  // statistics
  output logic [31:0]             n_supersteps,
  output logic [31:0]             n_broadcasts,
  output logic [31:0]             cands_sent,
  output logic [31:0]             cand_drops,
  output logic [31:0]             act_total,
  output logic [31:0]             hit_total
);

  localparam int NP = N_SRCH + N_CMP;

  // ring links: stop p drives link p, which feeds stop (p+1) % NP
  logic            rv [NP];
  flit_hdr_t       rh [NP];
  logic [IO_W-1:0] rd [NP];

  logic [N_CMP-1:0]       c_cmd_valid, c_done, c_busy, c_res_valid, c_res_ready;
  pu_cmd_e                c_cmd;
  logic [TILE_IDX_W-1:0]  c_ti, c_tj, c_k;
  logic [ROW_W-1:0]       c_row;
  logic [N_SRCH-1:0]      s_busy;
  logic                   s_start;
  logic [15:0]            c_res_id    [N_CMP];
  logic [31:0]            c_res_loc   [N_CMP];
  logic signed [ELEM_W-1:0] c_res_score [N_CMP];
  logic [31:0]            act_c [NP];
  logic [31:0]            hit_c [NP];
  logic [31:0]            sent_c [N_SRCH];
  logic [31:0]            drop_c [N_CMP];

  gendram_controller #(.N_SRCH(N_SRCH), .N_CMP(N_CMP), .DRAIN(NP + 8)) u_ctrl (
    .clk, .rst_n, .start(host_start), .mode(host_mode), .m, .tile_row,
    .done(host_done), .busy(host_busy),
    .cmd_valid(c_cmd_valid), .cmd(c_cmd), .cmd_ti(c_ti), .cmd_tj(c_tj), .cmd_k(c_k),
    .cmd_row(c_row), .cpu_done(c_done), .cpu_busy(c_busy),
    .srch_start(s_start), .srch_busy(s_busy),
    .n_supersteps, .n_broadcasts
  );

  for (genvar s = 0; s < N_SRCH; s++) begin : g_search
    localparam int UP = (s == 0) ? NP - 1 : s - 1;
    logic unused_cmd_ready;
    search_pu #(.N_PE(N_PE), .N_RING(NP), .N_DST(N_CMP), .DST_BASE(N_SRCH),
                .K(K), .STRIDE(STRIDE), .QDEPTH(QDEPTH)) u_spu (
      .clk, .rst_n, .my_id(PU_ID_W'(s)),
      .start(s_start), .num_reads, .read_row, .ptr_base, .cal_base, .min_votes,
      .busy(s_busy[s]),
      .ring_in_valid(rv[UP]), .ring_in_hdr(rh[UP]), .ring_in_data(rd[UP]),
      .ring_out_valid(rv[s]), .ring_out_hdr(rh[s]), .ring_out_data(rd[s]),
      .dram_cmd(dram_cmd[s]), .dram_bank(dram_bank[s]), .dram_row(dram_row[s]),
      .dram_col(dram_col[s]), .dram_wdata(dram_wdata[s]),
      .dram_rvalid(dram_rvalid[s]), .dram_rdata(dram_rdata[s]),
      .tt_we, .tt_idx, .tt_wdata,
      .cands_sent(sent_c[s]), .act_count(act_c[s]), .hit_count(hit_c[s])
    );
  end

  for (genvar c = 0; c < N_CMP; c++) begin : g_compute
    localparam int P  = N_SRCH + c;
    localparam int UP = (P == 0) ? NP - 1 : P - 1;
    logic cmd_ready;
    compute_pu #(.N_PE(N_PE), .LANES(LANES), .N_RING(NP)) u_cpu (
      .clk, .rst_n, .my_id(PU_ID_W'(P)),
      .cmd_valid(c_cmd_valid[c]), .cmd_ready, .cmd(c_cmd), .cmd_ti(c_ti), .cmd_tj(c_tj),
      .cmd_k(c_k), .cmd_bank(4'd0), .cmd_row(c_row), .ref_row,
      .done(c_done[c]), .busy(c_busy[c]),
      .ring_in_valid(rv[UP]), .ring_in_hdr(rh[UP]), .ring_in_data(rd[UP]),
      .ring_out_valid(rv[P]), .ring_out_hdr(rh[P]), .ring_out_data(rd[P]),
      .dram_cmd(dram_cmd[P]), .dram_bank(dram_bank[P]), .dram_row(dram_row[P]),
      .dram_col(dram_col[P]), .dram_wdata(dram_wdata[P]),
      .dram_rvalid(dram_rvalid[P]), .dram_rdata(dram_rdata[P]),
      .tt_we, .tt_idx, .tt_wdata,
      .res_valid(c_res_valid[c]), .res_ready(c_res_ready[c]), .res_id(c_res_id[c]),
      .res_loc(c_res_loc[c]), .res_score(c_res_score[c]),
      .act_count(act_c[P]), .hit_count(hit_c[P]), .cand_drops(drop_c[c])
    );
  end

  // result output: lowest-numbered Compute PU with a result goes first
  always_comb begin
    res_valid = 1'b0; res_id = '0; res_loc = '0; res_score = '0; c_res_ready = '0;
    for (int c = N_CMP-1; c >= 0; c--) begin
      if (c_res_valid[c]) begin
        res_valid = 1'b1; res_id = c_res_id[c]; res_loc = c_res_loc[c]; res_score = c_res_score[c];
      end
    end
    for (int c = 0; c < N_CMP; c++) begin
      if (c_res_valid[c]) begin
        c_res_ready[c] = res_ready;
        break;
      end
    end
  end

  always_comb begin
    act_total = '0; hit_total = '0; cands_sent = '0; cand_drops = '0;
    for (int p = 0; p < NP; p++) begin act_total += act_c[p]; hit_total += hit_c[p]; end
    for (int s = 0; s < N_SRCH; s++) cands_sent += sent_c[s];
    for (int c = 0; c < N_CMP; c++) cand_drops += drop_c[c];
  end

endmodule
