// gendram_controller: the logic die's central controller.
//
// It reconfigures the PU array for the two execution modes of the paper.
//
// Mode 0, homogeneous systolic broadcast (APSP, blocked Floyd-Warshall on an
// M x M grid of tiles, one tile per Compute PU, tile (i,j) on the PU given by
// the tile mapper). After loading every tile from its PU's DRAM, each
// super-step k = 0..M-1 runs
//   1. pivot update:      tile (k,k) updates itself;
//   2. pivot broadcast:   tile (k,k) is broadcast on the ring;
//   3. row/column update: tiles (k,j) and (i,k) update with it;
//   4. row/column broadcast: those tiles are broadcast, all at once, sharing
//      the ring;
//   5. internal update:   all other tiles update in parallel;
// and finally every tile is written back. Each phase issues one command per
// tile involved (one per cycle) and waits for all of them to report done; a
// broadcast phase then waits DRAIN cycles for the last flits to go round.
//
// Mode 1, heterogeneous pipeline (genomics): every Search PU is started on its
// reads; the Compute PUs consume the candidates as they arrive. The run ends
// when no PU is busy for DRAIN consecutive cycles.
//
// The phases, the broadcast pattern and the two modes follow the paper's
// scheduling figures; one-command-per-cycle issue, the done counting and the
// drain wait are this design's choices. m must satisfy m*m <= N_COMP.
module gendram_controller
  import gendram_pkg::*;
#(
  parameter int N_SRCH = 8,
  parameter int N_CMP  = 24,
  parameter int DRAIN  = 40
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  mode,        // 0 APSP, 1 genomics
  input  logic [TILE_IDX_W:0]   m,
  input  logic [ROW_W-1:0]      tile_row,
  output logic                  done,
  output logic                  busy,
  // compute PU commands
  output logic [N_CMP-1:0]      cmd_valid,
  output pu_cmd_e               cmd,
  output logic [TILE_IDX_W-1:0] cmd_ti,
  output logic [TILE_IDX_W-1:0] cmd_tj,
  output logic [TILE_IDX_W-1:0] cmd_k,
  output logic [ROW_W-1:0]      cmd_row,
  input  logic [N_CMP-1:0]      cpu_done,
  input  logic [N_CMP-1:0]      cpu_busy,
  // search PUs
  output logic                  srch_start,
  input  logic [N_SRCH-1:0]     srch_busy,
  // statistics
  output logic [31:0]           n_supersteps,
  output logic [31:0]           n_broadcasts
);

  typedef enum logic [2:0] {C_IDLE, C_ISSUE, C_WAIT, C_DRAIN, C_GEN, C_FIN} state_e;
  typedef enum logic [2:0] {PH_LOAD, PH_P1, PH_S1, PH_P2, PH_S2, PH_P3, PH_STORE} phase_e;

  state_e st;
  phase_e ph;
  logic [TILE_IDX_W-1:0] k, ii, jj;
  logic [7:0]  issued, finished;
  logic [15:0] dcnt;
  logic [PU_ID_W-1:0] tgt;

  tile_mapper #(.MOD(N_CMP), .BASE(0), .IW(TILE_IDX_W), .PW(PU_ID_W)) u_map (
    .i(ii), .j(jj), .m(m), .pu(tgt)
  );

  logic in_set;
  always_comb begin
    unique case (ph)
      PH_P1, PH_S1: in_set = (ii == k) && (jj == k);
      PH_P2, PH_S2: in_set = (ii == k) != (jj == k);
      PH_P3:        in_set = (ii != k) && (jj != k);
      default:      in_set = 1'b1;
    endcase
    unique case (ph)
      PH_LOAD:      cmd = PC_LOAD;
      PH_S1, PH_S2: cmd = PC_SEND;
      PH_STORE:     cmd = PC_STORE;
      default:      cmd = PC_UPDATE;
    endcase
    cmd_valid = '0;
    if (st == C_ISSUE && in_set) cmd_valid[tgt] = 1'b1;
    cmd_ti  = ii;
    cmd_tj  = jj;
    cmd_k   = k;
    cmd_row = tile_row;
  end

  wire last_tile = (ii == TILE_IDX_W'(m - 1)) && (jj == TILE_IDX_W'(m - 1));
  wire any_busy  = (|cpu_busy) || (|srch_busy);

  assign busy = (st != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; ph <= PH_LOAD; k <= '0; ii <= '0; jj <= '0;
      issued <= '0; finished <= '0; dcnt <= '0; done <= 1'b0; srch_start <= 1'b0;
      n_supersteps <= '0; n_broadcasts <= '0;
    end else begin
      done       <= 1'b0;
      srch_start <= 1'b0;
      finished   <= finished + 8'($countones(cpu_done));
      unique case (st)
        C_IDLE: if (start) begin
          if (mode) begin
            srch_start <= 1'b1; dcnt <= '0; st <= C_GEN;
          end else begin
            ph <= PH_LOAD; k <= '0; ii <= '0; jj <= '0; issued <= '0; finished <= '0;
            st <= C_ISSUE;
          end
        end
        C_ISSUE: begin
          if (in_set) begin
            issued <= issued + 8'd1;
            if (ph == PH_S1 || ph == PH_S2) n_broadcasts <= n_broadcasts + 32'd1;
          end
          if (last_tile) st <= C_WAIT;
          if (jj == TILE_IDX_W'(m - 1)) begin jj <= '0; ii <= ii + 1'b1; end
          else jj <= jj + 1'b1;
        end
        C_WAIT: if (finished == issued) begin
          dcnt <= '0;
          st <= (ph == PH_S1 || ph == PH_S2) ? C_DRAIN : C_FIN;
        end
        C_DRAIN: begin
          dcnt <= dcnt + 16'd1;
          if (dcnt == 16'(DRAIN)) st <= C_FIN;
        end
        C_FIN: begin
          // choose the next phase
          ii <= '0; jj <= '0; issued <= '0; finished <= '0;
          st <= C_ISSUE;
          unique case (ph)
            PH_LOAD:  ph <= PH_P1;
            PH_P1:    ph <= PH_S1;
            PH_S1:    ph <= PH_P2;
            PH_P2:    ph <= PH_S2;
            PH_S2:    ph <= PH_P3;
            PH_P3: begin
              n_supersteps <= n_supersteps + 32'd1;
              if (k == TILE_IDX_W'(m - 1)) ph <= PH_STORE;
              else begin k <= k + 1'b1; ph <= PH_P1; end
            end
            default: begin done <= 1'b1; st <= C_IDLE; end
          endcase
        end
        C_GEN: begin
          if (any_busy || srch_start) dcnt <= '0;
          else dcnt <= dcnt + 16'd1;
          if (dcnt == 16'(DRAIN)) begin done <= 1'b1; st <= C_IDLE; end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

endmodule
