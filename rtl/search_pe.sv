// search_pe: one Search PE, the seeding engine of the genomics pipeline.
//
// Seeding finds candidate alignment locations of a read by a two-step table
// lookup. For each seed position s of the read (every STRIDE bases):
//   Extractor       takes the K-base seed at s (2 bits per base) as its hash;
//   PTR access unit reads PTR[seed] = {count[63:32], start[31:0]}, the bucket
//                   of the seed in the CAL table;
//   CAL unit        reads CAL[start .. start+count-1] (at most MAX_HITS of them),
//                   each a reference position, and turns it into the read's
//                   start location loc = CAL - s;
//   Sorter          keeps up to NCAND distinct locations with a vote count
//                   (a location hit by several seeds gathers votes).
// When all seeds are done the sorter emits the locations in descending vote
// order (ties: oldest first) while they have at least min_votes votes, so the
// output is a filtered, prioritised candidate list; then the next read starts.
// Reads wait in the local memory (QDEPTH reads of 2*MAX_READ bits, 8 KB by
// default) and the one in work sits in the Buffer register.
//
// Interfaces: rd_* pushes a read (valid/ready); mem_* reads one 64-bit table
// word per request (valid/ready request, rsp_valid answer in order, one
// outstanding); out_* emits a candidate with its read (valid/ready).
// The units and their roles follow the paper; seed length, stride, table
// layout, vote filter and queue depth are this design's choices (the paper
// defers them to the index it builds on the host).
module search_pe
  import gendram_pkg::*;
#(
  parameter int K        = 12,
  parameter int STRIDE   = 12,
  parameter int MAX_HITS = 8,
  parameter int NCAND    = 16,
  parameter int QDEPTH   = 128
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [31:0]           ptr_base,
  input  logic [31:0]           cal_base,
  input  logic [7:0]            min_votes,
  // read input
  input  logic                  rd_valid,
  output logic                  rd_ready,
  input  logic [15:0]           rd_id,
  input  logic [15:0]           rd_len,
  input  logic [2*MAX_READ-1:0] rd_bases,
  // table memory port (64-bit words)
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic [31:0]           mem_req_addr,
  input  logic                  mem_rsp_valid,
  input  logic [63:0]           mem_rsp_data,
  // candidate output
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [15:0]           out_id,
  output logic [15:0]           out_len,
  output logic [31:0]           out_loc,
  output logic [7:0]            out_votes,
  output logic [2*MAX_READ-1:0] out_bases,
  output logic                  idle
);

  localparam int QW = $clog2(QDEPTH);
  localparam int CW = $clog2(NCAND);

  // ---- local memory: read queue ----
  logic [2*MAX_READ-1:0] lmem  [QDEPTH];
  logic [31:0]           lmeta [QDEPTH];
  logic [QW:0]           q_cnt;
  logic [QW-1:0]         q_wp, q_rp;

  // ---- buffer ----
  logic [2*MAX_READ-1:0] buf_bases;
  logic [15:0]           buf_id, buf_len;

  // ---- sorter table ----
  logic [NCAND-1:0]      c_vld;
  logic [31:0]           c_loc   [NCAND];
  logic [7:0]            c_votes [NCAND];

  typedef enum logic [3:0] {S_IDLE, S_LOAD, S_SEED, S_PTRQ, S_PTRW, S_CALQ, S_CALW, S_EMIT} state_e;
  state_e st;

  logic [15:0] s;
  logic [31:0] start, cnt, n;

  // extractor
  logic [2*K-1:0] seed;
  assign seed = buf_bases[2*s +: 2*K];

  // sorter lookup: existing match and first free slot
  logic [31:0]   new_loc;
  logic          hit, free_found;
  logic [CW-1:0] hit_idx, free_idx;
  assign new_loc = mem_rsp_data[31:0] - 32'(s);
  always_comb begin
    hit = 1'b0; hit_idx = '0; free_found = 1'b0; free_idx = '0;
    for (int c = NCAND-1; c >= 0; c--) begin
      if (c_vld[c] && c_loc[c] == new_loc) begin hit = 1'b1; hit_idx = CW'(c); end
      if (!c_vld[c]) begin free_found = 1'b1; free_idx = CW'(c); end
    end
  end

  // sorter selection: the entry with most votes
  logic          best_found;
  logic [CW-1:0] best_idx;
  always_comb begin
    best_found = 1'b0; best_idx = '0;
    for (int c = 0; c < NCAND; c++)
      if (c_vld[c] && (!best_found || c_votes[c] > c_votes[best_idx])) begin
        best_found = 1'b1; best_idx = CW'(c);
      end
  end

  assign rd_ready      = (q_cnt != (QW+1)'(QDEPTH));
  assign mem_req_valid = (st == S_PTRQ) || (st == S_CALQ);
  assign mem_req_addr  = (st == S_PTRQ) ? ptr_base + 32'(seed) : cal_base + start + n;
  assign out_valid     = (st == S_EMIT) && best_found && c_votes[best_idx] >= min_votes;
  assign out_id        = buf_id;
  assign out_len       = buf_len;
  assign out_loc       = c_loc[best_idx];
  assign out_votes     = c_votes[best_idx];
  assign out_bases     = buf_bases;
  assign idle          = (st == S_IDLE) && (q_cnt == '0);

  wire push = rd_valid && rd_ready;
  wire pop  = (st == S_IDLE) && (q_cnt != '0);

  always_ff @(posedge clk) begin
    if (push) begin
      lmem[q_wp]  <= rd_bases;
      lmeta[q_wp] <= {rd_len, rd_id};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt <= '0; q_wp <= '0; q_rp <= '0;
      buf_bases <= '0; buf_id <= '0; buf_len <= '0;
      c_vld <= '0;
      for (int c = 0; c < NCAND; c++) begin c_loc[c] <= '0; c_votes[c] <= '0; end
      st <= S_IDLE; s <= '0; start <= '0; cnt <= '0; n <= '0;
    end else begin
      if (push) q_wp <= q_wp + 1'b1;
      q_cnt <= q_cnt + (QW+1)'(push) - (QW+1)'(pop);
      unique case (st)
        S_IDLE: if (pop) begin
          buf_bases <= lmem[q_rp];
          {buf_len, buf_id} <= lmeta[q_rp];
          q_rp <= q_rp + 1'b1;
          st <= S_LOAD;
        end
        S_LOAD: begin
          s <= '0; c_vld <= '0;
          st <= S_SEED;
        end
        S_SEED: st <= (32'(s) + K > 32'(buf_len)) ? S_EMIT : S_PTRQ;
        S_PTRQ: if (mem_req_ready) st <= S_PTRW;
        S_PTRW: if (mem_rsp_valid) begin
          start <= mem_rsp_data[31:0];
          cnt   <= (mem_rsp_data[63:32] > 32'(MAX_HITS)) ? 32'(MAX_HITS) : mem_rsp_data[63:32];
          n     <= '0;
          if (mem_rsp_data[63:32] == '0) begin s <= s + 16'(STRIDE); st <= S_SEED; end
          else st <= S_CALQ;
        end
        S_CALQ: if (mem_req_ready) st <= S_CALW;
        S_CALW: if (mem_rsp_valid) begin
          if (hit) begin
            if (c_votes[hit_idx] != 8'hFF) c_votes[hit_idx] <= c_votes[hit_idx] + 8'd1;
          end else if (free_found) begin
            c_vld[free_idx] <= 1'b1; c_loc[free_idx] <= new_loc; c_votes[free_idx] <= 8'd1;
          end
          n <= n + 32'd1;
          if (n + 32'd1 >= cnt) begin s <= s + 16'(STRIDE); st <= S_SEED; end
          else st <= S_CALQ;
        end
        S_EMIT: begin
          if (out_valid) begin
            if (out_ready) c_vld[best_idx] <= 1'b0;
          end else begin
            c_vld <= '0;
            st <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
