// gs_chain_filter: Step 3 of GenStore-NM, chaining-based filtering.
//
// On start it chains the n_seeds seeds of the read, which it reads one by one,
// in reference order, from the location buffer (loc_idx -> loc_seed,
// combinational). For seed i it starts from f(i) = w_i (the k-mer length, the
// same for all seeds) and then presents each of the up to H previous seeds, held
// with their scores in the chaining buffer, to the chaining PE, one per cycle,
// keeping the largest PE score of a colinear predecessor. f(i) is then appended
// to the chaining buffer. After the last seed, done pulses for one cycle with
// best = max f(i) and pass = (best >= TH): the read goes to the host if pass is
// set and is filtered otherwise.
//
// Timing: seed i takes 2 + min(i, H) cycles (load, one cycle per predecessor,
// write); done is high sum_i (2 + min(i, H)) cycles after start was taken.
// start is accepted only while idle.
//
// From the paper: the recurrence, the PE, the 50-entry chaining buffer and the
// threshold test on the best chain. Own choices: serial evaluation with one PE,
// the colinearity test and TH = 40 (minimap2's default minimum chain score).
module gs_chain_filter
  import gs_pkg::*;
#(
  parameter int unsigned NSEED = SEED_N,
  parameter int unsigned H     = CHAIN_H,
  parameter int unsigned W     = KMER_K,
  parameter int          TH    = CHAIN_TH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(NSEED+1)-1:0] n_seeds,
  output logic [$clog2(NSEED)-1:0]   loc_idx,
  input  seed_t                      loc_seed,
  output logic                       busy,
  output logic                       done,
  output logic                       pass,
  output score_t                     best
);

  localparam int unsigned CW = $clog2(NSEED+1);
  localparam int unsigned HW = $clog2(H+1);

  typedef enum logic [1:0] { C_IDLE, C_LOAD, C_SCAN, C_WRITE } cstate_e;
  cstate_e state;

  logic [CW-1:0] i_cnt, n_reg;
  seed_t         seed_i;
  score_t        f_i;
  logic [HW-1:0] back;

  seed_t         cb_seed;
  score_t        cb_f;
  logic [HW-1:0] cb_count;
  logic          cb_clear, cb_wr;
  score_t        pe_score;
  logic          pe_colinear;

  gs_chain_buffer #(.DEPTH(H)) u_cbuf (
    .clk, .rst_n,
    .clear   (cb_clear),
    .wr_en   (cb_wr),
    .wr_seed (seed_i),
    .wr_f    (f_i),
    .rd_back (back),
    .rd_seed (cb_seed),
    .rd_f    (cb_f),
    .count   (cb_count)
  );

  gs_chain_pe u_pe (
    .x_i (seed_i.x), .y_i (seed_i.y),
    .x_j (cb_seed.x), .y_j (cb_seed.y),
    .w_i (8'(W)),
    .f_j (cb_f),
    .score    (pe_score),
    .colinear (pe_colinear)
  );

  assign loc_idx  = ($clog2(NSEED))'(i_cnt);
  assign cb_clear = (state == C_IDLE) && start;
  assign cb_wr    = (state == C_WRITE);
  assign busy     = (state != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= C_IDLE;
      i_cnt  <= '0;
      n_reg  <= '0;
      seed_i <= '0;
      f_i    <= '0;
      back   <= '0;
      best   <= '0;
      done   <= 1'b0;
      pass   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          i_cnt <= '0;
          n_reg <= n_seeds;
          best  <= SCORE_W'(W);
          if (n_seeds == '0) begin
            done  <= 1'b1;
            pass  <= (W >= TH);
          end else begin
            state <= C_LOAD;
          end
        end
        C_LOAD: begin
          seed_i <= loc_seed;
          f_i    <= SCORE_W'(W);
          back   <= HW'(1);
          state  <= (cb_count == '0) ? C_WRITE : C_SCAN;
        end
        C_SCAN: begin
          if (pe_colinear && pe_score > f_i) f_i <= pe_score;
          if (back == cb_count) state <= C_WRITE;
          else                  back  <= back + 1'b1;
        end
        C_WRITE: begin
          if (f_i > best) best <= f_i;
          if (i_cnt + 1'b1 == n_reg) begin
            done  <= 1'b1;
            pass  <= ((f_i > best) ? f_i : best) >= score_t'(TH);
            state <= C_IDLE;
          end else begin
            i_cnt <= i_cnt + 1'b1;
            state <= C_LOAD;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
