// dup_merger: merges duplicate track candidates before the Kalman fit.
//
// Tracklet seeding runs on several redundant layer pairs, so one particle is
// usually found more than once. Following the paper, candidates that share
// stubs in three or more layers or disks are merged into one candidate
// before the fit; the fit then has about three times fewer candidates.
//
// How it works: the event's candidates arrive in the KF worker's input
// format (a seed word, then the candidate's stubs). Each complete candidate
// is compared, one stored candidate per clock cycle, with the candidates
// kept so far. Two stubs are the same stub when layer, r, phi and z agree.
// If the layers holding shared stubs number at least MIN_SHARED, the new
// candidate is merged into the first such kept candidate: its stubs that the
// kept one lacks are added (up to MAX_STUBS) and its seed is discarded.
// Otherwise it is kept as a new candidate (up to MAX_CAND; beyond that it is
// dropped and counted). After the event's last word the kept candidates are
// sent on, renumbered 0, 1, ..., each with its stubs re-sorted by
// increasing radius (one stub per cycle, chosen as the smallest remaining
// radius), the last word carrying eoe. An event with no candidate is sent as
// one empty seed word with eoe, so the next stage still sees the event end.
//
// Only the matched stubs are compared: seed words carry helix parameters,
// not the seeding stubs themselves. Which copy survives, the comparison
// order and the data formats are this design's choices.
//
// Interface: in_valid/in_ready/in_word and out_valid/out_ready/out_word are
// valid-ready streams of in_word_t. in_ready is low while a candidate is
// being compared or the event is being sent; a seed word is also held off
// until the previous candidate has been compared.
module dup_merger
  import kf_pkg::*;
#(
  parameter int MIN_SHARED = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  in_word_t    in_word,
  output logic        out_valid,
  input  logic        out_ready,
  output in_word_t    out_word,
  output logic [15:0] merged,      // candidates merged into another
  output logic [15:0] dropped      // candidates lost for lack of room
);
  typedef enum logic [1:0] { M_COLLECT, M_COMPARE, M_EMIT } mstate_e;
  mstate_e st;

  // pending candidate
  seed_t           p_seed;
  stub_t           p_stub [MAX_STUBS];
  logic [IDX_W:0]  p_n;
  logic            p_valid;
  logic            p_last;     // the event ended with this candidate

  // kept candidates
  seed_t           k_seed [MAX_CAND];
  stub_t           k_stub [MAX_CAND][MAX_STUBS];
  logic [IDX_W:0]  k_n    [MAX_CAND];
  logic [CAND_W:0] nkept;
  logic [CAND_W:0] k;          // candidate being compared / emitted

  // emission
  logic            e_seed_done;
  logic [MAX_STUBS-1:0] e_sent;
  logic [IDX_W:0]  e_cnt;

  function automatic logic same_stub(stub_t a, stub_t b);
    return a.layer == b.layer && a.r == b.r && a.phi == b.phi && a.z == b.z;
  endfunction

  // ---------------- comparison of the pending candidate with kept[k] -----
  logic [MAX_STUBS-1:0] p_dup;         // pending stub already in kept[k]
  logic [NLAYER-1:0]    shared_layers;
  int unsigned          nshared;
  logic                 is_dup;
  logic [CAND_W-1:0]    kk;

  always_comb begin
    kk = k[CAND_W-1:0];
    p_dup = '0;
    shared_layers = '0;
    for (int i = 0; i < MAX_STUBS; i++) begin
      for (int j = 0; j < MAX_STUBS; j++) begin
        if (i < int'(p_n) && j < int'(k_n[kk]) && same_stub(p_stub[i], k_stub[kk][j]))
          p_dup[i] = 1'b1;
      end
      if (p_dup[i] && int'(p_stub[i].layer) < NLAYER) shared_layers[p_stub[i].layer] = 1'b1;
    end
    nshared = $countones(shared_layers);
    is_dup  = nshared >= MIN_SHARED;
  end

  // ---------------- emission: smallest remaining radius ------------------
  logic [IDX_W-1:0] e_pick;
  logic             e_more;
  always_comb begin
    e_pick = '0;
    e_more = 1'b0;
    for (int j = 0; j < MAX_STUBS; j++) begin
      if (j < int'(k_n[kk]) && !e_sent[j] &&
          (!e_more || k_stub[kk][j].r < k_stub[kk][e_pick].r)) begin
        e_pick = IDX_W'(j);
        e_more = 1'b1;
      end
    end
  end

  wire last_cand = (k + 1'b1 >= nkept);
  always_comb begin
    out_word = '0;
    out_valid = 1'b0;
    if (st == M_EMIT) begin
      out_valid = 1'b1;
      if (nkept == '0) begin
        out_word.kind = W_SEED;          // empty event marker
        out_word.eoe  = 1'b1;
      end else if (!e_seed_done) begin
        out_word.kind        = W_SEED;
        out_word.seed        = k_seed[kk];
        out_word.seed.slot   = kk;
        out_word.seed.nstubs = k_n[kk];
        out_word.eoe         = last_cand && (k_n[kk] == '0);
      end else begin
        out_word.kind      = W_STUB;
        out_word.stub      = k_stub[kk][e_pick];
        out_word.stub.slot = kk;
        out_word.stub.idx  = e_cnt[IDX_W-1:0];
        out_word.eoe       = last_cand && (e_cnt + 1'b1 == k_n[kk]);
      end
    end
  end

  assign in_ready = (st == M_COLLECT) && !(in_word.kind == W_SEED && p_valid);
  wire accept = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= M_COLLECT;
      p_valid     <= 1'b0;
      p_last      <= 1'b0;
      p_n         <= '0;
      nkept       <= '0;
      k           <= '0;
      e_seed_done <= 1'b0;
      e_sent      <= '0;
      e_cnt       <= '0;
      merged      <= '0;
      dropped     <= '0;
    end else begin
      case (st)
        M_COLLECT: begin
          if (accept) begin
            if (in_word.kind == W_SEED) begin
              p_seed  <= in_word.seed;
              p_n     <= '0;
              p_valid <= 1'b1;
            end else if (p_valid && p_n < (IDX_W+1)'(MAX_STUBS)) begin
              p_stub[p_n[IDX_W-1:0]] <= in_word.stub;
              p_n <= p_n + 1'b1;
            end
            if (in_word.eoe) begin
              p_last <= 1'b1;
              k      <= '0;
              st     <= (p_valid || in_word.kind == W_SEED) ? M_COMPARE : M_EMIT;
            end
          end else if (in_valid && in_word.kind == W_SEED && p_valid) begin
            k  <= '0;
            st <= M_COMPARE;
          end
        end
        M_COMPARE: begin
          if (k < nkept && is_dup) begin
            // merge the pending candidate's new stubs into kept[k]
            automatic logic [IDX_W:0] n = k_n[kk];
            for (int i = 0; i < MAX_STUBS; i++) begin
              if (i < int'(p_n) && !p_dup[i] && n < (IDX_W+1)'(MAX_STUBS)) begin
                k_stub[kk][n[IDX_W-1:0]] <= p_stub[i];
                n = n + 1'b1;
              end
            end
            k_n[kk] <= n;
            merged  <= merged + 1'b1;
            p_valid <= 1'b0;
            k       <= '0;
            st      <= p_last ? M_EMIT : M_COLLECT;
          end else if (k < nkept) begin
            k <= k + 1'b1;
          end else begin
            if (nkept < (CAND_W+1)'(MAX_CAND)) begin
              k_seed[nkept[CAND_W-1:0]] <= p_seed;
              for (int i = 0; i < MAX_STUBS; i++) k_stub[nkept[CAND_W-1:0]][i] <= p_stub[i];
              k_n[nkept[CAND_W-1:0]] <= p_n;
              nkept <= nkept + 1'b1;
            end else begin
              dropped <= dropped + 1'b1;
            end
            p_valid <= 1'b0;
            k       <= '0;
            st      <= p_last ? M_EMIT : M_COLLECT;
          end
        end
        default: begin  // M_EMIT
          if (out_ready) begin
            if (nkept == '0) begin
              st     <= M_COLLECT;
              p_last <= 1'b0;
            end else if (!e_seed_done || e_more) begin
              if (!e_seed_done) e_seed_done <= 1'b1;
              else begin
                e_sent[e_pick] <= 1'b1;
                e_cnt <= e_cnt + 1'b1;
              end
              if (out_word.eoe) begin
                st          <= M_COLLECT;
                p_last      <= 1'b0;
                nkept       <= '0;
                k           <= '0;
                e_seed_done <= 1'b0;
                e_sent      <= '0;
                e_cnt       <= '0;
              end else if (e_seed_done && e_cnt + 1'b1 == k_n[kk]) begin
                k           <= k + 1'b1;   // next candidate
                e_seed_done <= 1'b0;
                e_sent      <= '0;
                e_cnt       <= '0;
              end else if (!e_seed_done && k_n[kk] == '0) begin
                k           <= k + 1'b1;
                e_seed_done <= 1'b0;
              end
            end
          end
        end
      endcase
    end
  end
endmodule
