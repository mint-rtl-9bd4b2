// mint_model_pkg -- cycle-level reference model of one MINT+DMQ bank, used by
// the bank and rank testbenches to predict the design's outputs.
//
// The model is written from the behaviour the design implements, not from
// its code: a random-source model that keeps the first TRNG word in 0..M (or
// 1..M) after each use, the SAN/CAN/SAR tracker with the SAN = 0 transitive
// rule and the pseudo-mitigation at ACT number M+1, and a FIFO of pending
// mitigations that is served first at every REF/RFM. step() is called once per
// clock with that cycle's inputs and returns what the bank reports one cycle
// later (mitigation) or in the same cycle (pseudo, overflow).
//
// For the Row-Press extension set `frac` to the number of fractional bits
// and pass each activation's fixed-point weight `w`: CAN then adds w, the
// window closes when CAN would pass M, and the activation whose addition
// reaches SAN is selected.
package mint_model_pkg;

  typedef struct {
    bit valid;
    int row;
    int lvl;
    bit from_dmq;
  } mit_t;

  class mint_bank_model;
    int M;
    bit transitive;
    int depth;
    int lvl_max;
    int frac = 0;
    // random source
    int san_next;
    bit fresh;
    // tracker
    int san, can;
    bit sar_v;
    int sar_row, sar_lvl;
    // DMQ
    int q_row[$];
    int q_lvl[$];

    function new(int m, bit trans, int dq, int lmax);
      M = m; transitive = trans; depth = dq; lvl_max = lmax;
      reset();
    endfunction

    function void reset();
      san_next = M / 2 + 1; fresh = 0;
      san = 0; can = 0; sar_v = 0; sar_row = 0; sar_lvl = 0;
      q_row.delete(); q_lvl.delete();
    endfunction

    // One clock edge. Returns the mitigation reported next cycle.
    function mit_t step(int rng, bit act, int row, bit cmd,
                        output bit pseudo, output bit overflow, input int w = 1);
      mit_t r;
      bit reload, in_range;
      int s_in;
      r = '{valid: 0, row: 0, lvl: 0, from_dmq: 0};
      pseudo = 0; overflow = 0;
      s_in = san_next;
      reload = 0;
      if (cmd) begin
        if (q_row.size() > 0) begin
          r.valid = 1; r.row = q_row.pop_front(); r.lvl = q_lvl.pop_front(); r.from_dmq = 1;
        end else begin
          r.valid = sar_v; r.row = sar_row; r.lvl = sar_lvl;
          reload = 1;
          can = 0;
          san = s_in;
          if (s_in == 0 && sar_v) sar_lvl = (sar_lvl == lvl_max) ? sar_lvl : sar_lvl + 1;
          else sar_v = 0;
        end
      end else if (act) begin
        if (can + w > (M << frac)) begin
          pseudo = 1;
          reload = 1;
          if (sar_v) begin
            if (q_row.size() < depth) begin
              q_row.push_back(sar_row); q_lvl.push_back(sar_lvl);
            end else overflow = 1;
          end
          can = w;
          san = s_in;
          if (s_in != 0 && (s_in << frac) <= w) begin sar_v = 1; sar_row = row; sar_lvl = 0; end
          else if (s_in == 0 && sar_v) sar_lvl = (sar_lvl == lvl_max) ? sar_lvl : sar_lvl + 1;
          else sar_v = 0;
        end else begin
          if (can < (san << frac) && (san << frac) <= can + w) begin sar_v = 1; sar_row = row; sar_lvl = 0; end
          can = can + w;
        end
      end
      in_range = (rng <= M) && (transitive || rng != 0);
      if ((reload || !fresh) && in_range) begin
        san_next = rng; fresh = 1;
      end else if (reload) fresh = 0;
      return r;
    endfunction
  endclass

endpackage
