// Shared types and constants of the molecular similarity search accelerator.
//
// Fingerprints are 1024-bit Morgan bit vectors. Similarity is the Tanimoto
// coefficient |A and B| / |A or B|, carried as a 12-bit unsigned fraction
// (score = floor(4096 * inter / union), 1.0 saturated to 4095). A larger
// score means a closer compound. The 1024-bit length and the 12-bit score
// width follow the paper; the exact fixed-point encoding, the 21-bit compound
// index (room for the 1.9 million ChEMBL compounds) and the candidate record
// layout are this design's own choices.
package mss_pkg;

  localparam int unsigned FP_W    = 1024;               // fingerprint length L
  localparam int unsigned SCORE_W = 12;                 // Tanimoto score width
  localparam int unsigned ID_W    = 21;                 // compound index width
  localparam int unsigned CNT_W   = $clog2(FP_W + 1);   // bit count width (11)

  typedef logic [SCORE_W-1:0] score_t;
  typedef logic [ID_W-1:0]    id_t;
  typedef logic [CNT_W-1:0]   cnt_t;

  // One scored compound. 'valid' = 0 marks padding that ranks below any
  // real entry.
  typedef struct packed {
    logic   valid;
    score_t score;
    id_t    id;
  } cand_t;

  // Ranking used by every sorter: valid before invalid, then higher score,
  // then lower index (so ties resolve deterministically).
  function automatic logic cand_better(cand_t a, cand_t b);
    if (a.valid != b.valid) return a.valid;
    if (a.score != b.score) return a.score > b.score;
    return a.id < b.id;
  endfunction

endpackage
