// unicaim_pkg: shared constants, types and encodings of the UniCAIM key-cache macro.
//
// The paper's main configuration holds 576 key tokens (512 heavy tokens kept after the
// prefill stage plus 64 entries reserved for decoding), each of hidden dimension 128, one
// signed multilevel key per cell, and quantises sense-line currents with 10-bit SAR ADCs,
// 64 of them in parallel. Those numbers are the defaults below.
//
// Analog quantities are carried as integers:
//  * A key is a signed value in quarter steps, -4..+4 meaning -1.00..+1.00 (nine levels,
//    the nine VTH curves of the multilevel cell).
//  * A FeFET threshold is a level index 0..8: 0 = V_L (lowest VTH, largest current),
//    2 = V_L', 4 = V_M, 6 = V_H', 8 = V_H. A key k is stored as the pair
//    (VTH1, VTH1b) = (4-k, 4+k): +1 -> (V_L,V_H), -1 -> (V_H,V_L), 0 -> (V_M,V_M),
//    +0.5 -> (V_L',V_H'), as in the paper's cell truth table.
//  * A cell current is 8 - level units when its bit line carries the read voltage, else 0.
//    This linear current model is this design's choice (the paper shows I_SL linear in the
//    MAC value). A row's sense-line current is then 4*d - score, score = sum(q*k) in quarter
//    units, so a higher attention score gives a smaller current, as the paper describes.
//  * A sense-line voltage is an integer in 0..8*d, V_DD = 8*d.
package unicaim_pkg;

  localparam int unsigned H_TOKENS  = 512;   // heavy tokens kept after prefill
  localparam int unsigned M_TOKENS  = 64;    // entries reserved for decoding
  localparam int unsigned N_ROWS    = H_TOKENS + M_TOKENS;  // 576 rows
  localparam int unsigned D_DIM     = 128;   // hidden dimension per token
  localparam int unsigned TOP_K     = 64;    // tokens kept by dynamic pruning = ADC count
  localparam int unsigned ADC_BITS  = 10;    // SAR ADC resolution

  localparam int unsigned VTH_MAX   = 8;     // highest VTH level index (V_H)
  localparam int unsigned KEY_MAX   = 4;     // +1.00 in quarter steps

  typedef logic [3:0]        vth_t;          // VTH level index 0..8
  typedef logic signed [3:0] key_t;          // signed key, -4..+4 quarter steps

  // Program levels of one cell (both FeFETs).
  typedef struct packed {
    vth_t vth1;
    vth_t vth1b;
  } cell_prog_t;

  // Key value -> complementary VTH pair.
  function automatic cell_prog_t key_to_prog(key_t k);
    cell_prog_t p;
    key_t kc;
    kc = (k > key_t'(KEY_MAX)) ? key_t'(KEY_MAX) : (k < -key_t'(KEY_MAX)) ? -key_t'(KEY_MAX) : k;
    p.vth1  = vth_t'(4 - int'(kc));
    p.vth1b = vth_t'(4 + int'(kc));
    return p;
  endfunction

  // Phases of one decoding step, as sequenced by the controller.
  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,
    PH_WRITE  = 3'd1,   // overwrite one row with the new key (single write cycle)
    PH_CAM    = 3'd2,   // CAM mode: SL race, top-k latched on Ctrl1
    PH_SHARE  = 3'd3,   // S1 closed: charge sharing C_SL -> C_Acc
    PH_STATIC = 3'd4,   // C_Acc discharge race, evicted row latched on Ctrl2
    PH_ATTN   = 3'd5,   // current-domain CIM: MUX + ADC conversion of the top-k rows
    PH_DONE   = 3'd6
  } phase_t;

endpackage
