// eltf_pkg: types and constants shared by the ELiTeFormer generation accelerator.
//
// Number formats (this design's choice; the paper computes attention and
// normalisation in FP32 and keeps only the projections in INT8/ternary):
//   act_t   signed 16-bit activation, Q8.8 (value = int / 256)
//   q8_t    signed 8-bit quantised activation fed to the ELTF PEs
//   wide    Q.16 fixed point (value = int / 65536) for attention sums
// A ternary weight is a 2-bit index: 2'b00 -> 0, 2'b01 -> +1, 2'b11 -> -1,
// 2'b10 -> 0 (unused code). Four of them form one 8-bit weight dataframe,
// weight n in bits [2n+1:2n]. A 512-bit memory frame holds 64 dataframes
// (256 weights), dataframe k in bits [8k+7:8k].
package eltf_pkg;
  localparam int unsigned AXI_DW      = 512;  // memory bus width (paper: up to 512 bits)
  localparam int unsigned AXI_AW      = 40;   // byte address width (assumed)
  localparam int unsigned DF_W        = 8;    // weight dataframe width
  localparam int unsigned W_PER_DF    = 4;    // ternary weights per dataframe
  localparam int unsigned DF_PER_FRAME = AXI_DW / DF_W;  // 64
  localparam int unsigned FRAME_BYTES = AXI_DW / 8;     // 64
  localparam int unsigned MAX_BURST   = 4096 / FRAME_BYTES; // 4 kB burst = 64 beats
  localparam int unsigned ACT_FRAC    = 8;    // Q8.8 activations
  localparam int unsigned ACTS_PER_FRAME = AXI_DW / 16; // 32 gamma entries per frame

  typedef logic signed [15:0] act_t;
  typedef logic signed [7:0]  q8_t;
  typedef logic [DF_W-1:0]    wdf_t;

  // The four stages of one decoder layer (paper Sec. 3.3 / Fig. 2).
  typedef enum logic [1:0] {ST_QKV = 2'd0, ST_ATTN = 2'd1, ST_FFN12 = 2'd2, ST_FFN3 = 2'd3} stage_e;
  localparam int unsigned N_STAGES = 4;

  // Ternary index -> masks used by the ELTF PE instead of a multiplier.
  typedef struct packed {
    logic       flip;   // Bit Flip Mask (all ones when set)
    logic       pass;   // Null Value Mask (all ones when set, zero nullifies)
    logic       cpl;    // 2's complement value (+1 after the flip)
  } tmask_t;

  function automatic tmask_t tern_mask(input logic [1:0] idx);
    unique case (idx)
      2'b01:   return '{flip: 1'b0, pass: 1'b1, cpl: 1'b0}; // +1: pass through
      2'b11:   return '{flip: 1'b1, pass: 1'b1, cpl: 1'b1}; // -1: flip sign
      default: return '{flip: 1'b0, pass: 1'b0, cpl: 1'b0}; //  0: nullify
    endcase
  endfunction

  function automatic act_t sat16(input logic signed [63:0] v);
    if (v > 64'sd32767) return 16'sh7fff;
    if (v < -64'sd32768) return 16'sh8000;
    return act_t'(v[15:0]);
  endfunction
endpackage
