// mc2a_pkg: types and constants shared by the MC2A accelerator.
//
// The accelerator runs MCMC samplers as a pipeline: a VLIW instruction loads
// words from banked memories into a banked register file, a crossbar feeds
// them to T tree-shaped processing elements (the compute unit, CU) that form
// energy scores, and S Gumbel sampler elements (the sample unit, SU) draw a
// category from those scores; results go back to the sample and histogram
// memories. This package holds the default sizes of the evaluated
// configuration (T=S=64, K=3, M=6, B=320 memory banks of 1024 words), the
// instruction types, the PE and SU modes, the host register map and the
// 16-entry, 8-bit Gumbel noise table. Sizes and the table size/precision are
// the paper's; the encodings and the register map are this design's own.
package mc2a_pkg;

  // ---- default design parameters (evaluated configuration) ----
  localparam int unsigned P_B      = 320;  // memory / RF banks (bandwidth B)
  localparam int unsigned P_D      = 8;    // registers per RF bank (own choice)
  localparam int unsigned P_T      = 64;   // PE trees in the CU
  localparam int unsigned P_K      = 3;    // tree depth, 2^K inputs per tree
  localparam int unsigned P_S      = 64;   // sampler elements, S = 2^M
  localparam int unsigned P_M      = 6;
  localparam int unsigned P_DEPTH  = 1024; // words per memory bank
  localparam int unsigned P_IMEM   = 256;  // instruction memory entries (own choice)
  localparam int unsigned DATA_W   = 32;   // int32 datapath
  localparam int unsigned SAMPLE_W = 8;    // samples: up to 256 categories
  localparam int unsigned HIST_W   = 20;   // histogram counters: 10^6 steps
  localparam int unsigned BETA_FRAC = 16;  // beta and scores are Q16.16
  localparam int unsigned LUT_SIZE = 16;   // Gumbel LUT entries
  localparam int unsigned LUT_W    = 8;    // Gumbel LUT precision
  localparam int unsigned LUT_FRAC = 5;    // fraction bits of a LUT entry
  localparam int unsigned OP_W     = 3;

  // ---- instruction types ----
  typedef enum logic [OP_W-1:0] {
    OP_NOP  = 3'd0,  // bubble, resolves hazards
    OP_LOAD = 3'd1,  // memory -> RF only
    OP_C    = 3'd2,  // compute only: accumulate, optional write-back to RF
    OP_S    = 3'd3,  // sample only: CU bypassed, samples may be stored
    OP_CS   = 3'd4,  // compute and sample, pipelined
    OP_CSS  = 3'd5   // compute, sample, store sample and count histogram
  } opcode_e;

  // ---- per-tree PE mode (2 bits of CUCtrl per tree) ----
  typedef enum logic [1:0] {
    PE_BYPASS = 2'd0,  // input 0 passes to the SU unchanged
    PE_DOT    = 2'd1,  // sum of in[2i]*in[2i+1], times beta, plus accumulator
    PE_RSUM   = 2'd2,  // sum of all inputs, times beta, plus accumulator
    PE_IDLE   = 2'd3   // lane unused
  } pe_op_e;

  typedef enum logic {
    SU_TEMPORAL = 1'b0,  // every SE samples its own distribution over N cycles
    SU_SPATIAL  = 1'b1   // all SEs form one comparator tree for one distribution
  } su_mode_e;

  // ---- host register map (cfg_sel) ----
  typedef enum logic [2:0] {
    CFG_IMEM = 3'd0,  // addr = {entry, word}
    CFG_DMEM = 3'd1,  // addr = {bank, row}
    CFG_SMEM = 3'd2,  // addr = {bank, row}
    CFG_CSR  = 3'd3   // addr = register index below
  } cfg_sel_e;

  localparam int unsigned CSR_LOOP_START = 0;
  localparam int unsigned CSR_LOOP_END   = 1;
  localparam int unsigned CSR_LOOP_COUNT = 2;
  localparam int unsigned CSR_PROG_END   = 3;

  // ---- VLIW instruction layout, packed from bit 0 upward ----
  //   opcode    OP_W
  //   MemSel    B * (AW+3)      per bank {enable, source, indirect, row}
  //   RFCtrl    B * log2(D)     per bank register index
  //   InSel     T*2^K * log2(B) per CU operand, source bank
  //   CUCtrl    T*2 + 32        per tree pe_op_e, then beta (Q16.16)
  //   SUCtrl    S + 1           per SE last flag, then su_mode_e
  //   StoreCtrl S + log2(B) + AW  lane enables, base bank, row
  typedef enum int unsigned {
    F_OP = 0, F_MEMSEL = 1, F_RFCTRL = 2, F_INSEL = 3, F_CUCTRL = 4,
    F_SUCTRL = 5, F_STORE = 6, F_END = 7
  } field_e;

  function automatic int unsigned clog2_1(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  function automatic int unsigned field_width(input field_e f, input int unsigned b,
      input int unsigned d, input int unsigned t, input int unsigned k,
      input int unsigned s, input int unsigned aw);
    case (f)
      F_OP:     return OP_W;
      F_MEMSEL: return b * (aw + 3);
      F_RFCTRL: return b * clog2_1(d);
      F_INSEL:  return t * (2**k) * clog2_1(b);
      F_CUCTRL: return t * 2 + 32;
      F_SUCTRL: return s + 1;
      F_STORE:  return s + clog2_1(b) + aw;
      default:  return 0;
    endcase
  endfunction

  // bit offset of field f (F_END gives the instruction width)
  function automatic int unsigned field_offset(input field_e f, input int unsigned b,
      input int unsigned d, input int unsigned t, input int unsigned k,
      input int unsigned s, input int unsigned aw);
    int unsigned off = 0;
    for (int i = 0; i < int'(f); i++) off += field_width(field_e'(i), b, d, t, k, s, aw);
    return off;
  endfunction

endpackage
