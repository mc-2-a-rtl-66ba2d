// pipeline_ctrl: fetch, decode and the stage-by-stage control of the MC2A
// pipeline.
//
// Every instruction travels through fixed stages, one per cycle except the
// compute unit:
//   F      PC from the hardware loop, instruction memory read
//   I0     load unit: MemSel addresses the data / sample memory banks
//   I1     register file: loaded words written, RFCtrl registers read
//   I2     crossbar: InSel routes register values to the CU operands
//   I3..   compute unit, K+1 stages, CUCtrl (modes and beta)
//   I4+K   sample unit, SUCtrl; write-back of C results into the RF
//   I5+K   store unit: samples to the sample / histogram memory
// The controller decodes the instruction type once and hands each field to
// its unit in the cycle the instruction's data reaches that unit, by
// delaying the field (the paper's "pipelined mapping of control signals").
// Which fields a type uses follows the paper's ISA table: Load uses MemSel
// and RFCtrl; C adds InSel, CUCtrl and StoreCtrl (write-back); S uses RFCtrl,
// InSel, SUCtrl and StoreCtrl (no memory load, CU bypassed); CSS uses all;
// CS (listed in the text, not in the table) uses all but StoreCtrl; NOP
// none. There are no interlocks: the program places NOPs where an
// instruction needs a result that is still in flight.
// busy is high from start until the last instruction has left the pipeline;
// done pulses for one cycle then.
module pipeline_ctrl
  import mc2a_pkg::*;
#(
  parameter int unsigned B    = P_B,
  parameter int unsigned D    = P_D,
  parameter int unsigned T    = P_T,
  parameter int unsigned K    = P_K,
  parameter int unsigned S    = P_S,
  parameter int unsigned AW   = $clog2(P_DEPTH),
  parameter int unsigned PC_W = $clog2(P_IMEM),
  localparam int unsigned IW  = field_offset(F_END, B, D, T, K, S, AW),
  localparam int unsigned BW  = clog2_1(B),
  localparam int unsigned DW  = clog2_1(D),
  localparam int unsigned NO  = T * (2**K),
  localparam int unsigned N   = AW + 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [PC_W-1:0]       loop_start,
  input  logic [PC_W-1:0]       loop_end,
  input  logic [31:0]           loop_count,
  input  logic [PC_W-1:0]       prog_end,
  output logic                  busy,
  output logic                  done,
  output logic [31:0]           iter,
  // fetch
  output logic                  imem_re,
  output logic [PC_W-1:0]       imem_addr,
  input  logic [IW-1:0]         instr,
  // I0: load unit
  output logic                  ld_valid,
  output logic [B-1:0][N-1:0]   memsel,
  // I1: register file
  output logic                  rf_valid,
  output logic [B-1:0][DW-1:0]  rfctrl,
  // I2: crossbar
  output logic [NO-1:0][BW-1:0] insel,
  // I3: compute unit
  output logic                  cu_valid,
  output opcode_e               cu_opcode,
  output logic [T-1:0][1:0]     pe_mode,
  output logic [31:0]           beta,
  output logic [T-1:0]          cu_wb_en,
  // I4+K: sample unit and write-back
  output logic                  su_valid,
  output logic [S-1:0]          su_last,
  output su_mode_e              su_mode,
  output logic                  c_valid,
  output opcode_e               c_opcode,
  output logic [S-1:0]          c_en,
  output logic [BW-1:0]         c_base,
  output logic [AW-1:0]         c_row,
  // I5+K: store unit
  output logic                  s_valid,
  output opcode_e               s_opcode,
  output logic [S-1:0]          s_en,
  output logic [BW-1:0]         s_base,
  output logic [AW-1:0]         s_row
);
  localparam int unsigned O_MS = field_offset(F_MEMSEL, B, D, T, K, S, AW);
  localparam int unsigned O_RF = field_offset(F_RFCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_IN = field_offset(F_INSEL,  B, D, T, K, S, AW);
  localparam int unsigned O_CU = field_offset(F_CUCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_SU = field_offset(F_SUCTRL, B, D, T, K, S, AW);
  localparam int unsigned O_ST = field_offset(F_STORE,  B, D, T, K, S, AW);
  localparam int unsigned W_RF = B * DW;
  localparam int unsigned W_IN = NO * BW;
  localparam int unsigned W_CU = T * 2 + 32;
  localparam int unsigned W_SU = S + 1;
  localparam int unsigned W_ST = S + BW + AW;
  localparam int unsigned LAST = 5 + K;   // index of the store stage

  // ---------------- fetch ----------------
  logic [PC_W-1:0] pc;
  logic            fetch;
  hwloop #(.PC_W(PC_W)) u_hwloop (
    .clk, .rst_n, .start(start && !busy), .loop_start, .loop_end, .loop_count,
    .prog_end, .pc, .fetch, .iter
  );
  assign imem_re   = fetch;
  assign imem_addr = pc;

  // ---------------- decode (I0) ----------------
  logic    v0;
  opcode_e op0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v0 <= 1'b0;
    else        v0 <= fetch;
  end
  assign op0 = v0 ? opcode_e'(instr[OP_W-1:0]) : OP_NOP;

  function automatic logic uses_load(input opcode_e o);
    return o inside {OP_LOAD, OP_C, OP_CS, OP_CSS};
  endfunction
  function automatic logic uses_cu(input opcode_e o);
    return o inside {OP_C, OP_S, OP_CS, OP_CSS};
  endfunction
  function automatic logic uses_su(input opcode_e o);
    return o inside {OP_S, OP_CS, OP_CSS};
  endfunction

  assign ld_valid = uses_load(op0);
  assign memsel   = instr[O_MS +: B*N];

  // ---------------- per-stage delay lines ----------------
  // op[i]: type of the instruction in stage I(i); NOP when empty
  opcode_e         op  [1:LAST];
  logic [W_RF-1:0] rf_d;
  logic [W_IN-1:0] in_d [1:2];
  logic [W_CU-1:0] cu_d [1:3];
  logic [W_SU-1:0] su_d [1:4+K];
  logic [W_ST-1:0] st_d [1:LAST];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= LAST; i++) op[i] <= OP_NOP;
    end else begin
      op[1] <= op0;
      for (int i = 2; i <= LAST; i++) op[i] <= op[i-1];
    end
  end

  always_ff @(posedge clk) begin
    rf_d    <= instr[O_RF +: W_RF];
    in_d[1] <= instr[O_IN +: W_IN];
    in_d[2] <= in_d[1];
    cu_d[1] <= instr[O_CU +: W_CU];
    for (int i = 2; i <= 3; i++) cu_d[i] <= cu_d[i-1];
    su_d[1] <= instr[O_SU +: W_SU];
    for (int i = 2; i <= 4+K; i++) su_d[i] <= su_d[i-1];
    st_d[1] <= instr[O_ST +: W_ST];
    for (int i = 2; i <= LAST; i++) st_d[i] <= st_d[i-1];
  end

  // I1
  assign rf_valid = op[1] != OP_NOP && op[1] != OP_LOAD;
  assign rfctrl   = rf_d;
  // I2
  assign insel    = in_d[2];
  // I3
  assign cu_valid  = uses_cu(op[3]);
  assign cu_opcode = op[3];
  assign pe_mode   = cu_d[3][T*2-1:0];
  assign beta      = cu_d[3][T*2 +: 32];
  assign cu_wb_en  = T'(st_d[3][S-1:0]);
  // I4+K
  assign su_valid  = uses_su(op[4+K]);
  assign su_last   = su_d[4+K][S-1:0];
  assign su_mode   = su_mode_e'(su_d[4+K][S]);
  assign c_valid   = op[4+K] == OP_C;
  assign c_opcode  = op[4+K];
  assign {c_row, c_base, c_en} = st_d[4+K];
  // I5+K
  assign s_valid   = op[LAST] == OP_S || op[LAST] == OP_CSS;
  assign s_opcode  = op[LAST];
  assign {s_row, s_base, s_en} = st_d[LAST];

  // ---------------- status ----------------
  logic in_flight, busy_q;
  always_comb begin
    in_flight = v0;
    for (int i = 1; i <= LAST; i++) in_flight |= (op[i] != OP_NOP);
  end
  assign busy = fetch || in_flight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy_q <= 1'b0;
    else        busy_q <= busy;
  end
  assign done = busy_q && !busy;
endmodule
