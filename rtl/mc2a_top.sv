// mc2a_top: the MC2A Markov chain Monte Carlo accelerator.
//
// One chain is run as a program of VLIW instructions. Per instruction the
// load unit reads up to B words from the banked data memory (weights,
// log-probability tables) or the sample memory (current RV states), the
// multi-bank register file keeps them, a full crossbar hands any register to
// any of the T*2^K operands of the compute unit (T tree PEs of depth K), and
// the T energy scores stream straight into the S Gumbel sampler elements of
// the sample unit, without exponentials or normalisation. New samples are
// written to the sample memory and counted in the histogram memory. A
// hardware loop repeats the body of the program for the requested number of
// chain steps. Defaults are the evaluated configuration: T=S=64, K=3,
// B=320 banks of 1024 words; D=8 registers per bank is this design's choice.
// T and S must be equal (tree t feeds sampler element t).
//
// Host interface (the accelerator sits beside a host processor):
//   cfg_we/cfg_sel/cfg_addr/cfg_wdata  write the instruction memory
//       ({entry, 32-bit word}), data memory ({bank, row}), sample memory
//       ({bank, row}) or the loop registers (CSR_* indices);
//   start / busy / done                run the program from PC 0;
//   hist_clear / hist_clearing          zero all histogram counters;
//   rd_en/rd_sel/rd_addr -> rd_data     read a sample (rd_sel 0) or a
//       histogram counter (rd_sel 1) at {bank, row}, data the next cycle.
// Host writes are meant for when the accelerator is idle.
module mc2a_top
  import mc2a_pkg::*;
#(
  parameter int unsigned B          = P_B,
  parameter int unsigned D          = P_D,
  parameter int unsigned T          = P_T,
  parameter int unsigned K          = P_K,
  parameter int unsigned S          = P_S,
  parameter int unsigned DEPTH      = P_DEPTH,
  parameter int unsigned IMEM_DEPTH = P_IMEM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  cfg_sel_e    cfg_sel,
  input  logic [31:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic [31:0] iter,
  input  logic        hist_clear,
  output logic        hist_clearing,
  input  logic        rd_en,
  input  logic        rd_sel,
  input  logic [31:0] rd_addr,
  output logic [31:0] rd_data
);
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned BW    = clog2_1(B);
  localparam int unsigned DW    = clog2_1(D);
  localparam int unsigned NO    = T * (2**K);
  localparam int unsigned N     = AW + 3;
  localparam int unsigned PC_W  = clog2_1(IMEM_DEPTH);
  localparam int unsigned IW    = field_offset(F_END, B, D, T, K, S, AW);
  localparam int unsigned NWORD = (IW + 31) / 32;
  localparam int unsigned WW    = clog2_1(NWORD);
  localparam int unsigned IDX_W = 16;
  localparam int unsigned W     = DATA_W;

  if (T != S) begin : g_bad_cfg
    $error("mc2a_top: T must equal S");
  end

  // ---------------- host configuration ----------------
  logic [PC_W-1:0] loop_start, loop_end, prog_end;
  logic [31:0]     loop_count;
  logic [BW-1:0]   cfg_bank, rd_bank;
  logic [AW-1:0]   cfg_row, rd_row;
  assign cfg_bank = cfg_addr[AW +: BW];
  assign cfg_row  = cfg_addr[AW-1:0];
  assign rd_bank  = rd_addr[AW +: BW];
  assign rd_row   = rd_addr[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loop_start <= '0;
      loop_end   <= '0;
      loop_count <= 32'd1;
      prog_end   <= '0;
    end else if (cfg_we && cfg_sel == CFG_CSR) begin
      unique case (cfg_addr[1:0])
        2'(CSR_LOOP_START): loop_start <= PC_W'(cfg_wdata);
        2'(CSR_LOOP_END):   loop_end   <= PC_W'(cfg_wdata);
        2'(CSR_LOOP_COUNT): loop_count <= cfg_wdata;
        default:            prog_end   <= PC_W'(cfg_wdata);
      endcase
    end
  end

  // ---------------- fetch and control ----------------
  logic                  imem_re;
  logic [PC_W-1:0]       imem_addr;
  logic [IW-1:0]         instr;
  logic                  ld_valid, rf_valid, cu_valid, su_valid, c_valid, s_valid;
  logic [B-1:0][N-1:0]   memsel;
  logic [B-1:0][DW-1:0]  rfctrl;
  logic [NO-1:0][BW-1:0] insel;
  opcode_e               cu_opcode, c_opcode, s_opcode;
  logic [T-1:0][1:0]     pe_mode;
  logic [31:0]           beta;
  logic [T-1:0]          cu_wb_en;
  logic [S-1:0]          su_last, c_en, s_en;
  su_mode_e              su_mode;
  logic [BW-1:0]         c_base, s_base;
  logic [AW-1:0]         c_row, s_row;

  instr_mem #(.IW(IW), .DEPTH(IMEM_DEPTH)) u_imem (
    .clk,
    .host_we   (cfg_we && cfg_sel == CFG_IMEM),
    .host_addr (cfg_addr[WW +: PC_W]),
    .host_word (cfg_addr[WW-1:0]),
    .host_wdata(cfg_wdata),
    .rd_en     (imem_re),
    .rd_addr   (imem_addr),
    .rd_data   (instr)
  );

  pipeline_ctrl #(.B(B), .D(D), .T(T), .K(K), .S(S), .AW(AW), .PC_W(PC_W)) u_ctrl (
    .clk, .rst_n, .start, .loop_start, .loop_end, .loop_count, .prog_end,
    .busy, .done, .iter, .imem_re, .imem_addr, .instr,
    .ld_valid, .memsel, .rf_valid, .rfctrl, .insel,
    .cu_valid, .cu_opcode, .pe_mode, .beta, .cu_wb_en,
    .su_valid, .su_last, .su_mode, .c_valid, .c_opcode, .c_en, .c_base, .c_row,
    .s_valid, .s_opcode, .s_en, .s_base, .s_row
  );

  // ---------------- load unit and memories ----------------
  logic [B-1:0]                dmem_re, smem_re, ld_we;
  logic [B-1:0][AW-1:0]        ld_addr;
  logic [B-1:0][W-1:0]         dmem_rdata, ld_data;
  logic [B-1:0][SAMPLE_W-1:0]  smem_rdata;
  logic [S-1:0][SAMPLE_W-1:0]  last_sample;

  load_unit #(.B(B), .S(S), .AW(AW)) u_load (
    .clk, .rst_n, .valid(ld_valid), .memsel, .last_sample,
    .dmem_re, .smem_re, .addr(ld_addr), .dmem_rdata, .smem_rdata, .ld_we, .ld_data
  );

  data_mem #(.B(B), .DEPTH(DEPTH)) u_dmem (
    .clk, .re(dmem_re), .raddr(ld_addr), .rdata(dmem_rdata),
    .host_we   (cfg_we && cfg_sel == CFG_DMEM),
    .host_bank (cfg_bank),
    .host_addr (cfg_row),
    .host_wdata(cfg_wdata)
  );

  logic [B-1:0]               smem_we, hist_inc;
  logic [B-1:0][AW-1:0]       smem_waddr, hist_addr;
  logic [B-1:0][SAMPLE_W-1:0] smem_wdata;
  logic [SAMPLE_W-1:0]        smem_host_rdata;
  logic [HIST_W-1:0]          hist_host_rdata;
  logic                       rd_sel_q;

  sample_mem #(.B(B), .DEPTH(DEPTH)) u_smem (
    .clk, .re(smem_re), .raddr(ld_addr), .rdata(smem_rdata),
    .we(smem_we), .waddr(smem_waddr), .wdata(smem_wdata),
    .host_we   (cfg_we && cfg_sel == CFG_SMEM),
    .host_re   (rd_en && !rd_sel),
    .host_bank (cfg_we ? cfg_bank : rd_bank),
    .host_addr (cfg_we ? cfg_row : rd_row),
    .host_wdata(SAMPLE_W'(cfg_wdata)),
    .host_rdata(smem_host_rdata)
  );

  hist_mem #(.B(B), .DEPTH(DEPTH)) u_hist (
    .clk, .rst_n, .inc(hist_inc), .inc_addr(hist_addr),
    .clear(hist_clear), .clearing(hist_clearing),
    .host_re(rd_en && rd_sel), .host_bank(rd_bank), .host_addr(rd_row),
    .host_rdata(hist_host_rdata)
  );

  always_ff @(posedge clk) if (rd_en) rd_sel_q <= rd_sel;
  assign rd_data = rd_sel_q ? 32'(hist_host_rdata) : 32'(smem_host_rdata);

  // ---------------- register file and crossbar ----------------
  logic [B-1:0]          rf_wb_we;
  logic [B-1:0][DW-1:0]  rf_wb_idx;
  logic [B-1:0][W-1:0]   rf_wb_data, rf_rdata;
  logic                  rf_out_valid, xb_valid;
  logic [NO-1:0][W-1:0]  xb_out;

  regfile #(.B(B), .D(D)) u_rf (
    .clk, .rst_n, .rd_valid(rf_valid), .idx(rfctrl), .ld_we, .ld_data,
    .wb_we(rf_wb_we), .wb_idx(rf_wb_idx), .wb_data(rf_wb_data),
    .rd_data(rf_rdata), .out_valid(rf_out_valid)
  );

  crossbar #(.B(B), .NO(NO)) u_xbar (
    .clk, .rst_n, .in_valid(rf_out_valid), .in(rf_rdata), .sel(insel),
    .out(xb_out), .out_valid(xb_valid)
  );

  // ---------------- compute unit and sample unit ----------------
  logic [T-1:0][W-1:0]     cu_out;
  logic [T-1:0]            cu_out_valid;
  logic [S-1:0][IDX_W-1:0] sample;
  logic [S-1:0]            sample_valid;

  compute_unit #(.T(T), .K(K)) u_cu (
    .clk, .rst_n, .in_valid(cu_valid), .opcode(cu_opcode), .pe_mode, .beta,
    .wb_en(cu_wb_en), .in(xb_out), .out(cu_out), .out_valid(cu_out_valid)
  );

  sample_unit #(.S(S), .IDX_W(IDX_W)) u_su (
    .clk, .rst_n, .in_valid(su_valid), .score(cu_out), .last(su_last),
    .mode(su_mode), .sample, .sample_valid
  );

  // latest sample of every element, for indirect (data-dependent) loads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_sample <= '0;
    else
      for (int j = 0; j < S; j++)
        if (sample_valid[j]) last_sample[j] <= SAMPLE_W'(sample[j]);
  end

  // ---------------- store unit ----------------
  store_unit #(.B(B), .S(S), .D(D), .AW(AW), .IDX_W(IDX_W)) u_store (
    .s_opcode, .s_valid, .s_en, .s_base, .s_row, .sample, .sample_valid,
    .smem_we, .smem_waddr, .smem_wdata, .hist_inc, .hist_addr,
    .c_opcode, .c_valid, .c_en, .c_base, .c_row,
    .cu_out, .cu_valid(cu_out_valid),
    .rf_we(rf_wb_we), .rf_idx(rf_wb_idx), .rf_data(rf_wb_data)
  );

  // cu_valid gates the whole compute unit; xb_valid only mirrors it
  // (kept for waveform reading)
  logic unused_xb_valid;
  assign unused_xb_valid = xb_valid;
endmodule
