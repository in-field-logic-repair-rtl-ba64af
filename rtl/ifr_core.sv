// ifr_core: 32-bit, 3-stage pipelined processor core with in-field logic
// repair by cold spare pipeline stages.
//
// Every pipeline stage (predecode, decode, execute) exists twice, a main copy
// and a spare copy, each behind its own power switch. Only the copy in use is
// powered; the spare stays off, so it does not age, until the controller
// swaps it in. A 2-way switch box per stage boundary picks which copy's output
// reaches the pipeline register. Each stage copy generates one odd parity bit
// per output byte; a checker behind each pipeline register compares them.
// The register file is shared, not replicated, and protected by SECDED ECC.
// This architecture follows the paper; the instruction set, the replay
// mechanism's details and all sizes it does not give are this design's own.
//
// Pipeline. Cycle t: the instruction at `pc` is read from instruction memory
// and predecoded into register R1. t+1: decode reads the register file (with
// write-first bypass) and forms operands into R2. t+2: execute computes into
// R3, taking the committing instruction's result by forwarding. t+3: commit
// writes the register file / data memory and redirects the PC on a taken
// branch or jump (3-cycle branch penalty).
//
// Error handling. A parity error on a valid instruction in R1, R2 or R3
// squashes that instruction and every younger one and restarts fetching at
// its PC (replay), so a corrupted result never commits. The controller
// counts, per stage, how many times running the replayed instruction fails;
// at `err_threshold` the copy in use is declared permanently faulty, it is
// powered off, the other copy is powered on, fetching is held until that
// copy's power is good, then the switch flips and the instruction is re-run.
// After reset the main copies are powered one after another (daisy chain)
// before the first fetch. The controller is duplicated with a complemented
// copy and checked by a two-rail checker (`ctrl_error`).
//
// Memories: instruction and data memory are outside the core and read
// combinationally (imem_rdata in the same cycle as imem_addr, dmem_rdata in
// the same cycle as dmem_addr). Addresses are word addresses.
//
// `fi` is a fault-injection test hook per stage copy (index 2*stage + copy,
// copy 0 = main); tie it to zero in use. The Y2 outputs of the switch boxes
// (the off-line copy's bundle) have no consumer in this design and stay
// unconnected.
module ifr_core
  import ifr_pkg::*;
#(
  parameter int unsigned RAMP_CYCLES   = 64,
  parameter int unsigned ERR_THRESHOLD = 8    // used when err_threshold is 0
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [7:0]                 err_threshold, // 0: use ERR_THRESHOLD
  // instruction memory
  output logic [31:0]                imem_addr,
  input  logic [31:0]                imem_rdata,
  // data memory
  output logic [31:0]                dmem_addr,
  output logic                       dmem_we,
  output logic [31:0]                dmem_wdata,
  input  logic [31:0]                dmem_rdata,
  // fault-injection test hook
  input  fi_t [NSTAGES*NCOPIES-1:0]  fi,
  // commit trace
  output logic                       commit_valid,
  output logic [31:0]                commit_pc,
  output logic                       commit_we,
  output logic [4:0]                 commit_rd,
  output logic [31:0]                commit_wdata,
  // status
  output logic [NSTAGES-1:0]         err_detect,   // parity error on a valid instruction
  output logic [NSTAGES-1:0]         stage_sel,    // 1: spare copy in use
  output logic [NSTAGES*NCOPIES-1:0] pwr_en,
  output logic [NSTAGES*NCOPIES-1:0] pwr_ok,
  output logic [NSTAGES*NCOPIES-1:0] failed,
  output logic                       fetch_hold,
  output logic                       halted,
  output logic                       fatal,
  output logic                       ctrl_error,
  output logic                       ecc_corrected,
  output logic                       ecc_uncorrectable
);
  localparam int unsigned PD_P = PD_W / 8;
  localparam int unsigned DE_P = DE_W / 8;
  localparam int unsigned EX_P = EX_W / 8;

  // ---------------------------------------------------------------- state
  logic [31:0]     pc;
  logic            v1, v2, v3;
  logic [31:0]     pc1, pc2, pc3;
  logic [PD_W-1:0] d1;  logic [PD_P-1:0] p1;
  logic [DE_W-1:0] d2;  logic [DE_P-1:0] p2;
  logic [EX_W-1:0] d3;  logic [EX_P-1:0] p3;

  ctrl_out_t ctrl;

  // ------------------------------------------------------- power switches
  for (genvar i = 0; i < NSTAGES * NCOPIES; i++) begin : g_pwr
    ifr_power_switch #(.RAMP_CYCLES(RAMP_CYCLES)) u_sw (
      .clk, .rst_n, .en(ctrl.pwr_en[i]), .pwr_ok(pwr_ok[i])
    );
  end

  // ------------------------------------------------------- register file
  pd_t         pd_r1;
  ex_t         ex_r3;
  logic [31:0] rs1_val, rs2_val;
  logic        rf_we;
  logic [31:0] rf_wdata;
  fwd_t        fwd;

  assign pd_r1 = pd_t'(d1);
  assign ex_r3 = ex_t'(d3);

  ifr_regfile #(.NREGS(32)) u_rf (
    .clk, .rst_n,
    .we(rf_we), .waddr(ex_r3.rd), .wdata(rf_wdata),
    .raddr1(pd_r1.rs1), .rdata1(rs1_val),
    .raddr2(pd_r1.rs2), .rdata2(rs2_val),
    .corrected(ecc_corrected), .uncorrectable(ecc_uncorrectable)
  );

  // --------------------------------------------------- stage 1: predecode
  logic [PD_W-1:0] pd_out [NCOPIES];
  logic [PD_P-1:0] pd_par [NCOPIES];
  logic [PD_W+PD_P-1:0] pd_y1, pd_y2;

  assign imem_addr = pc;

  for (genvar c = 0; c < NCOPIES; c++) begin : g_pd
    ifr_predecode u_pd (
      .clk, .rst_n, .pwr_ok(pwr_ok[c]), .fi(fi[c]),
      .instr(imem_rdata), .out_data(pd_out[c]), .out_par(pd_par[c])
    );
  end

  ifr_switch_box #(.WIDTH(PD_W + PD_P)) u_sw_pd (
    .s(ctrl.sel[0]), .x1({pd_out[0], pd_par[0]}), .x2({pd_out[1], pd_par[1]}),
    .y1(pd_y1), .y2(pd_y2)
  );

  // ----------------------------------------------------- stage 2: decode
  logic [DE_W-1:0] de_out [NCOPIES];
  logic [DE_P-1:0] de_par [NCOPIES];
  logic [DE_W+DE_P-1:0] de_y1, de_y2;

  for (genvar c = 0; c < NCOPIES; c++) begin : g_de
    ifr_decode u_de (
      .clk, .rst_n, .pwr_ok(pwr_ok[2 + c]), .fi(fi[2 + c]),
      .in_data(d1), .pc(pc1), .rs1_val, .rs2_val,
      .out_data(de_out[c]), .out_par(de_par[c])
    );
  end

  ifr_switch_box #(.WIDTH(DE_W + DE_P)) u_sw_de (
    .s(ctrl.sel[1]), .x1({de_out[0], de_par[0]}), .x2({de_out[1], de_par[1]}),
    .y1(de_y1), .y2(de_y2)
  );

  // ---------------------------------------------------- stage 3: execute
  logic [EX_W-1:0] ex_out [NCOPIES];
  logic [EX_P-1:0] ex_par [NCOPIES];
  logic [EX_W+EX_P-1:0] ex_y1, ex_y2;

  for (genvar c = 0; c < NCOPIES; c++) begin : g_ex
    ifr_execute u_ex (
      .clk, .rst_n, .pwr_ok(pwr_ok[4 + c]), .fi(fi[4 + c]),
      .in_data(d2), .fwd,
      .out_data(ex_out[c]), .out_par(ex_par[c])
    );
  end

  ifr_switch_box #(.WIDTH(EX_W + EX_P)) u_sw_ex (
    .s(ctrl.sel[2]), .x1({ex_out[0], ex_par[0]}), .x2({ex_out[1], ex_par[1]}),
    .y1(ex_y1), .y2(ex_y2)
  );

  // ------------------------------------------------------ parity checkers
  logic err1, err2, err3;
  logic [PD_P-1:0] eb1;
  logic [DE_P-1:0] eb2;
  logic [EX_P-1:0] eb3;

  ifr_parity_check #(.WIDTH(PD_W)) u_chk1 (.data(d1), .par(p1), .err_byte(eb1), .err(err1));
  ifr_parity_check #(.WIDTH(DE_W)) u_chk2 (.data(d2), .par(p2), .err_byte(eb2), .err(err2));
  ifr_parity_check #(.WIDTH(EX_W)) u_chk3 (.data(d3), .par(p3), .err_byte(eb3), .err(err3));

  logic e1, e2, e3;
  assign e1 = v1 && err1;
  assign e2 = v2 && err2;
  assign e3 = v3 && err3;
  assign err_detect = {e3, e2, e1};

  // --------------------------------------------------------------- commit
  logic commit_en;
  assign commit_en = v3 && !err3;

  assign dmem_addr  = ex_r3.result;
  assign dmem_wdata = ex_r3.sd;
  assign dmem_we    = commit_en && ex_r3.is_store;
  assign rf_we      = commit_en && ex_r3.wb_en;
  assign rf_wdata   = ex_r3.is_load ? dmem_rdata : ex_r3.result;
  assign fwd        = '{valid: rf_we, rd: ex_r3.rd, data: rf_wdata};

  assign commit_valid = commit_en;
  assign commit_pc    = pc3;
  assign commit_we    = rf_we;
  assign commit_rd    = ex_r3.rd;
  assign commit_wdata = rf_wdata;

  // ------------------------------------------------- redirect and squash
  logic        redirect, kill_all, kill_young;
  logic [31:0] redirect_pc;
  logic        do_halt;
  logic        fetch_en;

  always_comb begin
    redirect    = 1'b0;
    redirect_pc = pc;
    kill_all    = 1'b0;   // R1, R2 and R3 receive bubbles
    kill_young  = 1'b0;   // R1 and R2 receive bubbles
    do_halt     = 1'b0;
    if (e3) begin
      redirect = 1'b1; redirect_pc = pc3; kill_all = 1'b1;
    end else if (commit_en && ex_r3.is_halt) begin
      do_halt = 1'b1; kill_all = 1'b1;
    end else if (commit_en && ex_r3.br_taken) begin
      redirect = 1'b1; redirect_pc = ex_r3.target; kill_all = 1'b1;
    end else if (e2) begin
      redirect = 1'b1; redirect_pc = pc2; kill_all = 1'b1;
    end else if (e1) begin
      redirect = 1'b1; redirect_pc = pc1; kill_young = 1'b1;
    end
    fetch_en = !ctrl.hold && !halted && !redirect && !do_halt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc     <= '0;
      halted <= 1'b0;
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
      pc1 <= '0; pc2 <= '0; pc3 <= '0;
      d1 <= '0; d2 <= '0; d3 <= '0;
      p1 <= '1; p2 <= '1; p3 <= '1;   // odd parity of all-zero bytes
    end else begin
      if (do_halt)       halted <= 1'b1;
      if (redirect)      pc <= redirect_pc;
      else if (fetch_en) pc <= pc + 32'd1;

      v1  <= fetch_en;
      pc1 <= pc;
      {d1, p1} <= pd_y1;

      v2  <= v1 && !kill_all && !kill_young;
      pc2 <= pc1;
      {d2, p2} <= de_y1;

      v3  <= v2 && !kill_all;
      pc3 <= pc2;
      {d3, p3} <= ex_y1;
    end
  end

  // ----------------------------------------------------------- controller
  logic [7:0] thr_eff;
  assign thr_eff = (err_threshold == 8'd0) ? 8'(ERR_THRESHOLD) : err_threshold;

  ifr_controller u_ctrl (
    .clk, .rst_n,
    .err_v({e3, e2, e1}),
    .ok_v({v3 && !err3, v2 && !err2, v1 && !err1}),
    .pwr_ok, .threshold(thr_eff),
    .ctrl, .ctrl_error
  );

  assign stage_sel  = ctrl.sel;
  assign pwr_en     = ctrl.pwr_en;
  assign failed     = ctrl.failed;
  assign fetch_hold = ctrl.hold;
  assign fatal      = ctrl.fatal;

  // The commit stage never writes a result that failed its parity check.
  a_no_bad_commit: assert property (@(posedge clk) disable iff (!rst_n)
                                    (v3 && err3) |-> !rf_we && !dmem_we);
endmodule
