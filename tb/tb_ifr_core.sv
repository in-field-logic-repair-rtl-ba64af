// tb_ifr_core: end-to-end testbench of the IFR core at its default
// parameters.
//
// A test program (loop with loads, stores, back-to-back dependences, shifts,
// compare, taken and not-taken branches, a jump and HALT) runs once per
// scenario. Every commit is compared with an instruction-set reference model
// (ifr_ref_pkg), and the final data memory with the model's. Scenarios:
// fault-free; permanent stuck-at and delay faults in the main decode and
// execute units (the four fault cases of the recovery-time table) and a
// stuck-at in predecode; a short transient that must be forgiven; a fault in
// both execute copies, which must end in the fatal state; and a bit flip in
// the register file, which ECC must correct. For each repair the recovery
// time (first detected error to first commit after the swap) is printed in
// cycles and checked against 1.6 us at 100 MHz. Each mechanism (replay,
// swap, daisy-chain power-up, fetch hold, forwarding, loads/stores, taken
// branches, transient forgiveness, fatal, ECC correction) is counted and a
// mechanism that never happened is a failure.
module tb_ifr_core;
  import ifr_pkg::*;
  import ifr_ref_pkg::*;

  localparam int unsigned NPROG = 24;
  localparam int unsigned MAX_RECOVERY = 160;   // cycles at 100 MHz = 1.6 us

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  // ------------------------------------------------------------ memories
  logic [31:0] imem [MEM_WORDS];
  logic [31:0] dmem [MEM_WORDS];

  logic [31:0] imem_addr, dmem_addr, dmem_wdata, dmem_rdata;
  logic        dmem_we;
  fi_t [NSTAGES*NCOPIES-1:0] fi;
  logic        commit_valid, commit_we;
  logic [31:0] commit_pc, commit_wdata;
  logic [4:0]  commit_rd;
  logic [NSTAGES-1:0] err_detect, stage_sel;
  logic [NSTAGES*NCOPIES-1:0] pwr_en, pwr_ok, failed;
  logic fetch_hold, halted, fatal, ctrl_error, ecc_corrected, ecc_uncorrectable;

  assign dmem_rdata = dmem[dmem_addr % MEM_WORDS];
  always_ff @(posedge clk) if (dmem_we) dmem[dmem_addr % MEM_WORDS] <= dmem_wdata;

  ifr_core dut (
    .clk, .rst_n, .err_threshold(8'd0),
    .imem_addr, .imem_rdata(imem[imem_addr % MEM_WORDS]),
    .dmem_addr, .dmem_we, .dmem_wdata, .dmem_rdata,
    .fi,
    .commit_valid, .commit_pc, .commit_we, .commit_rd, .commit_wdata,
    .err_detect, .stage_sel, .pwr_en, .pwr_ok, .failed,
    .fetch_hold, .halted, .fatal, .ctrl_error, .ecc_corrected, .ecc_uncorrectable
  );

  // -------------------------------------------------------------- program
  task automatic load_program();
    logic [31:0] p [NPROG];
    p[0]  = enc_i(OP_ADDI, 1, 0, 20);
    p[1]  = enc_i(OP_ADDI, 2, 0, 0);
    p[2]  = enc_i(OP_ADDI, 3, 0, 100);
    p[3]  = enc_i(OP_LUI,  4, 0, 16'h1234);
    p[4]  = enc_i(OP_ORI,  4, 4, 16'h5678);
    p[5]  = enc_r(OP_ADD,  2, 2, 1);          // loop:
    p[6]  = enc_i(OP_SW,   2, 3, 0);          //   mem[r3] = r2
    p[7]  = enc_i(OP_LW,   5, 3, 0);
    p[8]  = enc_r(OP_XOR,  6, 5, 4);
    p[9]  = enc_r(OP_SLL,  7, 6, 1);
    p[10] = enc_r(OP_SRL,  8, 7, 2);
    p[11] = enc_r(OP_SLT,  9, 8, 6);
    p[12] = enc_r(OP_SUB, 10, 6, 9);
    p[13] = enc_i(OP_ADDI, 3, 3, 1);
    p[14] = enc_i(OP_ADDI, 1, 1, -1);
    p[15] = enc_i(OP_BNE,  0, 1, -11);        //   if r1 != r0 goto loop
    p[16] = enc_i(OP_JAL, 11, 0, 2);          // -> 19
    p[17] = enc_i(OP_ADDI, 12, 0, 7);
    p[18] = enc_i(OP_ADDI, 12, 0, 9);
    p[19] = enc_i(OP_BEQ,  0, 0, 1);          // -> 21
    p[20] = enc_i(OP_ADDI, 13, 0, 5);
    p[21] = enc_r(OP_AND, 14, 10, 4);
    p[22] = enc_i(OP_SW,  14, 0, 0);
    p[23] = {OP_HALT, 26'd0};
    for (int i = 0; i < MEM_WORDS; i++) imem[i] = (i < NPROG) ? p[i] : 32'd0;
  endtask

  // expected commit trace
  commit_t exp_q [$];
  arch_t   ref_s;

  task automatic build_reference();
    ref_s.pc = 0;
    ref_s.halted = 0;
    for (int i = 0; i < 32; i++) ref_s.r[i] = '0;
    for (int i = 0; i < MEM_WORDS; i++) ref_s.m[i] = '0;
    exp_q.delete();
    while (!ref_s.halted && exp_q.size() < 5000)
      exp_q.push_back(ref_step(ref_s, imem[ref_s.pc % MEM_WORDS]));
  endtask

  // forwarding opportunities: instruction reading the register the previous
  // committed instruction wrote, committed in the next cycle
  function automatic bit reads_reg(logic [31:0] ins, logic [4:0] r);
    logic [5:0] op;
    op = ins[31:26];
    if (r == 0) return 0;
    case (op)
      OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLT, OP_SLL, OP_SRL:
        return ins[20:16] == r || ins[15:11] == r;
      OP_ADDI, OP_ANDI, OP_ORI, OP_LW: return ins[20:16] == r;
      OP_SW, OP_BEQ, OP_BNE: return ins[20:16] == r || ins[25:21] == r;
      default: return 0;
    endcase
  endfunction

  // ---------------------------------------------------- mechanism counters
  int n_replay, n_swap, n_boot_ok, n_hold, n_fwd, n_load, n_store, n_taken;
  int n_forgiven, n_fatal, n_ecc, n_halt, n_delay_repair, n_stuck_repair;

  // ------------------------------------------------------------- scenario
  typedef struct {
    string name;
    int    stage;         // -1: none
    bit    both;          // fault in both copies
    fi_t   f;
    int    after;         // commits before the fault appears
    int    duration;      // cycles the fault lasts, 0 = permanent
    bit    expect_swap;
    bit    expect_fatal;
    bit    ecc_flip;
  } scen_t;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(scen_t sc);
    int ncommit, cyc, t_first_err, t_swap, recovery, err_total, boot_order_ok;
    logic [NSTAGES-1:0] sel_prev;
    logic [NSTAGES*NCOPIES-1:0] ok_prev;
    int ok_rise [NSTAGES*NCOPIES];
    bit fault_on, mismatch, spare_powered, bad_ctrl;
    int fault_cycles;
    logic [31:0] last_ins;
    logic [4:0]  last_rd;
    bit          last_we;
    int          last_cyc;

    fi = '0;
    for (int i = 0; i < MEM_WORDS; i++) dmem[i] = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    ncommit = 0; cyc = 0; t_first_err = -1; t_swap = -1; recovery = -1;
    err_total = 0; fault_on = 0; mismatch = 0; spare_powered = 0; bad_ctrl = 0;
    fault_cycles = 0; sel_prev = '0; ok_prev = '0; last_we = 0; last_cyc = -10;
    last_ins = '0; last_rd = '0;
    for (int i = 0; i < NSTAGES*NCOPIES; i++) ok_rise[i] = -1;

    while (cyc < 4000) begin
      @(negedge clk);
      cyc++;
      // fault control
      if (sc.stage >= 0 && !fault_on && ncommit >= sc.after &&
          (sc.duration == 0 || fault_cycles == 0)) begin
        fault_on = 1;
        fi[2*sc.stage] = sc.f;
        if (sc.both) fi[2*sc.stage + 1] = sc.f;
      end
      if (fault_on) begin
        fault_cycles++;
        if (sc.duration != 0 && fault_cycles > sc.duration) begin
          fi = '0;
          fault_on = 0;
        end
      end
      if (sc.ecc_flip && ncommit == 60 && fault_cycles == 0) begin
        // flip one stored bit of r4, which the loop reads every iteration
        dut.u_rf.mem[4][7] = ~dut.u_rf.mem[4][7];
        fault_cycles = 1;
      end

      // observe the cycle's combinational outputs
      if (ctrl_error) bad_ctrl = 1;
      if (ecc_corrected) n_ecc++;
      if (fetch_hold && ok_rise[4] >= 0) n_hold++;
      for (int i = 0; i < NSTAGES*NCOPIES; i++)
        if (pwr_ok[i] && !ok_prev[i] && ok_rise[i] < 0) ok_rise[i] = cyc;
      ok_prev = pwr_ok;
      if (sc.stage < 0 && (pwr_en[1] || pwr_en[3] || pwr_en[5])) spare_powered = 1;
      if (|err_detect) begin
        n_replay++;
        err_total++;
        if (sc.stage >= 0 && err_detect[sc.stage] && t_first_err < 0) t_first_err = cyc;
      end
      if (sc.stage >= 0 && stage_sel[sc.stage] != sel_prev[sc.stage] && t_swap < 0) begin
        t_swap = cyc;
        n_swap++;
      end
      sel_prev = stage_sel;

      if (commit_valid) begin
        commit_t e;
        if (ncommit >= exp_q.size()) begin
          mismatch = 1;
        end else begin
          e = exp_q[ncommit];
          if (commit_pc != e.pc || commit_we != e.we ||
              (e.we && (commit_rd != e.rd || commit_wdata != e.wdata))) begin
            if (!mismatch)
              $display("  commit %0d mismatch: pc %0d/%0d we %0b/%0b rd %0d/%0d data %h/%h",
                       ncommit, commit_pc, e.pc, commit_we, e.we, commit_rd, e.rd,
                       commit_wdata, e.wdata);
            mismatch = 1;
          end
        end
        // mechanisms from the committed instruction
        begin
          logic [31:0] ins;
          ins = imem[commit_pc % MEM_WORDS];
          if (ins[31:26] == OP_LW) n_load++;
          if (ins[31:26] == OP_SW) n_store++;
          if (ins[31:26] == OP_HALT) n_halt++;
          if (ncommit + 1 < exp_q.size() && exp_q[ncommit + 1].pc != commit_pc + 1) n_taken++;
          if (last_we && last_cyc == cyc - 1 && reads_reg(ins, last_rd)) n_fwd++;
          last_we = commit_we; last_rd = commit_rd; last_cyc = cyc; last_ins = ins;
        end
        if (t_swap >= 0 && recovery < 0) recovery = cyc - t_first_err;
        ncommit++;
      end
      if (halted || (fatal && cyc > 200 + t_swap)) break;
    end
    fi = '0;

    // daisy chain: main copies powered in stage order, spares untouched
    boot_order_ok = ok_rise[0] > 0 && ok_rise[2] > ok_rise[0] && ok_rise[4] > ok_rise[2];
    if (boot_order_ok) n_boot_ok++;
    check(boot_order_ok, {sc.name, ": daisy-chain power-up order"});
    check(ok_rise[2] - ok_rise[0] >= 64 && ok_rise[4] - ok_rise[2] >= 64,
          {sc.name, ": each block waits for the previous power good"});
    check(!bad_ctrl, {sc.name, ": controller copies agree (two-rail checker quiet)"});
    check(!mismatch, {sc.name, ": every commit matches the reference model"});

    if (sc.expect_fatal) begin
      n_fatal += fatal;
      check(fatal, {sc.name, ": fatal state reached"});
      check(!halted, {sc.name, ": no completion after fatal"});
      check(failed[2*sc.stage] && failed[2*sc.stage+1], {sc.name, ": both copies marked failed"});
    end else begin
      check(halted && ncommit == exp_q.size(), {sc.name, ": program completes"});
      begin
        bit mem_ok = 1;
        for (int i = 0; i < MEM_WORDS; i++) if (dmem[i] !== ref_s.m[i]) mem_ok = 0;
        check(mem_ok, {sc.name, ": final data memory matches"});
      end
      check(!fatal, {sc.name, ": not fatal"});
    end

    if (sc.stage < 0 && !sc.ecc_flip) begin
      check(!spare_powered, {sc.name, ": spares stay powered off"});
      check(stage_sel == '0 && failed == '0, {sc.name, ": no swap"});
      check(err_total == 0, {sc.name, ": no parity errors"});
    end
    if (sc.ecc_flip) begin
      check(n_ecc > 0, {sc.name, ": ECC corrected the flipped bit"});
      check(stage_sel == '0, {sc.name, ": no swap"});
    end
    if (sc.expect_swap) begin
      check(t_swap > 0, {sc.name, ": stage swapped to spare"});
      check(stage_sel == NSTAGES'(1 << sc.stage) || sc.expect_fatal,
            {sc.name, ": only the faulty stage swapped"});
      check(failed[2*sc.stage], {sc.name, ": main copy marked failed"});
      if (!sc.expect_fatal) begin
        check(!pwr_en[2*sc.stage] && pwr_en[2*sc.stage+1],
              {sc.name, ": faulty copy off, spare on"});
        check(recovery > 0 && recovery <= MAX_RECOVERY,
              $sformatf("%s: recovery %0d cycles within %0d", sc.name, recovery, MAX_RECOVERY));
        if (sc.f.kind == FI_DELAY) n_delay_repair++; else n_stuck_repair++;
      end
    end
    if (sc.stage >= 0 && !sc.expect_swap) begin
      check(err_total > 0, {sc.name, ": transient detected"});
      check(stage_sel == '0 && failed == '0, {sc.name, ": transient forgiven, no swap"});
      if (err_total > 0 && stage_sel == '0) n_forgiven++;
    end
    $display("  %-26s commits=%0d cycles=%0d parity_errors=%0d recovery=%0d cycles (%0.2f us at 100 MHz)",
             sc.name, ncommit, cyc, err_total, recovery, recovery / 100.0);
  endtask

  function automatic fi_t mk(fi_kind_e k, int b, bit v);
    fi_t f;
    f.en = 1'b1; f.kind = k; f.bit_idx = 8'(b); f.stuck_val = v;
    return f;
  endfunction

  // bit positions in the stage bundles (see ifr_pkg)
  localparam int PD_IMM0  = 8;     // pd_t.imm[0]
  localparam int DE_A0    = 121;   // de_t.a[0]
  localparam int EX_RES0  = 74;    // ex_t.result[0]
  localparam int EX_PAD0  = 106;   // ex_t.pad[0], always 0 when fault-free

  initial begin
    scen_t s;
    fi = '0;
    load_program();
    build_reference();
    $display("reference program: %0d instructions committed", exp_q.size());

    s = '{name:"fault-free", stage:-1, both:0, f:'0, after:0, duration:0,
          expect_swap:0, expect_fatal:0, ecc_flip:0};
    run(s);
    s = '{name:"stuck-at decode", stage:1, both:0, f:mk(FI_STUCK, DE_A0, 1), after:40,
          duration:0, expect_swap:1, expect_fatal:0, ecc_flip:0};
    run(s);
    s = '{name:"stuck-at execute", stage:2, both:0, f:mk(FI_STUCK, EX_RES0, 1), after:40,
          duration:0, expect_swap:1, expect_fatal:0, ecc_flip:0};
    run(s);
    s = '{name:"delay decode", stage:1, both:0, f:mk(FI_DELAY, DE_A0, 0), after:40,
          duration:0, expect_swap:1, expect_fatal:0, ecc_flip:0};
    run(s);
    s = '{name:"delay execute", stage:2, both:0, f:mk(FI_DELAY, EX_RES0, 0), after:40,
          duration:0, expect_swap:1, expect_fatal:0, ecc_flip:0};
    run(s);
    s = '{name:"stuck-at predecode", stage:0, both:0, f:mk(FI_STUCK, PD_IMM0, 1), after:40,
          duration:0, expect_swap:1, expect_fatal:0, ecc_flip:0};
    run(s);
    s = '{name:"transient execute", stage:2, both:0, f:mk(FI_STUCK, EX_PAD0, 1), after:40,
          duration:3, expect_swap:0, expect_fatal:0, ecc_flip:0};
    run(s);
    s = '{name:"both execute copies", stage:2, both:1, f:mk(FI_STUCK, EX_PAD0, 1), after:40,
          duration:0, expect_swap:1, expect_fatal:1, ecc_flip:0};
    run(s);
    s = '{name:"register-file bit flip", stage:-1, both:0, f:'0, after:0, duration:0,
          expect_swap:0, expect_fatal:0, ecc_flip:1};
    run(s);

    $display("mechanisms: replay=%0d swap=%0d boot_daisy_chain=%0d fetch_hold=%0d forwarding=%0d load=%0d store=%0d taken=%0d halt=%0d transient_forgiven=%0d fatal=%0d ecc_correct=%0d stuck_repair=%0d delay_repair=%0d",
             n_replay, n_swap, n_boot_ok, n_hold, n_fwd, n_load, n_store, n_taken, n_halt,
             n_forgiven, n_fatal, n_ecc, n_stuck_repair, n_delay_repair);
    check(n_replay > 0, "mechanism: replay happened");
    check(n_swap > 0, "mechanism: swap happened");
    check(n_boot_ok > 0, "mechanism: daisy-chain power-up happened");
    check(n_hold > 0, "mechanism: fetch hold happened");
    check(n_fwd > 0, "mechanism: forwarding happened");
    check(n_load > 0 && n_store > 0, "mechanism: loads and stores happened");
    check(n_taken > 0, "mechanism: taken branches happened");
    check(n_halt > 0, "mechanism: halt happened");
    check(n_forgiven > 0, "mechanism: transient forgiven");
    check(n_fatal > 0, "mechanism: fatal state happened");
    check(n_ecc > 0, "mechanism: ECC correction happened");
    check(n_stuck_repair > 0 && n_delay_repair > 0, "mechanism: stuck-at and delay repairs");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
