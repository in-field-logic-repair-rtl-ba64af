// tb_ifr_fault_campaign: random permanent-fault campaign on the IFR core at
// its default parameters, the workload of the published fault tests
// (stuck-at and delay faults in a main pipeline stage while a program runs)
// widened to random fault sites.
//
// Each run resets the core, picks a random stage (predecode, decode or
// execute), a random bit of that stage's output bundle, stuck-at-0,
// stuck-at-1 or delay, and a random moment, and injects the fault into the
// main copy. Whatever happens, every commit must match the instruction-set
// reference model and the program must finish with the right data memory:
// a fault may be harmless (never excited), repaired by a swap, or
// intermittent and absorbed by replays, but it may never corrupt state or
// hang the core. Swaps must only ever hit the faulty stage. The recovery
// time of each swap (first detected error to first commit after the swap) is
// collected. A fault that only shows for some data spreads its errors over
// clean instructions and takes longer to reach the threshold than the
// replay-bound faults of tb_ifr_core, so the bound here is a sanity limit of
// 5 us at 100 MHz; the mean and worst case are printed. Counts of swapped, replayed-only and silent faults are printed,
// and each category must occur at least once.
module tb_ifr_fault_campaign;
  import ifr_pkg::*;
  import ifr_ref_pkg::*;

  localparam int unsigned NPROG = 24;
  localparam int unsigned NRUNS = 60;
  localparam int unsigned MAX_RECOVERY = 500;   // 5 us at 100 MHz

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

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

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int n_swapped = 0, n_replay_only = 0, n_silent = 0, worst_recovery = 0, sum_recovery = 0;

  task automatic run_one(int run);
    int stage, bitn, after, ncommit, cyc, t_first_err, recovery, nerr;
    int widths [3];
    fi_t f;
    bit fault_on, mismatch, bad_ctrl, swapped;
    logic [NSTAGES-1:0] sel_prev;
    string tag;
    widths = '{PD_W, DE_W, EX_W};
    stage = $urandom_range(2);
    bitn  = $urandom_range(widths[stage] - 1);
    f.en = 1'b1;
    f.kind = ($urandom_range(2) == 0) ? FI_DELAY : FI_STUCK;
    f.stuck_val = $urandom_range(1);
    f.bit_idx = 8'(bitn);
    after = $urandom_range(150);
    tag = $sformatf("run %0d: stage %0d bit %0d %s%0d after %0d commits", run, stage, bitn,
                    f.kind == FI_DELAY ? "delay" : "stuck-at-", f.stuck_val, after);

    fi = '0;
    for (int i = 0; i < MEM_WORDS; i++) dmem[i] = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    ncommit = 0; cyc = 0; t_first_err = -1; recovery = -1; nerr = 0;
    fault_on = 0; mismatch = 0; bad_ctrl = 0; sel_prev = '0; swapped = 0;

    while (cyc < 20000 && !halted && !fatal) begin
      @(negedge clk);
      cyc++;
      if (!fault_on && ncommit >= after) begin
        fault_on = 1;
        fi[2*stage] = f;
      end
      if (ctrl_error) bad_ctrl = 1;
      if (err_detect[stage]) begin
        nerr++;
        if (t_first_err < 0) t_first_err = cyc;
      end
      if (commit_valid) begin
        if (ncommit >= exp_q.size()) mismatch = 1;
        else begin
          commit_t e;
          e = exp_q[ncommit];
          if (commit_pc != e.pc || commit_we != e.we ||
              (e.we && (commit_rd != e.rd || commit_wdata != e.wdata))) mismatch = 1;
        end
        if (swapped && recovery < 0) recovery = cyc - t_first_err;
        ncommit++;
      end
      if (stage_sel != sel_prev) swapped = 1;
      sel_prev = stage_sel;
    end
    fi = '0;

    check(!mismatch, {tag, ": commits match the reference"});
    check(halted && ncommit == exp_q.size() && !fatal, {tag, ": program completes"});
    begin
      bit mem_ok = 1;
      for (int i = 0; i < MEM_WORDS; i++) if (dmem[i] !== ref_s.m[i]) mem_ok = 0;
      check(mem_ok, {tag, ": final data memory matches"});
    end
    check(!bad_ctrl, {tag, ": controller copies agree"});
    check(stage_sel == '0 || stage_sel == NSTAGES'(1 << stage), {tag, ": only the faulty stage swapped"});
    if (stage_sel != '0) begin
      n_swapped++;
      check(recovery > 0 && recovery <= MAX_RECOVERY, $sformatf("%s: recovery %0d cycles", tag, recovery));
      if (recovery > worst_recovery) worst_recovery = recovery;
      sum_recovery += recovery;
    end else if (nerr > 0) n_replay_only++;
    else n_silent++;
  endtask

  initial begin
    fi = '0;
    load_program();
    build_reference();
    for (int r = 0; r < NRUNS; r++) run_one(r);
    $display("campaign: %0d runs, swapped=%0d replay_only=%0d silent=%0d mean_recovery=%0d worst_recovery=%0d cycles",
             NRUNS, n_swapped, n_replay_only, n_silent,
             n_swapped > 0 ? sum_recovery / n_swapped : 0, worst_recovery);
    check(n_swapped > 0, "some faults were repaired by a swap");
    check(n_silent > 0, "some faults were never excited");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
