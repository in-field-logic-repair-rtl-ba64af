// ifr_ctrl_fsm: the repair controller's function (one copy; ifr_controller
// runs two copies and compares them).
//
// Fault classification (paper: an error that lasts more than a set number of
// cycles is permanent): one counter per stage counts parity errors seen on
// valid instructions at the stage's output register. Because an erroneous
// instruction is squashed and replayed, a permanent stuck-at fault keeps
// failing the same instruction and the counter climbs quickly. A run of
// CLEAN_WINDOW valid instructions that pass the stage's checker cleanly
// clears it, so an isolated transient error is forgotten while an
// intermittent fault (a delay fault that only shows when its bit toggles)
// still accumulates. Bubbles leave both counters alone. When the error count
// reaches `threshold` (adjustable at run time) the stage copy in use is
// declared failed. The clean-run rule is this design's choice.
//
// Repair (paper: turn the faulty block off, turn the spare on, re-run): the
// failed copy's power is switched off and the other copy's switched on;
// fetching is held until that copy reports power good, then the stage's
// switch-box select flips and fetching resumes at the replayed PC. If the
// other copy has already failed, the controller enters FATAL and holds fetch
// for good (the death state of the reliability model).
//
// Power sequencing (paper: blocks are turned on in a daisy chain to avoid
// in-rush current): after reset the main copies of predecode, decode and
// execute are powered one after another, each waiting for the previous one's
// power good, before fetching starts.
//
// With INVERT = 1 every output is complemented, which makes this the
// checking copy. All outputs are registered; the error inputs are sampled at
// the clock edge.
module ifr_ctrl_fsm
  import ifr_pkg::*;
#(
  parameter bit          INVERT       = 1'b0,
  parameter int unsigned CLEAN_WINDOW = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NSTAGES-1:0]         err_v,     // parity error on a valid instruction
  input  logic [NSTAGES-1:0]         ok_v,      // valid instruction passed cleanly
  input  logic [NSTAGES*NCOPIES-1:0] pwr_ok,
  input  logic [7:0]                 threshold,
  output ctrl_out_t                  ctrl
);
  typedef enum logic [1:0] {S_BOOT, S_RUN, S_SWAP, S_FATAL} state_e;

  state_e                     state;
  logic [1:0]                 boot_idx;
  logic [1:0]                 swap_stg;
  logic [7:0]                 cnt [NSTAGES];
  logic [7:0]                 clean [NSTAGES];
  logic [NSTAGES-1:0]         sel;
  logic [NSTAGES*NCOPIES-1:0] pwr_en;
  logic [NSTAGES*NCOPIES-1:0] failed;
  logic [7:0]                 thr;

  assign thr = (threshold == 8'd0) ? 8'd1 : threshold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_BOOT;
      boot_idx <= '0;
      swap_stg <= '0;
      sel      <= '0;
      pwr_en   <= '0;
      failed   <= '0;
      for (int k = 0; k < NSTAGES; k++) begin
        cnt[k]   <= '0;
        clean[k] <= '0;
      end
    end else begin
      unique case (state)
        S_BOOT: begin
          pwr_en[2*boot_idx] <= 1'b1;
          if (pwr_ok[2*boot_idx]) begin
            if (boot_idx == 2'(NSTAGES - 1)) state <= S_RUN;
            else                             boot_idx <= boot_idx + 1'b1;
          end
        end
        S_RUN: begin
          logic       perm;
          logic [1:0] k_perm;
          perm   = 1'b0;
          k_perm = '0;
          for (int k = 0; k < NSTAGES; k++) begin
            if (err_v[k]) begin
              clean[k] <= '0;
              if (cnt[k] != 8'hFF) cnt[k] <= cnt[k] + 1'b1;
              if (cnt[k] + 9'd1 >= {1'b0, thr}) begin
                perm   = 1'b1;     // the oldest (highest) stage wins
                k_perm = 2'(k);
              end
            end else if (ok_v[k]) begin
              if (32'(clean[k]) + 1 >= CLEAN_WINDOW) begin
                clean[k] <= '0;
                cnt[k]   <= '0;
              end else begin
                clean[k] <= clean[k] + 1'b1;
              end
            end
          end
          if (perm) begin
            cnt[k_perm] <= '0;
            failed[2*k_perm + {2'b0, sel[k_perm]}] <= 1'b1;
            if (failed[2*k_perm + {2'b0, !sel[k_perm]}]) begin
              state <= S_FATAL;
            end else begin
              pwr_en[2*k_perm + {2'b0, sel[k_perm]}]  <= 1'b0;
              pwr_en[2*k_perm + {2'b0, !sel[k_perm]}] <= 1'b1;
              swap_stg <= k_perm;
              state    <= S_SWAP;
            end
          end
        end
        S_SWAP: begin
          if (pwr_ok[2*swap_stg + {2'b0, !sel[swap_stg]}]) begin
            sel[swap_stg]   <= !sel[swap_stg];
            cnt[swap_stg]   <= '0;
            clean[swap_stg] <= '0;
            state         <= S_RUN;
          end
        end
        S_FATAL: ;
        default: state <= S_FATAL;
      endcase
    end
  end

  ctrl_out_t o;
  always_comb begin
    o.sel    = sel;
    o.pwr_en = pwr_en;
    o.failed = failed;
    o.hold   = (state != S_RUN);
    o.fatal  = (state == S_FATAL);
    ctrl     = INVERT ? ~o : o;
  end
endmodule
