// ifr_regfile: the core's register file, shared by the main and spare
// pipeline stages and not replicated.
//
// The paper leaves memories out of the replication and protects them with
// ECC. Here each of the NREGS 32-bit registers is stored as a 39-bit SECDED
// codeword (Hamming(38,32) plus overall parity, see ifr_pkg::ecc_encode).
// Two combinational read ports decode and correct; a single-bit error is
// corrected on the fly and flagged on `corrected`, a double-bit error is
// flagged on `uncorrectable`. Register 0 always reads as zero. The write port
// is written at the rising clock edge; a read of the register being written
// in the same cycle returns the new value (write-first bypass). Reset clears
// every register to the codeword of zero. The code, register count and
// bypass are this design's choices.
module ifr_regfile
  import ifr_pkg::*;
#(
  parameter int unsigned NREGS = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] waddr,
  input  logic [31:0]              wdata,
  input  logic [$clog2(NREGS)-1:0] raddr1,
  output logic [31:0]              rdata1,
  input  logic [$clog2(NREGS)-1:0] raddr2,
  output logic [31:0]              rdata2,
  output logic                     corrected,
  output logic                     uncorrectable
);
  logic [ECC_W-1:0] mem [NREGS];
  ecc_dec_t d1, d2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) mem[i] <= ecc_encode('0);
    end else if (we && waddr != '0) begin
      mem[waddr] <= ecc_encode(wdata);
    end
  end

  always_comb begin
    d1 = ecc_decode(mem[raddr1]);
    d2 = ecc_decode(mem[raddr2]);
    rdata1 = d1.data;
    rdata2 = d2.data;
    if (we && waddr != '0 && waddr == raddr1) rdata1 = wdata;
    if (we && waddr != '0 && waddr == raddr2) rdata2 = wdata;
    if (raddr1 == '0) rdata1 = '0;
    if (raddr2 == '0) rdata2 = '0;
    corrected     = (raddr1 != '0 && d1.corrected) || (raddr2 != '0 && d2.corrected);
    uncorrectable = (raddr1 != '0 && d1.uncorrectable) || (raddr2 != '0 && d2.uncorrectable);
  end
endmodule
