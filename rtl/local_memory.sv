// local_memory: the accelerator's banked phase-map store.
//
// NBANK banks of DEPTH x 32-bit single-clock SRAM, one read port and one write
// port per bank.  The paper provisions N_h banks of 1024 x 32-bit (4 kB);
// bank count and depth default to that.  Reads are synchronous: rdata is valid
// the cycle after re.  Writes take two half-word strobes so that a 16-bit
// phase can be written into either half of a word without a read-modify-write.
//
// Phase layout (chosen in this design, the paper gives only the bank shape):
// pixel (y, x) sits in bank y mod NBANK at word (y div NBANK) * IMG_W + x.
// Each word holds two copies of that pixel's phase, {half 1, half 0}; the
// controller reads the current half and writes theta_new into the other one,
// so the update of a sampling step becomes visible only after every tile of
// the step has been processed.
//
// This is written as a plain array; in silicon it maps onto SRAM macros.
module local_memory #(
  parameter int NBANK = 20,
  parameter int DEPTH = 1024
) (
  input  logic                              clk,
  input  logic [NBANK-1:0]                  re,
  input  logic [NBANK-1:0][$clog2(DEPTH)-1:0] raddr,
  output logic [NBANK-1:0][31:0]            rdata,
  input  logic [NBANK-1:0][1:0]             wstrb,
  input  logic [NBANK-1:0][$clog2(DEPTH)-1:0] waddr,
  input  logic [NBANK-1:0][31:0]            wdata
);

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [31:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wstrb[b][0]) mem[waddr[b]][15:0]  <= wdata[b][15:0];
      if (wstrb[b][1]) mem[waddr[b]][31:16] <= wdata[b][31:16];
      if (re[b])       rdata[b]             <= mem[raddr[b]];
    end
  end

endmodule
