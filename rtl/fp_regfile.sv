// fp_regfile: the architectural floating point register file that receives
// the sum of every fpadd (the paper draws it next to FPERR but does not
// describe it; it is the core's existing register file).
//
// NREGS registers of FLEN bits, two combinational read ports and one write
// port that takes effect at the rising clock edge. A read of the register
// being written in the same cycle returns the old value; the pipeline around
// it forwards the new one. All registers reset to +0.0 (synchronous, active
// low). The register count and port arrangement are this design's choice.
module fp_regfile
  import rebits_pkg::*;
#(
  parameter int unsigned NREGS = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] waddr,
  input  logic [FLEN-1:0]          wdata,
  input  logic [$clog2(NREGS)-1:0] raddr1,
  output logic [FLEN-1:0]          rdata1,
  input  logic [$clog2(NREGS)-1:0] raddr2,
  output logic [FLEN-1:0]          rdata2
);

  logic [FLEN-1:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NREGS); i++) regs[i] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata1 = regs[raddr1];
  assign rdata2 = regs[raddr2];

endmodule
