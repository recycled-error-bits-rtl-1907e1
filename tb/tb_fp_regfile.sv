// tb_fp_regfile: random writes and reads of the floating point register file
// against an array model; checks reset to zero, write timing and that a read
// in the write cycle still returns the old value.
module tb_fp_regfile;
  import rebits_pkg::*;

  localparam int unsigned NREGS = 32;
  logic                     clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [$clog2(NREGS)-1:0] waddr = '0, raddr1 = '0, raddr2 = '0;
  logic [FLEN-1:0]          wdata = '0, rdata1, rdata2;
  logic [FLEN-1:0]          model [NREGS];
  int checks = 0, failures = 0, cycles = 0;

  fp_regfile #(.NREGS(NREGS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin : watchdog
    wait (cycles == 100_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      we     = 1'($urandom);
      waddr  = 5'($urandom);
      wdata  = {32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom)};
      raddr1 = (n % 3 == 0) ? waddr : 5'($urandom);
      raddr2 = 5'($urandom);
      #1;
      checks++;
      if (rdata1 !== model[raddr1] || rdata2 !== model[raddr2]) begin
        failures++;
        $display("FAIL: r%0d %h/%h r%0d %h/%h", raddr1, rdata1, model[raddr1],
                 raddr2, rdata2, model[raddr2]);
      end
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
