// tb_fperr_file: checks the FPERR32/FPERR64 registers against a scoreboard:
// reset to zero, writes land only in the register of their precision, the
// read port selects by precision, and a write is visible the cycle after.
module tb_fperr_file;
  import rebits_pkg::*;

  logic            clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  prec_e           wr_prec = PREC_32, rd_prec = PREC_32;
  logic [FLEN-1:0] wr_data = '0, rd_data;
  logic [FLEN-1:0] fperr32, fperr64, m32, m64;
  int checks = 0, failures = 0, cycles = 0;

  fperr_file dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin : watchdog
    wait (cycles == 100_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what);
    logic [FLEN-1:0] exp_rd;
    exp_rd = (rd_prec == PREC_32) ? m32 : m64;
    checks++;
    if (fperr32 !== m32 || fperr64 !== m64 || rd_data !== exp_rd) begin
      failures++;
      $display("FAIL %s: fperr32 %h/%h fperr64 %h/%h rd %h/%h", what, fperr32, m32,
               fperr64, m64, rd_data, exp_rd);
    end
  endtask

  initial begin
    m32 = '0;
    m64 = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check("reset");
    for (int n = 0; n < 2000; n++) begin
      we      = 1'($urandom);
      wr_prec = prec_e'($urandom % 2);
      wr_data = {32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom)};
      rd_prec = prec_e'($urandom % 2);
      #1 check("before edge");            // write not yet visible
      @(posedge clk);
      if (we) begin
        if (wr_prec == PREC_32) m32 = wr_data;
        else                    m64 = wr_data;
      end
      #1 check("after edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
