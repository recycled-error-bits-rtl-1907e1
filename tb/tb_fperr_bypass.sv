// tb_fperr_bypass: drives random write sources and checks that the youngest
// matching FPERR write of the read precision is selected (Execute before
// Writeback before the register), together with the reported source.
module tb_fperr_bypass;
  import rebits_pkg::*;

  prec_e           rd_prec, ex_prec, wb_prec;
  logic            ex_we, wb_we;
  logic [FLEN-1:0] reg_data, ex_data, wb_data, data;
  logic [1:0]      src;
  logic            clk = 1'b0;
  int checks = 0, failures = 0, cycles = 0;
  int hits[3] = '{0, 0, 0};

  fperr_bypass dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin : watchdog
    wait (cycles == 100_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [FLEN-1:0] exp_d;
    logic [1:0]      exp_s;
    for (int n = 0; n < 5000; n++) begin
      rd_prec  = prec_e'($urandom % 2);
      ex_prec  = prec_e'($urandom % 2);
      wb_prec  = prec_e'($urandom % 2);
      ex_we    = 1'($urandom);
      wb_we    = 1'($urandom);
      reg_data = {32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom)};
      ex_data  = {32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom)};
      wb_data  = {32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom)};
      @(posedge clk);
      if (ex_we && ex_prec == rd_prec)      begin exp_d = ex_data;  exp_s = 2'd1; end
      else if (wb_we && wb_prec == rd_prec) begin exp_d = wb_data;  exp_s = 2'd2; end
      else                                  begin exp_d = reg_data; exp_s = 2'd0; end
      hits[exp_s]++;
      checks++;
      if (data !== exp_d || src !== exp_s) begin
        failures++;
        $display("FAIL: data %h/%h src %0d/%0d", data, exp_d, src, exp_s);
      end
    end
    for (int s = 0; s < 3; s++) begin
      checks++;
      if (hits[s] == 0) begin
        failures++;
        $display("FAIL: source %0d never exercised", s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
