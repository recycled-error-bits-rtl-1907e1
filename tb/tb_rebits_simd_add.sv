// tb_rebits_simd_add: random packed additions at both precisions, each lane
// compared with the reference model of fp_ref_pkg (sum and rounding error),
// so that lane placement and precision selection are both checked.
module tb_rebits_simd_add;
  import rebits_pkg::*;
  import fp_ref_pkg::*;

  prec_e           prec;
  logic [FLEN-1:0] a, b, sum, err;
  logic            clk = 1'b0;
  int checks = 0, failures = 0, cycles = 0;

  rebits_simd_add dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin : watchdog
    wait (cycles == 100_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [FLEN-1:0] es, ee;
    for (int n = 0; n < 4000; n++) begin
      prec = prec_e'(n % 2);
      if (prec == PREC_32) begin
        for (int l = 0; l < int'(FLEN / 32); l++) begin
          logic [7:0] ex;
          ex = 8'(100 + $urandom % 50);
          a[32*l +: 32] = {1'($urandom), ex, 23'($urandom)};
          b[32*l +: 32] = {1'($urandom), 8'(int'(ex) - int'($urandom % 32)), 23'($urandom)};
          add32_ref(a[32*l +: 32], b[32*l +: 32], es[32*l +: 32], ee[32*l +: 32]);
        end
      end else begin
        for (int l = 0; l < int'(FLEN / 64); l++) begin
          logic [10:0] ex;
          ex = 11'(1000 + $urandom % 50);
          a[64*l +: 64] = {1'($urandom), ex, 20'($urandom), 32'($urandom)};
          b[64*l +: 64] = {1'($urandom), 11'(int'(ex) - int'($urandom % 60)), 20'($urandom),
                           32'($urandom)};
          add64_ref(a[64*l +: 64], b[64*l +: 64], es[64*l +: 64], ee[64*l +: 64]);
        end
      end
      @(posedge clk);
      checks++;
      if (sum !== es || err !== ee) begin
        failures++;
        $display("FAIL prec %0d: sum %h/%h err %h/%h", prec, sum, es, err, ee);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
