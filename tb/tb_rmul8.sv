// tb_rmul8 - exhaustive check of the 8x8 reconfigurable multiplier, both
// compressor variants (DFM and SSM), over all 65536 operand pairs for nine
// error-control settings. For every pair the product must equal the
// reference model's; for each setting the number of wrong products and the
// sum of absolute errors must equal figures computed beforehand by an
// independent bit-level model; Er = 8'hFF must be exact.
module tb_rmul8;
  import rmul_pkg::*;
  import rmul_ref_pkg::*;

  logic [7:0]  a, b, er;
  logic [15:0] p_dfm, p_ssm;
  int checks = 0, failures = 0;

  rmul8 #(.VARIANT(DFM)) dut_dfm (.a, .b, .er, .p(p_dfm));
  rmul8 #(.VARIANT(SSM)) dut_ssm (.a, .b, .er, .p(p_ssm));

  localparam int NSET = 9;
  logic [7:0] ers      [NSET] = '{8'd0, 8'd1, 8'd63, 8'd64, 8'd127, 8'd128, 8'd200, 8'd254, 8'd255};
  int         nerr_dfm [NSET] = '{51451, 51386, 30668, 49494, 20150, 49639, 45239, 6144, 0};
  longint     sum_dfm  [NSET] = '{34045872, 34065216, 28393472, 31216736, 24160256,
                                  19164096, 10628848, 49152, 0};
  int         nerr_ssm [NSET] = '{10894, 10894, 1541, 10496, 771, 10642, 10112, 0, 0};
  longint     sum_ssm  [NSET] = '{2894080, 2894080, 1389568, 2223360, 800768, 1996032,
                                  1274112, 0, 0};

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NSET; s++) begin
      int nd, ns, mism;
      longint sd, ss;
      nd = 0; ns = 0; mism = 0; sd = 0; ss = 0;
      er = ers[s];
      for (int i = 0; i < 65536; i++) begin
        int ex;
        {a, b} = 16'(i);
        #1;
        ex = int'(a) * int'(b);
        if (p_dfm != ex) begin nd++; sd += (p_dfm > ex) ? p_dfm - ex : ex - p_dfm; end
        if (p_ssm != ex) begin ns++; ss += (p_ssm > ex) ? p_ssm - ex : ex - p_ssm; end
        if (p_dfm !== ref_mul8(1'b0, a, b, er) || p_ssm !== ref_mul8(1'b1, a, b, er)) begin
          if (mism < 5)
            $display("FAIL er=%0d a=%0d b=%0d: dfm %0d ssm %0d, ref %0d %0d", er, a, b, p_dfm,
                     p_ssm, ref_mul8(1'b0, a, b, er), ref_mul8(1'b1, a, b, er));
          mism++;
        end
      end
      checks++;
      if (mism != 0) failures++;
      checks++;
      if (nd != nerr_dfm[s] || sd != sum_dfm[s]) begin
        failures++;
        $display("FAIL DFM er=%0d: %0d errors, |err| sum %0d; expected %0d, %0d",
                 er, nd, sd, nerr_dfm[s], sum_dfm[s]);
      end
      checks++;
      if (ns != nerr_ssm[s] || ss != sum_ssm[s]) begin
        failures++;
        $display("FAIL SSM er=%0d: %0d errors, |err| sum %0d; expected %0d, %0d",
                 er, ns, ss, nerr_ssm[s], sum_ssm[s]);
      end
      $display("er=%3d  DFM error rate %6.2f%%  SSM error rate %6.2f%%", er,
               100.0 * nd / 65536.0, 100.0 * ns / 65536.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
