// tb_approx_csr - checks the three approximation CSRs: reset to zero, write,
// set and clear at each address, the old value returned on csr_rdata, the
// hit flag, that an access to another address changes nothing, and that a
// CSR access without csr_en changes nothing.
module tb_approx_csr;
  import rmul_pkg::*;

  logic        clk = 0, rst_n = 0, csr_en = 0, csr_hit;
  csr_op_e     csr_op = CSR_NONE;
  logic [11:0] csr_addr = '0;
  logic [31:0] csr_wdata = '0, csr_rdata, alucsr, mulcsr, divcsr;
  logic [31:0] model [3];
  int checks = 0, failures = 0;

  approx_csr dut (.clk, .rst_n, .csr_en, .csr_op, .csr_addr, .csr_wdata, .csr_rdata,
                  .csr_hit, .alucsr, .mulcsr, .divcsr);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic access(csr_op_e op, logic [11:0] addr, logic [31:0] val, logic en = 1'b1);
    int idx;
    logic [31:0] old;
    idx = (addr == 12'h800) ? 0 : (addr == 12'h801) ? 1 : (addr == 12'h802) ? 2 : -1;
    @(negedge clk);
    csr_en = en; csr_op = op; csr_addr = addr; csr_wdata = val;
    #1;
    old = (idx >= 0) ? model[idx] : 32'h0;
    check("old value on rdata", csr_rdata === old);
    check("hit flag", csr_hit === (idx >= 0));
    if (idx >= 0 && en) begin
      unique case (op)
        CSR_WRITE: model[idx] = val;
        CSR_SET:   model[idx] = old | val;
        CSR_CLEAR: model[idx] = old & ~val;
        default: ;
      endcase
    end
    @(negedge clk);
    csr_en = 0; csr_op = CSR_NONE;
    check("registers", alucsr === model[0] && mulcsr === model[1] && divcsr === model[2]);
  endtask

  initial begin
    model = '{default: '0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    check("reset values", alucsr == 0 && mulcsr == 0 && divcsr == 0);
    access(CSR_WRITE, 12'h801, 32'h07FF_8001);        // the sample program's value
    check("sample mulcsr value", mulcsr == 32'h07FF_8001);
    access(CSR_WRITE, 12'h800, 32'hA5A5_0003);
    access(CSR_WRITE, 12'h802, 32'h0000_0001);
    access(CSR_SET,   12'h801, 32'h0000_0006);
    access(CSR_CLEAR, 12'h801, 32'h07FF_8000);
    access(CSR_WRITE, 12'h803, 32'hFFFF_FFFF);        // not ours
    access(CSR_WRITE, 12'h7FF, 32'hFFFF_FFFF);
    access(CSR_WRITE, 12'h801, 32'h1234_5678, 1'b0);  // not enabled
    access(CSR_NONE,  12'h801, 32'hFFFF_FFFF);        // read only
    for (int i = 0; i < 200; i++)
      access(csr_op_e'(2'($urandom)), 12'h800 + 12'($urandom_range(0, 3)), $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
