`timescale 1ps/1fs
// tb_serdes_cfg_regs: checks the APB configuration registers.
//
// After reset every register must read its reset value (CDR parameter
// log2(N) = 3). Random APB writes to all registers are then mirrored in a
// model; each output port and each read-back must match the model, the status
// input must be readable at its address, and unmapped addresses read 0.
module tb_serdes_cfg_regs;
  import serdes_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [11:0] paddr = 0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [31:0] pwdata = 0, prdata, status;
  logic pready, pslverr;
  logic tx_warm_en, tx_comm_en, rx_warm_en, rx_comm_en;
  logic [2:0] cdr_log2n;
  logic [31:0] tx_addr, tx_size, rx_addr, rx_size;
  int checks = 0, failures = 0;
  logic [31:0] m[8];

  serdes_cfg_regs dut (.*);

  always #5000 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic apb(input bit wr, input logic [11:0] a, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk); psel = 1; penable = 0; pwrite = wr; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    #1 r = prdata;
    check(pready && !pslverr, "pready/pslverr");
    @(negedge clk); psel = 0; penable = 0;
  endtask

  function automatic logic [31:0] mask(input int i, input logic [31:0] d);
    case (i)
      0, 1: return {30'd0, d[1:0]};
      2:    return {29'd0, d[2:0]};
      7:    return status;
      default: return d;
    endcase
  endfunction

  initial begin
    logic [31:0] r;
    int i;
    status = 32'hDEAD_0042;
    #12000 rst_n = 1;
    foreach (m[j]) m[j] = 0;
    m[2] = 3; m[7] = status;
    for (int j = 0; j < 8; j++) begin
      apb(0, 12'(4 * j), 0, r);
      check(r == m[j], $sformatf("reset value reg %0d = %h", j, r));
    end
    for (int t = 0; t < 300; t++) begin
      i = $urandom % 8;
      if ($urandom % 2) begin
        apb(1, 12'(4 * i), $urandom, r);
        if (i != 7) m[i] = mask(i, pwdata);
      end else begin
        apb(0, 12'(4 * i), 0, r);
        check(r == mask(i, m[i]), $sformatf("read reg %0d got %h exp %h", i, r, m[i]));
      end
      check({tx_comm_en, tx_warm_en} == m[0][1:0] && {rx_comm_en, rx_warm_en} == m[1][1:0] &&
            cdr_log2n == m[2][2:0] && tx_addr == m[3] && tx_size == m[4] && rx_addr == m[5] &&
            rx_size == m[6], "outputs differ from model");
    end
    apb(0, 12'h040, 0, r);
    check(r == 0, "unmapped address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
