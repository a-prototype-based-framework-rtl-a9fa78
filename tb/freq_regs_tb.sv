// freq_regs_tb: self-checking test of the frequency registers. Checks the
// reset contents, writes random frequency codes and enables to every island
// over the APB port, and checks both the read-back values and the outputs
// that drive the DFS actuators; also checks that an out-of-range address
// neither changes anything nor reads back non-zero.
`timescale 1ns/1ps
module freq_regs_tb;
  import vespa_pkg::*;
  localparam int NI = 5;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so flops without a running clock reset too
  logic psel = 0, penable = 0, pwrite = 0, pready;
  logic [APB_AW-1:0] paddr = '0;
  logic [APB_DW-1:0] pwdata = '0, prdata;
  logic [NI-1:0][FREQ_W-1:0] freq_code;
  logic [NI-1:0] freq_en;
  int checks = 0, failures = 0;
  logic [FREQ_W-1:0] exp_code [NI];
  logic              exp_en   [NI];

  freq_regs #(.NI(NI)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic apb_write(input logic [7:0] a, input logic [31:0] d);
    @(posedge clk);
    psel <= 1; pwrite <= 1; paddr <= a; pwdata <= d; penable <= 0;
    @(posedge clk); penable <= 1;
    @(posedge clk); psel <= 0; penable <= 0; pwrite <= 0;
  endtask

  task automatic apb_read(input logic [7:0] a, output logic [31:0] d);
    @(posedge clk);
    psel <= 1; pwrite <= 0; paddr <= a; penable <= 0;
    @(posedge clk); penable <= 1;
    @(negedge clk); d = prdata;
    @(posedge clk); psel <= 0; penable <= 0;
  endtask

  initial begin
    logic [31:0] d;
    #22 rst_n = 1;
    for (int i = 0; i < NI; i++) begin
      check(freq_code[i] == 5'd2 && freq_en[i] == 1'b1, $sformatf("reset value of island %0d", i));
      exp_code[i] = 5'd2; exp_en[i] = 1'b1;
    end
    for (int r = 0; r < 20; r++) begin
      automatic int i = $urandom % NI;
      exp_code[i] = FREQ_W'($urandom);
      exp_en[i]   = 1'($urandom);
      apb_write(8'(4 * i), {23'd0, exp_en[i], 3'd0, exp_code[i]});
      @(posedge clk);
      for (int j = 0; j < NI; j++) begin
        check(freq_code[j] == exp_code[j] && freq_en[j] == exp_en[j],
              $sformatf("island %0d outputs %0d/%0b expected %0d/%0b", j, freq_code[j], freq_en[j], exp_code[j], exp_en[j]));
        apb_read(8'(4 * j), d);
        check(d == {23'd0, exp_en[j], 3'd0, exp_code[j]}, $sformatf("island %0d read %h", j, d));
      end
    end
    apb_write(8'h40, 32'h1FF);
    apb_read(8'h40, d);
    check(d == 0, "out-of-range read is zero");
    for (int j = 0; j < NI; j++)
      check(freq_code[j] == exp_code[j] && freq_en[j] == exp_en[j], "out-of-range write ignored");
    check(pready == 1'b1, "pready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
