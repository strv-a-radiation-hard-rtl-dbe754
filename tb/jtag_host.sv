// jtag_host: behavioural JTAG probe for the testbenches.
//
// Drives TCK, TMS and TDI and samples TDO, with TCK high and low for HALF system clock cycles
// each. Tasks: reset (Test-Logic-Reset, then Run-Test/Idle), ir_scan, dr_scan (LSB first,
// returns the captured bits), and the RISC-V debug transport operations dmi_write and
// dmi_read (41-bit DMI register: address, data, op). dmi_read issues the read and collects
// the result with a second scan.
module jtag_host #(
  parameter int HALF = 4
) (
  input  logic clk,
  output logic tck,
  output logic tms,
  output logic tdi,
  input  logic tdo
);
  initial begin
    tck = 1'b0;
    tms = 1'b1;
    tdi = 1'b0;
  end

  task automatic bit_cycle(input logic m, input logic d, output logic o);
    @(negedge clk);
    tms = m;
    tdi = d;
    repeat (HALF - 1) @(negedge clk);
    o = tdo;
    tck = 1'b1;
    repeat (HALF) @(negedge clk);
    tck = 1'b0;
  endtask

  task automatic reset();
    logic o;
    for (int i = 0; i < 6; i++) bit_cycle(1'b1, 1'b0, o);
    bit_cycle(1'b0, 1'b0, o);
  endtask

  task automatic ir_scan(input logic [4:0] ir);
    logic o;
    bit_cycle(1'b1, 1'b0, o);   // Select-DR
    bit_cycle(1'b1, 1'b0, o);   // Select-IR
    bit_cycle(1'b0, 1'b0, o);   // Capture-IR
    bit_cycle(1'b0, 1'b0, o);   // Shift-IR
    for (int i = 0; i < 5; i++) bit_cycle(i == 4, ir[i], o);
    bit_cycle(1'b1, 1'b0, o);   // Update-IR
    bit_cycle(1'b0, 1'b0, o);   // Run-Test/Idle
  endtask

  task automatic dr_scan(input int n, input logic [63:0] din, output logic [63:0] dout);
    logic o;
    dout = '0;
    bit_cycle(1'b1, 1'b0, o);   // Select-DR
    bit_cycle(1'b0, 1'b0, o);   // Capture-DR
    bit_cycle(1'b0, 1'b0, o);   // Shift-DR
    for (int i = 0; i < n; i++) begin
      bit_cycle(i == n - 1, din[i], o);
      dout[i] = o;
    end
    bit_cycle(1'b1, 1'b0, o);   // Update-DR
    bit_cycle(1'b0, 1'b0, o);   // Run-Test/Idle
  endtask

  task automatic dmi_write(input logic [6:0] a, input logic [31:0] d);
    logic [63:0] r;
    dr_scan(41, {23'b0, a, d, 2'b10}, r);
  endtask

  task automatic dmi_read(input logic [6:0] a, output logic [31:0] d);
    logic [63:0] r;
    dr_scan(41, {23'b0, a, 32'h0, 2'b01}, r);
    dr_scan(41, {23'b0, a, 32'h0, 2'b00}, r);
    d = r[33:2];
  endtask
endmodule
