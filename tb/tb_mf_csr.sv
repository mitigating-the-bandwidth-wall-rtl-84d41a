// tb_mf_csr: self-checking test of the register block, descriptor queue,
// doorbell and completion interrupt.
//
// Programs the access mode and three descriptors through the register port
// and checks: queued descriptors are withheld until the doorbell releases
// them, and exactly as many as released are offered; descriptors come out in
// order with the addresses and last flag written; the mode cannot change
// while the controller is busy; the interrupt fires once (one-cycle msi,
// pending level) only when all released work is taken and the controller is
// idle, and is cleared by the acknowledge write; the counter registers read
// back their inputs.
`timescale 1ns/1ps
module tb_mf_csr;
  import mf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  logic mmio_valid = 0, mmio_we = 0;
  logic [7:0] mmio_addr = 0;
  logic [63:0] mmio_wdata = 0, mmio_rdata;
  acc_mode_e mode;
  logic desc_valid, desc_pop = 0, ctrl_idle = 1, msi, irq_pending;
  tile_desc_t desc;
  logic [31:0] sa_cycles = 32'd1234, stall_cycles = 32'd77;
  int checks = 0, failures = 0, n_msi = 0;

  mf_csr #(.QDEPTH(16)) dut (.*);

  always @(posedge clk) if (rst_n && msi) n_msi++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); mmio_valid = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_valid = 0; mmio_we = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [63:0] d);
    @(negedge clk); mmio_valid = 1; mmio_we = 0; mmio_addr = a;
    #0.1 d = mmio_rdata;
    @(negedge clk); mmio_valid = 0;
  endtask

  initial begin
    logic [63:0] v;
    tile_desc_t exp [3];
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(8'h00, 64'd1);
    check(mode == MODE_DC, "mode written");
    for (int i = 0; i < 3; i++) begin
      exp[i] = '{a_addr: 64'h1000 * (i + 1), b_addr: 64'h20000 + 64'h1000 * i,
                 c_addr: 64'h300000 + 64'h400 * i, last: 1'(i != 1)};
      wr(8'h10, exp[i].a_addr);
      wr(8'h18, exp[i].b_addr);
      wr(8'h20, exp[i].c_addr);
      wr(8'h28, 64'(exp[i].last));
    end
    rd(8'h08, v);
    check(v[15:8] == 3, "three descriptors queued");
    check(!desc_valid, "nothing offered before the doorbell");
    repeat (5) @(negedge clk);
    check(n_msi == 0, "no interrupt before the doorbell");
    wr(8'h30, 64'd2);
    for (int i = 0; i < 2; i++) begin
      check(desc_valid, "released descriptor offered");
      check(desc == exp[i], $sformatf("descriptor %0d contents", i));
      ctrl_idle = 0;                       // controller takes it and is busy
      desc_pop = 1; @(negedge clk); desc_pop = 0;
    end
    check(!desc_valid, "third descriptor held back");
    wr(8'h00, 64'd2);
    check(mode == MODE_DC, "mode held while busy");
    repeat (10) @(negedge clk);
    check(n_msi == 0 && !irq_pending, "no interrupt while busy");
    ctrl_idle = 1;
    repeat (3) @(negedge clk);
    check(n_msi == 1 && irq_pending, "interrupt when done");
    repeat (5) @(negedge clk);
    check(n_msi == 1, "interrupt pulses once");
    rd(8'h38, v);
    check(v[0] == 1'b1, "IRQ register pending");
    wr(8'h38, 64'd1);
    check(!irq_pending, "acknowledge clears");
    wr(8'h30, 64'd1);
    check(desc_valid && desc == exp[2], "third descriptor after second doorbell");
    ctrl_idle = 0;
    desc_pop = 1; @(negedge clk); desc_pop = 0;
    ctrl_idle = 1;
    repeat (3) @(negedge clk);
    check(n_msi == 2, "second interrupt");
    wr(8'h00, 64'd2);
    check(mode == MODE_DEVMEM, "mode written when idle");
    rd(8'h40, v);
    check(v == 64'd1234, "SA_CYC readback");
    rd(8'h48, v);
    check(v == 64'd77, "STALL_CYC readback");
    rd(8'h10, v);
    check(v == exp[2].a_addr, "DESC_A readback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
