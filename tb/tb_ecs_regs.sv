// tb_ecs_regs: self-checking test of the register interface.
//
// Writes and reads back every configuration register, checks the one-cycle
// command pulses, status and counter read-back, sticky error bits with
// write-1-to-clear, the filling-scheme write window and the value returned
// for unmapped addresses. Reads return data one cycle after rd.
module tb_ecs_regs;
  logic clk = 0, rst_n = 0;
  logic [11:0] addr = '0;
  logic wr = 0, rd = 0;
  logic [31:0] wdata = '0, rdata, cmd_pulse, err_in = '0, err_reg;
  logic rvalid, fs_we;
  logic [31:0] cfg [32];
  logic [31:0] status [4];
  logic [31:0] cnt_l [16];
  logic [31:0] cnt_f [16];
  logic [7:0] fs_addr;
  logic [31:0] fs_wdata;
  int checks = 0, failures = 0;

  ecs_regs #(.N_CFG(32), .N_STAT(4), .N_CNT(16)) dut (.clk, .rst_n, .addr, .wr, .wdata, .rd,
    .rdata, .rvalid, .cfg, .cmd_pulse, .status, .err_in, .err_reg,
    .cnt_latched(cnt_l), .cnt_free(cnt_f), .fs_we, .fs_addr, .fs_wdata);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input int a, input logic [31:0] d);
    @(negedge clk); addr = 12'(a); wdata = d; wr = 1;
    @(negedge clk); wr = 0;
  endtask

  task automatic read(input int a, output logic [31:0] d);
    @(negedge clk); addr = 12'(a); rd = 1;
    @(negedge clk); rd = 0;
    check(rvalid == 1, "rvalid");
    d = rdata;
  endtask

  initial begin
    logic [31:0] vals [32];
    logic [31:0] d;
    int pulses;
    foreach (status[i]) status[i] = $urandom;
    foreach (cnt_l[i]) begin cnt_l[i] = $urandom; cnt_f[i] = $urandom; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) begin vals[i] = $urandom; write(i, vals[i]); end
    for (int i = 0; i < 32; i++) begin
      read(i, d); check(d == vals[i], $sformatf("cfg %0d", i));
      check(cfg[i] == vals[i], $sformatf("cfg port %0d", i));
    end
    foreach (status[i]) begin read(12'h080 + i, d); check(d == status[i], "status"); end
    foreach (cnt_l[i]) begin read(12'h100 + i, d); check(d == cnt_l[i], "latched"); end
    foreach (cnt_f[i]) begin read(12'h180 + i, d); check(d == cnt_f[i], "free"); end
    read(12'h300, d); check(d == 32'hDEADBEEF, "unmapped");
    // command pulse lasts one cycle
    pulses = 0;
    fork
      write(12'h040, 32'h0000_0005);
      repeat (4) @(posedge clk) #1 if (cmd_pulse == 32'h5) pulses++;
    join
    check(pulses == 1, $sformatf("command pulse cycles %0d", pulses));
    // sticky error bits, write one to clear
    @(negedge clk); err_in = 32'h0000_0006;
    @(negedge clk); err_in = '0;
    repeat (2) @(negedge clk);
    read(12'h0C0, d); check(d == 32'h6, "error sticky");
    write(12'h0C0, 32'h2);
    read(12'h0C0, d); check(d == 32'h4, "error cleared");
    // filling scheme window
    @(negedge clk); addr = 12'h4A5; wdata = 32'h1234_5678; wr = 1;
    #1 check(fs_we && fs_addr == 8'hA5 && fs_wdata == 32'h1234_5678, "fs window");
    @(negedge clk); wr = 0; addr = 12'h005; wr = 1;
    #1 check(!fs_we, "fs window not on cfg");
    @(negedge clk); wr = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
