// ecs_regs: register interface between the control system and the core.
//
// The control system configures the core, issues commands to it and reads
// its status, errors and counters through a simple single-word register bus
// (word addresses, 32-bit data; a write takes one cycle, a read returns
// rdata with rvalid one cycle after rd). The bus protocol and the address
// map below are this design's own; the text only names the configuration,
// status and error registers and the monitoring counters behind them.
//
//   0x000 + i  (i < N_CFG)   configuration register i, read/write
//   0x040                    command register: a write pulses cmd_pulse
//                            (bit per command) for one cycle; reads 0
//   0x080 + i  (i < N_STAT)  status word i, read only
//   0x0C0                    error register: bit set (sticky) by err_in,
//                            write 1 to clear
//   0x100 + i  (i < N_CNT)   latched counter i, read only
//   0x180 + i  (i < N_CNT)   free-running counter i, read only
//   0x400 + a  (a < 256)     filling-scheme RAM word a, write only
//                            (passed on as fs_we/fs_addr/fs_wdata)
// Unmapped reads return 0xDEADBEEF.
module ecs_regs #(
  parameter int unsigned N_CFG  = 32,
  parameter int unsigned N_STAT = 8,
  parameter int unsigned N_CNT  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [11:0] addr,
  input  logic        wr,
  input  logic [31:0] wdata,
  input  logic        rd,
  output logic [31:0] rdata,
  output logic        rvalid,
  output logic [31:0] cfg       [N_CFG],
  output logic [31:0] cmd_pulse,
  input  logic [31:0] status    [N_STAT],
  input  logic [31:0] err_in,
  output logic [31:0] err_reg,
  input  logic [31:0] cnt_latched [N_CNT],
  input  logic [31:0] cnt_free    [N_CNT],
  output logic        fs_we,
  output logic [7:0]  fs_addr,
  output logic [31:0] fs_wdata
);

  localparam logic [11:0] A_CMD = 12'h040;
  localparam logic [11:0] A_ERR = 12'h0C0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CFG; i++) cfg[i] <= '0;
      cmd_pulse <= '0;
      err_reg   <= '0;
      rdata     <= '0;
      rvalid    <= 1'b0;
    end else begin
      cmd_pulse <= '0;
      if (wr && addr < 12'(N_CFG)) cfg[addr[$clog2(N_CFG)-1:0]] <= wdata;
      if (wr && addr == A_CMD)     cmd_pulse <= wdata;
      if (wr && addr == A_ERR) err_reg <= (err_reg & ~wdata) | err_in;
      else                     err_reg <= err_reg | err_in;

      rvalid <= rd;
      if (rd) begin
        if (addr < 12'(N_CFG))
          rdata <= cfg[addr[$clog2(N_CFG)-1:0]];
        else if (addr >= 12'h080 && addr < 12'h080 + 12'(N_STAT))
          rdata <= status[32'(addr - 12'h080)];
        else if (addr == A_ERR)
          rdata <= err_reg;
        else if (addr >= 12'h100 && addr < 12'h100 + 12'(N_CNT))
          rdata <= cnt_latched[32'(addr - 12'h100)];
        else if (addr >= 12'h180 && addr < 12'h180 + 12'(N_CNT))
          rdata <= cnt_free[32'(addr - 12'h180)];
        else if (addr == A_CMD)
          rdata <= '0;
        else
          rdata <= 32'hDEADBEEF;
      end
    end
  end

  assign fs_we    = wr && (addr[11:8] == 4'h4);
  assign fs_addr  = addr[7:0];
  assign fs_wdata = wdata;

endmodule
