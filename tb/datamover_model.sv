// datamover_model: behavioural stand-in for an AXI DataMover and the memory behind
// it, for simulation only (not synthesizable as written, not part of the design).
//
// Read channel: a command {addr, btt} is accepted when the channel is idle; after
// LAT cycles the model streams btt/8 64-bit words from mem[addr/8] onwards, with
// random one-cycle gaps when STALL is set. Write channel: a command is accepted when
// idle; the next btt/8 beats on the write-data port are stored from mem[addr/8];
// LAT cycles after the last one a write status (okay) is offered. Addresses are
// byte addresses, word aligned. Testbenches read and write `mem` directly.
module datamover_model
  import shoal_pkg::*;
#(
  parameter int MEM_WORDS = 4096,
  parameter int LAT       = 6,
  parameter bit STALL     = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rdcmd_valid,
  output logic              rdcmd_ready,
  input  dm_cmd_t           rdcmd,
  output logic              rd_valid,
  input  logic              rd_ready,
  output logic [DATA_W-1:0] rd_data,
  input  logic              wrcmd_valid,
  output logic              wrcmd_ready,
  input  dm_cmd_t           wrcmd,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [DATA_W-1:0] wr_data,
  input  logic              wr_last,
  output logic              wrsts_valid,
  input  logic              wrsts_ready,
  output logic              wrsts_okay
);
  logic [DATA_W-1:0] mem [MEM_WORDS];

  int  rd_left, rd_wait, rd_addr;
  bit  rd_gap;
  int  wr_left, wr_addr, sts_wait;
  bit  wr_busy, sts_pend;
  int  reads, writes;
  bit  wr_last_err;

  assign rdcmd_ready = rd_left == 0;
  assign rd_valid    = rd_left != 0 && rd_wait == 0 && !rd_gap;
  assign rd_data     = mem[rd_addr % MEM_WORDS];
  assign wrcmd_ready = !wr_busy && !sts_pend;
  assign wr_ready    = wr_busy;
  assign wrsts_valid = sts_pend && sts_wait == 0;
  assign wrsts_okay  = 1'b1;

  always @(posedge clk) begin
    if (!rst_n) begin
      rd_left <= 0; rd_wait <= 0; rd_addr <= 0; rd_gap <= 0;
      wr_left <= 0; wr_addr <= 0; wr_busy <= 0; sts_pend <= 0; sts_wait <= 0;
      reads <= 0; writes <= 0; wr_last_err <= 0;
    end else begin
      rd_gap <= STALL && ($urandom_range(0, 3) == 0);
      if (rdcmd_valid && rdcmd_ready) begin
        rd_left <= int'(rdcmd.btt) / 8;
        rd_addr <= int'(rdcmd.addr) / 8;
        rd_wait <= LAT;
        reads   <= reads + 1;
      end else begin
        if (rd_wait != 0) rd_wait <= rd_wait - 1;
        if (rd_valid && rd_ready) begin
          rd_left <= rd_left - 1;
          rd_addr <= rd_addr + 1;
        end
      end
      if (wrcmd_valid && wrcmd_ready) begin
        wr_left <= int'(wrcmd.btt) / 8;
        wr_addr <= int'(wrcmd.addr) / 8;
        wr_busy <= 1;
        writes  <= writes + 1;
      end
      if (wr_valid && wr_ready) begin
        mem[wr_addr % MEM_WORDS] <= wr_data;
        wr_addr <= wr_addr + 1;
        wr_left <= wr_left - 1;
        if (wr_last != (wr_left == 1)) wr_last_err <= 1;
        if (wr_left == 1) begin
          wr_busy  <= 0;
          sts_pend <= 1;
          sts_wait <= LAT;
        end
      end
      if (sts_pend && sts_wait != 0) sts_wait <= sts_wait - 1;
      if (wrsts_valid && wrsts_ready) sts_pend <= 0;
    end
  end
endmodule
