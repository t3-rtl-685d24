// nmc_dram: DRAM channel with near-memory compute (op-and-store) in its bank groups.
//
// Accepts one command per cycle: OP_READ returns the 32-byte word READ_LAT cycles
// later; OP_STORE writes it; OP_UPDATE reads, adds (FP16, per lane, in nmc_alu) and
// writes back inside the memory, so a reduction costs no read on the GPU side.
// Because commands are executed one at a time in issue order, each update is atomic,
// as the paper requires of its near-bank ALUs.
//
// Timing follows the paper's HBM2 model: BANK_GROUPS = 4 bank groups (word address
// bits [1:0] select the group); back-to-back commands to one bank group are spaced by
// CCDL cycles, or by CCDWL = 4 cycles after an NMC update. The paper states that
// CCDWL is twice CCDL, so CCDL defaults to 2. Commands to different bank groups may
// issue on consecutive cycles. READ_LAT and the capacity WORDS are this design's
// choices; the paper gives neither (a real HBM2 stack holds gigabytes).
//
// Interface: cmd_valid/cmd_ready handshake; rsp_valid pulses with rsp_data/rsp_tag
// for each read and cannot be back-pressured. Counters report DRAM reads, writes and
// NMC updates, the data movement the paper measures.
module nmc_dram
  import t3_pkg::*;
#(
  parameter int unsigned WORDS       = 8192,
  parameter int unsigned BANK_GROUPS = 4,
  parameter int unsigned CCDL        = 2,
  parameter int unsigned CCDWL       = 4,
  parameter int unsigned READ_LAT    = 4,
  parameter int unsigned TAG_W       = 6,
  localparam int unsigned AW         = $clog2(WORDS),
  localparam int unsigned BGW        = (BANK_GROUPS > 1) ? $clog2(BANK_GROUPS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  mem_op_e            cmd_op,
  input  logic [AW-1:0]      cmd_addr,
  input  logic [DATA_W-1:0]  cmd_data,
  input  logic [TAG_W-1:0]   cmd_tag,
  output logic               rsp_valid,
  output logic [DATA_W-1:0]  rsp_data,
  output logic [TAG_W-1:0]   rsp_tag,
  output logic [31:0]        n_reads,
  output logic [31:0]        n_writes,
  output logic [31:0]        n_updates
);
  logic [DATA_W-1:0] mem [WORDS];
  logic [3:0]        bg_busy [BANK_GROUPS];   // cycles until the group accepts again
  logic [BGW-1:0]    bg;
  logic [DATA_W-1:0] old_word, new_word;
  logic              fire;

  logic              rd_v   [READ_LAT];
  logic [DATA_W-1:0] rd_d   [READ_LAT];
  logic [TAG_W-1:0]  rd_t   [READ_LAT];

  assign bg        = (BANK_GROUPS > 1) ? BGW'(cmd_addr % BANK_GROUPS) : '0;
  assign cmd_ready = (bg_busy[bg] == 0);
  assign fire      = cmd_valid && cmd_ready;
  assign old_word  = mem[cmd_addr];

  nmc_alu u_alu (
    .op       (cmd_op),
    .old_data (old_word),
    .in_data  (cmd_data),
    .new_data (new_word)
  );

  always_ff @(posedge clk) begin
    if (fire && cmd_op != OP_READ) mem[cmd_addr] <= new_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < BANK_GROUPS; g++) bg_busy[g] <= '0;
      for (int i = 0; i < READ_LAT; i++) begin
        rd_v[i] <= 1'b0;
        rd_d[i] <= '0;
        rd_t[i] <= '0;
      end
      n_reads   <= '0;
      n_writes  <= '0;
      n_updates <= '0;
    end else begin
      for (int g = 0; g < BANK_GROUPS; g++)
        if (bg_busy[g] != 0) bg_busy[g] <= bg_busy[g] - 4'd1;
      if (fire) begin
        bg_busy[bg] <= (cmd_op == OP_UPDATE) ? 4'(CCDWL - 1) : 4'(CCDL - 1);
        case (cmd_op)
          OP_READ:   n_reads   <= n_reads + 32'd1;
          OP_STORE:  n_writes  <= n_writes + 32'd1;
          OP_UPDATE: n_updates <= n_updates + 32'd1;
          default: ;
        endcase
      end
      rd_v[0] <= fire && (cmd_op == OP_READ);
      rd_d[0] <= old_word;
      rd_t[0] <= cmd_tag;
      for (int i = 1; i < READ_LAT; i++) begin
        rd_v[i] <= rd_v[i-1];
        rd_d[i] <= rd_d[i-1];
        rd_t[i] <= rd_t[i-1];
      end
    end
  end

  assign rsp_valid = rd_v[READ_LAT-1];
  assign rsp_data  = rd_d[READ_LAT-1];
  assign rsp_tag   = rd_t[READ_LAT-1];

  // a command is held until it is accepted
  property p_cmd_hold;
    @(posedge clk) disable iff (!rst_n) cmd_valid && !cmd_ready |=> cmd_valid;
  endproperty
  a_cmd_hold: assert property (p_cmd_hold);
endmodule
