// ddr_model: behavioural model of the external DDR2 memory behind its
// memory interface, for testbenches only (not synthesizable).
//
// Word-addressed array of MEM_W-bit words. Command channel: one command per
// clock when cmd_valid && cmd_ready; a write takes its data from the
// write-data channel in the same clock (byte mask bit 1 = byte kept). Read
// data return in order, LAT clocks after the command, one word per clock on
// rd_valid/rd_data. This gives the 256 bits per 100 MHz cycle of a 64-bit
// DDR2 bus at 200 MHz. Setting stall_pct makes cmd_ready and wdf_ready drop
// at random, to model page misses; blackout_period/blackout_len hold both
// low for blackout_len clocks in every blackout_period, like a refresh, or
// with blackout_wr_only only wdf_ready, like a full write-data FIFO. poke/peek give the host's
// direct access. proto_errs counts writes whose data channel did not move
// with the command.
module ddr_model
  import matmul_pkg::*;
#(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned LAT   = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  mem_cmd_t           cmd,
  input  logic               wdf_valid,
  output logic               wdf_ready,
  input  logic [MEM_W-1:0]   wdf_data,
  input  logic [MEM_W/8-1:0] wdf_mask,
  output logic               rd_valid,
  output logic [MEM_W-1:0]   rd_data
);

  typedef struct {
    longint unsigned    due;
    logic [ADDR_W-1:0]  addr;
  } rd_req_t;

  logic [MEM_W-1:0] mem [WORDS];
  rd_req_t          rq [$];
  longint unsigned  now;
  int unsigned      stall_pct;
  int unsigned      blackout_period;   // 0: no blackouts
  int unsigned      blackout_len;
  bit               blackout_wr_only;  // 1: only the write-data FIFO is full
  int unsigned      proto_errs;
  int unsigned      bad_addr;

  initial begin
    stall_pct  = 0;
    blackout_period = 0;
    blackout_len    = 0;
    blackout_wr_only = 1'b0;
    proto_errs = 0;
    bad_addr   = 0;
    for (int i = 0; i < int'(WORDS); i++) mem[i] = '0;
  end

  function automatic void poke(int unsigned addr, logic [MEM_W-1:0] data);
    mem[addr] = data;
  endfunction

  function automatic logic [MEM_W-1:0] peek(int unsigned addr);
    return mem[addr];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now       <= 0;
      cmd_ready <= 1'b0;
      wdf_ready <= 1'b0;
      rd_valid  <= 1'b0;
      rd_data   <= '0;
      rq.delete();
    end else begin
      now       <= now + 1;
      if (blackout_period != 0 && (now % blackout_period) < blackout_len) begin
        cmd_ready <= blackout_wr_only ? ($urandom_range(99) >= stall_pct) : 1'b0;
        wdf_ready <= 1'b0;
      end else begin
        cmd_ready <= ($urandom_range(99) >= stall_pct);
        wdf_ready <= ($urandom_range(99) >= stall_pct);
      end
      if (cmd_valid && cmd_ready) begin
        if (cmd.addr >= ADDR_W'(WORDS)) begin
          bad_addr <= bad_addr + 1;
        end else if (cmd.write) begin
          if (!(wdf_valid && wdf_ready)) proto_errs <= proto_errs + 1;
          for (int b = 0; b < int'(MEM_W / 8); b++)
            if (!wdf_mask[b]) mem[cmd.addr][b*8 +: 8] <= wdf_data[b*8 +: 8];
        end else begin
          rq.push_back('{due: now + LAT, addr: cmd.addr});
        end
      end else if (wdf_valid && wdf_ready) begin
        proto_errs <= proto_errs + 1;
      end
      if (rq.size() > 0 && rq[0].due <= now) begin
        rd_valid <= 1'b1;
        rd_data  <= mem[rq[0].addr];
        void'(rq.pop_front());
      end else begin
        rd_valid <= 1'b0;
      end
    end
  end

endmodule
