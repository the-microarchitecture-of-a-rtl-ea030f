// reg_file: integer register files of all hardware threads.
//
// Each thread owns a private bank of 32 registers of 32 bits, x0 .. x31;
// x0 always reads 0 and ignores writes. The banks form one array indexed by
// thread id. Ports:
//   two combinational read ports for the decode stage (thread harc_ID),
//   one write port for the execute stage (thread harc_IE), written at the
//     clock edge,
//   one read/write port for the debug unit (used while the core is halted; a
//     debug write and an execute-stage write never meet because the execute
//     stage is idle in the debug state).
// A read in the cycle of a write to the same register returns the old value:
// there is no bypass, the thread interleaving keeps such reads from happening.
// Follows the paper: 32 x 32-bit registers, x0 bound to 0, one register file
// per thread, access by the debug unit. Own choice: the port count and the
// priority of the execute-stage write over a debug write.
module reg_file
  import klessydra_pkg::*;
#(
  parameter int unsigned THREAD_POOL_SIZE = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // decode-stage read ports
  input  harc_t       rd_harc_i,
  input  logic [4:0]  raddr_a_i,
  output logic [31:0] rdata_a_o,
  input  logic [4:0]  raddr_b_i,
  output logic [31:0] rdata_b_o,
  // execute-stage write port
  input  logic        we_i,
  input  harc_t       wr_harc_i,
  input  logic [4:0]  waddr_i,
  input  logic [31:0] wdata_i,
  // debug port
  input  harc_t       dbg_harc_i,
  input  logic [4:0]  dbg_addr_i,
  input  logic        dbg_we_i,
  input  logic [31:0] dbg_wdata_i,
  output logic [31:0] dbg_rdata_o
);
  // thread-id bits needed to index the per-thread arrays
  localparam int unsigned IDX_W = (THREAD_POOL_SIZE > 1) ? $clog2(THREAD_POOL_SIZE) : 1;
  logic [31:0] regs_q [THREAD_POOL_SIZE][32];

  function automatic logic [31:0] rd(harc_t h, logic [4:0] a);
    if (a == 5'd0 || 32'(h) >= THREAD_POOL_SIZE) return '0;
    return regs_q[h[IDX_W-1:0]][a];
  endfunction

  assign rdata_a_o   = rd(rd_harc_i, raddr_a_i);
  assign rdata_b_o   = rd(rd_harc_i, raddr_b_i);
  assign dbg_rdata_o = rd(dbg_harc_i, dbg_addr_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int t = 0; t < THREAD_POOL_SIZE; t++)
        for (int r = 0; r < 32; r++) regs_q[t][r] <= '0;
    end else begin
      if (we_i && waddr_i != 5'd0 && 32'(wr_harc_i) < THREAD_POOL_SIZE)
        regs_q[wr_harc_i[IDX_W-1:0]][waddr_i] <= wdata_i;
      else if (dbg_we_i && dbg_addr_i != 5'd0 && 32'(dbg_harc_i) < THREAD_POOL_SIZE)
        regs_q[dbg_harc_i[IDX_W-1:0]][dbg_addr_i] <= dbg_wdata_i;
    end
  end
endmodule
