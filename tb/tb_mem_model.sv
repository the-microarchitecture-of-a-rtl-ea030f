// tb_mem_model: behavioural model of the platform memory seen by the core.
//
// One word array serves both the instruction port and the data port with the
// Pulpino protocol: a request is granted in the cycle it is raised, or later
// when a stall is drawn; the answer (rvalid, and rdata for reads) comes in
// the cycle after the grant. Stalls are drawn with $urandom with the given
// percentage per cycle (0 = the one-access-per-cycle memory). Writes honour
// the byte enables. Addresses are byte addresses; the array holds WORDS words.
// Accesses outside the array answer with data_err_i on the data port.
module tb_mem_model #(
  parameter int unsigned WORDS           = 4096,
  parameter int unsigned INSTR_STALL_PCT = 0,
  parameter int unsigned DATA_STALL_PCT  = 0
) (
  input  logic        clk_i,
  input  logic        instr_req_i,
  output logic        instr_gnt_o,
  output logic        instr_rvalid_o,
  input  logic [31:0] instr_addr_i,
  output logic [31:0] instr_rdata_o,
  input  logic        data_req_i,
  output logic        data_gnt_o,
  output logic        data_rvalid_o,
  input  logic        data_we_i,
  input  logic [3:0]  data_be_i,
  input  logic [31:0] data_addr_i,
  input  logic [31:0] data_wdata_i,
  output logic [31:0] data_rdata_o,
  output logic        data_err_o
);
  logic [31:0] mem [WORDS];
  logic        i_stall, d_stall;
  int unsigned instr_stalls = 0, data_stalls = 0;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = 32'h0000_0013;
    instr_rvalid_o = 1'b0;
    data_rvalid_o  = 1'b0;
    instr_rdata_o  = '0;
    data_rdata_o   = '0;
    data_err_o     = 1'b0;
    i_stall        = 1'b0;
    d_stall        = 1'b0;
  end

  assign instr_gnt_o = instr_req_i && !i_stall;
  assign data_gnt_o  = data_req_i && !d_stall;

  always @(posedge clk_i) begin
    instr_rvalid_o <= instr_req_i && instr_gnt_o;
    if (instr_req_i && instr_gnt_o)
      instr_rdata_o <= mem[(instr_addr_i >> 2) % WORDS];
    if (instr_req_i && i_stall) instr_stalls++;
    if (data_req_i && d_stall)  data_stalls++;

    data_rvalid_o <= data_req_i && data_gnt_o;
    if (data_req_i && data_gnt_o) begin
      data_err_o <= (data_addr_i >> 2) >= WORDS;
      if ((data_addr_i >> 2) < WORDS) begin
        if (data_we_i) begin
          for (int b = 0; b < 4; b++)
            if (data_be_i[b]) mem[data_addr_i >> 2][8*b +: 8] <= data_wdata_i[8*b +: 8];
        end else begin
          data_rdata_o <= mem[data_addr_i >> 2];
        end
      end
    end
    i_stall <= ($urandom % 100) < INSTR_STALL_PCT;
    d_stall <= ($urandom % 100) < DATA_STALL_PCT;
  end
endmodule
