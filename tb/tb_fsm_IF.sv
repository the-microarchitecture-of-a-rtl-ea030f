// tb_fsm_IF: fetch stage against the memory model. Phase 1: memory always
// grants and the pipeline never stalls; the stage must fetch one instruction
// per cycle (20 fetches in 20 cycles). Phase 2: random grant stalls and random
// execute-stage stalls; every instruction handed to ID must carry the word
// stored at its PC, in fetch order, none lost or repeated.
module tb_fsm_IF;
  import klessydra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        fetch_en = 0, ie_accept = 1, void_s = 0;
  harc_t       harc = '0;
  logic [31:0] pc_IF = 32'h100;
  logic        req, gnt, rvalid, fire, consumed, ready, adv, load, vld, busy;
  logic [31:0] addr, rdata, word, pc_ID;
  harc_t       harc_ID;
  int checks = 0, failures = 0;
  int unsigned stall_pct = 0;

  fsm_IF dut (.clk_i(clk), .rst_ni(rst_n), .fetch_enable_i(fetch_en), .ie_accept_i(ie_accept),
    .harc_IF_i(harc), .void_IF_i(void_s), .pc_IF_i(pc_IF),
    .instr_req_o(req), .instr_addr_o(addr), .instr_gnt_i(gnt), .instr_rvalid_i(rvalid),
    .instr_rdata_i(rdata), .fire_o(fire), .slot_consumed_o(consumed),
    .id_ready_o(ready), .id_advance_o(adv), .id_load_o(load),
    .instr_valid_ID_o(vld), .instr_word_ID_o(word), .pc_ID_o(pc_ID), .harc_ID_o(harc_ID),
    .busy_o(busy));

  // program memory: word at address a is a ^ 0xA5A50000; grant stalls on demand
  logic stall_now = 0;
  assign gnt = req && !stall_now;
  always @(posedge clk) begin
    rvalid <= req && gnt;
    // read data is only meaningful with rvalid: random otherwise
    rdata <= (req && gnt) ? (addr ^ 32'hA5A5_0000) : $urandom;
    stall_now <= ($urandom % 100) < stall_pct;
  end
  initial begin rvalid = 0; rdata = 0; end

  // PC advances on fire, as the pc_updater would do
  always @(posedge clk) if (fire) pc_IF <= pc_IF + 4;

  logic [31:0] fired_q[$];
  int fires = 0, delivered = 0;
  always @(posedge clk) if (rst_n) begin
    if (fire) begin fired_q.push_back(addr); fires++; end
    if (adv && vld) begin
      logic [31:0] e;
      e = fired_q.pop_front();
      delivered++;
      checks++;
      if (pc_ID != e || word != (e ^ 32'hA5A5_0000)) begin
        failures++;
        $display("FAIL delivered pc %h word %h, expected pc %h", pc_ID, word, e);
      end
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); fetch_en = 1;
    f0 = fires;
    repeat (20) @(negedge clk);
    checks++;
    if (fires - f0 != 20) begin failures++; $display("FAIL %0d fetches in 20 cycles", fires - f0); end
    // phase 2: random stalls on both sides
    stall_pct = 30;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      ie_accept = ($urandom % 100) >= 30;
    end
    @(negedge clk); ie_accept = 1; stall_pct = 0; fetch_en = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (fired_q.size() != 0 || delivered != fires) begin
      failures++; $display("FAIL %0d fetched, %0d delivered", fires, delivered);
    end
    $display("fetches=%0d", fires);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
