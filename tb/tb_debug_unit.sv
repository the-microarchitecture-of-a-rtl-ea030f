// tb_debug_unit: the debug unit with a small behavioural model of the core
// (it halts two cycles after halt_req and fetches at random while allowed).
// Checks the bus timing (grant in the request cycle, read data one cycle
// later), halt by register write, by pin and by EBREAK with the right cause,
// resume by register and by pin, GPR access (register-file port driven only
// while halted, thread/register decoded from the address), NPC reads, and
// single-step: exactly one fetch per step, SSTH set when the core re-halts.
module tb_debug_unit;
  import klessydra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        req = 0, we = 0, halt_pin = 0, resume_pin = 0, ebreak = 0;
  logic [14:0] addr = 0;
  logic [31:0] wdata = 0, rdata, rf_wdata, pcs [3];
  logic        gnt, rvalid, halted_o, halt_req, fetch_allow, rf_we;
  harc_t       rf_harc;
  logic [4:0]  rf_addr;
  logic        halted = 0, fetch = 0;
  logic [1:0]  drain = 0;
  int checks = 0, failures = 0, fetches = 0;

  debug_unit #(.THREAD_POOL_SIZE(3)) dut (.clk_i(clk), .rst_ni(rst_n),
    .debug_req_i(req), .debug_gnt_o(gnt), .debug_rvalid_o(rvalid), .debug_addr_i(addr),
    .debug_we_i(we), .debug_wdata_i(wdata), .debug_rdata_o(rdata),
    .debug_halt_i(halt_pin), .debug_resume_i(resume_pin), .debug_halted_o(halted_o),
    .ebreak_i(ebreak), .halted_i(halted), .fetch_i(fetch), .halt_req_o(halt_req),
    .fetch_allow_o(fetch_allow), .pc_i(pcs), .rf_harc_o(rf_harc), .rf_addr_o(rf_addr),
    .rf_we_o(rf_we), .rf_wdata_o(rf_wdata),
    .rf_rdata_i({24'hABCDEF, 3'(rf_harc), rf_addr}));

  assign pcs[0] = 32'h100; assign pcs[1] = 32'h204; assign pcs[2] = 32'h308;

  // core model: drains for two cycles after halt_req, then sits halted
  always @(posedge clk) begin
    if (!halt_req) begin halted <= 0; drain <= 0; end
    else if (drain == 2) halted <= 1;
    else drain <= drain + 1;
    if (fetch) fetches++;
  end
  always @(negedge clk) fetch = fetch_allow && !halted && ($urandom % 2);

  task automatic chk(string n, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", n, got, exp); end
  endtask

  task automatic dwrite(logic [14:0] a, logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = a; wdata = d; #1;
    chk("grant in request cycle", 32'(gnt), 1);
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic dread(logic [14:0] a, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = a; #1;
    chk("grant in request cycle", 32'(gnt), 1);
    @(negedge clk); req = 0; #1;
    chk("rvalid one cycle later", 32'(rvalid), 1);
    d = rdata;
  endtask

  task automatic wait_halted();
    int n = 0;
    do begin @(posedge clk); n++; end while (!halted_o && n < 50);
    chk("core halted", 32'(halted_o), 1);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int f0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    chk("running after reset", 32'(fetch_allow), 1);
    // GPR write while running is ignored by the register file port
    @(negedge clk); req = 1; we = 1; addr = 15'h0400 + 15'h80 + 15'd4 * 15'd5; wdata = 1; #1;
    chk("no GPR write while running", 32'(rf_we), 0);
    @(negedge clk); req = 0; we = 0;
    // halt by register
    dwrite(15'h0000, 32'h0001_0000);
    #1 chk("halt request", 32'(halt_req), 1);
    chk("fetch blocked", 32'(fetch_allow), 0);
    wait_halted();
    dread(15'h000C, d); chk("cause halt", d, 32'h1F);
    dread(15'h0000, d); chk("DBG_CTRL", d, 32'h0001_0000);
    // GPR access, thread t, register r
    for (int k = 0; k < 20; k++) begin
      int t = $urandom % 3, r = $urandom % 32;
      logic [14:0] a = 15'h0400 + 15'(t * 128 + r * 4);
      dread(a, d); chk("GPR read", d, {24'hABCDEF, 3'(t), 5'(r)});
      @(negedge clk); req = 1; we = 1; addr = a; wdata = $urandom; #1;
      chk("GPR write strobe", 32'(rf_we), 1);
      chk("GPR write addr", {27'(rf_harc), rf_addr}, {27'(t), 5'(r)});
      @(negedge clk); req = 0; we = 0;
    end
    for (int t = 0; t < 3; t++) begin
      dread(15'h2000 + 15'(4 * t), d); chk("NPC", d, pcs[t]);
    end
    // resume by register
    dwrite(15'h0000, 32'h0);
    #1 chk("resumed", 32'(fetch_allow), 1);
    repeat (10) @(negedge clk);
    chk("still running", 32'(halt_req), 0);
    // halt by pin, resume by pin
    @(negedge clk); halt_pin = 1; @(negedge clk); halt_pin = 0;
    wait_halted();
    @(negedge clk); resume_pin = 1; @(negedge clk); resume_pin = 0; #1;
    chk("resumed by pin", 32'(fetch_allow), 1);
    // EBREAK
    @(negedge clk); ebreak = 1; @(negedge clk); ebreak = 0;
    wait_halted();
    dread(15'h000C, d); chk("cause EBREAK", d, 32'd3);
    // single steps: SSTE then resume with SSTE kept
    for (int s = 0; s < 5; s++) begin
      dwrite(15'h0004, 0);
      f0 = fetches;
      dwrite(15'h0000, 32'h1);
      // the core leaves halt, executes one instruction and halts again
      begin
        int n = 0;
        while (halted_o && n < 20) begin @(posedge clk); n++; end
      end
      wait_halted();
      repeat (3) @(negedge clk);
      chk("one fetch per step", 32'(fetches - f0), 1);
      dread(15'h0004, d); chk("SSTH", d, 1);
      dread(15'h0000, d); chk("still halted after step", d, 32'h0001_0001);
    end
    // leave step mode
    dwrite(15'h0000, 32'h0);
    #1 chk("resumed after stepping", 32'(fetch_allow), 1);
    repeat (10) @(negedge clk);
    chk("running freely", 32'(halt_req), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
