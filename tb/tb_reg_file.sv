// tb_reg_file: random writes to the three thread banks through the execute
// port and the debug port, compared on every read port with a reference
// array; x0 must read 0 whatever is written to it.
module tb_reg_file;
  import klessydra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  harc_t rh, wh, dh;
  logic [4:0] ra, rb, wa, da;
  logic [31:0] rda, rdb, wd, dwd, drd;
  logic we, dwe;
  logic [31:0] model [3][32];
  int checks = 0, failures = 0;

  reg_file #(.THREAD_POOL_SIZE(3)) dut (.clk_i(clk), .rst_ni(rst_n),
    .rd_harc_i(rh), .raddr_a_i(ra), .rdata_a_o(rda), .raddr_b_i(rb), .rdata_b_o(rdb),
    .we_i(we), .wr_harc_i(wh), .waddr_i(wa), .wdata_i(wd),
    .dbg_harc_i(dh), .dbg_addr_i(da), .dbg_we_i(dwe), .dbg_wdata_i(dwd), .dbg_rdata_o(drd));

  task automatic chk(string n, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", n, got, exp); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3; t++) for (int r = 0; r < 32; r++) model[t][r] = 0;
    {we, dwe} = 0; rh = 0; wh = 0; dh = 0; ra = 0; rb = 0; wa = 0; da = 0; wd = 0; dwd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 800; i++) begin
      @(negedge clk);
      // check reads
      rh = harc_t'($urandom % 3); ra = 5'($urandom); rb = 5'($urandom);
      dh = harc_t'($urandom % 3); da = 5'($urandom);
      #1;
      chk("port a", rda, model[rh][ra]);
      chk("port b", rdb, model[rh][rb]);
      chk("debug port", drd, model[dh][da]);
      // one write from execute or debug
      we = $urandom % 2; dwe = !we && ($urandom % 2);
      wh = harc_t'($urandom % 3); wa = 5'($urandom); wd = $urandom;
      dwd = $urandom;
      if (we && wa != 0) model[wh][wa] = wd;
      if (dwe && da != 0) model[dh][da] = dwd;
      @(posedge clk); #1; we = 0; dwe = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
