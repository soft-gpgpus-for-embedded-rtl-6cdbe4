// tb_addr_regfile: after reset every address register reads zero; then random
// writes of one selected address register in masked lanes, compared with
// a model of all four registers of every lane and row.
// Expected contents come from a shadow array in the testbench. No ports;
// 10-unit clock with a watchdog. Four 32-bit registers per thread is this
// design's choice (the paper does not give the count).
module tb_addr_regfile;
  import flexgrip_pkg::*;
  localparam int NSP = 8, MW = 2, ROWS = MW * 32 / NSP;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] raddr, waddr;
  logic [1:0] wsel;
  logic [NSP-1:0] we;
  logic [31:0] rdata [NSP][NUM_AREG], wdata [NSP];
  logic [31:0] model [ROWS][NSP][NUM_AREG];

  addr_regfile #(.NUM_SP(NSP), .MAX_WARPS(MW)) dut (.clk, .rst_n, .raddr, .rdata, .waddr, .wsel, .we, .wdata);

  task automatic cmp();
    for (int l = 0; l < NSP; l++)
      for (int p = 0; p < NUM_AREG; p++) begin
        checks++;
        if (rdata[l][p] !== model[raddr][l][p]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d lane %0d p%0d", raddr, l, p);
        end
      end
  endtask

  initial begin
    we = '0;
    for (int r = 0; r < ROWS; r++) for (int l = 0; l < NSP; l++) for (int p = 0; p < 4; p++) model[r][l][p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin raddr = 3'(r); #1; cmp(); end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      raddr = 3'($urandom_range(0, ROWS - 1));
      waddr = 3'($urandom_range(0, ROWS - 1));
      wsel = 2'($urandom); we = NSP'($urandom);
      for (int l = 0; l < NSP; l++) wdata[l] = $urandom;
      #1;
      cmp();
      @(posedge clk);
      for (int l = 0; l < NSP; l++) if (we[l]) model[waddr][l][wsel] = wdata[l];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
