// tb_vector_regfile: random lane-masked writes and three-port reads of a
// 4-lane, 256-register file, compared with a bank model.
// Expected contents come from a shadow array. No ports; 10-unit clock with
// a watchdog. One bank per lane is this design's layout.
module tb_vector_regfile;
  localparam int NSP = 4, NREG = 256, DEP = NREG / NSP, NRD = 3;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [5:0] raddr [NRD], waddr;
  logic [31:0] rdata [NRD][NSP], wdata [NSP];
  logic [NSP-1:0] we;
  logic [31:0] model [NSP][DEP];

  vector_regfile #(.NUM_SP(NSP), .NUM_REGS(NREG), .NRD(NRD)) dut (.clk, .raddr, .rdata, .waddr, .we, .wdata);

  initial begin
    we = '0;
    for (int a = 0; a < DEP; a++) begin
      @(negedge clk);
      we = '1; waddr = 6'(a);
      for (int l = 0; l < NSP; l++) begin wdata[l] = $urandom; model[l][a] = wdata[l]; end
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int p = 0; p < NRD; p++) raddr[p] = 6'($urandom_range(0, DEP - 1));
      we = NSP'($urandom); waddr = 6'($urandom_range(0, DEP - 1));
      for (int l = 0; l < NSP; l++) wdata[l] = $urandom;
      #1;
      for (int p = 0; p < NRD; p++)
        for (int l = 0; l < NSP; l++) begin
          checks++;
          if (rdata[p][l] !== model[l][raddr[p]]) begin
            failures++;
            if (failures < 10) $display("FAIL port %0d lane %0d addr %0d", p, l, raddr[p]);
          end
        end
      @(posedge clk);
      for (int l = 0; l < NSP; l++) if (we[l]) model[l][waddr] = wdata[l];
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
