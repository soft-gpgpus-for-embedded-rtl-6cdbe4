// tb_instr_mem: loads 64 words through the host port and checks that each
// of two fetch ports returns the word at its address in the low half and
// the following word in the high half.
// No ports; 10-unit clock with a watchdog. The 64-bit fetch port is this
// design's choice, so that an 8-byte instruction is read in one cycle.
module tb_instr_mem;
  localparam int WORDS = 64;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] raddr [2], waddr, wdata;
  logic [63:0] rdata [2];
  logic we;
  logic [31:0] model [WORDS];

  instr_mem #(.WORDS(WORDS), .NUM_SM(2)) dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);

  initial begin
    we = 0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      we = 1; waddr = 32'(i) * 4; wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 200; n++) begin
      for (int s = 0; s < 2; s++) raddr[s] = 32'($urandom_range(0, WORDS - 1)) * 4;
      #1;
      for (int s = 0; s < 2; s++) begin
        int w;
        w = int'(raddr[s] / 4);
        checks++;
        if (rdata[s] !== {model[(w + 1) % WORDS], model[w]}) begin
          failures++;
          if (failures < 10) $display("FAIL %h -> %h", raddr[s], rdata[s]);
        end
      end
      @(negedge clk);
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
