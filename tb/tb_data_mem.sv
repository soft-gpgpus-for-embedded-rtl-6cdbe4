// tb_data_mem: random writes on three write ports and reads on two read
// ports of a 64-word memory, compared with an array model; includes
// same-word writes from several ports (highest port wins) and address
// wrap-around of the byte address.
// Expected contents come from a shadow array. No ports; 10-unit clock with a
// watchdog. Reads are combinational and writes take effect at the next edge
// (this design's timing; the paper gives none).
module tb_data_mem;
  localparam int WORDS = 64, NRD = 2, NWR = 3;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] raddr [NRD], rdata [NRD], waddr [NWR], wdata [NWR];
  logic we [NWR];
  logic [31:0] model [WORDS];

  data_mem #(.WORDS(WORDS), .NRD(NRD), .NWR(NWR)) dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);

  initial begin
    for (int p = 0; p < NWR; p++) we[p] = 0;
    // initialise
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      we[0] = 1; waddr[0] = 32'(i) * 4; wdata[0] = 32'(i) * 3 + 1; model[i] = wdata[0];
    end
    @(negedge clk); we[0] = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int p = 0; p < NRD; p++) raddr[p] = $urandom_range(0, 4 * WORDS * 2 - 1);
      #1;
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (rdata[p] !== model[(raddr[p] / 4) % WORDS]) begin
          failures++;
          if (failures < 10) $display("FAIL read %h got %h", raddr[p], rdata[p]);
        end
      end
      for (int p = 0; p < NWR; p++) begin
        we[p] = $urandom_range(0, 1);
        waddr[p] = (n % 5 == 0) ? 32'h10 : 32'($urandom_range(0, 4 * WORDS - 1));
        wdata[p] = $urandom;
      end
      @(posedge clk);
      for (int p = 0; p < NWR; p++) if (we[p]) model[(waddr[p] / 4) % WORDS] = wdata[p];
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
