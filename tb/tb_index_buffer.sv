// tb_index_buffer: pushes random symbol indices into the index buffer at
// default size (h = 27, depth 8), with random gaps, and after every cycle
// compares every entry read through rd_ptr with a queue model of the last
// eight symbols (entry 0 = newest).
`include "tb_check.svh"
module tb_index_buffer;
  localparam int H = 27, NMAX = 8;
  logic clk = 0, rst_n = 0, shift = 0;
  logic [4:0] sym_idx = '0, rd_idx;
  logic [2:0] rd_ptr = '0;
  int checks = 0, failures = 0;
  logic [4:0] model [NMAX];

  index_buffer #(.H(H), .NMAX(NMAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NMAX; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      shift   = ($urandom_range(0, 3) != 0);
      sym_idx = 5'($urandom_range(0, H-1));
      @(posedge clk);
      if (shift) begin
        for (int i = NMAX-1; i > 0; i--) model[i] = model[i-1];
        model[0] = sym_idx;
      end
      #1;
      shift = 0;
      for (int p = 0; p < NMAX; p++) begin
        rd_ptr = 3'(p);
        #1;
        `CHECK(rd_idx == model[p], $sformatf("entry %0d got %0d want %0d", p, rd_idx, model[p]))
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
