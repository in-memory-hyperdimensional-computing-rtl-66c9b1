// tb_im_crossbar: programs every row of a reduced IM crossbar (d = 96,
// h = 27) with random bits, then reads random rows with random gate-line
// patterns and checks the sense-amplifier output against row AND gates.
`include "tb_check.svh"
module tb_im_crossbar;
  localparam int D = 96, H = 27;
  logic clk = 0, prog_we = 0;
  logic [4:0] prog_row = '0, row_sel = '0;
  logic [D-1:0] prog_data = '0, gate_lines = '0, sa_out;
  logic [D-1:0] model [H];
  int checks = 0, failures = 0;

  im_crossbar #(.D(D), .H(H)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [D-1:0] rnd();
    logic [D-1:0] v;
    for (int i = 0; i < D; i += 32) v[i +: 32] = $urandom();
    return v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < H; r++) begin
      @(negedge clk);
      prog_we = 1; prog_row = 5'(r); prog_data = rnd(); model[r] = prog_data;
    end
    @(negedge clk);
    prog_we = 0;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      row_sel = 5'($urandom_range(0, H-1));
      gate_lines = (it % 10 == 0) ? '1 : rnd();
      #1;
      `CHECK(sa_out == (model[row_sel] & gate_lines), $sformatf("row %0d read mismatch", row_sel))
    end
    // overwrite one row and read it back with all gates on
    @(negedge clk);
    prog_we = 1; prog_row = 5'd3; prog_data = rnd(); model[3] = prog_data;
    @(negedge clk);
    prog_we = 0; row_sel = 5'd3; gate_lines = '1;
    #1;
    `CHECK(sa_out == model[3], "reprogrammed row")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
