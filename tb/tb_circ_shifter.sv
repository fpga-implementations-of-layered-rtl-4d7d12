// tb_circ_shifter: a forward and a reverse shifter at L = 64, random words
// and every shift amount; output lane m must hold input lane (m + p) mod L
// (forward) or (m - p) mod L (reverse), and reverse after forward must give
// the input back.
module tb_circ_shifter;
  localparam int unsigned L = 64, WIDTH = 5, SW = 6;
  logic [L-1:0][WIDTH-1:0] din, fwd, back;
  logic [SW-1:0] shift;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  circ_shifter #(.L(L), .WIDTH(WIDTH), .DIR(1'b0)) u_f (.din(din), .shift, .dout(fwd));
  circ_shifter #(.L(L), .WIDTH(WIDTH), .DIR(1'b1)) u_r (.din(fwd), .shift, .dout(back));

  initial begin
    for (int n = 0; n < 4 * L; n++) begin
      int p;
      p = n % L;
      for (int j = 0; j < L; j++) din[j] = WIDTH'($urandom);
      shift = SW'(p);
      #1;
      for (int m = 0; m < L; m++) begin
        checks += 2;
        if (fwd[m] != din[(m + p) % L]) begin
          failures++;
          if (failures < 10) $display("FAIL forward p=%0d lane %0d", p, m);
        end
        if (back[m] != din[m]) begin
          failures++;
          if (failures < 10) $display("FAIL reverse p=%0d lane %0d", p, m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
