// tb_wordline_driver -- random row buses, Filter and bank selects; every local
// word line is compared with (Filter ? wl : gwl) & bs[bank].
module tb_wordline_driver;
  localparam int H = 240, NB = 22;
  logic [H-1:0] gwl, wl;
  logic filter;
  logic [NB-1:0] bs;
  logic [NB-1:0][H-1:0] wl_local;
  int checks = 0, failures = 0;

  wordline_driver #(.H(H), .NB(NB)) dut (.gwl(gwl), .wl(wl), .filter(filter),
                                         .bs(bs), .wl_local(wl_local));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int r = 0; r < H; r++) begin gwl[r] = $urandom_range(0, 1); wl[r] = $urandom_range(0, 1); end
      filter = $urandom_range(0, 1);
      bs     = NB'({$urandom, $urandom});
      #1;
      for (int b = 0; b < NB; b++)
        for (int r = 0; r < H; r++) begin
          logic exp;
          exp = bs[b] && (filter ? wl[r] : gwl[r]);
          checks++;
          if (wl_local[b][r] !== exp) begin
            failures++;
            if (failures < 5) $display("FAIL t=%0d b=%0d r=%0d", t, b, r);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
