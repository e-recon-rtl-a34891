// Testbench of one bank: program random 4-bit weights row by row with the SET/RESET
// bias, then apply random row inputs and enables in compute bias and check every row's
// 4-bit partial product against in & en ? weight : 0. Also checks single-row read.
module tb_reram_bank;
  localparam int ROWS = 64, COLS = 4;
  logic [ROWS-1:0] wl, en, in;
  logic [COLS-1:0] bl, sl;
  logic vwr;
  logic [ROWS*COLS-1:0] pp;
  logic [COLS-1:0] w [ROWS];
  int checks = 0, failures = 0;

  reram_bank #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = '0; en = '0; in = '0; bl = '0; sl = '0; vwr = 0;
    #1;
    for (int pass = 0; pass < 3; pass++) begin
      for (int r = 0; r < ROWS; r++) begin
        w[r] = COLS'($urandom);
        wl = '0; wl[r] = 1'b1; vwr = 1; bl = w[r]; sl = ~w[r]; #1;
        wl = '0; vwr = 0; bl = '0; sl = '0; #1;
      end
      for (int t = 0; t < 20; t++) begin
        wl = '1; bl = '0; sl = '1;
        in = {$urandom, $urandom}; en = {$urandom, $urandom};
        if (t == 0) begin in = '1; en = '1; end
        #1;
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (pp[COLS*r +: COLS] !== ((in[r] && en[r]) ? w[r] : '0)) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d pp=%h w=%h in=%b en=%b",
                                        r, pp[COLS*r +: COLS], w[r], in[r], en[r]);
          end
        end
      end
      // single-row read: only row r's word line, input and enable on
      for (int r = 0; r < ROWS; r += 7) begin
        wl = '0; wl[r] = 1; in = '0; in[r] = 1; en = '0; en[r] = 1; bl = '0; sl = '1; #1;
        checks++;
        if (pp !== ((ROWS*COLS)'(w[r]) << (COLS*r))) begin
          failures++;
          $display("FAIL read row %0d", r);
        end
      end
      wl = '0; en = '0; in = '0; sl = '0; #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
