// Testbench of the 3T1R bitcell model: SET/RESET writes, the AND truth table in compute
// mode (input 1 = BL low / SL high / IN high), no write while CIM_EN is on or at the
// read level, and no
// output while the word line is off.
module tb_bitcell_3t1r;
  logic bl, sl, vwr, wl, cim_en, in, out;
  int checks = 0, failures = 0;

  bitcell_3t1r dut (.*);

  task automatic check(input logic exp, input string what);
    checks++;
    if (out !== exp) begin
      failures++;
      $display("FAIL %s: out=%0b expected %0b", what, out, exp);
    end
  endtask

  task automatic write(input logic w);
    wl = 1; cim_en = 0; vwr = 1; bl = w; sl = ~w; #1;
    wl = 0; vwr = 0; bl = 0; sl = 0; #1;
  endtask

  // compute with the truth-table encoding of the input value x
  task automatic compute(input logic x);
    wl = 1; cim_en = 1; bl = ~x; sl = x; in = x; #1;
  endtask

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bl = 0; sl = 0; vwr = 0; wl = 0; cim_en = 0; in = 0;
    #1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int w = 0; w < 2; w++) begin
        write(w[0]);
        for (int x = 0; x < 2; x++) begin
          compute(x[0]);
          check(w[0] & x[0], $sformatf("w=%0d x=%0d", w, x));
        end
        // input-1 bias on BL/SL but IN low: the M2 path must block the output
        wl = 1; cim_en = 1; bl = 0; sl = 1; in = 0; #1; check(1'b0, "IN low");
        // word line off: no output
        wl = 0; #1; check(1'b0, "wl off");
        // CIM_EN off: no output
        wl = 1; cim_en = 0; bl = 0; sl = 0; in = 1; #1; check(1'b0, "cim_en off");
        wl = 0; #1;
      end
    end
    // a write bias with CIM_EN on must not change the stored state
    write(1'b1);
    wl = 1; cim_en = 1; bl = 0; sl = 1; in = 0; #1;   // RESET polarity, but computing
    compute(1'b1); check(1'b1, "no write while computing");
    // a write with the word line off must not change the state
    wl = 0; cim_en = 0; bl = 0; sl = 1; #1;
    compute(1'b1); check(1'b1, "no write with wl off");
    // read-level bias of RESET polarity on a row that is not computing: no write
    wl = 1; cim_en = 0; vwr = 0; bl = 0; sl = 1; #1;
    compute(1'b1); check(1'b1, "no write at read level");
    write(1'b0);
    compute(1'b1); check(1'b0, "RESET to HRS");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
