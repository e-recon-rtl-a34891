// Testbench of the enable and input control: activations and mask are captured on load
// and held; in compute mode IN[r] is the selected bit of activation r and En the mask;
// in read mode only the addressed row is on; plane_zero flags an empty bit-plane.
module tb_input_ctrl;
  import ereCON_pkg::*;
  logic clk = 0, rst_n;
  logic load;
  logic [64*8-1:0] act, act_ref;
  logic [63:0] row_mask, mask_ref;
  in_mode_e mode;
  logic [2:0] bit_sel;
  logic [5:0] row;
  logic [63:0] in, en;
  logic plane_zero;
  int checks = 0, failures = 0, cycles = 0;

  input_ctrl #(.ROWS(64), .ACT_W(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    rst_n = 0; load = 0; mode = IN_IDLE; bit_sel = 0; row = 0;
    act = '0; row_mask = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      for (int i = 0; i < 16; i++) act[32*i +: 32] = $urandom;
      row_mask = {$urandom, $urandom};
      if (t % 5 == 0) row_mask = '1;
      if (t == 3) act = '0;
      act_ref = act; mask_ref = row_mask;
      load = 1;
      @(negedge clk);
      load = 0;
      act = ~act; row_mask = ~row_mask;   // must not disturb the captured values
      mode = IN_CIM;
      for (int b = 7; b >= 0; b--) begin
        logic [63:0] exp_in;
        bit_sel = 3'(b);
        #1;
        for (int r = 0; r < 64; r++) exp_in[r] = act_ref[8*r + b];
        chk(in === exp_in, $sformatf("in t=%0d b=%0d", t, b));
        chk(en === mask_ref, "en = mask");
        chk(plane_zero === ((exp_in & mask_ref) == 0), "plane_zero");
      end
      mode = IN_READ; row = 6'($urandom); #1;
      chk(in === (64'd1 << row) && en === (64'd1 << row), "read row");
      chk(plane_zero === 1'b0, "read plane");
      mode = IN_IDLE; #1;
      chk(in === '0 && en === '0, "idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
