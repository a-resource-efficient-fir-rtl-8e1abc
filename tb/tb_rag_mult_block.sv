// tb_rag_mult_block -- checks every product of the shift-and-add multiplier
// block against a plain multiplication, for the extreme inputs and for
// random ones.
module tb_rag_mult_block;
  import tb_ref_pkg::*;

  localparam int DATA_W = 16;
  localparam int PROD_W = DATA_W + 10;

  logic signed [DATA_W-1:0] xin;
  logic signed [PROD_W-1:0] prod [15];
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  rag_mult_block #(.DATA_W(DATA_W)) dut (.xin(xin), .prod(prod));

  always #5 clk = ~clk;

  task automatic check_one(input logic signed [DATA_W-1:0] v);
    xin = v;
    #1;
    for (int i = 0; i < 15; i++) begin
      longint expv;
      expv = longint'(v) * TB_COEFF_R[i];
      checks++;
      if (longint'(prod[i]) != expv) begin
        failures++;
        if (failures < 10)
          $display("FAIL x=%0d * %0d: got %0d expected %0d", v, TB_COEFF_R[i], prod[i], expv);
      end
    end
  endtask

  initial begin
    check_one(16'sd0);
    check_one(16'sd1);
    check_one(-16'sd1);
    check_one(16'sh7fff);
    check_one(16'sh8000);
    for (int n = 0; n < 3000; n++) check_one(DATA_W'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
