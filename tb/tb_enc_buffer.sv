// tb_enc_buffer: stores a distinct counter state at each of the 16
// addresses of the intermediate encoding buffer, overwrites some, and reads
// all of them back.
module tb_enc_buffer;
  import pacim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [3:0] waddr = 0, raddr = 0;
  sp_t wdata [ACT_W];
  sp_t rdata [ACT_W];
  sp_t model [ENC_DEPTH][ACT_W];
  int checks = 0, failures = 0;

  enc_buffer dut (.*);

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < ENC_DEPTH; a++) begin
        if (pass == 1 && a % 3 != 0) continue;
        @(negedge clk);
        for (int b = 0; b < ACT_W; b++) begin
          wdata[b] = SP_W'($urandom);
          model[a][b] = wdata[b];
        end
        we = 1; waddr = 4'(a);
      end
      @(negedge clk);
      we = 0;
      for (int a = 0; a < ENC_DEPTH; a++) begin
        raddr = 4'(a);
        #1;
        for (int b = 0; b < ACT_W; b++) begin
          checks++;
          if (rdata[b] != model[a][b]) begin
            failures++;
            if (failures < 10) $display("FAIL: addr %0d bit %0d = %0d expected %0d", a, b, rdata[b], model[a][b]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
