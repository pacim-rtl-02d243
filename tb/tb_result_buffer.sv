// tb_result_buffer: adds random parallel D-CiM transfers and sequential PCE
// results (sometimes in the same clock) into the 64 entries and compares
// every entry with a reference; checks clear.
module tb_result_buffer;
  import pacim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, clear = 0, dcim_valid = 0, pce_valid = 0;
  acc_t dcim_val [N_MWC];
  logic [5:0] pce_ch = 0, rd_idx = 0;
  acc_t pce_val = 0, rd_data;
  longint ref_e [N_MWC];
  int checks = 0, failures = 0, both = 0;

  result_buffer dut (.*);

  task automatic compare(input string what);
    for (int c = 0; c < N_MWC; c++) begin
      rd_idx = 6'(c);
      #1;
      checks++;
      if (longint'(rd_data) != ref_e[c]) begin
        failures++;
        if (failures < 10) $display("FAIL %s: entry %0d = %0d expected %0d", what, c, rd_data, ref_e[c]);
      end
    end
  endtask

  initial begin
    for (int c = 0; c < N_MWC; c++) begin dcim_val[c] = '0; ref_e[c] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int t = 0; t < 100; t++) begin
        @(negedge clk);
        dcim_valid = ($urandom % 8) == 0;
        pce_valid  = ($urandom % 2) == 0;
        for (int c = 0; c < N_MWC; c++) dcim_val[c] = acc_t'($urandom % 1000000);
        pce_ch  = 6'($urandom);
        pce_val = acc_t'($urandom % 1000000) - acc_t'(1000);
        if (dcim_valid) for (int c = 0; c < N_MWC; c++) ref_e[c] += longint'(dcim_val[c]);
        if (pce_valid) ref_e[pce_ch] += longint'(pce_val);
        if (dcim_valid && pce_valid) both++;
      end
      @(negedge clk);
      dcim_valid = 0; pce_valid = 0;
      compare("accumulate");
      clear = 1; dcim_valid = 1; pce_valid = 1;
      @(negedge clk);
      clear = 0; dcim_valid = 0; pce_valid = 0;
      for (int c = 0; c < N_MWC; c++) ref_e[c] = 0;
      compare("clear");
    end
    checks++;
    if (both == 0) begin failures++; $display("FAIL: no simultaneous merge exercised"); end
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
