// tb_param_memory: self-checking test of the weight / bias storage.
// Checks reset to zero, writes to every weight and bias entry (random data) read back
// in parallel, and that out-of-range addresses and wr_en = 0 change nothing.
module tb_param_memory;
  import rbm_pkg::*;
  localparam int unsigned NV = 5, NH = 7;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  param_sel_e wr_sel = SEL_WEIGHT;
  logic [2:0] wr_row = '0, wr_col = '0;
  weight_t wr_data = '0;
  weight_t weights [NV][NH];
  weight_t vis_bias [NV];
  weight_t hid_bias [NH];
  int checks = 0, failures = 0;
  weight_t mw [NV][NH];
  weight_t mv [NV];
  weight_t mh [NH];

  param_memory #(.NV(NV), .NH(NH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(param_sel_e s, int r, int c, weight_t d);
    @(negedge clk);
    wr_en = 1; wr_sel = s; wr_row = 3'(r); wr_col = 3'(c); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic compare();
    for (int i = 0; i < NV; i++) begin
      for (int j = 0; j < NH; j++) begin
        checks++; if (weights[i][j] !== mw[i][j]) begin failures++; $display("w[%0d][%0d]=%0d exp %0d", i, j, weights[i][j], mw[i][j]); end
      end
      checks++; if (vis_bias[i] !== mv[i]) failures++;
    end
    for (int j = 0; j < NH; j++) begin checks++; if (hid_bias[j] !== mh[j]) failures++; end
  endtask

  initial begin
    for (int i = 0; i < NV; i++) begin mv[i] = 0; for (int j = 0; j < NH; j++) mw[i][j] = 0; end
    for (int j = 0; j < NH; j++) mh[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    compare();
    for (int i = 0; i < NV; i++)
      for (int j = 0; j < NH; j++) begin
        mw[i][j] = weight_t'($urandom);
        write(SEL_WEIGHT, i, j, mw[i][j]);
      end
    for (int i = 0; i < NV; i++) begin mv[i] = weight_t'($urandom); write(SEL_VIS_BIAS, i, 0, mv[i]); end
    for (int j = 0; j < NH; j++) begin mh[j] = weight_t'($urandom); write(SEL_HID_BIAS, 0, j, mh[j]); end
    compare();
    // out-of-range rows / columns are ignored
    write(SEL_WEIGHT, 6, 2, 9'sd77);
    write(SEL_WEIGHT, 1, 7, 9'sd77);
    write(SEL_VIS_BIAS, 5, 0, 9'sd77);
    write(SEL_HID_BIAS, 0, 7, 9'sd77);
    // wr_en low: nothing happens
    @(negedge clk); wr_sel = SEL_WEIGHT; wr_row = 0; wr_col = 0; wr_data = ~mw[0][0];
    @(negedge clk);
    compare();
    // overwrite one entry, most negative value
    mw[4][6] = -9'sd256; write(SEL_WEIGHT, 4, 6, mw[4][6]);
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
