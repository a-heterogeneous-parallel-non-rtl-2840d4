// tb_layer_param_mem: checks reset contents, that every word lands on its
// weight or bias (address j*(N_IN+1)+k), that writes past the layer are
// ignored and that nothing changes without a write enable.
module tb_layer_param_mem;
  import mlmd_pkg::*;

  localparam int NI = 3, NO = 3;
  logic clk = 0, rst_n = 0, we = 0;
  logic [CFG_ADDR_W-1:0] addr = '0;
  logic [CFG_W-1:0] wdata = '0;
  shift_param_t w [NO][NI];
  fx_t b [NO];
  logic [16:0] model_w [NO][NI];
  logic [12:0] model_b [NO];
  int checks = 0, failures = 0;

  layer_param_mem dut (.clk, .rst_n, .we, .addr, .wdata, .w, .b);

  always #5 clk = ~clk;

  task automatic compare(input string what);
    for (int j = 0; j < NO; j++) begin
      for (int k = 0; k < NI; k++) begin
        checks++;
        if (17'(w[j][k]) !== model_w[j][k]) begin
          failures++; $display("FAIL %s w[%0d][%0d]=%h exp %h", what, j, k, w[j][k], model_w[j][k]);
        end
      end
      checks++;
      if (13'(b[j]) !== model_b[j]) begin
        failures++; $display("FAIL %s b[%0d]=%h exp %h", what, j, b[j], model_b[j]);
      end
    end
  endtask

  task automatic write(input int ad, input logic [16:0] d);
    @(negedge clk);
    we = 1; addr = CFG_ADDR_W'(ad); wdata = d;
    @(negedge clk);
    we = 0;
    if (ad < NO * (NI + 1)) begin
      if (ad % (NI + 1) == NI) model_b[ad / (NI + 1)] = d[12:0];
      else model_w[ad / (NI + 1)][ad % (NI + 1)] = d;
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < NO; j++) begin
      model_b[j] = '0;
      for (int k = 0; k < NI; k++) model_w[j][k] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare("reset");
    for (int r = 0; r < 5; r++) begin
      for (int ad = 0; ad < NO * (NI + 1); ad++) write(ad, 17'($urandom));
      compare("write");
    end
    for (int ad = NO * (NI + 1); ad < 256; ad += 7) write(ad, 17'($urandom));
    compare("out of range");
    @(negedge clk);
    wdata = 17'h1ffff; addr = 0;
    repeat (3) @(negedge clk);
    compare("no enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
