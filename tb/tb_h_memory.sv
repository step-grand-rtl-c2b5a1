// tb_h_memory: checks the parity-check matrix store.
// After reset every column must read 0; random column writes must appear one cycle later
// in h_cols with all other columns unchanged; a shadow copy in the testbench is the
// reference.
module tb_h_memory;
  localparam int N = 128, NK = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [6:0] wr_col = '0;
  logic [NK-1:0] wr_data = '0;
  logic [N-1:0][NK-1:0] h_cols;
  logic [NK-1:0] shadow [N];
  int checks = 0, failures = 0;

  h_memory dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      shadow[i] = '0;
      checks++;
      if (h_cols[i] != '0) failures++;
    end
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      wr_en   = 1'($urandom_range(0, 3) != 0);
      wr_col  = 7'($urandom_range(0, N - 1));
      wr_data = $urandom();
      @(posedge clk);
      if (wr_en) shadow[wr_col] = wr_data;
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (h_cols[i] != shadow[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
