// tb_global_sram: writes all 11 input tables of a 2^10-gate circuit (binary
// selectors, 90%-sparse witness-like tables, full permutation tables) and
// reads every gate row back, in random order, through the address
// translation; checks each value and that no dense overflow occurred. A
// second table set with too many full values must raise overflow.
//
// The table classes (binary, sparse, full) follow the paper; the one-cycle
// read latency and the overflow flag are this design's.
module tb_global_sram;
  import tb_ref_pkg::*;
  localparam int MU = 10, N = 2**MU;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_valid = 0, rd_valid = 0, rd_out_valid, overflow;
  logic [3:0] wr_table;
  logic [MU-1:0] wr_idx, rd_idx;
  fr_t wr_data, rd_row [11];
  fr_t ref_t [11][N];

  global_sram #(.MU(MU)) dut (.clk, .rst_n, .wr_valid, .wr_table, .wr_idx, .wr_data,
                              .rd_valid, .rd_idx, .rd_out_valid, .rd_row, .overflow);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_table = '0; wr_idx = '0; wr_data = '0; rd_idx = '0;
    for (int t = 0; t < 11; t++)
      for (int i = 0; i < N; i++)
        ref_t[t][i] = (t < 4) ? fr_t'($urandom_range(0, 1)) : (t < 8) ? rsparse() : rrand();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 11; t++)
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        wr_valid = 1; wr_table = 4'(t); wr_idx = MU'(i); wr_data = ref_t[t][i];
      end
    @(negedge clk) wr_valid = 0;
    for (int k = 0; k < 3*N; k++) begin
      int i;
      i = (k < N) ? k : $urandom_range(0, N - 1);
      @(negedge clk);
      rd_valid = 1; rd_idx = MU'(i);
      @(negedge clk);
      rd_valid = 0;
      for (int t = 0; t < 11; t++) begin
        checks++;
        if (rd_row[t] !== ref_t[t][i]) begin failures++; if (failures < 10) $display("t%0d i%0d mismatch", t, i); end
      end
    end
    checks++;
    if (overflow) begin failures++; $display("unexpected overflow"); end
    // overflow: a fully dense table does not fit the compressed store
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      wr_valid = 1; wr_table = 4'd5; wr_idx = MU'(i); wr_data = rrand() | fr_t'(2);
    end
    @(negedge clk) wr_valid = 0;
    @(negedge clk);
    checks++;
    if (!overflow) begin failures++; $display("overflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
