// global_sram: the global MLE scratchpad with compressed table storage.
//
// The circuit's input MLEs (selectors qL qR qM qO qC, witnesses w1 w2 w3,
// permutations s1 s2 s3) are fetched once and read by several protocol
// steps, so they stay on chip. Most of their entries are 0 or 1, which is
// exploited by storing three kinds of table:
//   binary tables (qL, qR, qM, qO)   one bit per entry, packed in one word
//                                    per gate
//   sparse tables (qC, w1, w2, w3)   a 2-bit tag per entry (0, 1 or full);
//                                    full-width values go to a dense array in
//                                    order. An address-translation step finds
//                                    a full entry's slot as base[block] +
//                                    (number of full tags before it in its
//                                    BLK-entry block); base[] is filled while
//                                    the table is written.
//   full tables (s1, s2, s3)         one 255-bit word per entry.
// Writes (from memory) must come in index order for each sparse table.
// A read returns one whole gate row (all 11 values, decompressed) one cycle
// after rd_valid. With 10% full-width entries this stores a sparse table in
// about a tenth of the uncompressed space (DENSE_DIV = 8 leaves headroom).
// Packing the binary tables and the address translation for sparse tables
// follow the published description; the block size, tag code and the one
// read port (the single-channel bus needs no more) are this design's
// choices. Banking is not modelled: the array stands for the banks.
module global_sram
  import zk_pkg::*;
#(
  parameter int MU        = 20,
  parameter int BLK       = 64,
  parameter int DENSE_DIV = 8
) (
  input  logic clk,
  input  logic rst_n,
  // write port: table 0-3 binary, 4-7 sparse, 8-10 full
  input  logic        wr_valid,
  input  logic [3:0]  wr_table,
  input  logic [MU-1:0] wr_idx,
  input  fr_t         wr_data,
  // read port
  input  logic        rd_valid,
  input  logic [MU-1:0] rd_idx,
  output logic        rd_out_valid,
  output fr_t         rd_row [11],
  output logic        overflow     // a sparse table ran out of dense slots
);
  localparam int N    = 2**MU;
  localparam int ND   = N / DENSE_DIV;
  localparam int NBLK = N / BLK;
  localparam int DW   = $clog2(ND);
  localparam int BW   = $clog2(BLK);

  logic [3:0]    bin_mem [N];
  logic [1:0]    tag_mem [4][N];
  fr_t           dense_mem [4][ND];
  logic [DW:0]   base_mem [4][NBLK];
  logic [DW:0]   dense_cnt [4];
  fr_t           full_mem [3][N];

  // ---------------- write ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < 4; t++) dense_cnt[t] <= '0;
      overflow <= 1'b0;
    end else if (wr_valid) begin
      if (wr_table < 4) begin
        bin_mem[wr_idx][wr_table[1:0]] <= wr_data[0];
      end else if (wr_table < 8) begin
        logic [1:0] t;
        t = wr_table[1:0];
        if (wr_idx[BW-1:0] == '0) base_mem[t][wr_idx[MU-1:BW]] <= dense_cnt[t];
        if (wr_data == fr_t'(0))      tag_mem[t][wr_idx] <= 2'd0;
        else if (wr_data == fr_t'(1)) tag_mem[t][wr_idx] <= 2'd1;
        else begin
          tag_mem[t][wr_idx] <= 2'd2;
          if (32'(dense_cnt[t]) < ND) begin
            dense_mem[t][DW'(dense_cnt[t])] <= wr_data;
            dense_cnt[t] <= dense_cnt[t] + 1'b1;
          end else begin
            overflow <= 1'b1;
          end
        end
      end else if (wr_table < 11) begin
        full_mem[2'(wr_table - 4'd8)][wr_idx] <= wr_data;
      end
    end
  end

  // ---------------- read with address translation ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_out_valid <= 1'b0;
      for (int k = 0; k < 11; k++) rd_row[k] <= '0;
    end else begin
      rd_out_valid <= rd_valid;
      if (rd_valid) begin
        for (int k = 0; k < 4; k++) rd_row[k] <= fr_t'(bin_mem[rd_idx][k]);
        for (int t = 0; t < 4; t++) begin
          logic [BW:0] pc;
          logic [MU-1:0] a;
          pc = '0;
          for (int e = 0; e < BLK; e++) begin
            a = {rd_idx[MU-1:BW], BW'(e)};
            if (e < int'(rd_idx[BW-1:0]) && tag_mem[t][a] == 2'd2) pc = pc + 1'b1;
          end
          unique case (tag_mem[t][rd_idx])
            2'd0:    rd_row[4+t] <= '0;
            2'd1:    rd_row[4+t] <= fr_t'(1);
            default: rd_row[4+t] <= dense_mem[t][DW'(base_mem[t][rd_idx[MU-1:BW]] + (DW+1)'(pc))];
          endcase
        end
        for (int k = 0; k < 3; k++) rd_row[8+k] <= full_mem[k][rd_idx];
      end
    end
  end
endmodule
