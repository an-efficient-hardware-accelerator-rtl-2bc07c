// Weight index buffer (WIB): the compressed sparse-row index of the pruned kernels.
//
// 4 KB of 16-bit words split into three parts, as the paper describes:
//   part 0  Offset    : one 16-bit word per input channel, the number of nonzero
//                       weights of that channel in one kernel (in FC: in the vector)
//   part 1  R_pointer : 4-bit count of nonzero weights in each kernel row, four per word
//   part 2  Index     : 4-bit step index (zeros skipped before each nonzero weight),
//                       four per word
// Nibble k of a word is bits [4k+3:4k]. The split 512 / 512 / 1024 words is this
// design's choice. Shape-wise pruning makes all kernels of a group of N output
// channels share this index, so there is one WIB for the whole PU array.
// Each part has its own synchronous read port (data the cycle after the read enable,
// held otherwise); R_pointer and Index are read by nibble address.
module weight_index_buffer #(
  parameter int unsigned OFF_WORDS = 512,
  parameter int unsigned RP_WORDS  = 512,
  parameter int unsigned IDX_WORDS = 1024
) (
  input  logic        clk,
  input  logic        we,
  input  logic [1:0]  wpart,   // 0 Offset, 1 R_pointer, 2 Index
  input  logic [11:0] waddr,   // word address within the part
  input  logic [15:0] wdata,
  input  logic        off_re,
  input  logic [9:0]  off_addr,
  output logic [15:0] off_data,
  input  logic        rp_re,
  input  logic [12:0] rp_naddr,
  output logic [3:0]  rp_data,
  input  logic        idx_re,
  input  logic [13:0] idx_naddr,
  output logic [3:0]  idx_data
);
  logic [15:0] off_mem [OFF_WORDS];
  logic [15:0] rp_mem  [RP_WORDS];
  logic [15:0] idx_mem [IDX_WORDS];
  logic [15:0] rp_word, idx_word;

  always_comb begin
    rp_word  = rp_mem[(rp_naddr >> 2) % RP_WORDS];
    idx_word = idx_mem[(idx_naddr >> 2) % IDX_WORDS];
  end

  always_ff @(posedge clk) begin
    if (we && wpart == 2'd0) off_mem[waddr % OFF_WORDS] <= wdata;
    if (we && wpart == 2'd1) rp_mem[waddr % RP_WORDS]   <= wdata;
    if (we && wpart == 2'd2) idx_mem[waddr % IDX_WORDS] <= wdata;
    if (off_re) off_data <= off_mem[off_addr % OFF_WORDS];
    if (rp_re)  rp_data  <= rp_word[rp_naddr[1:0]*4 +: 4];
    if (idx_re) idx_data <= idx_word[idx_naddr[1:0]*4 +: 4];
  end
endmodule
