// page_register: the two-stage page register of one plane (data register and cache
// register, as drawn under every plane of the logic die).
//
// The flash array senses a page into the data register word by word (arr_we) and
// marks it complete with arr_done. As soon as the cache register is free the whole
// page moves to it in one cycle, so the array can sense the next page while the
// logic (ECC decoder, then PE) works on the current one: this is the register
// pipeline that overlaps a page read with its GEMV. The logic reads the cache
// register combinationally (rd_addr -> rd_data), corrects bits in place with an XOR
// mask (fix_we) and frees it with cache_release.
// For programming, the logic fills the cache register (wr_we), claims it with
// cache_load, and the array reads it back through arr_rd_addr; cache_release frees it
// afterwards. Programming from the cache register rather than the data register is
// this design's simplification; the paper only names the two registers.
module page_register
  import kvnand_pkg::*;
#(
  parameter int unsigned WORDS = PAGE_WORDS
) (
  input  logic  clk,
  input  logic  rst_n,
  // flash array side
  input  logic  arr_we,
  input  col_t  arr_addr,
  input  word_t arr_wdata,
  input  logic  arr_done,
  input  col_t  arr_rd_addr,
  output word_t arr_rdata,
  output logic  data_valid,
  // logic side
  output logic  cache_valid,
  input  col_t  rd_addr,
  output word_t rd_data,
  input  logic  fix_we,
  input  col_t  fix_addr,
  input  word_t fix_mask,
  input  logic  wr_we,
  input  col_t  wr_addr,
  input  word_t wr_data,
  input  logic  cache_load,
  input  logic  cache_release,
  output logic  xfer          // one-cycle pulse: data register moved to cache register
);
  word_t data_r  [WORDS];
  word_t cache_r [WORDS];

  assign xfer = data_valid && !cache_valid;

  always_ff @(posedge clk) begin
    if (arr_we) data_r[arr_addr] <= arr_wdata;
    if (xfer) begin
      cache_r <= data_r;
    end else begin
      if (wr_we)  cache_r[wr_addr]  <= wr_data;
      if (fix_we) cache_r[fix_addr] <= cache_r[fix_addr] ^ fix_mask;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_valid  <= 1'b0;
      cache_valid <= 1'b0;
    end else begin
      if (xfer) begin
        data_valid  <= arr_done;     // a page completing in the same cycle stays valid
        cache_valid <= 1'b1;
      end else begin
        if (arr_done) data_valid <= 1'b1;
        if (cache_release) cache_valid <= 1'b0;
        else if (cache_load) cache_valid <= 1'b1;
      end
    end
  end

  assign rd_data   = cache_r[rd_addr];
  assign arr_rdata = cache_r[arr_rd_addr];

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
      arr_done |-> (!data_valid || xfer));
endmodule
