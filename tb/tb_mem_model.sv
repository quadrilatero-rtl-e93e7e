// tb_mem_model: behavioural model of the data memory seen by the coprocessor:
// four word-interleaved banks of 32 KiB (128 KiB in all). A 128-bit access at
// any word-aligned address touches four consecutive words, one in each bank,
// so it never conflicts with itself. Grants come in the request cycle, or
// after random wait cycles when stall_pct_i > 0 (standing in for contention
// from the host core on the interconnect). Read data returns one cycle after
// the grant. Testbenches fill and inspect the memory through `word`.
module tb_mem_model (
  input  logic         clk_i,
  input  int           stall_pct_i,   // chance (percent) that a request waits a cycle
  input  logic         req_i,
  input  logic         we_i,
  input  logic [31:0]  addr_i,
  input  logic [127:0] wdata_i,
  output logic         gnt_o,
  output logic         rvalid_o,
  output logic [127:0] rdata_o,
  output int           stalls_o
);
  localparam int WORDS_PER_BANK = 32 * 1024 / 4;
  logic [31:0] bank [4][WORDS_PER_BANK];
  logic        stall;

  initial begin
    stalls_o = 0;
    rvalid_o = 0;
    rdata_o  = '0;
    stall    = 0;
    for (int b = 0; b < 4; b++) for (int w = 0; w < WORDS_PER_BANK; w++) bank[b][w] = '0;
  end

  function automatic logic [31:0] rd(input int unsigned wa);
    return bank[wa % 4][(wa / 4) % WORDS_PER_BANK];
  endfunction

  task automatic wr(input int unsigned wa, input logic [31:0] v);
    bank[wa % 4][(wa / 4) % WORDS_PER_BANK] = v;
  endtask

  always @(negedge clk_i) stall = (stall_pct_i > 0) && (($urandom % 100) < stall_pct_i);
  assign gnt_o = req_i && !stall;

  always @(posedge clk_i) begin
    rvalid_o <= 1'b0;
    if (req_i && stall) stalls_o <= stalls_o + 1;
    if (req_i && gnt_o) begin
      if (we_i) begin
        for (int e = 0; e < 4; e++) wr(addr_i / 4 + e, wdata_i[32*e +: 32]);
      end else begin
        for (int e = 0; e < 4; e++) rdata_o[32*e +: 32] <= rd(addr_i / 4 + e);
        rvalid_o <= 1'b1;
      end
    end
  end
endmodule
