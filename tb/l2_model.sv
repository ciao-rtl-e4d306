// l2_model: behavioural stand-in for everything below the SM's L1 level (L2
// cache, interconnect, DRAM). It is not synthesizable and not part of the design.
// Writes from WQ are applied at once; block reads from ReqQ are answered in
// order after LAT cycles with the current contents. Memory contents default to
// init_word(addr), so a testbench can predict every load.
module l2_model
  import ciao_pkg::*;
#(
  parameter int unsigned LAT = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        l2_req_valid,
  input  blk_t        l2_req_blk,
  output logic        l2_req_ready,
  input  logic        l2_wr_valid,
  input  logic [ADDR_W-1:0] l2_wr_addr,
  input  logic [31:0] l2_wr_data,
  output logic        l2_wr_ready,
  output logic        l2_rsp_valid,
  output blk_t        l2_rsp_blk,
  output line_t       l2_rsp_line,
  input  logic        l2_rsp_ready
);
  logic [31:0] mem [logic [29:0]];
  blk_t        q_blk [$];
  longint      q_due [$];
  longint      cyc = 0;

  function automatic logic [31:0] init_word(input logic [31:0] a);
    return (a * 32'h9E3779B1) ^ 32'h5A5A_0F0F;
  endfunction

  function automatic logic [31:0] rd(input logic [31:0] a);
    if (mem.exists(a[31:2])) return mem[a[31:2]];
    return init_word({a[31:2], 2'b00});
  endfunction

  assign l2_req_ready = 1'b1;
  assign l2_wr_ready  = 1'b1;

  initial begin
    l2_rsp_valid = 1'b0; l2_rsp_blk = '0; l2_rsp_line = '0;
  end

  always @(posedge clk) begin
    cyc = cyc + 1;
    if (l2_wr_valid && rst_n) mem[l2_wr_addr[31:2]] = l2_wr_data;
    if (l2_rsp_valid && l2_rsp_ready) begin
      void'(q_blk.pop_front());
      void'(q_due.pop_front());
    end
    if (l2_req_valid && rst_n) begin
      q_blk.push_back(l2_req_blk);
      q_due.push_back(cyc + LAT);
    end
    // outputs for the next cycle
    if (q_blk.size() > 0 && q_due[0] <= cyc) begin
      l2_rsp_valid <= 1'b1;
      l2_rsp_blk   <= q_blk[0];
      for (int k = 0; k < WORDS; k++) l2_rsp_line[32*k +: 32] <= rd({q_blk[0], 5'(k), 2'b00});
    end else begin
      l2_rsp_valid <= 1'b0;
    end
  end
endmodule
