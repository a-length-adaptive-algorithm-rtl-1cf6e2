// hbm_model: behavioural model of the off-chip HBM seen through NP independent
// channels. Each channel has a read port (data one cycle after rd_en) and a write
// port (takes effect at the clock edge). Activation space (address bit 31 = 0) is
// a sparse memory that reads 0 where never written; weight space (bit 31 = 1) is
// read-only and generated by tb_ref_pkg::wgen. Not synthesizable.
module hbm_model #(
  parameter int unsigned NP    = 3,
  parameter int unsigned LANES = 8
) (
  input  logic                clk,
  input  logic                rd_en   [NP],
  input  logic [31:0]         rd_addr [NP],
  output logic [LANES*8-1:0]  rd_data [NP],
  input  logic                wr_en   [NP],
  input  logic [31:0]         wr_addr [NP],
  input  logic [LANES*8-1:0]  wr_data [NP]
);
  logic [LANES*8-1:0] mem [logic [31:0]];
  int unsigned reads, writes;

  initial begin reads = 0; writes = 0; end

  function automatic logic [LANES*8-1:0] peek(logic [31:0] a);
    logic [LANES*8-1:0] w;
    if (a[31]) begin
      for (int l = 0; l < int'(LANES); l++) w[l*8 +: 8] = 8'(tb_ref_pkg::wgen(a, l));
      return w;
    end
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void poke(logic [31:0] a, logic [LANES*8-1:0] d);
    mem[a] = d;
  endfunction

  always @(posedge clk) begin
    for (int p = 0; p < int'(NP); p++) begin
      if (rd_en[p]) begin rd_data[p] <= peek(rd_addr[p]); reads++; end
      if (wr_en[p]) begin mem[wr_addr[p]] = wr_data[p]; writes++; end
    end
  end
endmodule
