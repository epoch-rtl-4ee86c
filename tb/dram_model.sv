// dram_model: behavioural model of the off-chip DRAM seen by the EPOCH controller.
// Behavioural model, not synthesizable; used only by the testbenches.
// Word-addressed. A request is granted after a random delay (GNT_STALL_PCT per
// cycle); a granted read returns its word RD_LAT cycles later with rvalid.
// Unwritten words read as zero.
module dram_model #(
  parameter int unsigned GNT_STALL_PCT = 0,
  parameter int unsigned RD_LAT        = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic        gnt,
  output logic        rvalid,
  output logic [31:0] rdata
);

  logic [31:0] mem [logic [31:0]];
  logic [31:0] pipe_d [RD_LAT];
  logic        pipe_v [RD_LAT];
  int unsigned n_writes, n_reads, n_stalls;
  logic        stall_r;

  function automatic logic [31:0] peek(logic [31:0] a);
    if (mem.exists(a)) return mem[a];
    return 32'h0;
  endfunction

  assign gnt    = req && !stall_r;
  assign rvalid = pipe_v[RD_LAT-1];
  assign rdata  = pipe_d[RD_LAT-1];

  initial begin
    n_writes = 0; n_reads = 0; n_stalls = 0;
    for (int i = 0; i < int'(RD_LAT); i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      stall_r <= 1'b0;
      for (int i = 0; i < int'(RD_LAT); i++) pipe_v[i] <= 1'b0;
    end else begin
      stall_r <= ($urandom_range(99) < GNT_STALL_PCT);
      if (req && !gnt) n_stalls++;
      pipe_v[0] <= gnt && !we;
      pipe_d[0] <= (gnt && !we) ? peek(addr) : 32'h0;
      for (int i = 1; i < int'(RD_LAT); i++) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      if (gnt && we)  begin mem[addr] = wdata; n_writes++; end
      if (gnt && !we) n_reads++;
    end
  end

endmodule
