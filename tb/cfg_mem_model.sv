// cfg_mem_model: behavioural model of the ICAP primitive and the
// configuration memory of the partial region, for simulation only.
// Row-addressed: icap_csib = 0 selects, icap_rdwrb = 1 reads (data on icap_o
// on the next clock edge), 0 writes icap_i. upset() flips one stored bit to
// emulate a soft error. Counts reads and writes for the testbenches. While
// rst_n is low the port is ignored, so register contents before reset cannot
// reach the memory or the counters.
module cfg_mem_model #(
  parameter int unsigned AW   = 7,
  parameter int unsigned ROWW = 17
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            icap_csib,
  input  logic            icap_rdwrb,
  input  logic [AW-1:0]   icap_addr,
  input  logic [ROWW-1:0] icap_i,
  output logic [ROWW-1:0] icap_o
);
  logic [ROWW-1:0] mem [2**AW];
  int unsigned     n_reads = 0, n_writes = 0;

  initial for (int i = 0; i < 2**AW; i++) mem[i] = '0;

  always @(posedge clk) begin
    if (rst_n && !icap_csib) begin
      if (icap_rdwrb) begin
        icap_o <= mem[icap_addr];
        n_reads++;
      end else begin
        mem[icap_addr] <= icap_i;
        n_writes++;
      end
    end
  end

  function automatic void upset(input int addr, input int bitpos);
    mem[addr][bitpos] = ~mem[addr][bitpos];
  endfunction

  function automatic logic [ROWW-1:0] peek(input int addr);
    return mem[addr];
  endfunction
endmodule
