// dram_model: behavioural model of an off-chip DRAM read channel, for
// testbenches only. It holds no array: the word at address a is the function
// dram_word(a) below, so a test can predict every word without a table. A
// request is accepted with a random stall, and its word comes back 1..LAT+1
// cycles later as a one-cycle pulse; one request is outstanding at a time.
module dram_model #(
  parameter int unsigned AW  = 32,
  parameter int unsigned DW  = 32,
  parameter int unsigned LAT = 6,
  parameter int unsigned SEED = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  input  logic [AW-1:0] req_addr,
  output logic          req_ready,
  output logic          resp_valid,
  output logic [DW-1:0] resp_data
);
  function automatic logic [DW-1:0] dram_word(input logic [AW-1:0] a);
    return DW'(a * 32'h2545_F491 + SEED * 32'h0001_0001);
  endfunction

  logic          pending;
  int            cnt;
  logic [AW-1:0] addr_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pending <= 1'b0; cnt <= 0; addr_q <= '0; req_ready <= 1'b0;
      resp_valid <= 1'b0; resp_data <= '0;
    end else begin
      resp_valid <= 1'b0;
      req_ready  <= !pending && ($urandom_range(0, 3) != 0);
      if (req_valid && req_ready) begin
        pending <= 1'b1;
        addr_q  <= req_addr;
        cnt     <= int'($urandom_range(0, LAT));
      end else if (pending) begin
        if (cnt == 0) begin
          pending    <= 1'b0;
          resp_valid <= 1'b1;
          resp_data  <= dram_word(addr_q);
        end else cnt <= cnt - 1;
      end
    end
  end
endmodule
