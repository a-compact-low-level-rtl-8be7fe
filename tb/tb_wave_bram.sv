// tb_wave_bram: self-checking test of the waveform memory.
// Writes 64 random words over AXI4-Lite (one with partial byte strobes), reads
// some back over the bus, then reads every written address on the pulse port
// and checks the I/Q halves and the one-clock read latency. The depth is the
// default 2048; addresses near the top are included.
module tb_wave_bram;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  logic [10:0] rd_addr;
  iq_t rd_i, rd_q;
  int checks = 0, failures = 0;
  logic [31:0] model [int];

  wave_bram dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp), .rd_addr, .rd_i, .rd_q);
  axil_master_bfm bfm (.clk, .req, .rsp);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addrs [64];
    logic [31:0] d;
    rd_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 64; k++) begin
      addrs[k] = (k < 60) ? k * 31 % 2048 : 2044 + (k - 60);
      d = $urandom;
      bfm.write(16'(addrs[k] * 4), d);
      model[addrs[k]] = d;
    end
    // byte-strobed write: only bytes 1 and 3
    d = 32'hA1B2C3D4;
    bfm.write(16'(addrs[5] * 4), d, 4'b1010);
    model[addrs[5]] = {d[31:24], model[addrs[5]][23:16], d[15:8], model[addrs[5]][7:0]};
    for (int k = 0; k < 64; k += 9) begin
      bfm.read(16'(addrs[k] * 4), d);
      checks++;
      if (d != model[addrs[k]]) begin failures++; $display("bus read %0d: %h exp %h", addrs[k], d, model[addrs[k]]); end
    end
    for (int k = 0; k < 64; k++) begin
      @(negedge clk) rd_addr = 11'(addrs[k]);
      @(negedge clk);
      checks++;
      if (rd_i != iq_t'(model[addrs[k]][15:0]) || rd_q != iq_t'(model[addrs[k]][31:16])) begin
        failures++; $display("pulse read %0d: %h/%h exp %h", addrs[k], rd_q, rd_i, model[addrs[k]]);
      end
    end
    checks++;
    if (bfm.errors != 0) begin failures++; $display("bus protocol errors %0d", bfm.errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
