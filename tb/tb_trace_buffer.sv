// tb_trace_buffer: self-checking test of the trace buffer. Both write ports
// write interleaved ids (even ids on port 0, odd on port 1, in the same
// cycles); then both read ports read every id back, one cycle after the
// address, and a second round overwrites part of the buffer.
`timescale 1ns/1ps
module tb_trace_buffer;
  import decalcion_pkg::*;
  localparam int D = 1024;

  logic clk = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] we = 0; logic [9:0] waddr [2]; trace_t wdata [2];
  logic [9:0] raddr_a = 0, raddr_b = 0; trace_t rdata_a, rdata_b;

  trace_buffer #(.DEPTH(D)) dut (.*);

  int ref_m [D];

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic fill(int from, int to);
    for (int i = from; i < to; i += 2) begin
      @(negedge clk);
      we = 2'b11; waddr[0] = 10'(i); waddr[1] = 10'(i + 1);
      wdata[0] = trace_t'($urandom); wdata[1] = trace_t'($urandom);
      ref_m[i] = int'(wdata[0]); ref_m[i+1] = int'(wdata[1]);
    end
    @(negedge clk); we = 0;
  endtask

  task automatic check_all();
    for (int i = 0; i < D; i++) begin
      raddr_a = 10'(i); raddr_b = 10'(D - 1 - i);
      @(negedge clk);
      checks += 2;
      if (int'(rdata_a) != ref_m[i]) failures++;
      if (int'(rdata_b) != ref_m[D-1-i]) failures++;
    end
  endtask

  initial begin
    waddr = '{default: '0}; wdata = '{default: '0};
    fill(0, D);
    check_all();
    fill(100, 300);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
