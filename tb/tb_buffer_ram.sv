// tb_buffer_ram: self-checking test of the buffer (64 words x 40 bits, 2 read
// ports). Writes random words, reads them back on both ports one cycle later,
// and checks that a read of the word being written returns the old word.
module tb_buffer_ram;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we;
  logic [5:0] waddr;
  logic [39:0] wdata;
  logic [1:0][5:0] raddr;
  logic [1:0][39:0] rdata;
  logic [39:0] model [64];

  always #5 clk = ~clk;

  buffer_ram #(.DEPTH(64), .WIDTH(40), .NRD(2)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [39:0] e0, e1;
    we = 0; raddr = '0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = {8'(i), $urandom};
      model[i] = wdata;
    end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      raddr[0] = 6'($urandom); raddr[1] = 6'($urandom);
      we = ($urandom % 2);
      waddr = (t % 4 == 0) ? raddr[0] : 6'($urandom);
      wdata = {$urandom, 8'(t)};
      e0 = model[raddr[0]]; e1 = model[raddr[1]];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks += 2;
      if (rdata[0] !== e0) begin failures++; $display("port0 mismatch t=%0d", t); end
      if (rdata[1] !== e1) begin failures++; $display("port1 mismatch t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
