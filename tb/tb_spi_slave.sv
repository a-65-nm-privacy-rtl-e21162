// tb_spi_slave: bit-bangs 40-bit mode-0 frames at clk/10, checks the
// register-bus requests (kind, address, data) and that read data supplied by
// a responder after one or two cycles comes back on MISO.
module tb_spi_slave;
  import cie_pkg::*;
  logic clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0, miso;
  bus_req_t bus_req;
  bus_rsp_t bus_rsp;
  int checks = 0, failures = 0;
  int nreq = 0;
  bus_req_t last_req;
  int lat = 1;
  always #5 clk = ~clk;

  spi_slave dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .bus_req, .bus_rsp);

  // responder: read data = address xor 16'hA5A5 after `lat` cycles
  initial bus_rsp = '0;
  always @(posedge clk) begin
    bus_rsp.ack <= 1'b0;
    if (bus_req.req) begin
      nreq++; last_req = bus_req;
      if (!bus_req.we) begin
        repeat (lat - 1) @(posedge clk);
        bus_rsp.ack <= 1'b1; bus_rsp.rdata <= bus_req.addr ^ 16'hA5A5;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic frame(input logic [7:0] cmd, input logic [15:0] addr, input logic [15:0] data,
                       output logic [15:0] rd);
    logic [39:0] f;
    f = {cmd, addr, data};
    rd = '0;
    cs_n = 0; repeat (10) @(negedge clk);
    for (int b = 39; b >= 0; b--) begin
      mosi = f[b]; repeat (5) @(negedge clk);
      sclk = 1;
      if (b < 16) rd = {rd[14:0], miso};
      repeat (5) @(negedge clk);
      sclk = 0;
    end
    repeat (10) @(negedge clk); cs_n = 1; repeat (10) @(negedge clk);
  endtask

  initial begin
    logic [15:0] rd, a, d;
    int n0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 30; k++) begin
      a = 16'($urandom); d = 16'($urandom); lat = 1 + k % 2;
      n0 = nreq;
      if (k % 2 == 0) begin
        frame(8'h80, a, d, rd);
        checks++;
        if (nreq != n0 + 1 || !last_req.we || last_req.addr != a || last_req.wdata != d) begin
          failures++; $display("FAIL write a=%h d=%h got we=%0d a=%h d=%h n=%0d", a, d, last_req.we, last_req.addr, last_req.wdata, nreq - n0);
        end
      end else begin
        frame(8'h00, a, 16'h0, rd);
        checks++;
        if (nreq != n0 + 1 || last_req.we || last_req.addr != a) begin failures++; $display("FAIL read request a=%h", a); end
        checks++;
        if (rd != (a ^ 16'hA5A5)) begin failures++; $display("FAIL read data %h exp %h", rd, a ^ 16'hA5A5); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
