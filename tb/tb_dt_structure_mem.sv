// tb_dt_structure_mem: fills the memory with random words, reads them back
// in random order with one cycle of read latency, and rewrites a few words
// while reading others.
module tb_dt_structure_mem;
  localparam int AW = 9, DW = 44;
  logic clk = 0;
  logic [AW-1:0] raddr, waddr;
  logic [DW-1:0] rdata, wdata;
  logic we;
  logic [DW-1:0] model [2**AW];
  int checks = 0, failures = 0;

  dt_structure_mem #(.ADDR_W(AW), .DATA_W(DW)) dut (
    .clk, .raddr_i(raddr), .rdata_o(rdata), .we_i(we), .waddr_i(waddr), .wdata_i(wdata));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [AW-1:0] a_prev;
    we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    raddr = 0; a_prev = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      if (k > 0) begin
        checks++;
        if (rdata !== model[a_prev]) begin
          failures++; $display("addr %0d: %h expected %h", a_prev, rdata, model[a_prev]);
        end
      end
      raddr  = AW'($urandom);
      // a new read address must not show before the next clock edge
      #1;
      if (k > 0 && raddr != a_prev) begin
        checks++;
        if (rdata !== model[a_prev]) begin failures++; $display("read without latency"); end
      end
      a_prev = raddr;
      we = ($urandom_range(0, 3) == 0);
      waddr = AW'($urandom);
      if (waddr == raddr) we = 0;
      wdata = {$urandom, $urandom};
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
