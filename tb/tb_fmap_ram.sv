// tb_fmap_ram - random writes and 9-port reads against a shadow array.
// Checks that a write is visible from the next cycle on every read port and
// that other words keep their contents.
module tb_fmap_ram;
  logic clk = 1'b0;
  int   checks = 0, failures = 0;
  localparam int D = 64;
  logic            we;
  logic [5:0]      waddr;
  logic [31:0]     wdata;
  logic [8:0][5:0] raddr;
  logic [8:0][31:0] rdata;
  logic [31:0]     shadow [D];

  fmap_ram #(.W(32), .DEPTH(D), .NRD(9)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    we = 0; waddr = '0; wdata = '0; raddr = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = $urandom; shadow[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int r = 0; r < 9; r++) raddr[r] = 6'($urandom);
      #1;
      for (int r = 0; r < 9; r++) begin
        checks++;
        if (rdata[r] !== shadow[raddr[r]]) begin
          failures++;
          $display("port %0d addr %0d got %h exp %h", r, raddr[r], rdata[r], shadow[raddr[r]]);
        end
      end
      we = ($urandom % 2) == 1; waddr = 6'($urandom); wdata = $urandom;
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
