// tb_axil_cfg: an AXI4-Lite master issues random writes (address and data
// valid in either order, random response-ready delay) and random reads.
// Each write must produce exactly one cfg_we pulse with the block field,
// word address and data of that write and an OKAY response; each read
// must return the addressed status word.
module tb_axil_cfg;
  localparam int NSTAT = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic s_awvalid = 0, s_awready; logic [31:0] s_awaddr = '0;
  logic s_wvalid = 0, s_wready; logic [31:0] s_wdata = '0;
  logic s_bvalid, s_bready = 0; logic [1:0] s_bresp;
  logic s_arvalid = 0, s_arready; logic [31:0] s_araddr = '0;
  logic s_rvalid, s_rready = 0; logic [31:0] s_rdata; logic [1:0] s_rresp;
  logic cfg_we; logic [3:0] cfg_blk; logic [19:0] cfg_addr; logic [31:0] cfg_wdata;
  logic [NSTAT-1:0][31:0] status;
  int checks = 0, failures = 0;

  axil_cfg #(.NSTAT(NSTAT)) dut (.*);

  initial for (int k = 0; k < NSTAT; k++) status[k] = 32'hA5000000 + 32'(k * 3);

  logic [55:0] expq [$];   // {blk, addr, data}
  int n_we = 0;
  always @(posedge clk) if (!rst && cfg_we) begin
    logic [55:0] e;
    checks++; n_we++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected cfg_we"); end
    else begin
      e = expq.pop_front();
      if ({cfg_blk, cfg_addr, cfg_wdata} !== e) begin failures++; $display("FAIL cfg %h exp %h", {cfg_blk, cfg_addr, cfg_wdata}, e); end
    end
  end

  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    int skew;
    bit aw_done = 0, w_done = 0;
    skew = $urandom_range(4) - 2;
    @(negedge clk);
    if (skew <= 0) begin s_awvalid = 1; s_awaddr = a; end
    if (skew >= 0) begin s_wvalid = 1; s_wdata = d; end
    repeat (skew < 0 ? -skew : skew) @(negedge clk);
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d;
    expq.push_back({a[25:22], a[21:2], d});
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (s_awready) aw_done = 1;
      if (s_wready) w_done = 1;
      @(negedge clk);
      if (aw_done) s_awvalid = 0;
      if (w_done) s_wvalid = 0;
    end
    repeat ($urandom_range(3)) @(negedge clk);
    s_bready = 1;
    @(posedge clk);
    while (!s_bvalid) @(posedge clk);
    checks++; if (s_bresp != 2'b00) failures++;
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); s_arvalid = 1; s_araddr = a;
    @(posedge clk); while (!s_arready) @(posedge clk);
    @(negedge clk); s_arvalid = 0;
    repeat ($urandom_range(3)) @(negedge clk);
    s_rready = 1;
    @(posedge clk); while (!s_rvalid) @(posedge clk);
    d = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    int k;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int n = 0; n < 100; n++) begin
      if ($urandom_range(1) == 0) axi_write({6'b0, 4'($urandom), 20'($urandom), 2'b00}, $urandom);
      else begin
        k = $urandom_range(NSTAT - 1);
        axi_read({$urandom_range(15) << 22, 26'(k * 4)}, d);
        checks++;
        if (d != status[k]) begin failures++; $display("FAIL read %0d = %h", k, d); end
      end
    end
    repeat (4) @(negedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("writes %0d", n_we);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
