// axi_mem_model: behavioural AXI4 slave memory for the testbenches (stands in
// for HBM or DDR). Sparse storage of DW-bit beats addressed by byte address;
// INCR bursts; one read and one write burst at a time; ready/valid gaps drawn
// at random with probability 1/STALL so the master sees back-pressure.
// Testbench access: mem[beat address] directly; stall_cnt counts cycles in
// which the model held back a handshake.
module axi_mem_model #(
  parameter int DW    = 64,
  parameter int STALL = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [63:0]     araddr,
  input  logic [7:0]      arlen,
  input  logic [2:0]      arsize,
  input  logic [1:0]      arburst,
  input  logic            arvalid,
  output logic            arready,
  output logic [DW-1:0]   rdata,
  output logic [1:0]      rresp,
  output logic            rlast,
  output logic            rvalid,
  input  logic            rready,
  input  logic [63:0]     awaddr,
  input  logic [7:0]      awlen,
  input  logic [2:0]      awsize,
  input  logic [1:0]      awburst,
  input  logic            awvalid,
  output logic            awready,
  input  logic [DW-1:0]   wdata,
  input  logic [DW/8-1:0] wstrb,
  input  logic            wlast,
  input  logic            wvalid,
  output logic            wready,
  output logic [1:0]      bresp,
  output logic            bvalid,
  input  logic            bready
);
  localparam int BB = DW / 8;
  logic [DW-1:0] mem [longint];
  int stall_cnt = 0, rd_bursts = 0, wr_bursts = 0, burst_errors = 0;

  logic        r_act = 0, w_act = 0;
  longint      r_addr, w_addr;
  int          r_left, w_left;

  assign rresp = 2'b00;
  assign bresp = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 0; rvalid <= 0; rlast <= 0; awready <= 0; wready <= 0; bvalid <= 0;
      r_act <= 0; w_act <= 0;
    end else begin
      // ---- read ----
      arready <= 0;
      if (!r_act && arvalid && !arready) begin
        if ($urandom_range(0, STALL - 1) != 0) begin
          arready <= 1;
          r_act <= 1; r_addr <= longint'(araddr); r_left <= int'(arlen) + 1;
          rd_bursts <= rd_bursts + 1;
          if (araddr / 4096 != (araddr + (64'(arlen) + 1) * BB - 1) / 4096 || arsize != 3'($clog2(BB)) || arburst != 2'b01)
            burst_errors <= burst_errors + 1;
        end else stall_cnt <= stall_cnt + 1;
      end
      if (r_act) begin
        if (!rvalid || rready) begin
          if (rvalid && rready && rlast) begin
            rvalid <= 0; r_act <= 0;
          end else if ($urandom_range(0, STALL - 1) != 0) begin
            rvalid <= 1;
            rdata  <= mem.exists(r_addr / BB) ? mem[r_addr / BB] : '0;
            rlast  <= (r_left == 1);
            r_addr <= r_addr + BB;
            r_left <= r_left - 1;
          end else begin
            rvalid <= 0;
            stall_cnt <= stall_cnt + 1;
          end
        end
      end
      // ---- write ----
      awready <= 0;
      if (!w_act && awvalid && !awready && !bvalid) begin
        awready <= 1; w_act <= 1; w_addr <= longint'(awaddr); w_left <= int'(awlen) + 1;
        wr_bursts <= wr_bursts + 1;
        if (awaddr / 4096 != (awaddr + (64'(awlen) + 1) * BB - 1) / 4096)
          burst_errors <= burst_errors + 1;
      end
      wready <= w_act && ($urandom_range(0, STALL - 1) != 0);
      if (w_act && wvalid && wready) begin
        w_addr <= w_addr + BB;
        w_left <= w_left - 1;
        if (wlast != (w_left == 1)) burst_errors <= burst_errors + 1;
        if (w_left == 1) begin w_act <= 0; wready <= 0; bvalid <= 1; end
      end
      if (bvalid && bready) bvalid <= 0;
    end
  end
  // write data into the array (blocking: the array is dynamically sized)
  always @(posedge clk)
    if (rst_n && w_act && wvalid && wready) mem[w_addr / BB] = wdata;
endmodule
