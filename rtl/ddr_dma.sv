// ddr_dma: the DMA between the accelerator and the feature DDR.
//
// Read side: an axi_read_master moves input features and the BN/Res parameter
// vectors into the on-chip buffers (beats leave on o_*). Write side: a command
// (wstart, waddr, wbeats) streams `wbeats` DW-bit beats from the ping-pong
// buffer's DMA port to memory as INCR bursts of at most 16 beats that do not
// cross 4 KiB. Each beat is fetched from the buffer (src_en/src_idx, data one
// cycle later in src_data), then held on WDATA until accepted; the B response
// of a burst is awaited before the next burst. wdone pulses after the last
// response. The burst rules and the one-beat-at-a-time write are this design's
// own choices.
module ddr_dma #(
  parameter int DW = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  // read command and beats out
  input  logic              rstart,
  input  logic [1:0]        rdst,
  input  logic [63:0]       raddr,
  input  logic [31:0]       rbeats,
  output logic              rdone,
  output logic              o_valid,
  output logic [1:0]        o_dst,
  output logic [31:0]       o_idx,
  output logic [DW-1:0]     o_data,
  // write command and buffer source
  input  logic              wstart,
  input  logic [63:0]       waddr,
  input  logic [31:0]       wbeats,
  output logic              wdone,
  output logic              src_en,
  output logic [31:0]       src_idx,
  input  logic [DW-1:0]     src_data,
  // AXI4 read channels
  output logic [63:0]       araddr,
  output logic [7:0]        arlen,
  output logic [2:0]        arsize,
  output logic [1:0]        arburst,
  output logic              arvalid,
  input  logic              arready,
  input  logic [DW-1:0]     rdata,
  input  logic [1:0]        rresp,
  input  logic              rlast,
  input  logic              rvalid,
  output logic              rready,
  // AXI4 write channels
  output logic [63:0]       awaddr,
  output logic [7:0]        awlen,
  output logic [2:0]        awsize,
  output logic [1:0]        awburst,
  output logic              awvalid,
  input  logic              awready,
  output logic [DW-1:0]     wdata,
  output logic [DW/8-1:0]   wstrb,
  output logic              wlast,
  output logic              wvalid,
  input  logic              wready,
  input  logic [1:0]        bresp,
  input  logic              bvalid,
  output logic              bready
);
  localparam int BB = DW / 8;

  axi_read_master #(.DW(DW)) u_rd (
    .clk, .rst_n, .start(rstart), .dst(rdst), .addr(raddr), .beats(rbeats), .done(rdone),
    .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rdata, .rresp, .rlast, .rvalid, .rready,
    .o_valid, .o_dst, .o_idx, .o_data
  );

  typedef enum logic [2:0] {W_IDLE, W_AW, W_FETCH, W_WAIT, W_DATA, W_RESP} wst_t;
  wst_t ws;
  logic [63:0] next_addr;
  logic [31:0] left, idx, bleft;
  logic [31:0] to_4k, blen;
  always_comb begin
    to_4k = 32'((64'd4096 - (next_addr & 64'hFFF)) / BB);
    blen  = (left < 16) ? left : 32'd16;
    if (to_4k < blen) blen = to_4k;
  end

  assign awsize  = 3'($clog2(BB));
  assign awburst = 2'b01;
  assign wstrb   = '1;
  assign bready  = (ws == W_RESP);
  assign src_en  = (ws == W_FETCH);
  assign src_idx = idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= W_IDLE; wdone <= 1'b0; awvalid <= 1'b0; awaddr <= '0; awlen <= '0;
      wvalid <= 1'b0; wlast <= 1'b0; wdata <= '0;
      next_addr <= '0; left <= '0; idx <= '0; bleft <= '0;
    end else begin
      wdone <= 1'b0;
      case (ws)
        W_IDLE: if (wstart) begin
          next_addr <= waddr; left <= wbeats; idx <= '0;
          if (wbeats == 0) wdone <= 1'b1;
          else ws <= W_AW;
        end
        W_AW: begin
          if (!awvalid) begin
            awvalid <= 1'b1; awaddr <= next_addr; awlen <= 8'(blen - 1); bleft <= blen;
          end else if (awready) begin
            awvalid   <= 1'b0;
            next_addr <= next_addr + 64'(blen) * BB;
            left      <= left - blen;
            ws        <= W_FETCH;
          end
        end
        W_FETCH: ws <= W_WAIT;          // buffer read issued this cycle
        W_WAIT: begin                   // data arrives
          wdata  <= src_data;
          wvalid <= 1'b1;
          wlast  <= (bleft == 1);
          ws     <= W_DATA;
        end
        W_DATA: if (wready) begin
          wvalid <= 1'b0;
          wlast  <= 1'b0;
          idx    <= idx + 1;
          bleft  <= bleft - 1;
          ws     <= (bleft == 1) ? W_RESP : W_FETCH;
        end
        W_RESP: if (bvalid) begin
          if (left == 0) begin ws <= W_IDLE; wdone <= 1'b1; end
          else ws <= W_AW;
        end
        default: ws <= W_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) wvalid && !wready |=> wvalid && $stable(wdata));
  assert property (@(posedge clk) bvalid && bready |-> bresp == 2'b00);
endmodule
