// axi_read_master: AXI4 read DMA engine (used as the HBM DMA, and inside the
// DDR DMA).
//
// A command (start, dst, addr, beats) moves `beats` DW-bit beats from memory
// starting at byte address `addr` (DW/8-byte aligned) to the on-chip buffers.
// The engine issues INCR bursts of at most 16 beats that never cross a 4 KiB
// boundary, one burst outstanding at a time, and always accepts read data.
// Every received beat appears on o_valid/o_dst/o_idx/o_data, where o_idx
// counts beats from 0 within the command; the buffer side turns o_idx into a
// word address and word part. done pulses one cycle after the last beat.
// Burst length, width and one-outstanding-burst are this design's choices;
// the paper only says the DMAs move data over AXI.
module axi_read_master #(
  parameter int DW = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [1:0]        dst,
  input  logic [63:0]       addr,
  input  logic [31:0]       beats,
  output logic              done,
  // AXI4 read address channel
  output logic [63:0]       araddr,
  output logic [7:0]        arlen,
  output logic [2:0]        arsize,
  output logic [1:0]        arburst,
  output logic              arvalid,
  input  logic              arready,
  // AXI4 read data channel
  input  logic [DW-1:0]     rdata,
  input  logic [1:0]        rresp,
  input  logic              rlast,
  input  logic              rvalid,
  output logic              rready,
  // beats to the buffers
  output logic              o_valid,
  output logic [1:0]        o_dst,
  output logic [31:0]       o_idx,
  output logic [DW-1:0]     o_data
);
  localparam int BB = DW / 8;   // bytes per beat

  typedef enum logic [1:0] {IDLE, ADDR, DATA} st_t;
  st_t st;
  logic [63:0] next_addr;
  logic [31:0] left, idx;

  // beats of the next burst: up to 16, not past 4 KiB, not past the end
  logic [31:0] to_4k, blen;
  always_comb begin
    to_4k = 32'((64'd4096 - (next_addr & 64'hFFF)) / BB);
    blen  = (left < 16) ? left : 32'd16;
    if (to_4k < blen) blen = to_4k;
  end

  assign arsize  = 3'($clog2(BB));
  assign arburst = 2'b01;
  assign rready  = (st == DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; done <= 1'b0; arvalid <= 1'b0; araddr <= '0; arlen <= '0;
      next_addr <= '0; left <= '0; idx <= '0; o_valid <= 1'b0; o_dst <= '0;
      o_data <= '0; o_idx <= '0;
    end else begin
      done <= 1'b0;
      o_valid <= 1'b0;
      case (st)
        IDLE: if (start) begin
          next_addr <= addr; left <= beats; idx <= '0; o_dst <= dst;
          if (beats == 0) done <= 1'b1;
          else st <= ADDR;
        end
        ADDR: begin
          if (!arvalid) begin
            arvalid <= 1'b1; araddr <= next_addr; arlen <= 8'(blen - 1);
          end else if (arready) begin
            arvalid   <= 1'b0;
            next_addr <= next_addr + 64'(blen) * BB;
            left      <= left - blen;
            st        <= DATA;
          end
        end
        DATA: if (rvalid) begin
          o_valid <= 1'b1;
          o_data  <= rdata;
          o_idx   <= idx;
          idx     <= idx + 1;
          if (rlast) begin
            if (left == 0) begin st <= IDLE; done <= 1'b1; end
            else st <= ADDR;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) arvalid && !arready |=> arvalid && $stable(araddr));
  assert property (@(posedge clk) rvalid && rready |-> rresp == 2'b00);
endmodule
