// dma_engine: DMA from an FPGA data stream into a ring buffer in the host
// PC's main memory, signalled without interrupts. The engine writes the
// stream word by word (DW bits, byte addresses) into a ring of RING_WORDS
// words starting at ring_base. Whenever a block of BLOCK_WORDS words is
// complete, it writes the ring position just after that block (the
// pointer to the last written block, counted in words) to the control
// memory at ctrl_addr; the PC polls that location. That scheme, ring
// buffer plus control memory, follows the paper. The PC's read position
// (rd_ptr, from a PC-writeable register) keeps the engine from overwriting
// unread data: the input stalls while the ring has less than one block
// free, which is this design's addition. Host writes use a valid/ready
// port (hw_*) standing in for the PCIe hard IP's DMA write interface.
// enable low stops the engine after the current word. So that the tail of
// a burst does not wait for more data, the pointer is also written when
// the input has been idle for 2^FLUSH_LOG2 clocks with words not yet
// signalled (this design's choice).
module dma_engine #(
  parameter int DW          = 128,
  parameter int RING_LOG2   = 20,   // words in the ring
  parameter int BLOCK_LOG2  = 6,    // words per block
  parameter int FLUSH_LOG2  = 10    // idle clocks before a partial block is signalled
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 enable,
  input  logic [63:0]          ring_base,
  input  logic [63:0]          ctrl_addr,
  input  logic [RING_LOG2-1:0] rd_ptr,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [DW-1:0]        in_data,
  output logic                 hw_valid,
  input  logic                 hw_ready,
  output logic [63:0]          hw_addr,
  output logic [DW-1:0]        hw_data,
  output logic [RING_LOG2-1:0] wr_ptr,
  output logic [31:0]          blocks_done
);
  localparam int BYTES = DW / 8;
  localparam logic [RING_LOG2-1:0] BLOCK = RING_LOG2'(1 << BLOCK_LOG2);
  logic [RING_LOG2-1:0] used;
  logic                 ctrl_pend, space, hw_free;
  logic [RING_LOG2-1:0] sig_ptr;        // last pointer written to ctrl_addr
  logic [FLUSH_LOG2:0]  idle;

  assign used     = wr_ptr - rd_ptr;
  assign space    = (RING_LOG2'((1 << RING_LOG2) - 1) - used) >= BLOCK;
  assign hw_free  = !hw_valid || hw_ready;
  assign in_ready = enable && hw_free && !ctrl_pend && (space || wr_ptr[BLOCK_LOG2-1:0] != '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      hw_valid <= 1'b0; hw_addr <= '0; hw_data <= '0;
      wr_ptr <= '0; ctrl_pend <= 1'b0; blocks_done <= '0; sig_ptr <= '0; idle <= '0;
    end else begin
      if (in_valid && in_ready) idle <= '0;
      else if (!idle[FLUSH_LOG2]) idle <= idle + 1'b1;
      if (idle[FLUSH_LOG2] && sig_ptr != wr_ptr && !ctrl_pend) begin
        ctrl_pend <= 1'b1;
        idle      <= '0;
      end
      if (hw_valid && hw_ready) hw_valid <= 1'b0;
      if (ctrl_pend && hw_free) begin
        hw_valid    <= 1'b1;
        hw_addr     <= ctrl_addr;
        hw_data     <= DW'(wr_ptr);
        sig_ptr     <= wr_ptr;
        ctrl_pend   <= 1'b0;
        blocks_done <= blocks_done + 1'b1;
      end else if (in_valid && in_ready) begin
        hw_valid <= 1'b1;
        hw_addr  <= ring_base + 64'(wr_ptr) * 64'(BYTES);
        hw_data  <= in_data;
        wr_ptr   <= wr_ptr + 1'b1;
        if (wr_ptr[BLOCK_LOG2-1:0] == '1) ctrl_pend <= 1'b1;
      end
    end
  end
endmodule
