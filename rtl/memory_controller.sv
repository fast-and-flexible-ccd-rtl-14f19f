// memory_controller: owns the sequencer SRAM (512 K x 8 asynchronous SRAM)
// and serves two clients.
//
//  * Read port, used by synthesize_pattern: one request returns one 32-bit
//    word, assembled from four consecutive bytes (little-endian). The
//    request is accepted in the cycle rd_req is seen with the controller
//    idle; the first byte address is put on the SRAM bus in that same
//    cycle and one byte is captured on every clock edge, so rd_ack (with
//    rd_data) comes in the fourth cycle. A requester that keeps rd_req high
//    and moves rd_addr on after each rd_ack reads one 32-bit word every
//    four cycles.
//  * Write port, used by serial_interface during a download: one byte per
//    request, req/ack handshake (wr_req held until wr_ack). A write takes
//    three cycles: accept, write strobe (we_n low), hold (data kept on
//    the bus while we_n rises), with wr_ack in the last one.
//
// Reads have priority; in normal use the two never overlap because the
// sequencer is stopped while a download runs. The SRAM data bus is split
// into dq_o / dq_i / dq_oe; the tristate pad itself sits outside.
// That the memory is a 512 Kbyte SRAM and that the pattern is read in
// pieces through this block follows the paper; the 32-bit read size, the
// byte order and the bus timing are this design's choice.
module memory_controller
  import ccd_pkg::*;
#(
  parameter int unsigned AW = SRAM_AW     // SRAM byte-address width
) (
  input  logic          clk,
  input  logic          rst_n,
  // read port (32-bit words)
  input  logic          rd_req,
  input  logic [AW-3:0] rd_addr,          // 32-bit word address
  output logic          rd_ack,
  output logic [31:0]   rd_data,
  // write port (bytes)
  input  logic          wr_req,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data,
  output logic          wr_ack,
  // SRAM pins
  output logic [AW-1:0] sram_addr,
  output logic [7:0]    sram_dq_o,
  input  logic [7:0]    sram_dq_i,
  output logic          sram_dq_oe,
  output logic          sram_ce_n,
  output logic          sram_oe_n,
  output logic          sram_we_n
);

  typedef enum logic [1:0] {MC_IDLE, MC_READ, MC_WSTROBE, MC_WHOLD} mc_state_e;

  mc_state_e       state;
  logic [AW-3:0]   rd_base;
  logic [1:0]      byte_idx;
  logic [23:0]     rd_bytes;       // bytes 0..2 of the word being read
  logic [AW-1:0]   w_addr;
  logic [7:0]      w_data;

  wire accept_rd = (state == MC_IDLE) && rd_req;
  wire accept_wr = (state == MC_IDLE) && !rd_req && wr_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= MC_IDLE;
      rd_base   <= '0;
      byte_idx  <= '0;
      rd_bytes  <= '0;
      w_addr    <= '0;
      w_data    <= '0;
      sram_we_n <= 1'b1;
    end else begin
      unique case (state)
        MC_IDLE: begin
          if (accept_rd) begin
            rd_base       <= rd_addr;
            rd_bytes[7:0] <= sram_dq_i;     // byte 0 read in the accept cycle
            byte_idx      <= 2'd1;
            state         <= MC_READ;
          end else if (accept_wr) begin
            w_addr    <= wr_addr;
            w_data    <= wr_data;
            sram_we_n <= 1'b0;
            state     <= MC_WSTROBE;
          end
        end
        MC_READ: begin
          unique case (byte_idx)
            2'd1: rd_bytes[15:8]  <= sram_dq_i;
            2'd2: rd_bytes[23:16] <= sram_dq_i;
            default: ;
          endcase
          byte_idx <= byte_idx + 2'd1;
          if (byte_idx == 2'd3) state <= MC_IDLE;
        end
        MC_WSTROBE: begin
          sram_we_n <= 1'b1;
          state     <= MC_WHOLD;
        end
        MC_WHOLD: state <= MC_IDLE;
        default:  state <= MC_IDLE;
      endcase
    end
  end

  always_comb begin
    sram_addr  = '0;
    sram_dq_o  = w_data;
    sram_dq_oe = 1'b0;
    sram_ce_n  = 1'b1;
    sram_oe_n  = 1'b1;
    unique case (state)
      MC_IDLE: begin
        if (accept_rd) begin
          sram_addr = {rd_addr, 2'b00};
          sram_ce_n = 1'b0;
          sram_oe_n = 1'b0;
        end
      end
      MC_READ: begin
        sram_addr = {rd_base, byte_idx};
        sram_ce_n = 1'b0;
        sram_oe_n = 1'b0;
      end
      MC_WSTROBE, MC_WHOLD: begin
        sram_addr  = w_addr;
        sram_ce_n  = 1'b0;
        sram_dq_oe = 1'b1;
      end
      default: ;
    endcase
  end

  assign rd_ack  = (state == MC_READ) && (byte_idx == 2'd3);
  assign rd_data = {sram_dq_i, rd_bytes};
  assign wr_ack  = (state == MC_WHOLD);

  // A write request is held until it is acknowledged.
  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              (wr_req && !wr_ack) |=> wr_req)
    else $error("memory_controller: wr_req dropped before wr_ack");
  // The bus is never driven while the SRAM output is enabled.
  a_no_contention: assert property (@(posedge clk) disable iff (!rst_n)
                                    !(sram_dq_oe && !sram_oe_n))
    else $error("memory_controller: bus contention");

endmodule
