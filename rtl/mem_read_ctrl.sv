// mem_read_ctrl: memory-read controller and event builder of the SliT128C.
//
// On the Read Start strobe it reads every word of the two SRAMs and hands
// them, one 128-bit word at a time, to the serializer. The two SRAMs hold the
// interleaved halves of one 5 ns sample stream (CLK_P samples at even, CLK_N
// samples at odd 5 ns slots), so the controller reads address a of SRAM P,
// then address a of SRAM N, then a+1, and so on. The words thus leave the chip
// in time order, one 128-channel hit map per 5 ns slot, 2*DEPTH words in all.
// This merge of the two phases into one time-ordered stream is this design's
// reading of the "event building block" the paper names without describing.
//
// Interface: clk (CLK_P, 100 MHz), rst_n, start (clk200-domain strobe, seen
// once); re_p/raddr_p/rdata_p and re_n/raddr_n/rdata_n to the SRAMs (one
// cycle read latency); out_valid/out_ready/out_data, a valid/ready handshake
// to the serializer; reading status.
// Timing: one cycle after Read Start the first word is requested; each word
// is offered two cycles after its request, and the next request follows the
// cycle in which the word is accepted, so with out_ready always high a word
// leaves every 3 cycles. The serializer takes one word per 128 cycles, so the
// reading never stalls the serial line.
//
// From the paper: reading starts on Read Start, reads all of the data and
// sends it to the serializer, in the external 100 MHz domain. The read order,
// the handshake and the rule that a Read Start during a readout is ignored are
// this design's own choices.
module mem_read_ctrl #(
  parameter  int unsigned DEPTH = slit_pkg::MEM_SAMPLES / 2,
  parameter  int unsigned WIDTH = slit_pkg::NUM_CH,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             re_p,
  output logic [AW-1:0]    raddr_p,
  input  logic [WIDTH-1:0] rdata_p,
  output logic             re_n,
  output logic [AW-1:0]    raddr_n,
  input  logic [WIDTH-1:0] rdata_n,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             reading
);

  typedef enum logic [1:0] {RD_IDLE, RD_REQ, RD_DATA, RD_SEND} rd_state_e;

  rd_state_e     state;
  logic [AW-1:0] addr;
  logic          sel;      // 0: SRAM P (earlier sample), 1: SRAM N

  assign re_p    = (state == RD_REQ) && !sel;
  assign re_n    = (state == RD_REQ) &&  sel;
  assign raddr_p = addr;
  assign raddr_n = addr;
  assign reading = (state != RD_IDLE);
  assign out_valid = (state == RD_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= RD_IDLE;
      addr     <= '0;
      sel      <= 1'b0;
      out_data <= '0;
    end else begin
      unique case (state)
        RD_IDLE: if (start) begin
          addr  <= '0;
          sel   <= 1'b0;
          state <= RD_REQ;
        end
        RD_REQ:  state <= RD_DATA;
        RD_DATA: begin
          out_data <= sel ? rdata_n : rdata_p;
          state    <= RD_SEND;
        end
        RD_SEND: if (out_ready) begin
          if (sel && addr == AW'(DEPTH - 1)) begin
            state <= RD_IDLE;
          end else begin
            if (sel) addr <= addr + 1'b1;
            sel   <= ~sel;
            state <= RD_REQ;
          end
        end
        default: state <= RD_IDLE;
      endcase
    end
  end

endmodule
