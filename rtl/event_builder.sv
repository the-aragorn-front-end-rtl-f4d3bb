// event_builder: last stage of the TDC-FPGA readout.
//
// For every real trigger the TCS labels (event number, spill number, event
// type) and the local trigger tag are queued in a label FIFO. When the first
// word of the next event appears on the concentrated data stream, the event
// builder sends one package over the serial link:
//   H0  {4'hA, 1'b0, event_type[4:0], spill_no[10:0], 3'b0, tag[7:0]}
//   H1  {4'hB, 8'b0, event_no[19:0]}
//   D   {4'h1, 3'b0, trailing, 1'b0, channel[6:0], time[15:0]}  per hit
//   T   {4'hC, 3'b0, tag_error, 8'b0, hit_count[15:0]}
// The trailer word of the stream closes the package; tag_error in T is set
// when the stream's event tag differs from the label's tag.
// Packages are serialised by serial_tx on SCK/SDO/SFR.
// Adding the event labels before the serial transfer follows the paper; the
// word layout and label widths (COMPASS-like 20/11/5 bits) are this design's.
module event_builder
  import tdc_pkg::*;
#(
  parameter int unsigned LABEL_DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst,
  // TCS labels, captured on each real trigger
  input  logic             label_valid,
  input  logic [19:0]      tcs_event_no,
  input  logic [10:0]      tcs_spill_no,
  input  logic [4:0]       tcs_event_type,
  input  logic [TAG_W-1:0] tag,
  // concentrated data
  input  dword_t           in_word,
  input  logic             in_empty,
  output logic             in_pop,
  // serial link
  output logic             sck,
  output logic             sdo,
  output logic             sfr,
  output logic             label_overflow
);
  typedef struct packed {
    logic [19:0]      event_no;
    logic [10:0]      spill_no;
    logic [4:0]       event_type;
    logic [TAG_W-1:0] tag;
  } label_t;

  typedef enum logic [1:0] {E_IDLE, E_H0, E_H1, E_BODY} estate_e;

  estate_e     state;
  label_t      lab, lab_in;
  logic        lab_empty, lab_full, lab_pop;
  logic [15:0] nhits;
  logic        tx_valid, tx_last, tx_ready;
  logic [31:0] tx_word;

  assign lab_in = '{event_no: tcs_event_no, spill_no: tcs_spill_no,
                    event_type: tcs_event_type, tag: tag};
  assign label_overflow = label_valid & lab_full;

  sync_fifo #(.WIDTH($bits(label_t)), .DEPTH(LABEL_DEPTH)) u_labels (
    .clk, .rst, .push(label_valid), .din(lab_in), .pop(lab_pop),
    .dout(lab), .empty(lab_empty), .full(lab_full), .count()
  );

  always_comb begin
    tx_valid = 1'b0;
    tx_last  = 1'b0;
    tx_word  = '0;
    in_pop   = 1'b0;
    lab_pop  = 1'b0;
    unique case (state)
      E_H0: begin
        tx_valid = 1'b1;
        tx_word  = {4'hA, 1'b0, lab.event_type, lab.spill_no, 3'b0, lab.tag};
      end
      E_H1: begin
        tx_valid = 1'b1;
        tx_word  = {4'hB, 8'b0, lab.event_no};
      end
      E_BODY: if (!in_empty) begin
        tx_valid = 1'b1;
        if (in_word.trailer) begin
          tx_last = 1'b1;
          tx_word = {4'hC, 3'b0, (in_word.time16[TAG_W-1:0] != lab.tag), 8'b0, nhits};
          lab_pop = tx_ready;
        end else begin
          tx_word = {4'h1, 3'b0, in_word.trailing, 1'b0, in_word.channel, in_word.time16};
        end
        in_pop = tx_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= E_IDLE;
      nhits <= '0;
    end else begin
      unique case (state)
        E_IDLE: if (!lab_empty && !in_empty) begin
          state <= E_H0;
          nhits <= '0;
        end
        E_H0: if (tx_ready) state <= E_H1;
        E_H1: if (tx_ready) state <= E_BODY;
        E_BODY: if (!in_empty && tx_ready) begin
          if (in_word.trailer) state <= E_IDLE;
          else                 nhits <= nhits + 1'b1;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  serial_tx #(.W(32)) u_tx (
    .clk, .rst, .tx_valid, .tx_word, .tx_last, .tx_ready, .sck, .sdo, .sfr
  );
endmodule
