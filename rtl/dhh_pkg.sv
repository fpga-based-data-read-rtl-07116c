// dhh_pkg: types and constants shared by the DHH / DHHC read-out firmware.
// All data paths carry 16-bit words (the word size of the detector frames)
// with start-of-frame and end-of-frame flags. The word layouts below are
// this design's own: the read-out paper names the fields (frame ID, row,
// column, ADC value, trigger number, data type) but gives no bit layout.
//
// Body word layout, bits [15:14] give the kind:
//   00 hit           [13:8] column inside the DHP (0..63), [7:0] ADC value
//   10 row header    [9:0]  row number (0..767); following hits are in that row
//   11 cluster tag   [11:0] cluster number of the hit word that follows
// The first word of a frame (sof) is a header whose meaning depends on the
// stage: DHP frame ID from the front end, trigger number after re-ordering,
// DHH frame type word after framing (see dhh_frame_word).
package dhh_pkg;

  typedef struct packed {
    logic        sof;
    logic        eof;
    logic [15:0] data;
  } word_t;

  localparam logic [1:0] W_HIT = 2'b00;
  localparam logic [1:0] W_ROW = 2'b10;
  localparam logic [1:0] W_CLU = 2'b11;

  // DHH / DHHC frame types, carried in [15:12] of a frame's first word.
  typedef enum logic [3:0] {
    FT_RAW     = 4'h0,   // zero-suppressed pixel data of one DHP
    FT_CLUSTER = 4'h1,   // clustered pixel data of one DHP
    FT_ETH     = 4'h2,   // Ethernet reply frame
    FT_SEB_HDR = 4'h3,   // sub-event header (DHHC)
    FT_SEB_TRL = 4'h4    // sub-event trailer (DHHC)
  } frame_type_e;

  // Trigger information handed to a data-storage module.
  typedef struct packed {
    logic [15:0] trig_num;
    logic [9:0]  first_row;
    logic [15:0] frame_id;
  } job_t;

  function automatic logic [15:0] row_word(input logic [9:0] row);
    return {W_ROW, 4'b0, row};
  endfunction

  function automatic logic [15:0] hit_word(input logic [5:0] col, input logic [7:0] adc);
    return {W_HIT, col, adc};
  endfunction

  function automatic logic [15:0] clu_word(input logic [11:0] id);
    return {W_CLU, 2'b0, id};
  endfunction

  // DHH frame type word: [15:12] type, [11] last frame of this event from
  // this DHH, [7:2] DHH index, [1:0] DHP link.
  function automatic logic [15:0] dhh_frame_word(input frame_type_e t, input logic last,
                                                 input logic [5:0] dhh_id, input logic [1:0] link);
    return {t, last, 3'b0, dhh_id, link};
  endfunction

endpackage
