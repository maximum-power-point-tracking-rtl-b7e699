// mppt_pkg: types and constants shared by the MPPT blocks.
//
// Clock Request codes (2 bits, sent by the tracking system to the power
// management) and the Averaging codes (2 bits, an external input of the
// tracking system). The meaning of each Clock Request code follows the power
// management flow chart: 2'b00 asks for the fastest tracking clock and 2'b11
// for the slowest. The paper keeps the Averaging code private and only lists
// the sample counts 1, 8, 32 and 64; the mapping 00/01/10/11 -> 1/8/32/64
// used here is this design's own choice.
package mppt_pkg;

  // Clock Request: the tracking clock is System Clock divided by 2, 20, 200
  // or 2000 (the flow chart prints /1, /10, /100, /1000; the counters toggle
  // on rising edges, so each ratio doubles).
  typedef enum logic [1:0] {
    CLK_REQ_DIV2    = 2'b00,
    CLK_REQ_DIV20   = 2'b01,
    CLK_REQ_DIV200  = 2'b10,
    CLK_REQ_DIV2000 = 2'b11
  } clk_req_e;

  // Averaging code: number of samples that form one averaged point.
  typedef enum logic [1:0] {
    AVG_1  = 2'b00,
    AVG_8  = 2'b01,
    AVG_32 = 2'b10,
    AVG_64 = 2'b11
  } avg_code_e;

  // Width of the voltage / current samples and of the PWM compare value.
  localparam int unsigned SAMPLE_W = 8;
  localparam int unsigned CMP_W    = 8;

  // Compare value after reset: 128 of 256 counts, a 50 % duty cycle.
  localparam logic [CMP_W-1:0] CMP_RESET = 8'd128;

  // log2 of the number of averaged samples for an Averaging code.
  function automatic logic [2:0] avg_shift(input avg_code_e code);
    unique case (code)
      AVG_1:   return 3'd0;
      AVG_8:   return 3'd3;
      AVG_32:  return 3'd5;
      default: return 3'd6;
    endcase
  endfunction

endpackage
