// adft_pkg: shared types and constants of the 32-beam multiplierless beamformer.
//
// The 32-point approximate DFT (ADFT) matrix F32_hat has entries whose real and
// imaginary parts lie in {0, +1, -1}; it factors exactly into eight sparse
// stages, F32_hat = W8 * W7 * ... * W1, in decimation-in-frequency order.
// Every entry of every Wi is one of {0, +1, -1, +j, -j}, and each row of a Wi
// has at most three non-zero entries, so a stage is a set of two- and
// three-input complex adders with no multipliers, shifts or constants.
//
// W_TABLE below lists, for stage s (0 = W1 ... 7 = W8) and output row r, the up
// to three (coefficient, source index) pairs of row r of W(s+1). The entries are
// those of the published factorization; CZ marks an unused term slot. Stages
// W1..W7 are real (+1/-1 only); W8 is the only stage with +j/-j entries.
// Real additions per stage (2 per complex two-input addition):
//   W1, W2, W5: 60   W3, W4, W6: 28   W7: 24   W8: 60   total 348.
//
// Word growth: the largest row L1-norm of the real-form product W8...W1 is 48,
// and no partial product exceeds it, so an input of IN_W bits needs at most
// ADFT_GROWTH = 6 extra bits (48 < 64) anywhere in the datapath. The width of 
// the datapath is this design's choice; the published text fixes only the
// 8-bit input.
package adft_pkg;

  localparam int N           = 32;  // transform size = number of elements = beams
  localparam int N_STAGES    = 8;   // sparse factors W1..W8
  localparam int MAX_TERMS   = 3;   // non-zeros per row of any Wi
  localparam int ADC_W       = 8;   // ADC / ADFT input word length
  localparam int ADFT_GROWTH = 6;   // ceil(log2(48))
  localparam int ADFT_LATENCY = N_STAGES;  // clocks from adft32 input to output

  // One non-zero coefficient of a sparse stage.
  typedef enum logic [2:0] {
    CZ  = 3'd0,   // unused term
    CP1 = 3'd1,   // +1
    CM1 = 3'd2,   // -1
    CPJ = 3'd3,   // +j
    CMJ = 3'd4    // -j
  } coef_e;

  typedef struct packed {
    coef_e      coef;
    logic [4:0] src;   // input index of the stage feeding this term
  } term_t;

  localparam term_t W_TABLE [N_STAGES][N][MAX_TERMS] = '{
    // W1
    '{
      '{'{CP1, 5'd0}, '{CP1, 5'd16}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CP1, 5'd15}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CP1, 5'd14}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CP1, 5'd13}, '{CZ, 5'd0}},
      '{'{CP1, 5'd4}, '{CP1, 5'd12}, '{CZ, 5'd0}},
      '{'{CP1, 5'd5}, '{CP1, 5'd11}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CP1, 5'd10}, '{CZ, 5'd0}},
      '{'{CP1, 5'd7}, '{CP1, 5'd9}, '{CZ, 5'd0}},
      '{'{CP1, 5'd8}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd7}, '{CM1, 5'd9}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CM1, 5'd10}, '{CZ, 5'd0}},
      '{'{CP1, 5'd5}, '{CM1, 5'd11}, '{CZ, 5'd0}},
      '{'{CP1, 5'd4}, '{CM1, 5'd12}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CM1, 5'd13}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CM1, 5'd14}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CM1, 5'd15}, '{CZ, 5'd0}},
      '{'{CP1, 5'd0}, '{CM1, 5'd16}, '{CZ, 5'd0}},
      '{'{CP1, 5'd17}, '{CP1, 5'd31}, '{CZ, 5'd0}},
      '{'{CP1, 5'd18}, '{CP1, 5'd30}, '{CZ, 5'd0}},
      '{'{CP1, 5'd19}, '{CP1, 5'd29}, '{CZ, 5'd0}},
      '{'{CP1, 5'd20}, '{CP1, 5'd28}, '{CZ, 5'd0}},
      '{'{CP1, 5'd21}, '{CP1, 5'd27}, '{CZ, 5'd0}},
      '{'{CP1, 5'd22}, '{CP1, 5'd26}, '{CZ, 5'd0}},
      '{'{CP1, 5'd23}, '{CP1, 5'd25}, '{CZ, 5'd0}},
      '{'{CP1, 5'd24}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd23}, '{CM1, 5'd25}, '{CZ, 5'd0}},
      '{'{CP1, 5'd22}, '{CM1, 5'd26}, '{CZ, 5'd0}},
      '{'{CP1, 5'd21}, '{CM1, 5'd27}, '{CZ, 5'd0}},
      '{'{CP1, 5'd20}, '{CM1, 5'd28}, '{CZ, 5'd0}},
      '{'{CP1, 5'd19}, '{CM1, 5'd29}, '{CZ, 5'd0}},
      '{'{CP1, 5'd18}, '{CM1, 5'd30}, '{CZ, 5'd0}},
      '{'{CP1, 5'd17}, '{CM1, 5'd31}, '{CZ, 5'd0}}
    },
    // W2
    '{
      '{'{CP1, 5'd0}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CP1, 5'd17}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CP1, 5'd18}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CP1, 5'd19}, '{CZ, 5'd0}},
      '{'{CP1, 5'd4}, '{CP1, 5'd20}, '{CZ, 5'd0}},
      '{'{CP1, 5'd5}, '{CP1, 5'd21}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CP1, 5'd22}, '{CZ, 5'd0}},
      '{'{CP1, 5'd7}, '{CP1, 5'd23}, '{CZ, 5'd0}},
      '{'{CP1, 5'd8}, '{CP1, 5'd24}, '{CZ, 5'd0}},
      '{'{CP1, 5'd9}, '{CP1, 5'd25}, '{CZ, 5'd0}},
      '{'{CP1, 5'd10}, '{CP1, 5'd26}, '{CZ, 5'd0}},
      '{'{CP1, 5'd11}, '{CP1, 5'd27}, '{CZ, 5'd0}},
      '{'{CP1, 5'd12}, '{CP1, 5'd28}, '{CZ, 5'd0}},
      '{'{CP1, 5'd13}, '{CP1, 5'd29}, '{CZ, 5'd0}},
      '{'{CP1, 5'd14}, '{CP1, 5'd30}, '{CZ, 5'd0}},
      '{'{CP1, 5'd15}, '{CP1, 5'd31}, '{CZ, 5'd0}},
      '{'{CP1, 5'd16}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CM1, 5'd17}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CM1, 5'd18}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CM1, 5'd19}, '{CZ, 5'd0}},
      '{'{CP1, 5'd4}, '{CM1, 5'd20}, '{CZ, 5'd0}},
      '{'{CP1, 5'd5}, '{CM1, 5'd21}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CM1, 5'd22}, '{CZ, 5'd0}},
      '{'{CP1, 5'd7}, '{CM1, 5'd23}, '{CZ, 5'd0}},
      '{'{CP1, 5'd8}, '{CM1, 5'd24}, '{CZ, 5'd0}},
      '{'{CP1, 5'd9}, '{CM1, 5'd25}, '{CZ, 5'd0}},
      '{'{CP1, 5'd10}, '{CM1, 5'd26}, '{CZ, 5'd0}},
      '{'{CP1, 5'd11}, '{CM1, 5'd27}, '{CZ, 5'd0}},
      '{'{CP1, 5'd12}, '{CM1, 5'd28}, '{CZ, 5'd0}},
      '{'{CP1, 5'd13}, '{CM1, 5'd29}, '{CZ, 5'd0}},
      '{'{CP1, 5'd14}, '{CM1, 5'd30}, '{CZ, 5'd0}},
      '{'{CP1, 5'd15}, '{CM1, 5'd31}, '{CZ, 5'd0}}
    },
    // W3
    '{
      '{'{CP1, 5'd0}, '{CP1, 5'd8}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CP1, 5'd7}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CP1, 5'd6}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CP1, 5'd5}, '{CZ, 5'd0}},
      '{'{CP1, 5'd4}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CM1, 5'd5}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CM1, 5'd6}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CM1, 5'd7}, '{CZ, 5'd0}},
      '{'{CP1, 5'd0}, '{CM1, 5'd8}, '{CZ, 5'd0}},
      '{'{CP1, 5'd9}, '{CP1, 5'd15}, '{CZ, 5'd0}},
      '{'{CP1, 5'd10}, '{CP1, 5'd14}, '{CZ, 5'd0}},
      '{'{CP1, 5'd11}, '{CP1, 5'd13}, '{CZ, 5'd0}},
      '{'{CP1, 5'd12}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd11}, '{CM1, 5'd13}, '{CZ, 5'd0}},
      '{'{CP1, 5'd10}, '{CM1, 5'd14}, '{CZ, 5'd0}},
      '{'{CP1, 5'd9}, '{CM1, 5'd15}, '{CZ, 5'd0}},
      '{'{CP1, 5'd16}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd17}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd18}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd19}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd20}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd21}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd22}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd23}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd24}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd25}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd26}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd27}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd28}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd29}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd30}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd31}, '{CZ, 5'd0}, '{CZ, 5'd0}}
    },
    // W4
    '{
      '{'{CP1, 5'd0}, '{CP1, 5'd4}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CP1, 5'd3}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CM1, 5'd3}, '{CZ, 5'd0}},
      '{'{CP1, 5'd0}, '{CM1, 5'd4}, '{CZ, 5'd0}},
      '{'{CP1, 5'd5}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CP1, 5'd8}, '{CZ, 5'd0}},
      '{'{CP1, 5'd7}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CM1, 5'd8}, '{CZ, 5'd0}},
      '{'{CP1, 5'd9}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd10}, '{CP1, 5'd12}, '{CZ, 5'd0}},
      '{'{CP1, 5'd11}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd10}, '{CM1, 5'd12}, '{CZ, 5'd0}},
      '{'{CP1, 5'd13}, '{CP1, 5'd15}, '{CZ, 5'd0}},
      '{'{CP1, 5'd14}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd13}, '{CM1, 5'd15}, '{CZ, 5'd0}},
      '{'{CP1, 5'd16}, '{CP1, 5'd28}, '{CZ, 5'd0}},
      '{'{CP1, 5'd17}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd18}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd19}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd20}, '{CP1, 5'd24}, '{CZ, 5'd0}},
      '{'{CP1, 5'd21}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd22}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd23}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd20}, '{CM1, 5'd24}, '{CZ, 5'd0}},
      '{'{CP1, 5'd25}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd26}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd27}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd16}, '{CM1, 5'd28}, '{CZ, 5'd0}},
      '{'{CP1, 5'd29}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd30}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd31}, '{CZ, 5'd0}, '{CZ, 5'd0}}
    },
    // W5
    '{
      '{'{CP1, 5'd0}, '{CP1, 5'd2}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd0}, '{CM1, 5'd2}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CP1, 5'd4}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CM1, 5'd4}, '{CZ, 5'd0}},
      '{'{CP1, 5'd5}, '{CP1, 5'd8}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CP1, 5'd7}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CM1, 5'd7}, '{CZ, 5'd0}},
      '{'{CP1, 5'd5}, '{CM1, 5'd8}, '{CZ, 5'd0}},
      '{'{CP1, 5'd9}, '{CP1, 5'd12}, '{CZ, 5'd0}},
      '{'{CP1, 5'd10}, '{CP1, 5'd11}, '{CZ, 5'd0}},
      '{'{CP1, 5'd10}, '{CM1, 5'd11}, '{CZ, 5'd0}},
      '{'{CP1, 5'd9}, '{CM1, 5'd12}, '{CZ, 5'd0}},
      '{'{CP1, 5'd13}, '{CP1, 5'd14}, '{CZ, 5'd0}},
      '{'{CP1, 5'd13}, '{CM1, 5'd14}, '{CZ, 5'd0}},
      '{'{CP1, 5'd15}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CM1, 5'd16}, '{CP1, 5'd30}, '{CZ, 5'd0}},
      '{'{CP1, 5'd17}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd18}, '{CP1, 5'd24}, '{CZ, 5'd0}},
      '{'{CP1, 5'd19}, '{CP1, 5'd21}, '{CP1, 5'd23}},
      '{'{CP1, 5'd20}, '{CP1, 5'd22}, '{CZ, 5'd0}},
      '{'{CP1, 5'd19}, '{CM1, 5'd21}, '{CZ, 5'd0}},
      '{'{CP1, 5'd20}, '{CM1, 5'd22}, '{CZ, 5'd0}},
      '{'{CP1, 5'd19}, '{CM1, 5'd23}, '{CZ, 5'd0}},
      '{'{CP1, 5'd18}, '{CM1, 5'd24}, '{CZ, 5'd0}},
      '{'{CP1, 5'd25}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd26}, '{CP1, 5'd28}, '{CZ, 5'd0}},
      '{'{CP1, 5'd27}, '{CP1, 5'd29}, '{CP1, 5'd31}},
      '{'{CP1, 5'd26}, '{CM1, 5'd28}, '{CZ, 5'd0}},
      '{'{CP1, 5'd27}, '{CM1, 5'd29}, '{CZ, 5'd0}},
      '{'{CP1, 5'd16}, '{CP1, 5'd30}, '{CZ, 5'd0}},
      '{'{CP1, 5'd27}, '{CM1, 5'd31}, '{CZ, 5'd0}}
    },
    // W6
    '{
      '{'{CP1, 5'd0}, '{CP1, 5'd1}, '{CZ, 5'd0}},
      '{'{CP1, 5'd0}, '{CM1, 5'd1}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd4}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd5}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd7}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd8}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd9}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd10}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd11}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd12}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd13}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd14}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd15}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd16}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd17}, '{CP1, 5'd21}, '{CM1, 5'd23}},
      '{'{CP1, 5'd18}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd19}, '{CP1, 5'd20}, '{CZ, 5'd0}},
      '{'{CP1, 5'd19}, '{CM1, 5'd20}, '{CZ, 5'd0}},
      '{'{CP1, 5'd17}, '{CM1, 5'd21}, '{CZ, 5'd0}},
      '{'{CP1, 5'd22}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd17}, '{CP1, 5'd23}, '{CZ, 5'd0}},
      '{'{CP1, 5'd24}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd25}, '{CP1, 5'd29}, '{CM1, 5'd31}},
      '{'{CP1, 5'd26}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd27}, '{CP1, 5'd30}, '{CZ, 5'd0}},
      '{'{CP1, 5'd28}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd25}, '{CM1, 5'd29}, '{CZ, 5'd0}},
      '{'{CP1, 5'd27}, '{CM1, 5'd30}, '{CZ, 5'd0}},
      '{'{CP1, 5'd25}, '{CP1, 5'd31}, '{CZ, 5'd0}}
    },
    // W7
    '{
      '{'{CP1, 5'd0}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd4}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd5}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd7}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd8}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd9}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd10}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd11}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd12}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd13}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd14}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd15}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd16}, '{CP1, 5'd29}, '{CZ, 5'd0}},
      '{'{CP1, 5'd17}, '{CP1, 5'd24}, '{CZ, 5'd0}},
      '{'{CM1, 5'd18}, '{CP1, 5'd23}, '{CZ, 5'd0}},
      '{'{CP1, 5'd19}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd20}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd21}, '{CP1, 5'd22}, '{CZ, 5'd0}},
      '{'{CP1, 5'd21}, '{CM1, 5'd22}, '{CZ, 5'd0}},
      '{'{CP1, 5'd18}, '{CP1, 5'd23}, '{CZ, 5'd0}},
      '{'{CP1, 5'd17}, '{CM1, 5'd24}, '{CZ, 5'd0}},
      '{'{CP1, 5'd25}, '{CP1, 5'd26}, '{CZ, 5'd0}},
      '{'{CP1, 5'd25}, '{CM1, 5'd26}, '{CZ, 5'd0}},
      '{'{CP1, 5'd27}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd28}, '{CP1, 5'd31}, '{CZ, 5'd0}},
      '{'{CP1, 5'd16}, '{CM1, 5'd29}, '{CZ, 5'd0}},
      '{'{CP1, 5'd30}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CP1, 5'd28}, '{CM1, 5'd31}, '{CZ, 5'd0}}
    },
    // W8
    '{
      '{'{CP1, 5'd0}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CMJ, 5'd19}, '{CP1, 5'd27}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CMJ, 5'd10}, '{CZ, 5'd0}},
      '{'{CMJ, 5'd23}, '{CM1, 5'd28}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CPJ, 5'd13}, '{CZ, 5'd0}},
      '{'{CMJ, 5'd17}, '{CP1, 5'd25}, '{CZ, 5'd0}},
      '{'{CM1, 5'd5}, '{CMJ, 5'd9}, '{CZ, 5'd0}},
      '{'{CM1, 5'd16}, '{CMJ, 5'd22}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CMJ, 5'd15}, '{CZ, 5'd0}},
      '{'{CMJ, 5'd21}, '{CM1, 5'd29}, '{CZ, 5'd0}},
      '{'{CP1, 5'd8}, '{CMJ, 5'd12}, '{CZ, 5'd0}},
      '{'{CMJ, 5'd24}, '{CM1, 5'd26}, '{CZ, 5'd0}},
      '{'{CM1, 5'd4}, '{CPJ, 5'd14}, '{CZ, 5'd0}},
      '{'{CMJ, 5'd18}, '{CM1, 5'd31}, '{CZ, 5'd0}},
      '{'{CP1, 5'd7}, '{CPJ, 5'd11}, '{CZ, 5'd0}},
      '{'{CMJ, 5'd20}, '{CM1, 5'd30}, '{CZ, 5'd0}},
      '{'{CP1, 5'd1}, '{CZ, 5'd0}, '{CZ, 5'd0}},
      '{'{CPJ, 5'd20}, '{CM1, 5'd30}, '{CZ, 5'd0}},
      '{'{CP1, 5'd7}, '{CMJ, 5'd11}, '{CZ, 5'd0}},
      '{'{CPJ, 5'd18}, '{CM1, 5'd31}, '{CZ, 5'd0}},
      '{'{CM1, 5'd4}, '{CMJ, 5'd14}, '{CZ, 5'd0}},
      '{'{CPJ, 5'd24}, '{CM1, 5'd26}, '{CZ, 5'd0}},
      '{'{CP1, 5'd8}, '{CPJ, 5'd12}, '{CZ, 5'd0}},
      '{'{CPJ, 5'd21}, '{CM1, 5'd29}, '{CZ, 5'd0}},
      '{'{CP1, 5'd2}, '{CPJ, 5'd15}, '{CZ, 5'd0}},
      '{'{CM1, 5'd16}, '{CPJ, 5'd22}, '{CZ, 5'd0}},
      '{'{CM1, 5'd5}, '{CPJ, 5'd9}, '{CZ, 5'd0}},
      '{'{CPJ, 5'd17}, '{CP1, 5'd25}, '{CZ, 5'd0}},
      '{'{CP1, 5'd3}, '{CMJ, 5'd13}, '{CZ, 5'd0}},
      '{'{CPJ, 5'd23}, '{CM1, 5'd28}, '{CZ, 5'd0}},
      '{'{CP1, 5'd6}, '{CPJ, 5'd10}, '{CZ, 5'd0}},
      '{'{CPJ, 5'd19}, '{CP1, 5'd27}, '{CZ, 5'd0}}
    }
  };

endpackage
