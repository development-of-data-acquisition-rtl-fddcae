// Sample image used by several testbenches: the 22 x 22 simulated frame of
// the worked example, 8-bit values, holding four photon events whose peaks
// are 37 at (x 6, y 3), 31 at (16, 6), 33 at (14, 14) and 25 at (5, 17).
// Its first nine rows are the rows shown in the line-buffer walkthrough.
localparam int FIG_W = 22;
localparam int FIG_H = 22;
localparam int fig_img [FIG_H][FIG_W] = '{
  '{0,0,0,10,12,14,15,15,13,11,0,0,0,0,0,0,0,0,0,0,0,0},
  '{0,0,0,13,16,20,22,21,17,14,11,0,0,0,0,0,0,0,0,0,0,0},
  '{0,0,11,15,22,28,31,28,22,16,12,0,0,0,0,0,0,0,0,0,0,0},
  '{0,0,12,18,27,34,37,32,24,18,12,0,0,0,0,13,15,15,14,0,0,0},
  '{0,0,13,19,27,34,35,30,23,17,12,0,0,0,14,18,20,20,17,14,0,0},
  '{0,0,12,17,23,27,28,24,18,14,11,0,0,13,17,23,26,26,21,17,13,0},
  '{0,0,10,13,17,19,19,16,14,11,0,0,0,14,20,26,31,29,24,18,13,0},
  '{0,0,0,10,12,13,12,11,10,0,0,0,0,14,20,26,29,27,22,17,13,0},
  '{0,0,0,0,0,0,0,0,0,0,0,0,0,13,17,21,22,21,18,14,0,0},
  '{0,0,0,0,0,0,0,0,0,0,0,0,0,0,13,15,16,15,13,0,0,0},
  '{0,0,0,0,0,0,0,0,0,0,0,0,0,11,12,13,12,10,0,0,0,0},
  '{0,0,0,0,0,0,0,0,0,0,0,10,13,16,18,18,16,13,11,0,0,0},
  '{0,0,0,0,0,0,0,0,0,0,0,12,17,22,25,25,21,16,12,0,0,0},
  '{0,0,0,0,10,11,10,0,0,0,11,13,20,27,32,30,25,18,13,10,0,0},
  '{0,0,0,12,14,15,14,12,0,0,0,14,21,28,33,31,25,18,13,10,0,0},
  '{0,0,11,15,18,20,19,15,12,0,0,14,19,25,27,25,20,15,12,0,0,0},
  '{0,0,13,18,22,24,22,17,13,0,0,12,15,18,19,18,15,12,0,0,0,0},
  '{0,0,14,19,24,25,22,17,13,0,0,0,11,12,13,12,11,0,0,0,0,0},
  '{0,0,13,17,21,21,19,15,12,0,0,0,0,0,0,0,0,0,0,0,0,0},
  '{0,0,11,13,15,15,14,12,0,0,0,0,0,0,0,0,0,0,0,0,0,0},
  '{0,0,0,10,11,11,10,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0},
  '{0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0}
};
