00000128
ffffff0f
000000db
ffffffaf
