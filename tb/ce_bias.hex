ffffff5d
0000011a
ffffff14
ffffffd9
ffffff4c
000000cf
