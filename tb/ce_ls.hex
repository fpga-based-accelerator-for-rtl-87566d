01
01
02
01
00
