59524844
4e4f5453
52502045
4152474f
53202c4d
20454d4f
49525453
0000474e
59524844
4e4f5453
52502045
4152474f
31202c4d
20545327
49525453
0000474e
59524844
4e4f5453
52502045
4152474f
32202c4d
20444e27
49525453
0000474e
59524844
4e4f5453
52502045
4152474f
33202c4d
20445227
49525453
0000474e
