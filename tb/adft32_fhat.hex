44444444444444444444444444444444
44477733333fffcccccddd1111155544
447333fcccd11154447333fcccd11154
4733fccd1544733fcd1154473fccd115
473fcd15473fcd15473fcd15473fcd15
473cd1473fc1543fcd1473cd1543fc15
43fc1473c1543cd143fc1473c1543cd1
43cd573c143fd543c147fd143c157fc1
43c143c143c143c143c143c143c143c1
43c57f143c17fd43c14fd53c143d57c1
43d43c53c17c14f143d43c53c17c14f1
4f14f14f17c17c17c53c53c53d43d43d
4f17c53d4f17c53d4f17c53d4f17c53d
4f13d4c53d4c5317c5317c4f17c4f13d
4c5313d4c4f1317c4c5313d4c4f1317c
4c4f5f131317d7c4c4c5f531313d7d4c
4c4c4c4c4c4c4c4c4c4c4c4c4c4c4c4c
4c4d7d313135f5c4c4c7d713131f5f4c
4c7131f4c4d3135c4c7131f4c4d3135c
4d31f4c71f4c7135c7135c4d35c4d31f
4d35c71f4d35c71f4d35c71f4d35c71f
4d34d34d35c35c35c71c71c71f41f41f
41f41c71c35c34d341f41c71c35c34d3
41c75d341c35df41c34df71c341f75c3
41c341c341c341c341c341c341c341c3
41cf751c341df741c345df341c375dc3
41dc3451c3741cf341dc3451c3741cf3
451cf3451dc3741dcf3451cf3741dc37
451dcf37451dcf37451dcf37451dcf37
4511dccf3744511dcf3374451dccf337
445111dcccf33374445111dcccf33374
44455511111dddcccccfff3333377744
